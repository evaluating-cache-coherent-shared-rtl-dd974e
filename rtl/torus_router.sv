// torus_router: one five-port router of the chip's 2D torus.
//
// Ports 0..3 are the links to the neighbours and port 4 is the local node.
// Input port p receives flits that travel in direction p (0 = +x, 1 = -x,
// 2 = +y, 3 = -y); output port p sends in direction p, so output p of one
// router feeds input p of the next router in that direction.
//
// Routing is dimension order, x then y, taking the shorter way round each ring
// (+ on a tie). Torus rings can deadlock, so each virtual network has two
// virtual channels with a dateline: a flit moves to channel 1 when it crosses
// the wrap-around link of its current ring and starts again on channel 0 when
// it turns into the y ring. Every (input port, vnet, vc) has its own FIFO;
// each output picks one eligible FIFO head per cycle, round robin, if the next
// router's FIFO for that vnet/vc has room (in_ready/out_ready are registered
// "not full" flags, so there is no combinational path between routers).
// A flit spends one cycle per hop.
//
// The paper gives only "2D torus, 12 GB/s link bandwidth". Here a link carries
// one whole coherence message per cycle; the wiring width, the routing, the
// virtual channels and the buffer depth are this design's choices.
module torus_router
  import ccsvm_pkg::*;
#(
  parameter int unsigned X = 0,
  parameter int unsigned Y = 0,
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  // neighbour links
  input  flit_t in_flit  [4],
  input  logic  in_valid [4],
  output logic  in_ready [4][N_VNET][N_VC],
  output flit_t out_flit [4],
  output logic  out_valid[4],
  input  logic  out_ready[4][N_VNET][N_VC],
  // local node
  input  msg_t  inj_msg,
  input  vnet_e inj_vnet,
  input  logic  inj_valid,
  output logic  inj_ready [N_VNET],
  output msg_t  ej_msg,
  output vnet_e ej_vnet,
  output logic  ej_valid,
  input  logic  ej_ready  [N_VNET]
);
  localparam int unsigned NP = 5;
  localparam int unsigned NQ = NP * N_VNET * N_VC;

  function automatic int unsigned qidx(int unsigned p, int unsigned v, int unsigned c);
    return (p * N_VNET + v) * N_VC + c;
  endfunction

  flit_t q_in   [NQ];
  logic  q_push [NQ];
  flit_t q_head [NQ];
  logic  q_pop  [NQ];
  logic  q_full [NQ];
  logic  q_empty[NQ];

  for (genvar q = 0; q < NQ; q++) begin : g_q
    logic [$clog2(DEPTH+1)-1:0] cnt;
    sync_fifo #(.T(flit_t), .DEPTH(DEPTH)) u_fifo (
      .clk, .rst_n, .push(q_push[q]), .wdata(q_in[q]), .pop(q_pop[q]),
      .rdata(q_head[q]), .full(q_full[q]), .empty(q_empty[q]), .count(cnt));
  end

  // ---- input side: steer arriving flits into their (vnet, vc) FIFO ----
  always_comb begin
    for (int q = 0; q < NQ; q++) begin
      q_push[q] = 1'b0;
      q_in[q]   = '0;
    end
    for (int p = 0; p < 4; p++) begin
      int unsigned qi;
      qi = qidx(p, int'(in_flit[p].vnet), int'(in_flit[p].vc));
      if (in_valid[p]) begin
        q_push[qi] = 1'b1;
        q_in[qi]   = in_flit[p];
      end
    end
    begin
      int unsigned qi;
      qi = qidx(4, int'(inj_vnet), 0);
      if (inj_valid) begin
        q_push[qi] = 1'b1;
        q_in[qi].vnet = inj_vnet;
        q_in[qi].vc   = 1'b0;
        q_in[qi].msg  = inj_msg;
      end
    end
  end

  always_comb begin
    for (int p = 0; p < 4; p++)
      for (int v = 0; v < N_VNET; v++)
        for (int c = 0; c < N_VC; c++)
          in_ready[p][v][c] = !q_full[qidx(p, v, c)];
    for (int v = 0; v < N_VNET; v++)
      inj_ready[v] = !q_full[qidx(4, v, 0)];
  end

  // ---- route computation for each FIFO head ----
  function automatic int unsigned route(node_t dst);
    int unsigned dx, dy, fx, fy;
    dx = int'(dst) % N_X;
    dy = int'(dst) / N_X;
    fx = (dx + N_X - X) % N_X;
    fy = (dy + N_Y - Y) % N_Y;
    if (fx != 0)      return (fx <= N_X / 2) ? 0 : 1;
    else if (fy != 0) return (fy <= N_Y / 2) ? 2 : 3;
    else              return 4;
  endfunction

  function automatic logic wrap_link(int unsigned o);
    case (o)
      0:       return X == N_X - 1;
      1:       return X == 0;
      2:       return Y == N_Y - 1;
      3:       return Y == 0;
      default: return 1'b0;
    endcase
  endfunction

  logic [2:0] q_route [NQ];
  logic       q_ovc   [NQ];
  logic       q_elig  [NQ];

  always_comb begin
    for (int p = 0; p < NP; p++)
      for (int v = 0; v < N_VNET; v++)
        for (int c = 0; c < N_VC; c++) begin
          int unsigned q, o;
          logic same_dim;
          q = qidx(p, v, c);
          o = route(q_head[q].msg.dst);
          q_route[q] = 3'(o);
          same_dim = (p < 2 && o < 2) || (p >= 2 && p < 4 && o >= 2 && o < 4);
          q_ovc[q] = wrap_link(o) ? 1'b1 : (same_dim ? q_head[q].vc : 1'b0);
          if (q_empty[q])  q_elig[q] = 1'b0;
          else if (o == 4) q_elig[q] = ej_ready[v];
          else             q_elig[q] = out_ready[o][v][q_ovc[q]];
        end
  end

  // ---- output arbitration: round robin over the FIFOs, per output ----
  logic [$clog2(NQ)-1:0] rr   [NP];
  logic                  gnt_v[NP];
  logic [$clog2(NQ)-1:0] gnt_q[NP];

  always_comb begin
    for (int o = 0; o < NP; o++) begin
      gnt_v[o] = 1'b0;
      gnt_q[o] = '0;
      for (int k = 0; k < NQ; k++) begin
        int unsigned q;
        q = (int'(rr[o]) + k) % NQ;
        if (!gnt_v[o] && q_elig[q] && int'(q_route[q]) == o) begin
          gnt_v[o] = 1'b1;
          gnt_q[o] = $clog2(NQ)'(q);
        end
      end
    end
    for (int q = 0; q < NQ; q++) q_pop[q] = 1'b0;
    for (int o = 0; o < NP; o++)
      if (gnt_v[o]) q_pop[gnt_q[o]] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int o = 0; o < NP; o++) rr[o] <= '0;
    end else begin
      for (int o = 0; o < NP; o++)
        if (gnt_v[o]) rr[o] <= (int'(gnt_q[o]) == NQ - 1) ? '0 : gnt_q[o] + 1'b1;
    end
  end

  always_comb begin
    for (int o = 0; o < 4; o++) begin
      out_valid[o]   = gnt_v[o];
      out_flit[o]    = q_head[gnt_q[o]];
      out_flit[o].vc = q_ovc[gnt_q[o]];
    end
    ej_valid = gnt_v[4];
    ej_msg   = q_head[gnt_q[4]].msg;
    ej_vnet  = q_head[gnt_q[4]].vnet;
  end

endmodule
