// torus_network: the chip's on-chip network, an N_X x N_Y two-dimensional
// torus of torus_router instances (5 x 4 = 20 nodes by default).
//
// Router (x, y) serves node id y*N_X + x. Output direction d of each router is
// wired to input d of its neighbour in that direction, including the
// wrap-around links that close every row and column into a ring. Each node
// injects whole messages tagged with a virtual network and receives them with
// a per-vnet ready, so a node can refuse one message class while still
// draining the others.
//
// The paper fixes the topology (2D torus) and the placement of CPU, MTTOP,
// L2/directory and memory-controller nodes (system figure); the flow control is
// this design's own and is described in torus_router.
module torus_network
  import ccsvm_pkg::*;
#(
  parameter int unsigned DEPTH = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  msg_t  inj_msg   [N_NODES],
  input  vnet_e inj_vnet  [N_NODES],
  input  logic  inj_valid [N_NODES],
  output logic  inj_ready [N_NODES][N_VNET],
  output msg_t  ej_msg    [N_NODES],
  output vnet_e ej_vnet   [N_NODES],
  output logic  ej_valid  [N_NODES],
  input  logic  ej_ready  [N_NODES][N_VNET]
);
  flit_t link_flit  [N_NODES][4];
  logic  link_valid [N_NODES][4];
  logic  link_ready [N_NODES][4][N_VNET][N_VC];  // ready of router n's input d

  function automatic int unsigned neighbour(int unsigned n, int unsigned d);
    int unsigned x, y;
    x = n % N_X;
    y = n / N_X;
    case (d)
      0:       x = (x + 1) % N_X;
      1:       x = (x + N_X - 1) % N_X;
      2:       y = (y + 1) % N_Y;
      default: y = (y + N_Y - 1) % N_Y;
    endcase
    return y * N_X + x;
  endfunction

  for (genvar n = 0; n < N_NODES; n++) begin : g_r
    flit_t in_flit   [4];
    logic  in_valid  [4];
    logic  out_ready [4][N_VNET][N_VC];
    for (genvar d = 0; d < 4; d++) begin : g_d
      // input d comes from the neighbour on the opposite side
      localparam int unsigned SRC = neighbour(n, d ^ 1);
      localparam int unsigned DST = neighbour(n, d);
      assign in_flit[d]  = link_flit[SRC][d];
      assign in_valid[d] = link_valid[SRC][d];
      assign out_ready[d] = link_ready[DST][d];
    end
    torus_router #(.X(n % N_X), .Y(n / N_X), .DEPTH(DEPTH)) u_router (
      .clk, .rst_n,
      .in_flit, .in_valid, .in_ready(link_ready[n]),
      .out_flit(link_flit[n]), .out_valid(link_valid[n]), .out_ready,
      .inj_msg(inj_msg[n]), .inj_vnet(inj_vnet[n]), .inj_valid(inj_valid[n]),
      .inj_ready(inj_ready[n]),
      .ej_msg(ej_msg[n]), .ej_vnet(ej_vnet[n]), .ej_valid(ej_valid[n]),
      .ej_ready(ej_ready[n]));
  end
endmodule
