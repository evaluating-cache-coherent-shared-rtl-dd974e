// l1_cache: private write-back L1 cache (instruction or data) of one CPU or
// MTTOP core, with its side of the chip's MOESI directory protocol and the
// MTTOP atomic operations.
//
// Organisation: SIZE_BYTES, WAYS-way set associative, 64-byte blocks,
// physically indexed and tagged. Defaults are the MTTOP L1 of the simulated
// system (16 KB, 4-way, 1-cycle hit); the CPU L1s are 64 KB, 4-way, 2-cycle
// hit (HIT_LAT = 2). Tag, state and data are read combinationally.
//
// Core side: one operation at a time (req/req_ready, then one rsp_valid pulse).
// The paper has no write buffer between a core and its cache, so the cache is
// blocking. A hit answers HIT_LAT cycles after the request cycle. Loads and
// fetches need S, E, O or M. Stores and the atomics (CAS, ADD, INC, DEC, which
// return the old word) need E or M: like a CPU, the MTTOP performs atomics in
// its L1 after getting exclusive coherence permission.
//
// Protocol side (the message set is in ccsvm_pkg): a miss sends GETS or GETX
// to the home L2/directory bank; an S or O block that must be written sends
// GETX with have_data so the directory can grant M without resending the
// data. Evicting an E, O or M block sends PUTX with the data and waits for
// WB_ACK before the miss is issued; S blocks are dropped silently. When the
// GRANT arrives the block is installed in the granted state, the waiting
// operation is completed and UNBLOCK is sent, which lets the blocking
// directory move on. Forwarded messages are always served, also while a miss
// is outstanding: INV (S -> I, ack), FWD_GETS (owner sends its data, stays
// owner in O), FWD_GETX (owner sends its data, -> I).
//
// The paper says only that the protocol is a standard, unoptimized MOESI
// directory protocol with write-back L1s; all of the transitions above are
// this design's choice.
module l1_cache
  import ccsvm_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 16384,
  parameter int unsigned WAYS       = 4,
  parameter int unsigned HIT_LAT    = 1,
  parameter int unsigned NODE       = 0,
  parameter unit_e       UNIT       = U_L1D
) (
  input  logic    clk,
  input  logic    rst_n,
  // core side
  input  logic    req_valid,
  input  l1_req_t req,
  output logic    req_ready,
  output logic    rsp_valid,
  output logic [63:0] rsp_data,
  // network side, outgoing
  output logic    out_valid,
  output msg_t    out_msg,
  output vnet_e   out_vnet,
  input  logic    out_ready,
  // network side, incoming forwards (INV, FWD_GETS, FWD_GETX)
  input  logic    fwd_valid,
  input  msg_t    fwd_msg,
  output logic    fwd_ready,
  // network side, incoming responses (GRANT, WB_ACK)
  input  logic    rsp_in_valid,
  input  msg_t    rsp_in_msg,
  output logic    rsp_in_ready,
  // statistics
  output logic    stat_hit,
  output logic    stat_miss,
  output logic    stat_wb
);
  localparam int unsigned SETS  = SIZE_BYTES / (BLK_BYTES * WAYS);
  localparam int unsigned SW    = $clog2(SETS);
  localparam int unsigned TW    = BA_W - SW;
  localparam int unsigned WW    = (WAYS > 1) ? $clog2(WAYS) : 1;

  mstate_e        st_a  [SETS][WAYS];
  logic [TW-1:0]  tag_a [SETS][WAYS];
  block_t         dat_a [SETS][WAYS];

  // ---- held core request ----
  logic    creq_v;
  l1_req_t creq_q;
  l1_req_t cur;
  logic    cur_v;
  logic [HIT_LAT:0] rsp_pipe_v;
  logic [63:0]      rsp_pipe_d [HIT_LAT+1];
  logic             rsp_busy;

  always_comb begin
    rsp_busy = 1'b0;
    for (int i = 1; i < HIT_LAT; i++) rsp_busy |= rsp_pipe_v[i];
  end
  assign req_ready = !creq_v && !rsp_busy;
  assign cur_v     = creq_v || (req_valid && req_ready);
  assign cur       = creq_v ? creq_q : req;

  // ---- pending miss or writeback ----
  logic           pend_v, pend_wb;
  logic [SW-1:0]  pend_set;
  logic [WW-1:0]  pend_way;
  logic [WW-1:0]  rr_way;

  // ---- output buffer: one message at a time ----
  logic  ob_v;
  msg_t  ob_msg;
  vnet_e ob_vnet;
  logic  can_send;
  assign out_valid = ob_v;
  assign out_msg   = ob_msg;
  assign out_vnet  = ob_vnet;
  assign can_send  = !ob_v || out_ready;

  // ---- lookups ----
  baddr_t        c_ba, f_ba;
  logic [SW-1:0] c_set, f_set;
  logic [TW-1:0] c_tag, f_tag;
  logic          c_hit, f_hit;
  logic [WW-1:0] c_way, f_way;
  logic          c_has_inv;
  logic [WW-1:0] c_inv_way;

  assign c_ba  = cur.paddr[PA_W-1:OFF_W];
  assign c_set = c_ba[SW-1:0];
  assign c_tag = c_ba[BA_W-1:SW];
  assign f_ba  = fwd_msg.addr;
  assign f_set = f_ba[SW-1:0];
  assign f_tag = f_ba[BA_W-1:SW];

  always_comb begin
    c_hit = 1'b0; c_way = '0; f_hit = 1'b0; f_way = '0;
    c_has_inv = 1'b0; c_inv_way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (st_a[c_set][w] != ST_I && tag_a[c_set][w] == c_tag) begin
        c_hit = 1'b1; c_way = WW'(w);
      end
      if (st_a[f_set][w] != ST_I && tag_a[f_set][w] == f_tag) begin
        f_hit = 1'b1; f_way = WW'(w);
      end
    end
    for (int w = WAYS - 1; w >= 0; w--)
      if (st_a[c_set][w] == ST_I) begin
        c_has_inv = 1'b1; c_inv_way = WW'(w);
      end
  end

  function automatic logic is_write_op(memop_e op);
    return op != OP_LD;
  endfunction

  // ---- apply a core operation to a block ----
  function automatic void do_op(input l1_req_t r, input block_t blk_in,
                                output block_t blk_out, output logic [63:0] old);
    logic [2:0]  wi;
    logic [63:0] w, nw;
    wi  = r.paddr[5:3];
    w   = blk_in[wi*64 +: 64];
    old = w;
    case (r.op)
      OP_ST:   nw = r.wdata;
      OP_CAS:  nw = (w == r.cmp) ? r.wdata : w;
      OP_ADD:  nw = w + r.wdata;
      OP_INC:  nw = w + 64'd1;
      OP_DEC:  nw = w - 64'd1;
      default: nw = w;
    endcase
    blk_out = blk_in;
    blk_out[wi*64 +: 64] = nw;
  endfunction

  mstate_e  c_st;
  assign c_st = st_a[c_set][c_way];
  logic c_perm;
  assign c_perm = c_hit && (is_write_op(cur.op) ? (c_st == ST_E || c_st == ST_M) : 1'b1);

  // which action this cycle
  logic act_rsp, act_fwd, act_core;
  assign act_rsp  = rsp_in_valid && (rsp_in_msg.mtype == M_WB_ACK || can_send);
  assign act_fwd  = !act_rsp && fwd_valid && can_send;
  assign act_core = !act_rsp && !act_fwd && cur_v && !pend_v && (c_perm || can_send);
  assign rsp_in_ready = act_rsp;
  assign fwd_ready    = act_fwd;

  assign stat_hit  = act_core && c_perm;
  assign stat_miss = act_core && !c_perm && !(!c_hit && !c_has_inv &&
                     (st_a[c_set][rr_way] != ST_I && st_a[c_set][rr_way] != ST_S));
  assign stat_wb   = act_core && !c_hit && !c_has_inv &&
                     (st_a[c_set][rr_way] == ST_E || st_a[c_set][rr_way] == ST_O ||
                      st_a[c_set][rr_way] == ST_M);

  msg_t base_msg;
  always_comb begin
    base_msg          = '0;
    base_msg.src      = node_t'(NODE);
    base_msg.src_unit = UNIT;
    base_msg.dst_unit = U_DIR;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) st_a[s][w] <= ST_I;
      creq_v     <= 1'b0;
      creq_q     <= '0;
      pend_v     <= 1'b0;
      pend_wb    <= 1'b0;
      pend_set   <= '0;
      pend_way   <= '0;
      rr_way     <= '0;
      ob_v       <= 1'b0;
      ob_msg     <= '0;
      ob_vnet    <= VN_REQ;
      rsp_pipe_v <= '0;
      for (int i = 0; i <= HIT_LAT; i++) rsp_pipe_d[i] <= '0;
    end else begin
      block_t      nb, fb;
      logic [63:0] old;
      msg_t        m;
      if (ob_v && out_ready) ob_v <= 1'b0;
      // response delay line: stage 1 is written by a completing operation
      rsp_pipe_v[0] <= 1'b0;
      for (int i = 1; i <= HIT_LAT; i++) begin
        rsp_pipe_v[i] <= (i == 1) ? 1'b0 : rsp_pipe_v[i-1];
        rsp_pipe_d[i] <= (i == 1) ? rsp_pipe_d[1] : rsp_pipe_d[i-1];
      end
      if (req_valid && req_ready && !(act_core && c_perm)) begin
        creq_v <= 1'b1;
        creq_q <= req;
      end

      if (act_rsp) begin
        if (rsp_in_msg.mtype == M_WB_ACK) begin
          st_a[pend_set][pend_way] <= ST_I;
          pend_v <= 1'b0;
        end else begin
          // GRANT: install, complete the waiting operation, unblock
          fb = rsp_in_msg.have_data ? rsp_in_msg.data : dat_a[pend_set][pend_way];
          do_op(cur, fb, nb, old);
          dat_a[pend_set][pend_way] <= nb;
          st_a[pend_set][pend_way]  <= (is_write_op(cur.op)) ? ST_M : rsp_in_msg.gstate;
          pend_v        <= 1'b0;
          creq_v        <= 1'b0;
          rsp_pipe_v[1] <= 1'b1;
          rsp_pipe_d[1] <= old;
          m = base_msg; m.mtype = M_UNBLOCK; m.dst = rsp_in_msg.src; m.addr = rsp_in_msg.addr;
          ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_RSP;
        end
      end else if (act_fwd) begin
        m = base_msg; m.dst = fwd_msg.src; m.addr = fwd_msg.addr;
        if (fwd_msg.mtype == M_INV) begin
          m.mtype = M_INV_ACK;
          if (f_hit && st_a[f_set][f_way] == ST_S) st_a[f_set][f_way] <= ST_I;
        end else begin
          m.mtype     = M_OWN_DATA;
          m.have_data = f_hit;
          m.data      = dat_a[f_set][f_way];
          m.dirty     = f_hit && (st_a[f_set][f_way] == ST_M || st_a[f_set][f_way] == ST_O);
          if (f_hit) st_a[f_set][f_way] <= (fwd_msg.mtype == M_FWD_GETS) ? ST_O : ST_I;
        end
        ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_RSP;
      end else if (act_core) begin
        m = base_msg;
        m.dst  = bank_node(addr_bank(c_ba));
        m.addr = c_ba;
        if (c_perm) begin
          do_op(cur, dat_a[c_set][c_way], nb, old);
          if (is_write_op(cur.op)) begin
            dat_a[c_set][c_way] <= nb;
            st_a[c_set][c_way]  <= ST_M;
          end
          creq_v        <= 1'b0;
          rsp_pipe_v[1] <= 1'b1;
          rsp_pipe_d[1] <= old;
        end else if (c_hit) begin
          // S or O block that must become writable: upgrade
          m.mtype = M_GETX; m.have_data = 1'b1;
          pend_v <= 1'b1; pend_wb <= 1'b0; pend_set <= c_set; pend_way <= c_way;
          ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_REQ;
        end else begin
          logic [WW-1:0] vw;
          vw = c_has_inv ? c_inv_way : rr_way;
          if (!c_has_inv) rr_way <= rr_way + 1'b1;
          if (st_a[c_set][vw] == ST_E || st_a[c_set][vw] == ST_O || st_a[c_set][vw] == ST_M) begin
            m.mtype = M_PUTX;
            m.addr  = {tag_a[c_set][vw], c_set};
            m.dst   = bank_node(addr_bank({tag_a[c_set][vw], c_set}));
            m.have_data = 1'b1;
            m.dirty = (st_a[c_set][vw] != ST_E);
            m.data  = dat_a[c_set][vw];
            pend_v <= 1'b1; pend_wb <= 1'b1; pend_set <= c_set; pend_way <= vw;
          end else begin
            m.mtype = is_write_op(cur.op) ? M_GETX : M_GETS;
            st_a[c_set][vw]  <= ST_I;
            tag_a[c_set][vw] <= c_tag;
            pend_v <= 1'b1; pend_wb <= 1'b0; pend_set <= c_set; pend_way <= vw;
          end
          ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_REQ;
        end
      end
    end
  end

  assign rsp_valid = rsp_pipe_v[HIT_LAT];
  assign rsp_data  = rsp_pipe_d[HIT_LAT];

`ifndef SYNTHESIS
  // The directory only grants or acknowledges what this cache asked for.
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
      rsp_in_valid |-> pend_v);
  // An instruction cache never asks for write permission.
  a_icache_ro: assert property (@(posedge clk) disable iff (!rst_n)
      (UNIT == U_L1I && req_valid) |-> req.op == OP_LD);
`endif
endmodule
