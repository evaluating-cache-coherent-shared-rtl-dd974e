// l2_dir_bank: one bank of the shared, inclusive L2 cache with the coherence
// directory embedded in its blocks (four 1 MB banks in the simulated chip,
// 10 CPU cycles per access).
//
// Every L2 block carries, besides tag, valid and a dirty bit (newer than
// DRAM), the directory state of the L1 copies: a sharer bit per L1 (28 L1s:
// L1I and L1D of 14 cores) and an owner pointer. The owner holds the block in
// E, O or M; the sharers hold it in S. Because the L2 is inclusive, an L2
// miss means no L1 has the block, and evicting an L2 block first recalls all
// of its L1 copies (INV to sharers, FWD_GETX to the owner).
//
// The bank is a blocking directory: it handles one request at a time, start
// to finish, and stays busy until the requester's UNBLOCK. Requests
// (GETS/GETX/PUTX) wait in the network meanwhile; responses are always
// accepted. Per request:
//   GETS, owner present : FWD_GETS to the owner, its data is granted as S.
//   GETS, no owner      : granted from the L2, E if no other L1 holds it, else S.
//   GETX                : INV to every other sharer, FWD_GETX to another owner,
//                         collect every answer, grant M (without data when the
//                         requester said it still holds the block and the
//                         directory agrees).
//   PUTX                : from the owner: write the data, clear the owner;
//                         from anyone else (a writeback that lost a race with
//                         a FWD_GETX): just acknowledge.
// Misses read the block from the memory controller of its address (MEM_RD /
// MEM_DATA); dirty victims are written back with MEM_WR.
//
// From the paper: inclusive shared L2, 1 MB banks, directory state kept in
// the L2 blocks, standard unoptimized MOESI, LAT = 10 cycles. This design's
// choices: 8 ways, blocking one-transaction-at-a-time operation, all owner
// data passing through the directory, the message set and the replacement
// (an invalid way, else a way no L1 holds, else round robin).
module l2_dir_bank
  import ccsvm_pkg::*;
#(
  parameter int unsigned BANK       = 0,
  parameter int unsigned SIZE_BYTES = 1048576,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned LAT        = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  // outgoing messages
  output logic  out_valid,
  output msg_t  out_msg,
  output vnet_e out_vnet,
  input  logic  out_ready,
  // incoming requests (VN_REQ)
  input  logic  req_valid,
  input  msg_t  req_msg,
  output logic  req_ready,
  // incoming responses (VN_RSP)
  input  logic  rsp_valid,
  input  msg_t  rsp_msg,
  output logic  rsp_ready,
  // statistics
  output logic  stat_miss,
  output logic  stat_recall,
  output logic  stat_fwd
);
  localparam int unsigned SETS = SIZE_BYTES / (BLK_BYTES * WAYS);
  localparam int unsigned SW   = $clog2(SETS);
  localparam int unsigned TW   = BA_W - 2 - SW;
  localparam int unsigned WW   = (WAYS > 1) ? $clog2(WAYS) : 1;
  // D_LAT is held so that a hit without forwards grants LAT cycles after the
  // request was accepted (six of those cycles are the other FSM steps).
  localparam int unsigned LAT_K = (LAT > 6) ? LAT - 6 : 0;
  localparam int unsigned LW    = $clog2(LAT + 2);

  logic            v_a     [SETS][WAYS];
  logic            dirty_a [SETS][WAYS];
  logic [TW-1:0]   tag_a   [SETS][WAYS];
  logic [N_L1-1:0] shr_a   [SETS][WAYS];
  logic            own_v_a [SETS][WAYS];
  logic [L1ID_W-1:0] own_a [SETS][WAYS];
  block_t          dat_a   [SETS][WAYS];

  typedef enum logic [3:0] {
    D_IDLE, D_LAT, D_LOOKUP, D_RECALL, D_EVICT, D_MEMRD, D_MEMWAIT,
    D_PROCESS, D_COLLECT, D_GRANT, D_WAITUNB
  } dstate_e;
  dstate_e st;

  msg_t            rq;             // request being served
  logic [LW-1:0]   lat_cnt;
  logic [SW-1:0]   set_q;
  logic [WW-1:0]   way_q, rr_way;
  logic [N_L1-1:0] tgt;            // INVs still to send
  logic            fwd_pend;       // FWD to the owner still to send
  mtype_e          fwd_type;
  logic [L1ID_W-1:0] fwd_to;
  logic [5:0]      acks;           // answers still expected
  logic            got_data;
  block_t          dbuf;
  logic            recall;         // collecting for an eviction

  baddr_t        rq_ba;
  logic [SW-1:0] rq_set;
  logic [TW-1:0] rq_tag;
  logic [L1ID_W-1:0] rq_id;
  assign rq_ba  = rq.addr;
  assign rq_set = rq_ba[2 +: SW];
  assign rq_tag = rq_ba[BA_W-1 -: TW];
  assign rq_id  = l1_id(rq.src, rq.src_unit);

  function automatic node_t id_node(logic [L1ID_W-1:0] id);
    return core_node(int'(id) / 2);
  endfunction
  function automatic unit_e id_unit(logic [L1ID_W-1:0] id);
    return id[0] ? U_L1I : U_L1D;
  endfunction
  function automatic baddr_t blk_addr(logic [TW-1:0] t, logic [SW-1:0] s);
    return {t, s, 2'(BANK)};
  endfunction

  // ---- tag lookup and victim choice for the current request ----
  logic          l_hit;
  logic [WW-1:0] l_way, l_vic;
  always_comb begin
    logic found_inv;
    l_hit = 1'b0; l_way = '0;
    found_inv = 1'b0; l_vic = rr_way;
    for (int w = 0; w < WAYS; w++)
      if (v_a[rq_set][w] && tag_a[rq_set][w] == rq_tag) begin
        l_hit = 1'b1; l_way = WW'(w);
      end
    for (int w = WAYS - 1; w >= 0; w--)
      if (v_a[rq_set][w] && shr_a[rq_set][w] == '0 && !own_v_a[rq_set][w]) l_vic = WW'(w);
    for (int w = WAYS - 1; w >= 0; w--)
      if (!v_a[rq_set][w]) begin
        found_inv = 1'b1; l_vic = WW'(w);
      end
  end

  // ---- output buffer ----
  logic  ob_v;
  msg_t  ob_msg;
  vnet_e ob_vnet;
  logic  can_send;
  assign out_valid = ob_v;
  assign out_msg   = ob_msg;
  assign out_vnet  = ob_vnet;
  assign can_send  = !ob_v || out_ready;

  assign req_ready = (st == D_IDLE);
  assign rsp_ready = 1'b1;

  logic [N_L1-1:0] tgt_low;     // lowest pending INV target
  logic [L1ID_W-1:0] tgt_id;
  always_comb begin
    tgt_low = tgt & (~tgt + 1'b1);
    tgt_id  = '0;
    for (int i = 0; i < N_L1; i++) if (tgt_low[i]) tgt_id = L1ID_W'(i);
  end

  logic rsp_is_ans;
  assign rsp_is_ans = rsp_valid && (rsp_msg.mtype == M_INV_ACK || rsp_msg.mtype == M_OWN_DATA);

  assign stat_miss   = (st == D_LOOKUP) && !l_hit && rq.mtype != M_PUTX;
  assign stat_recall = (st == D_LOOKUP) && !l_hit && rq.mtype != M_PUTX &&
                       v_a[rq_set][l_vic] && (shr_a[rq_set][l_vic] != '0 || own_v_a[rq_set][l_vic]);
  assign stat_fwd    = (st == D_COLLECT) && can_send && fwd_pend;

  msg_t base;
  always_comb begin
    base          = '0;
    base.src      = bank_node(BANK);
    base.src_unit = U_DIR;
    base.dst_unit = U_L1D;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < WAYS; w++) begin
          v_a[s][w]     <= 1'b0;
          own_v_a[s][w] <= 1'b0;
          shr_a[s][w]   <= '0;
          dirty_a[s][w] <= 1'b0;
        end
      st <= D_IDLE; rq <= '0; lat_cnt <= '0; set_q <= '0; way_q <= '0; rr_way <= '0;
      tgt <= '0; fwd_pend <= 1'b0; fwd_type <= M_FWD_GETS; fwd_to <= '0;
      acks <= '0; got_data <= 1'b0; dbuf <= '0; recall <= 1'b0;
      ob_v <= 1'b0; ob_msg <= '0; ob_vnet <= VN_RSP;
    end else begin
      msg_t m;
      logic [5:0] acks_n;
      if (ob_v && out_ready) ob_v <= 1'b0;
      acks_n = acks;
      if (rsp_is_ans) begin
        acks_n = acks_n - 1'b1;
        if (rsp_msg.mtype == M_OWN_DATA && rsp_msg.have_data) begin
          got_data <= 1'b1;
          dbuf     <= rsp_msg.data;
          if (recall) dirty_a[set_q][way_q] <= dirty_a[set_q][way_q] | rsp_msg.dirty;
          if (recall) dat_a[set_q][way_q]   <= rsp_msg.data;
        end
      end

      case (st)
        D_IDLE: if (req_valid) begin
          rq <= req_msg; lat_cnt <= '0; st <= D_LAT;
        end
        D_LAT: begin
          lat_cnt <= lat_cnt + 1'b1;
          if (int'(lat_cnt) >= LAT_K) st <= D_LOOKUP;
        end
        D_LOOKUP: begin
          set_q <= rq_set;
          got_data <= 1'b0;
          if (l_hit) begin
            way_q <= l_way; st <= D_PROCESS;
          end else if (rq.mtype == M_PUTX) begin
            // a writeback of a block the L2 no longer tracks: stale, acknowledge
            way_q <= l_way; st <= D_PROCESS;
          end else begin
            way_q <= l_vic;
            rr_way <= rr_way + 1'b1;
            if (v_a[rq_set][l_vic] && (shr_a[rq_set][l_vic] != '0 || own_v_a[rq_set][l_vic])) begin
              recall   <= 1'b1;
              tgt      <= shr_a[rq_set][l_vic] &
                          ~(own_v_a[rq_set][l_vic] ? (N_L1'(1) << own_a[rq_set][l_vic]) : '0);
              fwd_pend <= own_v_a[rq_set][l_vic];
              fwd_type <= M_FWD_GETX;
              fwd_to   <= own_a[rq_set][l_vic];
              st       <= D_RECALL;
            end else begin
              st <= D_EVICT;
            end
          end
        end
        D_RECALL: begin
          // send the recall messages, then wait for every answer
          if (can_send && fwd_pend) begin
            m = base; m.mtype = M_FWD_GETX; m.dst = id_node(fwd_to); m.dst_unit = id_unit(fwd_to);
            m.addr = blk_addr(tag_a[set_q][way_q], set_q);
            ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
            fwd_pend <= 1'b0; acks_n = acks_n + 1'b1;
          end else if (can_send && tgt != '0) begin
            m = base; m.mtype = M_INV; m.dst = id_node(tgt_id); m.dst_unit = id_unit(tgt_id);
            m.addr = blk_addr(tag_a[set_q][way_q], set_q);
            ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
            tgt <= tgt & ~tgt_low; acks_n = acks_n + 1'b1;
          end else if (!fwd_pend && tgt == '0 && acks_n == '0) begin
            shr_a[set_q][way_q] <= '0; own_v_a[set_q][way_q] <= 1'b0;
            recall <= 1'b0;
            st <= D_EVICT;
          end
        end
        D_EVICT: if (can_send) begin
          if (v_a[set_q][way_q] && dirty_a[set_q][way_q]) begin
            m = base; m.mtype = M_MEM_WR;
            m.addr = blk_addr(tag_a[set_q][way_q], set_q);
            m.dst = mc_node(addr_mc(m.addr)); m.dst_unit = U_MC;
            m.have_data = 1'b1; m.data = dat_a[set_q][way_q];
            ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
          end
          v_a[set_q][way_q] <= 1'b0;
          st <= D_MEMRD;
        end
        D_MEMRD: if (can_send) begin
          m = base; m.mtype = M_MEM_RD; m.addr = rq_ba;
          m.dst = mc_node(addr_mc(rq_ba)); m.dst_unit = U_MC;
          ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
          st <= D_MEMWAIT;
        end
        D_MEMWAIT: if (rsp_valid && rsp_msg.mtype == M_MEM_DATA) begin
          v_a[set_q][way_q]     <= 1'b1;
          tag_a[set_q][way_q]   <= rq_tag;
          dirty_a[set_q][way_q] <= 1'b0;
          shr_a[set_q][way_q]   <= '0;
          own_v_a[set_q][way_q] <= 1'b0;
          dat_a[set_q][way_q]   <= rsp_msg.data;
          st <= D_PROCESS;
        end
        D_PROCESS: begin
          logic hit_now;
          hit_now = v_a[set_q][way_q] && tag_a[set_q][way_q] == rq_tag;
          case (rq.mtype)
            M_PUTX: if (can_send) begin
              if (hit_now && own_v_a[set_q][way_q] && own_a[set_q][way_q] == rq_id) begin
                dat_a[set_q][way_q]   <= rq.data;
                dirty_a[set_q][way_q] <= dirty_a[set_q][way_q] | rq.dirty;
                own_v_a[set_q][way_q] <= 1'b0;
                shr_a[set_q][way_q]   <= shr_a[set_q][way_q] & ~(N_L1'(1) << rq_id);
              end
              m = base; m.mtype = M_WB_ACK; m.dst = rq.src; m.dst_unit = rq.src_unit; m.addr = rq_ba;
              ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_RSP;
              st <= D_IDLE;
            end
            M_GETS: begin
              tgt <= '0;
              if (own_v_a[set_q][way_q] && own_a[set_q][way_q] != rq_id) begin
                fwd_pend <= 1'b1; fwd_type <= M_FWD_GETS; fwd_to <= own_a[set_q][way_q];
              end else begin
                fwd_pend <= 1'b0;
              end
              st <= D_COLLECT;
            end
            default: begin // GETX
              tgt <= shr_a[set_q][way_q] & ~(N_L1'(1) << rq_id) &
                     ~(own_v_a[set_q][way_q] ? (N_L1'(1) << own_a[set_q][way_q]) : '0);
              if (own_v_a[set_q][way_q] && own_a[set_q][way_q] != rq_id) begin
                fwd_pend <= 1'b1; fwd_type <= M_FWD_GETX; fwd_to <= own_a[set_q][way_q];
              end else begin
                fwd_pend <= 1'b0;
              end
              st <= D_COLLECT;
            end
          endcase
        end
        D_COLLECT: begin
          if (can_send && fwd_pend) begin
            m = base; m.mtype = fwd_type; m.dst = id_node(fwd_to); m.dst_unit = id_unit(fwd_to);
            m.addr = rq_ba;
            ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
            fwd_pend <= 1'b0; acks_n = acks_n + 1'b1;
          end else if (can_send && tgt != '0) begin
            m = base; m.mtype = M_INV; m.dst = id_node(tgt_id); m.dst_unit = id_unit(tgt_id);
            m.addr = rq_ba;
            ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_FWD;
            tgt <= tgt & ~tgt_low; acks_n = acks_n + 1'b1;
          end else if (!fwd_pend && tgt == '0 && acks_n == '0) begin
            st <= D_GRANT;
          end
        end
        D_GRANT: if (can_send) begin
          logic holds;
          m = base; m.mtype = M_GRANT; m.dst = rq.src; m.dst_unit = rq.src_unit; m.addr = rq_ba;
          m.data = got_data ? dbuf : dat_a[set_q][way_q];
          if (rq.mtype == M_GETS) begin
            m.have_data = 1'b1;
            if (!own_v_a[set_q][way_q] && (shr_a[set_q][way_q] & ~(N_L1'(1) << rq_id)) == '0) begin
              m.gstate = ST_E;
              own_v_a[set_q][way_q] <= 1'b1;
              own_a[set_q][way_q]   <= rq_id;
              shr_a[set_q][way_q]   <= '0;
            end else begin
              m.gstate = ST_S;
              shr_a[set_q][way_q] <= shr_a[set_q][way_q] | (N_L1'(1) << rq_id);
            end
          end else begin
            holds = shr_a[set_q][way_q][rq_id] ||
                    (own_v_a[set_q][way_q] && own_a[set_q][way_q] == rq_id);
            m.gstate    = ST_M;
            m.have_data = !(rq.have_data && holds);
            own_v_a[set_q][way_q] <= 1'b1;
            own_a[set_q][way_q]   <= rq_id;
            shr_a[set_q][way_q]   <= '0;
          end
          ob_v <= 1'b1; ob_msg <= m; ob_vnet <= VN_RSP;
          st <= D_WAITUNB;
        end
        D_WAITUNB: if (rsp_valid && rsp_msg.mtype == M_UNBLOCK) st <= D_IDLE;
        default: st <= D_IDLE;
      endcase
      acks <= acks_n;
    end
  end

`ifndef SYNTHESIS
  // The directory waits for UNBLOCK only after every forward and INV is out.
  a_one_pending: assert property (@(posedge clk) disable iff (!rst_n)
      (st == D_WAITUNB) |-> !fwd_pend && tgt == '0);
`endif
endmodule
