// core_node: the network node of one CPU or MTTOP core, drawn in the system
// figure as a circle holding "TLB" and "L1". It holds everything the core
// needs for cache-coherent shared virtual memory: a CR3 register, a TLB, a
// page table walker, the L1 instruction and data caches and their network
// interface. The core pipeline itself is outside (x86 for a CPU, a SIMT
// pipeline for a MTTOP core) and connects through the req/rsp port.
//
// An access (load, store, atomic or instruction fetch, with a virtual
// address) is looked up in the TLB in the cycle it arrives; on a hit it goes
// to the L1 in that same cycle, so a TLB and L1 hit answers HIT_LAT cycles
// later. A TLB miss starts the walker, whose page-table reads go through the
// L1D; the translation is then filled into the TLB and the access retried.
// A page fault is raised on pf_valid with the address, the cause and the
// node's CR3 (for a MTTOP core the MIFD forwards it to a CPU as an
// interrupt); the access waits for pf_resume and then retries. tlb_flush
// empties the TLB (shootdown). cr3_load sets the CR3 register (for a MTTOP
// core, from the warp launch).
//
// Network interface: the two L1s share the node's injection port (round
// robin); arriving forwards and responses wait in one small FIFO per virtual
// network and are steered to L1D or L1I by their destination unit.
//
// From the paper: per-core TLB and walker, CR3 register added to MTTOP cores,
// MTTOP page faults reported with CR3, flush-all shootdown, L1I and L1D per
// core. This design's choices: one shared port for fetch and data, and the
// interface timing.
module core_node
  import ccsvm_pkg::*;
#(
  parameter int unsigned CORE        = N_CPU,       // first MTTOP core
  parameter int unsigned L1_SIZE     = 16384,
  parameter int unsigned L1_WAYS     = 4,
  parameter int unsigned HIT_LAT     = 1,
  parameter int unsigned TLB_ENTRIES = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // core pipeline side
  input  logic        req_valid,
  input  core_req_t   req,
  output logic        req_ready,
  output logic        rsp_valid,
  output logic [63:0] rsp_data,
  input  logic        cr3_load,
  input  logic [63:0] cr3_value,
  input  logic        tlb_flush,
  output logic        pf_valid,
  output logic [VA_W-1:0] pf_va,
  output logic [1:0]  pf_cause,
  output logic [63:0] pf_cr3,
  input  logic        pf_ack,
  input  logic        pf_resume,
  // network
  output msg_t        inj_msg,
  output vnet_e       inj_vnet,
  output logic        inj_valid,
  input  logic        inj_ready [N_VNET],
  input  msg_t        ej_msg,
  input  vnet_e       ej_vnet,
  input  logic        ej_valid,
  output logic        ej_ready  [N_VNET],
  // statistics
  output logic        stat_tlb_miss,
  output logic        stat_fault,
  output logic        stat_l1_miss
);
  localparam int unsigned NODE = int'(core_node(CORE));

  typedef enum logic [2:0] {T_IDLE, T_XLATE, T_WALK, T_FAULT, T_WAITRES, T_L1WAIT} tstate_e;
  tstate_e    st;
  core_req_t  cq;
  logic [63:0] cr3_q;
  core_req_t  cur;
  assign cur = (st == T_IDLE) ? req : cq;

  // ---- TLB ----
  logic             tlb_hit, tlb_wr, fill_v;
  logic [PPN_W-1:0] tlb_ppn;
  logic             ptw_done, ptw_fault, ptw_wr, ptw_busy;
  logic [PPN_W-1:0] ptw_ppn;
  logic [1:0]       ptw_cause;
  assign fill_v = ptw_done && !ptw_fault;

  tlb #(.ENTRIES(TLB_ENTRIES)) u_tlb (
    .clk, .rst_n,
    .lk_vpn(cur.vaddr[VA_W-1:PG_W]), .lk_hit(tlb_hit), .lk_ppn(tlb_ppn), .lk_writable(tlb_wr),
    .fill_valid(fill_v), .fill_vpn(cq.vaddr[VA_W-1:PG_W]), .fill_ppn(ptw_ppn),
    .fill_writable(ptw_wr), .flush(tlb_flush));

  logic is_wr;
  assign is_wr = (cur.op != OP_LD);
  logic xl_ok;   // translation usable for this access
  assign xl_ok = tlb_hit && (!is_wr || tlb_wr);
  logic in_xl;   // an access is being translated this cycle
  assign in_xl = (st == T_IDLE && req_valid) || st == T_XLATE;

  // ---- page table walker ----
  logic    d_req_v, d_req_rdy, i_req_v, i_req_rdy;
  l1_req_t l1r, d_req;
  logic    d_rsp_v, i_rsp_v;
  logic [63:0] d_rsp_d, i_rsp_d;
  logic            ptw_start;
  logic            pm_req_v, pm_req_rdy;
  logic [PA_W-1:0] pm_req_a;
  assign ptw_start = in_xl && !xl_ok && !ptw_busy;

  ptw u_ptw (
    .clk, .rst_n, .start(ptw_start), .va(cur.vaddr), .cr3(cr3_q), .is_write(is_wr),
    .busy(ptw_busy),
    .mem_req_valid(pm_req_v), .mem_req_addr(pm_req_a), .mem_req_ready(pm_req_rdy),
    .mem_rsp_valid(d_rsp_v && st == T_WALK), .mem_rsp_data(d_rsp_d),
    .done(ptw_done), .fault(ptw_fault), .fault_cause(ptw_cause), .ppn(ptw_ppn),
    .writable(ptw_wr));

  // ---- L1 request steering ----
  always_comb begin
    l1r.op     = cur.op;
    l1r.ifetch = cur.ifetch;
    l1r.paddr  = {tlb_ppn, cur.vaddr[PG_W-1:0]};
    l1r.wdata  = cur.wdata;
    l1r.cmp    = cur.cmp;
  end
  logic go_l1;
  assign go_l1   = in_xl && xl_ok;
  assign i_req_v = go_l1 && cur.ifetch;
  always_comb begin
    if (st == T_WALK) begin
      d_req_v = pm_req_v;
      d_req   = '{op: OP_LD, ifetch: 1'b0, paddr: pm_req_a, wdata: '0, cmp: '0};
    end else begin
      d_req_v = go_l1 && !cur.ifetch;
      d_req   = l1r;
    end
  end
  assign pm_req_rdy = (st == T_WALK) && d_req_rdy;
  logic l1_taken;
  assign l1_taken  = cur.ifetch ? (i_req_v && i_req_rdy) : (st != T_WALK && d_req_v && d_req_rdy);
  assign req_ready = (st == T_IDLE);
  assign rsp_valid = (st == T_L1WAIT) && (cq.ifetch ? i_rsp_v : d_rsp_v);
  assign rsp_data  = cq.ifetch ? i_rsp_d : d_rsp_d;

  // ---- translation FSM ----
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; cq <= '0; cr3_q <= '0;
      pf_valid <= 1'b0; pf_va <= '0; pf_cause <= '0;
    end else begin
      if (cr3_load) cr3_q <= cr3_value;
      case (st)
        T_IDLE: if (req_valid) begin
          cq <= req;
          if (l1_taken)        st <= T_L1WAIT;
          else if (ptw_start)  st <= T_WALK;
          else                 st <= T_XLATE;
        end
        T_XLATE: begin
          if (l1_taken)        st <= T_L1WAIT;
          else if (ptw_start)  st <= T_WALK;
        end
        T_WALK: if (ptw_done) begin
          if (ptw_fault) begin
            st <= T_FAULT; pf_valid <= 1'b1; pf_va <= cq.vaddr; pf_cause <= ptw_cause;
          end else begin
            st <= T_XLATE;
          end
        end
        T_FAULT: if (pf_ack) begin
          pf_valid <= 1'b0; st <= T_WAITRES;
        end
        T_WAITRES: if (pf_resume) st <= T_XLATE;
        T_L1WAIT: if (cq.ifetch ? i_rsp_v : d_rsp_v) st <= T_IDLE;
        default: st <= T_IDLE;
      endcase
    end
  end
  assign pf_cr3 = cr3_q;
  assign stat_tlb_miss = ptw_start;
  assign stat_fault    = (st == T_WALK) && ptw_done && ptw_fault;

  // ---- the two L1 caches ----
  logic  d_out_v, i_out_v, d_out_rdy, i_out_rdy;
  msg_t  d_out_m, i_out_m;
  vnet_e d_out_vn, i_out_vn;
  logic  d_fwd_v, i_fwd_v, d_fwd_rdy, i_fwd_rdy;
  logic  d_rin_v, i_rin_v, d_rin_rdy, i_rin_rdy;
  msg_t  fwd_head, rsp_head;
  logic  d_hit, d_miss, d_wb, i_hit, i_miss, i_wb;

  l1_cache #(.SIZE_BYTES(L1_SIZE), .WAYS(L1_WAYS), .HIT_LAT(HIT_LAT), .NODE(NODE), .UNIT(U_L1D)) u_l1d (
    .clk, .rst_n, .req_valid(d_req_v), .req(d_req), .req_ready(d_req_rdy),
    .rsp_valid(d_rsp_v), .rsp_data(d_rsp_d),
    .out_valid(d_out_v), .out_msg(d_out_m), .out_vnet(d_out_vn), .out_ready(d_out_rdy),
    .fwd_valid(d_fwd_v), .fwd_msg(fwd_head), .fwd_ready(d_fwd_rdy),
    .rsp_in_valid(d_rin_v), .rsp_in_msg(rsp_head), .rsp_in_ready(d_rin_rdy),
    .stat_hit(d_hit), .stat_miss(d_miss), .stat_wb(d_wb));

  l1_cache #(.SIZE_BYTES(L1_SIZE), .WAYS(L1_WAYS), .HIT_LAT(HIT_LAT), .NODE(NODE), .UNIT(U_L1I)) u_l1i (
    .clk, .rst_n, .req_valid(i_req_v), .req(l1r), .req_ready(i_req_rdy),
    .rsp_valid(i_rsp_v), .rsp_data(i_rsp_d),
    .out_valid(i_out_v), .out_msg(i_out_m), .out_vnet(i_out_vn), .out_ready(i_out_rdy),
    .fwd_valid(i_fwd_v), .fwd_msg(fwd_head), .fwd_ready(i_fwd_rdy),
    .rsp_in_valid(i_rin_v), .rsp_in_msg(rsp_head), .rsp_in_ready(i_rin_rdy),
    .stat_hit(i_hit), .stat_miss(i_miss), .stat_wb(i_wb));
  assign stat_l1_miss = d_miss || i_miss;

  // ---- injection: round robin between L1D and L1I ----
  logic last_i;
  logic sel_i;
  always_comb begin
    if (d_out_v && i_out_v) sel_i = !last_i;
    else                    sel_i = i_out_v;
    inj_valid = sel_i ? i_out_v : d_out_v;
    inj_msg   = sel_i ? i_out_m : d_out_m;
    inj_vnet  = sel_i ? i_out_vn : d_out_vn;
    d_out_rdy = !sel_i && inj_ready[d_out_vn];
    i_out_rdy = sel_i && inj_ready[i_out_vn];
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_i <= 1'b0;
    else if (inj_valid && inj_ready[inj_vnet]) last_i <= sel_i;
  end

  // ---- ejection: one FIFO per virtual network that reaches an L1 ----
  logic fwd_full, fwd_empty, rsp_full, rsp_empty, fwd_pop, rsp_pop;
  logic [1:0] fwd_cnt, rsp_cnt;
  sync_fifo #(.T(msg_t), .DEPTH(2)) u_ej_fwd (
    .clk, .rst_n, .push(ej_valid && ej_vnet == VN_FWD), .wdata(ej_msg), .pop(fwd_pop),
    .rdata(fwd_head), .full(fwd_full), .empty(fwd_empty), .count(fwd_cnt));
  sync_fifo #(.T(msg_t), .DEPTH(2)) u_ej_rsp (
    .clk, .rst_n, .push(ej_valid && ej_vnet == VN_RSP), .wdata(ej_msg), .pop(rsp_pop),
    .rdata(rsp_head), .full(rsp_full), .empty(rsp_empty), .count(rsp_cnt));
  always_comb begin
    ej_ready[VN_REQ] = 1'b0;
    ej_ready[VN_FWD] = !fwd_full;
    ej_ready[VN_RSP] = !rsp_full;
  end
  assign d_fwd_v = !fwd_empty && fwd_head.dst_unit == U_L1D;
  assign i_fwd_v = !fwd_empty && fwd_head.dst_unit == U_L1I;
  assign d_rin_v = !rsp_empty && rsp_head.dst_unit == U_L1D;
  assign i_rin_v = !rsp_empty && rsp_head.dst_unit == U_L1I;
  assign fwd_pop = (d_fwd_v && d_fwd_rdy) || (i_fwd_v && i_fwd_rdy);
  assign rsp_pop = (d_rin_v && d_rin_rdy) || (i_rin_v && i_rin_rdy);

`ifndef SYNTHESIS
  a_no_req_here: assert property (@(posedge clk) disable iff (!rst_n)
      !(ej_valid && ej_vnet == VN_REQ));
`endif
endmodule
