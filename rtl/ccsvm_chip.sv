// ccsvm_chip: the heterogeneous multicore chip with cache-coherent shared
// virtual memory: 4 CPU nodes, 10 MTTOP nodes, 4 banks of shared inclusive
// L2 with embedded directory, 2 memory controllers and the MTTOP interface
// device, joined by a 5 x 4 two-dimensional torus.
//
// Placement follows the system figure (see ccsvm_pkg). Every core node has a
// TLB, a page table walker, L1I and L1D; CPU L1s are 64 KB with a 2-cycle
// hit, MTTOP L1s 16 KB with a 1-cycle hit; the L2 banks are 1 MB with a
// 10-cycle access. All caches take part in the same MOESI directory protocol,
// so a CPU and a MTTOP thread communicate through ordinary loads, stores and
// atomics on shared virtual addresses, without going off chip.
//
// What is outside the chip logic and therefore a port:
//   * the CPU pipelines (x86) - memory port, CR3 load, TLB flush, page-fault
//     report and resume of each CPU node; CPUs also drive the MIFD's command
//     port and take its interrupt;
//   * the MTTOP SIMT pipelines - memory port of each MTTOP node, the warp
//     launches the MIFD hands out and the warp-done signals back;
//   * DRAM - one block-wide command port per memory controller.
// A MTTOP node's CR3 register is loaded from the CR3 of each warp it is
// given; its page faults go to the MIFD; MIFD shootdowns flush all MTTOP TLBs.
//
// The whole chip runs on one clock. The paper's cores run at 2.9 GHz (CPU)
// and 600 MHz (MTTOP); the latencies here are counted in cycles of the one
// clock, taken as the paper's numbers per block.
module ccsvm_chip
  import ccsvm_pkg::*;
#(
  parameter int unsigned CPU_L1_SIZE   = 65536,
  parameter int unsigned CPU_HIT_LAT   = 2,
  parameter int unsigned MTTOP_L1_SIZE = 16384,
  parameter int unsigned MTTOP_HIT_LAT = 1,
  parameter int unsigned L1_WAYS       = 4,
  parameter int unsigned TLB_ENTRIES   = 64,
  parameter int unsigned L2_BANK_SIZE  = 1048576,
  parameter int unsigned L2_WAYS       = 8,
  parameter int unsigned L2_LAT        = 10
) (
  input  logic         clk,
  input  logic         rst_n,
  // CPU nodes
  input  logic         cpu_req_valid [N_CPU],
  input  core_req_t    cpu_req       [N_CPU],
  output logic         cpu_req_ready [N_CPU],
  output logic         cpu_rsp_valid [N_CPU],
  output logic [63:0]  cpu_rsp_data  [N_CPU],
  input  logic         cpu_cr3_load  [N_CPU],
  input  logic [63:0]  cpu_cr3_value [N_CPU],
  input  logic         cpu_tlb_flush [N_CPU],
  output logic         cpu_pf_valid  [N_CPU],
  output logic [VA_W-1:0] cpu_pf_va  [N_CPU],
  output logic [1:0]   cpu_pf_cause  [N_CPU],
  input  logic         cpu_pf_resume [N_CPU],
  // MTTOP nodes
  input  logic         mt_req_valid [N_MTTOP],
  input  core_req_t    mt_req       [N_MTTOP],
  output logic         mt_req_ready [N_MTTOP],
  output logic         mt_rsp_valid [N_MTTOP],
  output logic [63:0]  mt_rsp_data  [N_MTTOP],
  output logic         mt_launch_valid [N_MTTOP],
  output warp_launch_t mt_launch,
  input  logic         mt_launch_ready [N_MTTOP],
  input  logic         mt_warp_done    [N_MTTOP],
  // MIFD command port and interrupt
  input  logic         mifd_cmd_valid,
  input  logic [1:0]   mifd_cmd_op,
  input  task_desc_t   mifd_cmd_task,
  output logic         mifd_cmd_ready,
  output logic         mifd_err,
  output logic         mifd_busy,
  output logic         irq_valid,
  output logic [1:0]   irq_cause,
  output logic [VA_W-1:0] irq_va,
  output logic [63:0]  irq_cr3,
  output logic [3:0]   irq_core,
  // DRAM ports
  output logic         dram_req_valid [N_MC],
  output logic         dram_req_we    [N_MC],
  output baddr_t       dram_req_addr  [N_MC],
  output block_t       dram_req_wdata [N_MC],
  input  logic         dram_req_ready [N_MC],
  input  logic         dram_rsp_valid [N_MC],
  input  block_t       dram_rsp_data  [N_MC],
  output logic         dram_rsp_ready [N_MC]
);
  // ---- network ----
  msg_t  inj_msg   [N_NODES];
  vnet_e inj_vnet  [N_NODES];
  logic  inj_valid [N_NODES];
  logic  inj_ready [N_NODES][N_VNET];
  msg_t  ej_msg    [N_NODES];
  vnet_e ej_vnet   [N_NODES];
  logic  ej_valid  [N_NODES];
  logic  ej_ready  [N_NODES][N_VNET];

  torus_network u_noc (
    .clk, .rst_n, .inj_msg, .inj_vnet, .inj_valid, .inj_ready,
    .ej_msg, .ej_vnet, .ej_valid, .ej_ready);

  // ---- MIFD ----
  logic         mf_launch_valid [N_MTTOP];
  logic         mf_pf_valid  [N_MTTOP];
  logic [VA_W-1:0] mf_pf_va  [N_MTTOP];
  logic [1:0]   mf_pf_cause  [N_MTTOP];
  logic [63:0]  mf_pf_cr3    [N_MTTOP];
  logic         mf_pf_ack    [N_MTTOP];
  logic         mf_pf_resume [N_MTTOP];
  logic         mf_flush;

  mifd u_mifd (
    .clk, .rst_n,
    .cmd_valid(mifd_cmd_valid), .cmd_op(mifd_cmd_op), .cmd_task(mifd_cmd_task),
    .cmd_ready(mifd_cmd_ready), .err_reg(mifd_err), .busy(mifd_busy),
    .launch_valid(mf_launch_valid), .launch(mt_launch), .launch_ready(mt_launch_ready),
    .warp_done(mt_warp_done),
    .pf_valid(mf_pf_valid), .pf_va(mf_pf_va), .pf_cause(mf_pf_cause), .pf_cr3(mf_pf_cr3),
    .pf_ack(mf_pf_ack), .pf_resume(mf_pf_resume),
    .irq_valid, .irq_cause, .irq_va, .irq_cr3, .irq_core,
    .tlb_flush(mf_flush));
  assign mt_launch_valid = mf_launch_valid;

  // ---- CPU nodes ----
  for (genvar c = 0; c < N_CPU; c++) begin : g_cpu
    localparam int unsigned N = int'(core_node(c));
    logic s_tlb, s_pf, s_miss;
    core_node #(.CORE(c), .L1_SIZE(CPU_L1_SIZE), .L1_WAYS(L1_WAYS), .HIT_LAT(CPU_HIT_LAT),
                .TLB_ENTRIES(TLB_ENTRIES)) u_node (
      .clk, .rst_n,
      .req_valid(cpu_req_valid[c]), .req(cpu_req[c]), .req_ready(cpu_req_ready[c]),
      .rsp_valid(cpu_rsp_valid[c]), .rsp_data(cpu_rsp_data[c]),
      .cr3_load(cpu_cr3_load[c]), .cr3_value(cpu_cr3_value[c]), .tlb_flush(cpu_tlb_flush[c]),
      .pf_valid(cpu_pf_valid[c]), .pf_va(cpu_pf_va[c]), .pf_cause(cpu_pf_cause[c]), .pf_cr3(),
      .pf_ack(1'b1), .pf_resume(cpu_pf_resume[c]),
      .inj_msg(inj_msg[N]), .inj_vnet(inj_vnet[N]), .inj_valid(inj_valid[N]), .inj_ready(inj_ready[N]),
      .ej_msg(ej_msg[N]), .ej_vnet(ej_vnet[N]), .ej_valid(ej_valid[N]), .ej_ready(ej_ready[N]),
      .stat_tlb_miss(s_tlb), .stat_fault(s_pf), .stat_l1_miss(s_miss));
  end

  // ---- MTTOP nodes ----
  for (genvar m = 0; m < N_MTTOP; m++) begin : g_mt
    localparam int unsigned N = int'(core_node(N_CPU + m));
    logic s_tlb, s_pf, s_miss;
    core_node #(.CORE(N_CPU + m), .L1_SIZE(MTTOP_L1_SIZE), .L1_WAYS(L1_WAYS),
                .HIT_LAT(MTTOP_HIT_LAT), .TLB_ENTRIES(TLB_ENTRIES)) u_node (
      .clk, .rst_n,
      .req_valid(mt_req_valid[m]), .req(mt_req[m]), .req_ready(mt_req_ready[m]),
      .rsp_valid(mt_rsp_valid[m]), .rsp_data(mt_rsp_data[m]),
      .cr3_load(mf_launch_valid[m] && mt_launch_ready[m]), .cr3_value(mt_launch.cr3),
      .tlb_flush(mf_flush),
      .pf_valid(mf_pf_valid[m]), .pf_va(mf_pf_va[m]), .pf_cause(mf_pf_cause[m]), .pf_cr3(mf_pf_cr3[m]),
      .pf_ack(mf_pf_ack[m]), .pf_resume(mf_pf_resume[m]),
      .inj_msg(inj_msg[N]), .inj_vnet(inj_vnet[N]), .inj_valid(inj_valid[N]), .inj_ready(inj_ready[N]),
      .ej_msg(ej_msg[N]), .ej_vnet(ej_vnet[N]), .ej_valid(ej_valid[N]), .ej_ready(ej_ready[N]),
      .stat_tlb_miss(s_tlb), .stat_fault(s_pf), .stat_l1_miss(s_miss));
  end

  // ---- L2 / directory banks ----
  for (genvar b = 0; b < N_BANKS; b++) begin : g_l2
    localparam int unsigned N = int'(bank_node(b));
    logic  o_v, o_rdy, rq_full, rq_empty, rs_full, rs_empty, rq_pop, rs_pop;
    msg_t  o_m, rq_head, rs_head;
    vnet_e o_vn;
    logic [1:0] rq_cnt, rs_cnt;
    logic  s_miss, s_recall, s_fwd;
    sync_fifo #(.T(msg_t), .DEPTH(2)) u_ej_req (
      .clk, .rst_n, .push(ej_valid[N] && ej_vnet[N] == VN_REQ), .wdata(ej_msg[N]), .pop(rq_pop),
      .rdata(rq_head), .full(rq_full), .empty(rq_empty), .count(rq_cnt));
    sync_fifo #(.T(msg_t), .DEPTH(2)) u_ej_rsp (
      .clk, .rst_n, .push(ej_valid[N] && ej_vnet[N] == VN_RSP), .wdata(ej_msg[N]), .pop(rs_pop),
      .rdata(rs_head), .full(rs_full), .empty(rs_empty), .count(rs_cnt));
    assign ej_ready[N][VN_REQ] = !rq_full;
    assign ej_ready[N][VN_FWD] = 1'b0;
    assign ej_ready[N][VN_RSP] = !rs_full;
    l2_dir_bank #(.BANK(b), .SIZE_BYTES(L2_BANK_SIZE), .WAYS(L2_WAYS), .LAT(L2_LAT)) u_bank (
      .clk, .rst_n,
      .out_valid(o_v), .out_msg(o_m), .out_vnet(o_vn), .out_ready(o_rdy),
      .req_valid(!rq_empty), .req_msg(rq_head), .req_ready(rq_pop),
      .rsp_valid(!rs_empty), .rsp_msg(rs_head), .rsp_ready(rs_pop),
      .stat_miss(s_miss), .stat_recall(s_recall), .stat_fwd(s_fwd));
    assign inj_valid[N] = o_v;
    assign inj_msg[N]   = o_m;
    assign inj_vnet[N]  = o_vn;
    assign o_rdy        = inj_ready[N][o_vn];
  end

  // ---- memory controllers ----
  for (genvar k = 0; k < N_MC; k++) begin : g_mc
    localparam int unsigned N = int'(mc_node(k));
    logic  o_v, o_rdy, f_full, f_empty, f_pop;
    msg_t  o_m, f_head;
    vnet_e o_vn;
    logic [1:0] f_cnt;
    logic  s_rd, s_wr;
    sync_fifo #(.T(msg_t), .DEPTH(2)) u_ej_fwd (
      .clk, .rst_n, .push(ej_valid[N] && ej_vnet[N] == VN_FWD), .wdata(ej_msg[N]), .pop(f_pop),
      .rdata(f_head), .full(f_full), .empty(f_empty), .count(f_cnt));
    assign ej_ready[N][VN_REQ] = 1'b0;
    assign ej_ready[N][VN_FWD] = !f_full;
    assign ej_ready[N][VN_RSP] = 1'b0;
    mem_ctrl #(.MC(k)) u_mc (
      .clk, .rst_n,
      .in_valid(!f_empty), .in_msg(f_head), .in_ready(f_pop),
      .out_valid(o_v), .out_msg(o_m), .out_vnet(o_vn), .out_ready(o_rdy),
      .dram_req_valid(dram_req_valid[k]), .dram_req_we(dram_req_we[k]),
      .dram_req_addr(dram_req_addr[k]), .dram_req_wdata(dram_req_wdata[k]),
      .dram_req_ready(dram_req_ready[k]), .dram_rsp_valid(dram_rsp_valid[k]),
      .dram_rsp_data(dram_rsp_data[k]), .dram_rsp_ready(dram_rsp_ready[k]),
      .stat_rd(s_rd), .stat_wr(s_wr));
    assign inj_valid[N] = o_v;
    assign inj_msg[N]   = o_m;
    assign inj_vnet[N]  = o_vn;
    assign o_rdy        = inj_ready[N][o_vn];
  end
endmodule
