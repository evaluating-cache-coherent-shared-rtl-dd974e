// tb_ccsvm_chip: end-to-end test of the whole chip at its default sizes.
//
// The testbench plays the parts that are not chip logic: the x86 CPU
// pipelines (as tasks that issue loads, stores and atomics on virtual
// addresses), the MTTOP SIMT pipelines (one process per MTTOP node that runs
// the warps the MIFD hands it, lane by lane), the OS page-fault handler and
// two DRAM channels (dram_model).
//
// Scenario, in order:
//  1. Page tables are built in DRAM (x86-64 4-level). The CPU writes two
//     32-element vectors and launches a 32-thread vector-add task through the
//     MIFD (the xthreads example): each MTTOP thread loads v1[tid] and
//     v2[tid], stores their sum, sets done[tid] and atomically increments a
//     shared counter. The CPU waits on the counter and checks every sum from
//     another CPU.
//  2. Page fault: a MTTOP thread touches an unmapped page; the MIFD
//     interrupts, the handler writes the PTE through a CPU's cache and
//     answers FAULT_DONE; the thread retries and must read the page's data.
//  3. TLB shootdown: every MTTOP core caches a translation, the CPU remaps
//     the page and issues SHOOTDOWN; every core must then see the new page.
//  4. L2 recall: nine blocks mapping to one L2 set are held by the four CPUs,
//     forcing an inclusive-L2 eviction with recall; one was dirty.
//  5. L1 writeback: five conflicting stores in one CPU L1 set.
//  6. MIFD error register: a task larger than all thread contexts.
//  7. CAS by a CPU on the counter the MTTOPs incremented.
// Each mechanism (TLB walk, page fault, L2 miss, L2 recall, cache-to-cache
// forward, invalidation, upgrade without data, L1 writeback, DRAM write,
// MTTOP atomic, MIFD error, shootdown) is counted and must occur.
module tb_ccsvm_chip;
  import ccsvm_pkg::*;

  localparam int unsigned DRAM_LAT = 290;   // 100 ns at 2.9 GHz
  localparam longint WATCHDOG = 3_000_000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  int checks = 0, failures = 0;

  logic         cpu_req_valid [N_CPU];
  core_req_t    cpu_req       [N_CPU];
  logic         cpu_req_ready [N_CPU];
  logic         cpu_rsp_valid [N_CPU];
  logic [63:0]  cpu_rsp_data  [N_CPU];
  logic         cpu_cr3_load  [N_CPU];
  logic [63:0]  cpu_cr3_value [N_CPU];
  logic         cpu_tlb_flush [N_CPU];
  logic         cpu_pf_valid  [N_CPU];
  logic [VA_W-1:0] cpu_pf_va  [N_CPU];
  logic [1:0]   cpu_pf_cause  [N_CPU];
  logic         cpu_pf_resume [N_CPU];
  logic         mt_req_valid [N_MTTOP];
  core_req_t    mt_req       [N_MTTOP];
  logic         mt_req_ready [N_MTTOP];
  logic         mt_rsp_valid [N_MTTOP];
  logic [63:0]  mt_rsp_data  [N_MTTOP];
  logic         mt_launch_valid [N_MTTOP];
  warp_launch_t mt_launch;
  logic         mt_launch_ready [N_MTTOP];
  logic         mt_warp_done    [N_MTTOP];
  logic         mifd_cmd_valid;
  logic [1:0]   mifd_cmd_op;
  task_desc_t   mifd_cmd_task;
  logic         mifd_cmd_ready, mifd_err, mifd_busy;
  logic         irq_valid;
  logic [1:0]   irq_cause;
  logic [VA_W-1:0] irq_va;
  logic [63:0]  irq_cr3;
  logic [3:0]   irq_core;
  logic         dram_req_valid [N_MC];
  logic         dram_req_we    [N_MC];
  baddr_t       dram_req_addr  [N_MC];
  block_t       dram_req_wdata [N_MC];
  logic         dram_req_ready [N_MC];
  logic         dram_rsp_valid [N_MC];
  block_t       dram_rsp_data  [N_MC];
  logic         dram_rsp_ready [N_MC];

  ccsvm_chip dut (.*);

  for (genvar k = 0; k < N_MC; k++) begin : g_dram
    dram_model #(.LAT(DRAM_LAT)) u_dram (
      .clk, .rst_n, .req_valid(dram_req_valid[k]), .req_we(dram_req_we[k]),
      .req_addr(dram_req_addr[k]), .req_wdata(dram_req_wdata[k]), .req_ready(dram_req_ready[k]),
      .rsp_valid(dram_rsp_valid[k]), .rsp_data(dram_rsp_data[k]), .rsp_ready(dram_rsp_ready[k]));
  end

  // ---------------- address map of the test ----------------
  localparam logic [63:0] CR3   = 64'h0010_0000;
  localparam logic [63:0] PDPT  = 64'h0010_1000;
  localparam logic [63:0] PD    = 64'h0010_2000;
  localparam logic [63:0] PT    = 64'h0010_3000;
  localparam logic [63:0] VB    = 64'h0000_4000_0000;   // PML4 0, PDPT 1, PD 0
  localparam logic [63:0] DATA_PA = 64'h0200_0000;
  localparam logic [63:0] CONF_PA = 64'h0400_0000;      // 512 KB apart: one L2 set
  localparam int unsigned NT = 32;                       // vector-add threads

  function automatic logic [63:0] va_page(int p); return VB + 64'(p) * 64'h1000; endfunction
  function automatic logic [63:0] V1(int i);   return va_page(0) + 64'(i) * 8; endfunction
  function automatic logic [63:0] V2(int i);   return va_page(1) + 64'(i) * 8; endfunction
  function automatic logic [63:0] SUM(int i);  return va_page(2) + 64'(i) * 8; endfunction
  function automatic logic [63:0] DONE(int i); return va_page(3) + 64 + 64'(i) * 8; endfunction
  localparam logic [63:0] CNT_VA = VB + 64'h3000;
  function automatic logic [63:0] PTE_VA(int p); return va_page(8) + 64'(p) * 8; endfunction
  localparam logic [63:0] PC_VADD = 64'h100, PC_FAULT = 64'h200, PC_SHOOT = 64'h300, PC_NOP = 64'h400;

  function automatic logic [63:0] dram_init(logic [63:0] pa);
    return {32'hD0D0_0000 | 32'(pa[PA_W-1:OFF_W]), 32'(pa[5:3])};
  endfunction

  task automatic poke(logic [63:0] pa, logic [63:0] v);
    if (addr_mc(pa[PA_W-1:OFF_W]) == 0) g_dram[0].u_dram.poke64(pa[PA_W-1:0], v);
    else                                g_dram[1].u_dram.poke64(pa[PA_W-1:0], v);
  endtask

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  // ---------------- CPU memory operations ----------------
  task automatic cpu_op(int c, memop_e op, logic [63:0] va, logic [63:0] wd, logic [63:0] cmpv,
                        output logic [63:0] rd);
    // inputs change and outputs are sampled at the falling edge
    @(negedge clk);
    cpu_req[c] = '{op: op, ifetch: 1'b0, vaddr: va[VA_W-1:0], wdata: wd, cmp: cmpv};
    cpu_req_valid[c] = 1'b1;
    while (!cpu_req_ready[c]) @(negedge clk);
    @(negedge clk);
    cpu_req_valid[c] = 1'b0;
    while (!cpu_rsp_valid[c]) @(negedge clk);
    rd = cpu_rsp_data[c];
  endtask
  task automatic cpu_st(int c, logic [63:0] va, logic [63:0] wd);
    logic [63:0] d; cpu_op(c, OP_ST, va, wd, 0, d);
  endtask
  task automatic cpu_ld(int c, logic [63:0] va, output logic [63:0] d);
    cpu_op(c, OP_LD, va, 0, 0, d);
  endtask

  // ---------------- MIFD commands ----------------
  bit mifd_lock = 0;
  task automatic mifd_cmd(logic [1:0] op, task_desc_t t);
    while (mifd_lock) @(negedge clk);
    mifd_lock = 1;
    @(negedge clk);
    mifd_cmd_op = op; mifd_cmd_task = t; mifd_cmd_valid = 1'b1;
    while (!mifd_cmd_ready) @(negedge clk);
    @(negedge clk);
    mifd_cmd_valid = 1'b0;
    mifd_lock = 0;
  endtask
  task automatic launch(logic [63:0] pc, int first, int last);
    mifd_cmd(2'd0, '{pc: pc, args: VB, first_tid: 32'(first), last_tid: 32'(last), cr3: CR3});
    @(negedge clk);
    while (mifd_busy) @(negedge clk);
  endtask

  // ---------------- MTTOP pipelines (behavioural) ----------------
  warp_launch_t wq [N_MTTOP][$];
  int warps_done = 0, threads_run = 0, atomics = 0;
  logic [63:0] fault_read, shoot_read [N_MTTOP];
  int shoot_cnt = 0;

  always_ff @(posedge clk)
    for (int m = 0; m < N_MTTOP; m++)
      if (mt_launch_valid[m] && mt_launch_ready[m]) wq[m].push_back(mt_launch);

  task automatic mt_op(int m, memop_e op, logic [63:0] va, logic [63:0] wd, output logic [63:0] rd);
    @(negedge clk);
    mt_req[m] = '{op: op, ifetch: 1'b0, vaddr: va[VA_W-1:0], wdata: wd, cmp: 0};
    mt_req_valid[m] = 1'b1;
    while (!mt_req_ready[m]) @(negedge clk);
    @(negedge clk);
    mt_req_valid[m] = 1'b0;
    while (!mt_rsp_valid[m]) @(negedge clk);
    rd = mt_rsp_data[m];
  endtask

  task automatic run_mttop(int m);
    warp_launch_t w;
    logic [63:0] a, b, d;
    forever begin
      while (wq[m].size() == 0) @(negedge clk);
      w = wq[m].pop_front();
      if (w.pc == PC_NOP) repeat (400) @(posedge clk);
      for (int l = 0; l < SIMD_W; l++) begin
        int tid;
        if (!w.lane_mask[l]) continue;
        tid = int'(w.first_tid) + l;
        case (w.pc)
          PC_VADD: begin
            mt_op(m, OP_LD, V1(tid), 0, a);
            mt_op(m, OP_LD, V2(tid), 0, b);
            mt_op(m, OP_ST, SUM(tid), a + b, d);
            mt_op(m, OP_ST, DONE(tid), 1, d);
            mt_op(m, OP_INC, CNT_VA, 0, d);      // mthread_signal
            atomics++;
            threads_run++;
          end
          PC_FAULT: if (l == 0) mt_op(m, OP_LD, va_page(9) + 16, 0, fault_read);
          PC_SHOOT: if (l == 0) begin
            mt_op(m, OP_LD, va_page(10), 0, shoot_read[m]);
            shoot_cnt++;
          end
          default: ;
        endcase
      end
      @(negedge clk);
      mt_warp_done[m] = 1'b1;
      @(negedge clk);
      mt_warp_done[m] = 1'b0;
      warps_done++;
    end
  endtask

  for (genvar m = 0; m < N_MTTOP; m++) begin : g_mt
    initial begin
      mt_req_valid[m] = 1'b0; mt_req[m] = '0; mt_warp_done[m] = 1'b0; mt_launch_ready[m] = 1'b1;
      @(posedge rst_n);
      run_mttop(m);
    end
  end

  // ---------------- OS page-fault handler, on CPU 1 ----------------
  int faults_handled = 0;
  initial begin
    @(posedge rst_n);
    forever begin
      @(negedge clk);
      if (irq_valid) begin
        int p;
        p = int'((64'(irq_va) - VB) >> 12);
        checks++;
        if (irq_cause != 2'd1 || irq_cr3 != CR3 || p != 9) begin
          failures++;
          $display("FAIL page fault report: cause %0d cr3 %h page %0d", irq_cause, irq_cr3, p);
        end
        cpu_st(1, PTE_VA(p), (DATA_PA + 64'(p) * 64'h1000) | 64'h3);
        mifd_cmd(2'd2, '0);
        faults_handled++;
      end
    end
  end

  // ---------------- mechanism counters (message monitor) ----------------
  int n_msg [16];
  int n_upgrade_nodata = 0, n_tlb_walk = 0, n_flush = 0, n_err = 0;
  always_ff @(posedge clk) if (rst_n) begin
    for (int n = 0; n < N_NODES; n++)
      if (dut.inj_valid[n] && dut.inj_ready[n][dut.inj_vnet[n]]) begin
        n_msg[int'(dut.inj_msg[n].mtype)]++;
        if (dut.inj_msg[n].mtype == M_GRANT && !dut.inj_msg[n].have_data) n_upgrade_nodata++;
      end
    if (dut.u_mifd.tlb_flush) n_flush++;
    if (mifd_err) n_err++;
  end
  for (genvar c = 0; c < N_CPU; c++) begin : g_cw
    always_ff @(posedge clk) if (dut.g_cpu[c].s_tlb) n_tlb_walk++;
  end
  int n_recall = 0;
  for (genvar b = 0; b < N_BANKS; b++) begin : g_rc
    always_ff @(posedge clk) if (dut.g_l2[b].s_recall) n_recall++;
  end
  for (genvar m = 0; m < N_MTTOP; m++) begin : g_mw
    always_ff @(posedge clk) if (dut.g_mt[m].s_tlb) n_tlb_walk++;
  end

  task automatic mech(string name, int n);
    checks++;
    $display("  mechanism %-28s %0d", name, n);
    if (n == 0) begin failures++; $display("FAIL mechanism %s never happened", name); end
  endtask

  // ---------------- main sequence ----------------
  initial begin
    logic [63:0] d;
    int k;
    for (int c = 0; c < N_CPU; c++) begin
      cpu_req_valid[c] = 1'b0; cpu_req[c] = '0; cpu_cr3_load[c] = 1'b0; cpu_cr3_value[c] = CR3;
      cpu_tlb_flush[c] = 1'b0; cpu_pf_resume[c] = 1'b0;
    end
    mifd_cmd_valid = 1'b0; mifd_cmd_op = '0; mifd_cmd_task = '0;
    for (int n = 0; n < 16; n++) n_msg[n] = 0;
    // page tables
    poke(CR3, PDPT | 3);
    poke(PDPT + 8, PD | 3);
    poke(PD, PT | 3);
    for (int p = 0; p < 512; p++) poke(PT + 64'(p) * 8, 0);
    for (int p = 0; p < 8; p++) poke(PT + 64'(p) * 8, (DATA_PA + 64'(p) * 64'h1000) | 3);
    poke(PT + 8 * 8, PT | 3);                         // page 8: window on the PT itself
    poke(PT + 10 * 8, (DATA_PA + 64'hA000) | 3);      // page 10 -> A
    poke(DATA_PA + 64'hA000, 64'hAAAA);
    poke(DATA_PA + 64'hB000, 64'hBBBB);
    for (int j = 0; j < 9; j++) poke(PT + 64'(16 + j) * 8, (CONF_PA + 64'(j) * 64'h80000) | 3);
    repeat (5) @(negedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    for (int c = 0; c < N_CPU; c++) cpu_cr3_load[c] = 1'b1;
    @(negedge clk);
    for (int c = 0; c < N_CPU; c++) cpu_cr3_load[c] = 1'b0;

    // ---- 1. vector add through xthreads ----
    for (int i = 0; i < NT; i++) begin
      cpu_st(0, V1(i), 64'(100 + 3 * i));
      cpu_st(0, V2(i), 64'(7 * i + 1));
      cpu_st(0, DONE(i), 0);
    end
    cpu_st(0, CNT_VA, 0);
    launch(PC_VADD, 0, NT - 1);
    check("no MIFD error on vector add", 64'(mifd_err), 0);
    k = 0;
    do begin
      cpu_ld(0, CNT_VA, d);
      k++;
    end while (d != NT && k < 100000);
    check("mthread counter", d, NT);
    for (int i = 0; i < NT; i++) begin
      cpu_ld(1, SUM(i), d);
      check($sformatf("sum[%0d]", i), d, 64'(100 + 3 * i) + 64'(7 * i + 1));
      cpu_ld(2, DONE(i), d);
      check($sformatf("done[%0d]", i), d, 1);
    end
    while (warps_done < NT / SIMD_W) @(negedge clk);
    check("threads run", 64'(threads_run), NT);

    // ---- 2. page fault from a MTTOP core ----
    launch(PC_FAULT, 0, 0);
    while (warps_done < NT / SIMD_W + 1) @(negedge clk);
    check("faults handled", 64'(faults_handled), 1);
    check("read after fault", fault_read, dram_init(DATA_PA + 64'h9000 + 16));

    // ---- 3. TLB shootdown ----
    launch(PC_SHOOT, 0, N_MTTOP * SIMD_W - 1);
    while (shoot_cnt < N_MTTOP) @(negedge clk);
    for (int m = 0; m < N_MTTOP; m++) check($sformatf("page 10 before remap, core %0d", m), shoot_read[m], 64'hAAAA);
    cpu_st(0, PTE_VA(10), (DATA_PA + 64'hB000) | 3);
    mifd_cmd(2'd1, '0);
    launch(PC_SHOOT, 0, N_MTTOP * SIMD_W - 1);
    while (shoot_cnt < 2 * N_MTTOP) @(negedge clk);
    for (int m = 0; m < N_MTTOP; m++) check($sformatf("page 10 after shootdown, core %0d", m), shoot_read[m], 64'hBBBB);

    // ---- 4. L2 recall: 9 blocks of one L2 set held by the CPUs ----
    cpu_st(0, va_page(16), 64'h1234_5678);
    for (int j = 1; j < 9; j++) begin
      cpu_ld(j % 4, va_page(16 + j), d);
      check($sformatf("conflict block %0d", j), d, dram_init(CONF_PA + 64'(j) * 64'h80000));
    end
    cpu_ld(2, va_page(16), d);
    check("dirty block after recall", d, 64'h1234_5678);

    // ---- 5. L1 writeback: 5 stores into one CPU L1 set ----
    for (int j = 0; j < 5; j++) cpu_st(3, va_page(20 + j - 4) + 8, 64'(j) + 64'h500);
    for (int j = 0; j < 5; j++) begin
      cpu_ld(3, va_page(20 + j - 4) + 8, d);
      check($sformatf("written back block %0d", j), d, 64'(j) + 64'h500);
    end

    // ---- 6. more threads than contexts ----
    mifd_cmd(2'd0, '{pc: PC_NOP, args: 0, first_tid: 0, last_tid: 1399, cr3: CR3});
    @(negedge clk);
    while (mifd_busy) @(negedge clk);
    check("MIFD error register set", 64'(mifd_err), 1);
    mifd_cmd(2'd3, '0);
    check("MIFD error register cleared", 64'(mifd_err), 0);
    while (warps_done < NT / SIMD_W + 1 + 2 * N_MTTOP + N_MTTOP * MTTOP_THREADS / SIMD_W) @(negedge clk);

    // ---- 7. CAS on the counter ----
    cpu_op(2, OP_CAS, CNT_VA, 1000, NT, d);
    check("CAS old value", d, NT);
    cpu_ld(0, CNT_VA, d);
    check("CAS new value", d, 1000);

    // ---- mechanisms ----
    mech("TLB miss / page walk", n_tlb_walk);
    mech("MTTOP page fault", faults_handled);
    mech("L2 miss (DRAM read)", n_msg[M_MEM_RD]);
    mech("L2 eviction with recall", n_recall);
    mech("DRAM write (dirty eviction)", n_msg[M_MEM_WR]);
    mech("cache-to-cache FWD_GETS", n_msg[M_FWD_GETS]);
    mech("ownership FWD_GETX", n_msg[M_FWD_GETX]);
    mech("invalidation", n_msg[M_INV]);
    mech("upgrade granted without data", n_upgrade_nodata);
    mech("L1 writeback PUTX", n_msg[M_PUTX]);
    mech("MTTOP atomic", atomics);
    mech("MIFD error", n_err);
    mech("MTTOP TLB flush", n_flush);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
