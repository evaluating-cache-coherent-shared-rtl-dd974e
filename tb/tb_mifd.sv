// tb_mifd: self-checking test of the MTTOP interface device with 3 cores of
// 2 warp contexts each. It checks: a 40-thread launch is cut into 5 warps of 8
// handed out round robin (cores 0,1,2,0,1) with the right first thread, lane
// mask, PC and CR3; a launch needing more contexts than are free places what
// fits and sets the error register; CLEAR_ERROR clears it; warp_done frees a
// context; a page fault from a core raises the CPU interrupt with its cause,
// address, CR3 and core, and FAULT_DONE resumes that core; SHOOTDOWN pulses
// the TLB flush. Commands are driven at the falling edge.
module tb_mifd;
  import ccsvm_pkg::*;
  localparam int NC = 3, WPC = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  logic cmd_valid, cmd_ready, err_reg, busy, irq_valid, tlb_flush;
  logic [1:0] cmd_op, irq_cause;
  task_desc_t cmd_task;
  logic launch_valid [NC], launch_ready [NC], warp_done [NC];
  warp_launch_t launch;
  logic pf_valid [NC], pf_ack [NC], pf_resume [NC];
  logic [VA_W-1:0] pf_va [NC];
  logic [1:0] pf_cause [NC];
  logic [63:0] pf_cr3 [NC];
  logic [VA_W-1:0] irq_va;
  logic [63:0] irq_cr3;
  logic [$clog2(NC)-1:0] irq_core;
  int checks = 0, failures = 0;
  int n_launch = 0, l_core [32];
  warp_launch_t l_w [32];
  int n_flush = 0, n_resume [NC];

  mifd #(.N_CORE(NC), .WARPS_PER_CORE(WPC)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(posedge clk) begin
    for (int c = 0; c < NC; c++) begin
      if (launch_valid[c] && launch_ready[c]) begin
        l_core[n_launch] = c; l_w[n_launch] = launch; n_launch++;
      end
      if (pf_resume[c]) n_resume[c]++;
      if (pf_ack[c]) pf_valid[c] <= 1'b0;
    end
    if (tlb_flush) n_flush++;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic cmd(logic [1:0] op, task_desc_t t);
    @(negedge clk);
    cmd_valid = 1'b1; cmd_op = op; cmd_task = t;
    while (!cmd_ready) @(negedge clk);
    @(negedge clk);
    cmd_valid = 1'b0;
  endtask

  task automatic settle();
    int n = 0;
    do begin @(negedge clk); n++; end while (busy && n < 200);
    repeat (3) @(negedge clk);
  endtask

  initial begin
    cmd_valid = 0; cmd_op = 0; cmd_task = '0;
    for (int c = 0; c < NC; c++) begin
      launch_ready[c] = 1; warp_done[c] = 0; pf_valid[c] = 0; pf_va[c] = '0;
      pf_cause[c] = '0; pf_cr3[c] = '0; n_resume[c] = 0;
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // 40 threads -> 5 warps
    cmd(2'd0, '{pc: 64'h400, args: 64'h9000, first_tid: 0, last_tid: 39, cr3: 64'h5000});
    settle();
    check("5 warps launched", n_launch == 5);
    for (int i = 0; i < 5 && i < n_launch; i++) begin
      check($sformatf("warp %0d core %0d", i, l_core[i]), l_core[i] == i % NC);
      check($sformatf("warp %0d first tid", i), l_w[i].first_tid == 32'(i * 8));
      check($sformatf("warp %0d mask", i), l_w[i].lane_mask == 8'hFF);
      check($sformatf("warp %0d pc/cr3", i), l_w[i].pc == 64'h400 && l_w[i].cr3 == 64'h5000);
    end
    check("no error", !err_reg);
    // 12 threads -> 2 warps, only 1 context free (core 2)
    cmd(2'd0, '{pc: 64'h800, args: 0, first_tid: 100, last_tid: 111, cr3: 64'h5000});
    settle();
    check("error set", err_reg);
    check("one warp placed", n_launch == 6);
    if (n_launch >= 6) check("placed on core 2", l_core[5] == 2 && l_w[5].first_tid == 100);
    cmd(2'd3, '0);
    settle();
    check("error cleared", !err_reg);
    // free a context on core 0 and launch a partial warp (3 threads)
    @(negedge clk); warp_done[0] = 1; @(negedge clk); warp_done[0] = 0;
    cmd(2'd0, '{pc: 64'h900, args: 0, first_tid: 200, last_tid: 202, cr3: 64'h5000});
    settle();
    check("partial warp launched", n_launch == 7);
    if (n_launch >= 7) check("partial warp core 0 mask 07", l_core[6] == 0 && l_w[6].lane_mask == 8'h07);
    check("no error after free", !err_reg);
    // page fault on core 1
    @(negedge clk);
    pf_valid[1] = 1; pf_va[1] = 48'h1234_5000; pf_cause[1] = 2'd1; pf_cr3[1] = 64'h5000;
    repeat (5) @(negedge clk);
    check("irq raised", irq_valid);
    check("irq fields", irq_core == 1 && irq_va == 48'h1234_5000 && irq_cause == 2'd1 && irq_cr3 == 64'h5000);
    check("fault acked", !pf_valid[1]);
    cmd(2'd2, '0);
    settle();
    check("core 1 resumed", n_resume[1] == 1 && n_resume[0] == 0 && n_resume[2] == 0);
    check("irq dropped", !irq_valid);
    cmd(2'd1, '0);
    settle();
    check("tlb flush", n_flush >= 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
