// tb_ptw: self-checking test of the x86-64 page table walker. A small memory
// model in the testbench holds a page table and answers each 64-bit read three
// cycles after it is accepted. The test walks a 4 KB page, a 2 MB and a 1 GB
// large page, a read-only page (read passes, write faults with cause 2) and an
// unmapped page (cause 1), and checks the number of table reads per walk.
// Inputs are driven at the falling edge; done is a one-cycle pulse.
module tb_ptw;
  import ccsvm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, is_write, busy, mem_req_valid, mem_req_ready, mem_rsp_valid;
  logic [VA_W-1:0] va;
  logic [63:0] cr3, mem_rsp_data;
  logic [PA_W-1:0] mem_req_addr;
  logic done, fault, writable;
  logic [1:0] fault_cause;
  logic [PPN_W-1:0] ppn;
  int checks = 0, failures = 0, reads = 0;
  logic [63:0] mem [logic [PA_W-1:0]];
  int lat = 0;
  logic [PA_W-1:0] pend_a;

  ptw dut (.*);

  always #5 clk = ~clk;
  initial begin
    #500000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  assign mem_req_ready = (lat == 0);
  always @(posedge clk) begin
    mem_rsp_valid <= 1'b0;
    if (lat > 0) begin
      lat <= lat - 1;
      if (lat == 1) begin
        mem_rsp_valid <= 1'b1;
        mem_rsp_data  <= mem.exists(pend_a) ? mem[pend_a] : 64'd0;
      end
    end else if (mem_req_valid) begin
      lat <= 3; pend_a <= mem_req_addr; reads <= reads + 1;
    end
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic walk(logic [47:0] v, logic w, logic exp_fault, int exp_cause,
                      int exp_ppn, logic exp_w, int exp_reads);
    int r0, n;
    @(negedge clk);
    r0 = reads;
    va = v; is_write = w; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    n = 0;
    while (!done && n < 1000) begin @(negedge clk); n++; end
    check($sformatf("done va %h", v), done);
    check($sformatf("fault va %h", v), fault == exp_fault);
    if (exp_fault) check($sformatf("cause va %h", v), int'(fault_cause) == exp_cause);
    else begin
      check($sformatf("ppn va %h got %h", v, ppn), ppn == PPN_W'(exp_ppn));
      check($sformatf("rw va %h", v), writable == exp_w);
    end
    check($sformatf("reads va %h got %0d", v, reads - r0), reads - r0 == exp_reads);
  endtask

  localparam logic [63:0] CR3 = 64'h10_0000;
  initial begin
    start = 0; is_write = 0; va = '0; cr3 = CR3;
    mem[31'h10_0000] = 64'h10_1003;          // PML4[0]   -> PDPT
    mem[31'h10_1008] = 64'h10_2003;          // PDPT[1]   -> PD   (VA 0x4000_0000)
    mem[31'h10_1010] = 64'h4000_0083;        // PDPT[2]   -> 1 GB page at 0x4000_0000
    mem[31'h10_2000] = 64'h10_3003;          // PD[0]     -> PT
    mem[31'h10_2008] = 64'h0060_0083;        // PD[1]     -> 2 MB page at 0x60_0000
    mem[31'h10_3000] = 64'h0200_0003;        // PT[0]     -> 0x200_0000 RW
    mem[31'h10_3008] = 64'h0200_1001;        // PT[1]     -> 0x200_1000 read-only
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    walk(48'h4000_0000, 1'b1, 1'b0, 0, 32'h2000, 1'b1, 4);
    walk(48'h4000_1123, 1'b0, 1'b0, 0, 32'h2001, 1'b0, 4);
    walk(48'h4000_1000, 1'b1, 1'b1, 2, 0, 0, 4);
    walk(48'h4000_2000, 1'b0, 1'b1, 1, 0, 0, 4);
    walk(48'h4023_4000, 1'b0, 1'b0, 0, 32'h600 + 32'h34, 1'b1, 3);
    walk(48'h8123_4000, 1'b1, 1'b0, 0, 32'h4_0000 + 32'h1234, 1'b1, 2);
    walk(48'h80_0000_0000, 1'b0, 1'b1, 1, 0, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
