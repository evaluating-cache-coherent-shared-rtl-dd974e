// tb_tlb: self-checking test of the 64-entry TLB. It fills every entry,
// checks each translation and its write permission, checks that a 65th fill
// replaces the oldest entry (round-robin victim), that refilling a present page
// updates it in place, and that flush removes every entry. Inputs are driven
// at the falling edge and outputs sampled there too; lookup is combinational.
module tb_tlb;
  import ccsvm_pkg::*;
  localparam int N = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  logic [VPN_W-1:0] lk_vpn, fill_vpn;
  logic [PPN_W-1:0] lk_ppn, fill_ppn;
  logic lk_hit, lk_writable, fill_valid, fill_writable, flush;
  int checks = 0, failures = 0;

  tlb #(.ENTRIES(N)) dut (.*);

  always #5 clk = ~clk;
  initial begin
    #200000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  task automatic check(string what, logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic fill(int v, int p, logic w);
    @(negedge clk);
    fill_valid = 1'b1; fill_vpn = VPN_W'(v); fill_ppn = PPN_W'(p); fill_writable = w;
    @(negedge clk);
    fill_valid = 1'b0;
  endtask

  task automatic look(int v, logic exp_hit, int exp_ppn, logic exp_w);
    lk_vpn = VPN_W'(v);
    #1;
    check($sformatf("hit vpn %0h", v), lk_hit == exp_hit);
    if (exp_hit) begin
      check($sformatf("ppn vpn %0h", v), lk_ppn == PPN_W'(exp_ppn));
      check($sformatf("rw vpn %0h", v), lk_writable == exp_w);
    end
  endtask

  initial begin
    fill_valid = 0; fill_vpn = '0; fill_ppn = '0; fill_writable = 0; flush = 0; lk_vpn = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    look(5, 1'b0, 0, 0);
    for (int i = 0; i < N; i++) fill(1000 + i * 7, 300 + i, i[0]);
    for (int i = 0; i < N; i++) look(1000 + i * 7, 1'b1, 300 + i, i[0]);
    look(999, 1'b0, 0, 0);
    fill(1000 + 3 * 7, 77, 1'b1);              // refill present page in place
    look(1000 + 3 * 7, 1'b1, 77, 1'b1);
    look(1000, 1'b1, 300, 1'b0);
    fill(5000, 9, 1'b1);                        // 65th page evicts entry 0
    look(5000, 1'b1, 9, 1'b1);
    look(1000, 1'b0, 0, 0);
    look(1000 + 7, 1'b1, 301, 1'b1);
    @(negedge clk); flush = 1'b1; @(negedge clk); flush = 1'b0;
    for (int i = 1; i < N; i++) look(1000 + i * 7, 1'b0, 0, 0);
    look(5000, 1'b0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
