// dram_model: behavioural model of one channel of off-chip DRAM, for
// simulation only (not synthesizable, not part of the chip).
//
// It accepts one whole-block read or write per cycle and answers reads in
// order, LAT cycles after the request (the simulated system's 100 ns DRAM is
// 290 cycles of a 2.9 GHz clock). Storage is sparse; a block never written
// reads as init_word(address, word). Testbenches fill memory (page tables,
// input arrays) through poke64 and read it back with peek64.
module dram_model
  import ccsvm_pkg::*;
#(
  parameter int unsigned LAT = 290
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   req_valid,
  input  logic   req_we,
  input  baddr_t req_addr,
  input  block_t req_wdata,
  output logic   req_ready,
  output logic   rsp_valid,
  output block_t rsp_data,
  input  logic   rsp_ready
);
  block_t mem [baddr_t];
  typedef struct { longint due; block_t data; } pend_t;
  pend_t q [$];
  longint cyc;
  int unsigned n_rd, n_wr;

  function automatic logic [63:0] init_word(baddr_t a, int w);
    return {32'hD0D0_0000 | 32'(a), 32'(w)};
  endfunction

  function automatic block_t rd_blk(baddr_t a);
    block_t b;
    if (mem.exists(a)) return mem[a];
    for (int w = 0; w < 8; w++) b[w*64 +: 64] = init_word(a, w);
    return b;
  endfunction

  function automatic void poke64(logic [PA_W-1:0] pa, logic [63:0] v);
    block_t b;
    b = rd_blk(pa[PA_W-1:OFF_W]);
    b[pa[5:3]*64 +: 64] = v;
    mem[pa[PA_W-1:OFF_W]] = b;
  endfunction

  function automatic logic [63:0] peek64(logic [PA_W-1:0] pa);
    block_t b;
    b = rd_blk(pa[PA_W-1:OFF_W]);
    return b[pa[5:3]*64 +: 64];
  endfunction

  assign req_ready = 1'b1;
  assign rsp_valid = (q.size() > 0) && (q[0].due <= cyc);
  assign rsp_data  = (q.size() > 0) ? q[0].data : '0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cyc  <= 0;
      n_rd <= 0;
      n_wr <= 0;
    end else begin
      cyc <= cyc + 1;
      if (rsp_valid && rsp_ready) void'(q.pop_front());
      if (req_valid) begin
        if (req_we) begin
          mem[req_addr] = req_wdata;
          n_wr <= n_wr + 1;
        end else begin
          q.push_back('{due: cyc + LAT, data: rd_blk(req_addr)});
          n_rd <= n_rd + 1;
        end
      end
    end
  end
endmodule
