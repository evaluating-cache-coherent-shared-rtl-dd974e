// mem_ctrl: memory controller node, the chip's link to off-chip DRAM. The
// simulated chip has two, on the torus column next to the L2 banks; each
// serves the blocks whose block-address bit 2 selects it.
//
// It takes MEM_RD and MEM_WR messages from the L2/directory banks (on the
// forward virtual network, which it always drains as long as DRAM accepts),
// turns them into whole-block DRAM reads and writes, and returns each read's
// block to the bank that asked, as MEM_DATA. DRAM answers reads in order, so
// the controller only keeps a FIFO of who asked for each outstanding read
// (RDQ deep). The paper only names the memory controller; the command
// interface, the in-order policy and the queue depth are this design's own.
module mem_ctrl
  import ccsvm_pkg::*;
#(
  parameter int unsigned MC  = 0,
  parameter int unsigned RDQ = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  // from the network (VN_FWD)
  input  logic   in_valid,
  input  msg_t   in_msg,
  output logic   in_ready,
  // to the network (VN_RSP)
  output logic   out_valid,
  output msg_t   out_msg,
  output vnet_e  out_vnet,
  input  logic   out_ready,
  // DRAM command port
  output logic   dram_req_valid,
  output logic   dram_req_we,
  output baddr_t dram_req_addr,
  output block_t dram_req_wdata,
  input  logic   dram_req_ready,
  input  logic   dram_rsp_valid,
  input  block_t dram_rsp_data,
  output logic   dram_rsp_ready,
  // statistics
  output logic   stat_rd,
  output logic   stat_wr
);
  typedef struct packed {
    node_t  src;
    baddr_t addr;
  } rd_t;

  rd_t  rq_head;
  logic rq_full, rq_empty, rq_push, rq_pop;
  logic [$clog2(RDQ+1)-1:0] rq_cnt;
  logic is_rd;

  assign is_rd          = (in_msg.mtype == M_MEM_RD);
  assign dram_req_valid = in_valid && (!is_rd || !rq_full);
  assign dram_req_we    = !is_rd;
  assign dram_req_addr  = in_msg.addr;
  assign dram_req_wdata = in_msg.data;
  assign in_ready       = dram_req_ready && (!is_rd || !rq_full);
  assign rq_push        = in_valid && in_ready && is_rd;

  sync_fifo #(.T(rd_t), .DEPTH(RDQ)) u_rdq (
    .clk, .rst_n, .push(rq_push), .wdata('{src: in_msg.src, addr: in_msg.addr}),
    .pop(rq_pop), .rdata(rq_head), .full(rq_full), .empty(rq_empty), .count(rq_cnt));

  // one-entry output buffer for read data
  logic ob_v;
  msg_t ob_msg;
  assign out_valid      = ob_v;
  assign out_msg        = ob_msg;
  assign out_vnet       = VN_RSP;
  assign dram_rsp_ready = !ob_v || out_ready;
  assign rq_pop         = dram_rsp_valid && dram_rsp_ready;
  assign stat_rd        = rq_push;
  assign stat_wr        = in_valid && in_ready && !is_rd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_v   <= 1'b0;
      ob_msg <= '0;
    end else begin
      if (ob_v && out_ready) ob_v <= 1'b0;
      if (rq_pop) begin
        ob_v <= 1'b1;
        ob_msg           <= '0;
        ob_msg.mtype     <= M_MEM_DATA;
        ob_msg.src       <= mc_node(MC);
        ob_msg.src_unit  <= U_MC;
        ob_msg.dst       <= rq_head.src;
        ob_msg.dst_unit  <= U_DIR;
        ob_msg.addr      <= rq_head.addr;
        ob_msg.have_data <= 1'b1;
        ob_msg.data      <= dram_rsp_data;
      end
    end
  end

`ifndef SYNTHESIS
  a_rsp_has_req: assert property (@(posedge clk) disable iff (!rst_n)
      dram_rsp_valid |-> !rq_empty);
  a_only_mem: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid |-> (in_msg.mtype == M_MEM_RD || in_msg.mtype == M_MEM_WR));
`endif
endmodule
