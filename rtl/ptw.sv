// ptw: hardware page table walker of one core. The paper gives every CPU and
// every MTTOP core its own walker because the cores are x86 (hardware TLB
// miss handling), and a MTTOP walker reports page faults instead of trapping.
//
// A walk starts on start with the virtual address, the CR3 value of the
// running process and whether the access is a write. It follows the x86-64
// four-level table: PML4, PDPT, PD, PT, each indexed by 9 bits of the address
// (bits 47:39, 38:30, 29:21, 20:12), 8-byte entries, entry address = table
// base + 8*index. An entry with P (bit 0) clear ends the walk with a
// not-present fault; R/W (bit 1) is ANDed over the levels, and a write to a
// page that is not writable ends with a protection fault. PS (bit 7) in a
// PDPT or PD entry ends the walk at a 1 GB or 2 MB page. The walk reads one
// 64-bit entry at a time through mem_req/mem_rsp (in the chip, through the
// core's L1D, so page tables are cached coherently) and takes one memory
// round trip per level. The x86-64 format is this design's reading of "x86";
// the paper does not state the paging mode.
module ptw
  import ccsvm_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [VA_W-1:0]  va,
  input  logic [63:0]      cr3,
  input  logic             is_write,
  output logic             busy,
  // memory port (physical, one 64-bit entry)
  output logic             mem_req_valid,
  output logic [PA_W-1:0]  mem_req_addr,
  input  logic             mem_req_ready,
  input  logic             mem_rsp_valid,
  input  logic [63:0]      mem_rsp_data,
  // result, valid for one cycle
  output logic             done,
  output logic             fault,
  output logic [1:0]       fault_cause,   // 1: not present, 2: write protect
  output logic [PPN_W-1:0] ppn,
  output logic             writable
);
  typedef enum logic [1:0] {W_IDLE, W_REQ, W_WAIT} wstate_e;
  wstate_e     st;
  logic [1:0]  level;        // 0 = PML4 ... 3 = PT
  logic [51:0] base;         // physical address of current table
  logic [VA_W-1:0] va_q;
  logic        wr_q, rw_acc;

  function automatic logic [8:0] vidx(logic [VA_W-1:0] a, logic [1:0] l);
    case (l)
      2'd0:    return a[47:39];
      2'd1:    return a[38:30];
      2'd2:    return a[29:21];
      default: return a[20:12];
    endcase
  endfunction

  logic [51:0] entry_addr;
  assign entry_addr    = {base[51:12], 12'b0} + {40'b0, vidx(va_q, level), 3'b000};
  assign mem_req_valid = (st == W_REQ);
  assign mem_req_addr  = entry_addr[PA_W-1:0];
  assign busy          = (st != W_IDLE);

  logic        pte_p, pte_rw, pte_ps, last;
  logic        rw_new;
  logic [51:0] pte_base;
  assign pte_p    = mem_rsp_data[0];
  assign pte_rw   = mem_rsp_data[1];
  assign pte_ps   = mem_rsp_data[7] && (level == 2'd1 || level == 2'd2);
  assign pte_base = {mem_rsp_data[51:12], 12'b0};
  assign last     = (level == 2'd3) || pte_ps;
  assign rw_new   = rw_acc && pte_rw;

  // physical page number of the final translation
  logic [51:0] leaf_pa;
  always_comb begin
    if (level == 2'd1)      leaf_pa = {mem_rsp_data[51:30], va_q[29:12], 12'b0};
    else if (level == 2'd2) leaf_pa = {mem_rsp_data[51:21], va_q[20:12], 12'b0};
    else                    leaf_pa = pte_base;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st          <= W_IDLE;
      level       <= '0;
      base        <= '0;
      va_q        <= '0;
      wr_q        <= 1'b0;
      rw_acc      <= 1'b0;
      done        <= 1'b0;
      fault       <= 1'b0;
      fault_cause <= '0;
      ppn         <= '0;
      writable    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        W_IDLE: if (start) begin
          st     <= W_REQ;
          level  <= 2'd0;
          base   <= cr3[51:0];
          va_q   <= va;
          wr_q   <= is_write;
          rw_acc <= 1'b1;
        end
        W_REQ: if (mem_req_ready) st <= W_WAIT;
        W_WAIT: if (mem_rsp_valid) begin
          if (!pte_p) begin
            st <= W_IDLE; done <= 1'b1; fault <= 1'b1; fault_cause <= 2'd1;
          end else if (last) begin
            st          <= W_IDLE;
            done        <= 1'b1;
            fault       <= wr_q && !rw_new;
            fault_cause <= (wr_q && !rw_new) ? 2'd2 : 2'd0;
            ppn         <= leaf_pa[PA_W-1:12];
            writable    <= rw_new;
          end else begin
            st     <= W_REQ;
            level  <= level + 1'b1;
            base   <= pte_base;
            rw_acc <= rw_new;
          end
        end
        default: st <= W_IDLE;
      endcase
    end
  end
endmodule
