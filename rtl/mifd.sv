// mifd: the MTTOP InterFace Device, a small controller that hides the MTTOP
// cores from the CPUs. CPUs talk only to it; it knows how many MTTOP cores
// there are and which thread contexts are free.
//
// Task launch: a CPU writes a task descriptor {PC, arguments, first thread
// ID, last thread ID, CR3} (the xthreads create_mthread write syscall). The
// MIFD cuts the thread range into SIMD-width chunks (warps of SIMD_W threads)
// and hands them out round robin over the MTTOP cores, skipping cores with no
// free warp context, one warp per cycle (launch_valid/launch_ready to the
// chosen core; the warp carries the CR3 the core loads). When every context is
// taken before the task is placed, the remaining threads are not launched and
// the error register is set; as in the paper, nothing guarantees that a task
// needing global synchronisation is placed entirely. warp_done from a core
// returns a context.
//
// Page faults: a MTTOP page table walker that finds a fault reports it here;
// the MIFD takes one fault at a time (round robin between cores), interrupts
// a CPU with cause, faulting address, CR3 and core, and when the CPU writes
// FAULT_DONE it tells that core to retry the access.
//
// TLB shootdown: a CPU command SHOOTDOWN flushes the TLBs of all MTTOP cores.
//
// From the paper: round-robin assignment until contexts run out, error
// register, SIMD-width chunks, interrupting a CPU with the cause and CR3,
// flushing all MTTOP TLBs on a shootdown. This design's choices: the command
// encoding, one warp per cycle, the last-thread field, and routing the
// shootdown through the MIFD.
module mifd
  import ccsvm_pkg::*;
#(
  parameter int unsigned N_CORE       = N_MTTOP,
  parameter int unsigned WARPS_PER_CORE = MTTOP_THREADS / SIMD_W
) (
  input  logic         clk,
  input  logic         rst_n,
  // CPU command port
  input  logic         cmd_valid,
  input  logic [1:0]   cmd_op,     // 0 LAUNCH, 1 SHOOTDOWN, 2 FAULT_DONE, 3 CLEAR_ERROR
  input  task_desc_t   cmd_task,
  output logic         cmd_ready,
  output logic         err_reg,
  output logic         busy,
  // warp launch to the MTTOP cores
  output logic         launch_valid [N_CORE],
  output warp_launch_t launch,
  input  logic         launch_ready [N_CORE],
  input  logic         warp_done    [N_CORE],
  // page faults from the MTTOP cores
  input  logic         pf_valid [N_CORE],
  input  logic [VA_W-1:0] pf_va [N_CORE],
  input  logic [1:0]   pf_cause [N_CORE],
  input  logic [63:0]  pf_cr3   [N_CORE],
  output logic         pf_ack    [N_CORE],   // fault taken, drop pf_valid
  output logic         pf_resume [N_CORE],   // fault handled, retry
  // interrupt to a CPU
  output logic         irq_valid,
  output logic [1:0]   irq_cause,
  output logic [VA_W-1:0] irq_va,
  output logic [63:0]  irq_cr3,
  output logic [$clog2(N_CORE)-1:0] irq_core,
  // TLB flush to the MTTOP cores
  output logic         tlb_flush
);
  localparam int unsigned CW = $clog2(N_CORE);
  localparam int unsigned FW = $clog2(WARPS_PER_CORE + 1);

  logic [FW-1:0] free_w [N_CORE];
  logic          launching;
  task_desc_t    tq;
  logic [31:0]   next_tid;
  logic [CW-1:0] rr;

  // ---- pick the next core with a free context, round robin from rr ----
  logic          pick_v;
  logic [CW-1:0] pick;
  always_comb begin
    pick_v = 1'b0;
    pick   = '0;
    for (int k = 0; k < N_CORE; k++) begin
      int unsigned c;
      c = (int'(rr) + k) % N_CORE;
      if (!pick_v && free_w[c] != '0) begin
        pick_v = 1'b1;
        pick   = CW'(c);
      end
    end
  end

  logic [31:0] remain;
  assign remain = tq.last_tid - next_tid + 1;

  always_comb begin
    launch.pc        = tq.pc;
    launch.args      = tq.args;
    launch.first_tid = next_tid;
    launch.cr3       = tq.cr3;
    for (int l = 0; l < SIMD_W; l++) launch.lane_mask[l] = (32'(l) < remain);
    for (int c = 0; c < N_CORE; c++) launch_valid[c] = launching && pick_v && (pick == CW'(c));
  end

  logic fire;
  assign fire      = launching && pick_v && launch_ready[pick];
  assign cmd_ready = !launching && !(cmd_op == 2'd2 && !irq_valid);
  assign busy      = launching;

  // ---- fault arbitration ----
  logic          pf_pick_v;
  logic [CW-1:0] pf_pick;
  logic [CW-1:0] pf_rr;
  always_comb begin
    pf_pick_v = 1'b0;
    pf_pick   = '0;
    for (int k = 0; k < N_CORE; k++) begin
      int unsigned c;
      c = (int'(pf_rr) + k) % N_CORE;
      if (!pf_pick_v && pf_valid[c]) begin
        pf_pick_v = 1'b1;
        pf_pick   = CW'(c);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < N_CORE; c++) begin
        free_w[c]    <= FW'(WARPS_PER_CORE);
        pf_resume[c] <= 1'b0;
        pf_ack[c]    <= 1'b0;
      end
      launching <= 1'b0;
      tq        <= '0;
      next_tid  <= '0;
      rr        <= '0;
      err_reg   <= 1'b0;
      irq_valid <= 1'b0;
      irq_cause <= '0;
      irq_va    <= '0;
      irq_cr3   <= '0;
      irq_core  <= '0;
      pf_rr     <= '0;
      tlb_flush <= 1'b0;
    end else begin
      tlb_flush <= 1'b0;
      for (int c = 0; c < N_CORE; c++) begin
        pf_resume[c] <= 1'b0;
        pf_ack[c]    <= 1'b0;
        free_w[c] <= free_w[c] + FW'(warp_done[c]) - FW'(fire && pick == CW'(c));
      end
      // commands
      if (cmd_valid && cmd_ready) begin
        case (cmd_op)
          2'd0: begin
            tq        <= cmd_task;
            next_tid  <= cmd_task.first_tid;
            launching <= (cmd_task.last_tid >= cmd_task.first_tid);
          end
          2'd1: tlb_flush <= 1'b1;
          2'd2: begin
            irq_valid <= 1'b0;
            pf_resume[irq_core] <= 1'b1;
          end
          default: err_reg <= 1'b0;
        endcase
      end
      // warp distribution
      if (launching) begin
        if (!pick_v) begin
          err_reg   <= 1'b1;      // out of MTTOP thread contexts
          launching <= 1'b0;
        end else if (fire) begin
          rr <= (int'(pick) == N_CORE - 1) ? '0 : pick + 1'b1;
          if (remain <= SIMD_W) launching <= 1'b0;
          else                  next_tid  <= next_tid + SIMD_W;
        end
      end
      // take a new fault when none is outstanding
      if (!irq_valid && pf_pick_v && !pf_ack[pf_pick] && !(cmd_valid && cmd_ready && cmd_op == 2'd2)) begin
        irq_valid <= 1'b1;
        irq_cause <= pf_cause[pf_pick];
        irq_va    <= pf_va[pf_pick];
        irq_cr3   <= pf_cr3[pf_pick];
        irq_core  <= pf_pick;
        pf_ack[pf_pick] <= 1'b1;
        pf_rr     <= (int'(pf_pick) == N_CORE - 1) ? '0 : pf_pick + 1'b1;
      end
    end
  end

`ifndef SYNTHESIS
  a_ctx_bound: assert property (@(posedge clk) disable iff (!rst_n)
      fire |-> free_w[pick] != '0);
`endif
endmodule
