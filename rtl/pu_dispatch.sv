// pu_dispatch -- starts kernels on free PUs and enforces the kernel cycle limit.
//
// When the WLBVT scheduler grants an FMQ (grant_valid, combinational from the
// scheduler), the dispatcher pops the head descriptor of that FMQ in the same
// cycle and, one cycle later, presents a task (PU number, FMQ, descriptor,
// kernel entry pointer) on task_valid/task to the lowest-numbered free PU.
// Kernels run to completion: a PU stays busy until it signals pu_done. The
// dispatcher records which FMQ each PU serves and derives from it the per-FMQ
// PU occupation that the scheduler needs (occ, combinational from the busy
// flags, so it already counts a PU in the cycle its task is presented).
//
// Watchdog: each PU has a cycle counter started with the task. If the FMQ's
// cycle limit L is non-zero and the kernel is still running after L cycles
// (counter == L), the kernel is terminated: pu_kill[p] pulses in the next
// cycle, the PU becomes free in that same cycle and a timeout event for the
// FMQ's event queue is raised (ev_valid[p]/ev[p]). A pu_done in the cycle the
// limit is reached wins over the kill.
//
// Run-to-completion, per-FMQ cycle limits and notification through the event
// queue follow the paper; the lowest-free-PU choice and exact timing are this
// design's choices.
module pu_dispatch
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ = N_FMQ_DEF,
  parameter int unsigned N_PU  = N_PU_DEF,
  localparam int unsigned OCC_W = $clog2(N_PU + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              grant_valid,
  input  logic [FMQ_W-1:0]  grant_fmq,
  output logic              pu_free,
  output logic              deq_valid,
  output logic [FMQ_W-1:0]  deq_fmq,
  input  desc_t             deq_desc,
  input  logic [31:0]       cycle_limit [N_FMQ],
  input  logic [PTR_W-1:0]  kernel_ptr  [N_FMQ],
  output logic              task_valid,
  output task_t             task_o,
  input  logic [N_PU-1:0]   pu_done,
  output logic [N_PU-1:0]   pu_kill,
  output logic [N_PU-1:0]   pu_busy,
  output logic [FMQ_W-1:0]  pu_fmq [N_PU],
  output logic [OCC_W-1:0]  occ    [N_FMQ],
  output logic [N_PU-1:0]   ev_valid,
  output event_t            ev     [N_PU]
);

  logic [31:0] cnt [N_PU];
  logic [31:0] lim [N_PU];

  // lowest free PU
  logic [PU_W-1:0] free_pu;
  always_comb begin
    pu_free = 1'b0;
    free_pu = '0;
    for (int p = N_PU - 1; p >= 0; p--) begin
      if (!pu_busy[p]) begin
        pu_free = 1'b1;
        free_pu = PU_W'(p);
      end
    end
  end

  assign deq_valid = grant_valid && pu_free;
  assign deq_fmq   = grant_fmq;

  // per-FMQ count of the busy PUs serving it (one adder tree per FMQ)
  for (genvar i = 0; i < N_FMQ; i++) begin : g_occ
    always_comb begin
      occ[i] = '0;
      for (int p = 0; p < N_PU; p++)
        if (pu_busy[p] && (pu_fmq[p] == FMQ_W'(i))) occ[i] = occ[i] + 1'b1;
    end
  end

  logic [N_PU-1:0] expire;
  always_comb
    for (int p = 0; p < N_PU; p++)
      expire[p] = pu_busy[p] && !pu_done[p] && (lim[p] != '0) && (cnt[p] == lim[p]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pu_busy    <= '0;
      pu_kill    <= '0;
      ev_valid   <= '0;
      task_valid <= 1'b0;
      task_o     <= '0;
      for (int p = 0; p < N_PU; p++) begin
        pu_fmq[p] <= '0;
        cnt[p]    <= '0;
        lim[p]    <= '0;
        ev[p]     <= '0;
      end
    end else begin
      task_valid <= deq_valid;
      if (deq_valid) begin
        task_o.pu         <= free_pu;
        task_o.fmq        <= grant_fmq;
        task_o.desc       <= deq_desc;
        task_o.kernel_ptr <= kernel_ptr[grant_fmq];
      end
      pu_kill  <= expire;
      ev_valid <= expire;
      for (int p = 0; p < N_PU; p++) begin
        if (expire[p]) begin
          ev[p].code <= EV_TIMEOUT;
          ev[p].pu   <= PU_W'(p);
          ev[p].fmq  <= pu_fmq[p];
          ev[p].info <= cnt[p];
        end
        if (deq_valid && (free_pu == PU_W'(p))) begin
          pu_busy[p] <= 1'b1;
          pu_fmq[p]  <= grant_fmq;
          cnt[p]     <= '0;
          lim[p]     <= cycle_limit[grant_fmq];
        end else if (pu_busy[p]) begin
          if (pu_done[p] || expire[p]) pu_busy[p] <= 1'b0;
          cnt[p] <= cnt[p] + 1'b1;
        end
      end
    end
  end

  // a PU can only finish a kernel it is running
  for (genvar p = 0; p < N_PU; p++) begin : g_chk
    a_done_busy: assert property (@(posedge clk) disable iff (!rst_n) pu_done[p] |-> pu_busy[p]);
  end

endmodule
