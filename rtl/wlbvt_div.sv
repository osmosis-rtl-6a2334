// wlbvt_div -- free-running bit-serial divider that keeps one FMQ's
// priority-normalised throughput key up to date for the WLBVT scheduler.
//
// key = floor(total_occ * 2**FRAC_W / (bvt * prio))
//
// total_occ is the FMQ's accumulated PU-cycles and bvt its active cycles, so
// total_occ/bvt is the average number of PUs the flow has held while active
// (at most N_PU). The quotient therefore fits in QW = OCC_W + FRAC_W bits and
// a restoring divider needs QW steps. The divider samples its operands, runs
// QW cycles (one quotient bit per cycle), publishes the result in `key` and
// starts again: `key` is refreshed every QW+1 cycles and lags the counters by
// at most 2*(QW+1) cycles. A zero denominator (FMQ never active) gives key 0,
// so a new flow is favoured. prio 0 is treated as 1.
//
// The ratio is the paper's scheduling metric; computing it with a serial
// divider per FMQ instead of every cycle is this design's choice.
module wlbvt_div
  import osmosis_pkg::*;
#(
  parameter int unsigned OCC_W  = 6,
  parameter int unsigned FRAC_W = 16,
  localparam int unsigned QW    = OCC_W + FRAC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BVT_W-1:0]  total_occ,
  input  logic [BVT_W-1:0]  bvt,
  input  logic [PRIO_W-1:0] prio,
  output logic [QW-1:0]     key
);

  localparam int unsigned NW = BVT_W + FRAC_W;          // numerator
  localparam int unsigned DW = BVT_W + PRIO_W;          // denominator
  localparam int unsigned SW = DW + QW;                  // shifted denominator

  logic [NW-1:0]          rem;
  logic [SW-1:0]          dsh;
  logic [QW-1:0]          q;
  logic [$clog2(QW+1)-1:0] step;   // 0: load, 1..QW: iterate
  logic                   dzero;

  logic [PRIO_W-1:0] p_eff;
  logic [DW-1:0]     den;
  assign p_eff = (prio == '0) ? PRIO_W'(1) : prio;
  assign den   = DW'(bvt) * DW'(p_eff);

  logic [SW-1:0] rem_ext;
  assign rem_ext = SW'(rem);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem   <= '0;
      dsh   <= '0;
      q     <= '0;
      step  <= '0;
      dzero <= 1'b1;
      key   <= '0;
    end else if (step == '0) begin
      rem   <= {total_occ, FRAC_W'(0)};
      dsh   <= SW'(den) << (QW - 1);
      dzero <= (den == '0);
      q     <= '0;
      step  <= 1;
    end else begin
      if (rem_ext >= dsh) begin
        rem <= NW'(rem_ext - dsh);
        q   <= {q[QW-2:0], 1'b1};
      end else begin
        q   <= {q[QW-2:0], 1'b0};
      end
      dsh <= dsh >> 1;
      if (int'(step) == QW) begin
        step <= '0;
        key  <= dzero ? '0 : ((rem_ext >= dsh) ? {q[QW-2:0], 1'b1} : {q[QW-2:0], 1'b0});
      end else begin
        step <= step + 1'b1;
      end
    end
  end

endmodule
