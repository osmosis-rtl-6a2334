// wlbvt_sched -- Weight Limited Borrowed Virtual Time (WLBVT) PU scheduler.
//
// Decides which flow management queue (FMQ) gets the next free processing
// unit (PU). Per FMQ it keeps two 64-bit counters, updated every cycle:
//   bvt       += 1          while the FMQ is active (descriptors queued or
//                           kernels running),
//   total_occ += occ        the number of PUs the FMQ currently holds.
// total_occ/bvt is the flow's throughput in PUs; divided by the priority it is
// the key by which flows are ranked (wlbvt_div computes it per FMQ).
//
// An FMQ is eligible when its FIFO is non-empty and it holds fewer PUs than
// its weighted share ceil(N_PU * prio / S), S being the sum of the priorities
// of all FMQs with non-empty FIFOs. For an integer occupation,
//   occ < ceil(N_PU*prio/S)  <=>  occ*S < N_PU*prio,
// so the limit is evaluated with multipliers and no divider. Among eligible
// FMQs the one with the lowest key wins; ties go to the lowest index.
//
// Pipeline (LATENCY = 5 cycles from a state change to the grant it causes):
//   1  sample FIFO state, occupation, priorities, keys; add up S
//   2  eligibility (weight limit)
//   3  min search inside groups of 16 FMQs
//   4  min search over the group winners
//   5  result register; the grant leaving it is re-checked combinationally
//      against live state (FIFO still non-empty, still under its limit, a
//      PU free), so a decision made on stale state is dropped, never wrong.
// A new decision enters the pipeline every cycle, so one grant per cycle can
// be sustained.
//
// Interface: grant_valid/grant_fmq are combinational outputs of the last
// stage and mean "pop one descriptor of grant_fmq and start it on a PU now".
//
// Follows the paper's scheduling pseudocode with two deviations documented
// in the accompanying notes: the share uses the PU count (the pseudocode
// writes the FMQ count) and the key is refreshed by a serial divider rather
// than every cycle. The five-cycle decision latency is the paper's figure.
module wlbvt_sched
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ  = N_FMQ_DEF,
  parameter int unsigned N_PU   = N_PU_DEF,
  parameter int unsigned FRAC_W = 16,
  localparam int unsigned OCC_W = $clog2(N_PU + 1),
  localparam int unsigned QW    = OCC_W + FRAC_W,
  localparam int unsigned SUM_W = PRIO_W + $clog2(N_FMQ) + 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [N_FMQ-1:0]  nonempty,
  input  logic [OCC_W-1:0]  occ  [N_FMQ],
  input  logic [PRIO_W-1:0] prio [N_FMQ],
  input  logic              pu_free,
  output logic              grant_valid,
  output logic [FMQ_W-1:0]  grant_fmq,
  output logic [BVT_W-1:0]  bvt       [N_FMQ],
  output logic [BVT_W-1:0]  total_occ [N_FMQ],
  output logic [QW-1:0]     key       [N_FMQ]
);

  localparam int unsigned GS = 16;                       // group size, stage 3
  localparam int unsigned NG = (N_FMQ + GS - 1) / GS;    // groups
  localparam int unsigned MW = OCC_W + SUM_W;            // limit products

  // ------------------------------------------------ per-FMQ accounting
  logic [PRIO_W-1:0] p_eff [N_FMQ];
  always_comb
    for (int i = 0; i < N_FMQ; i++) p_eff[i] = (prio[i] == '0) ? PRIO_W'(1) : prio[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FMQ; i++) begin
        bvt[i]       <= '0;
        total_occ[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_FMQ; i++) begin
        total_occ[i] <= total_occ[i] + BVT_W'(occ[i]);
        if (nonempty[i] || (occ[i] != '0)) bvt[i] <= bvt[i] + 1'b1;
      end
    end
  end

  for (genvar i = 0; i < N_FMQ; i++) begin : g_div
    wlbvt_div #(.OCC_W(OCC_W), .FRAC_W(FRAC_W)) u_div (
      .clk, .rst_n,
      .total_occ (total_occ[i]),
      .bvt       (bvt[i]),
      .prio      (p_eff[i]),
      .key       (key[i])
    );
  end

  // live priority sum of FMQs with queued descriptors
  logic [SUM_W-1:0] psum_live;
  always_comb begin
    psum_live = '0;
    for (int i = 0; i < N_FMQ; i++)
      if (nonempty[i]) psum_live = psum_live + SUM_W'(p_eff[i]);
  end

  function automatic logic under_limit(logic [OCC_W-1:0] o, logic [SUM_W-1:0] s,
                                       logic [PRIO_W-1:0] p);
    logic [MW-1:0] lhs, rhs;
    lhs = MW'(o) * MW'(s);
    rhs = MW'(N_PU) * MW'(p);
    return lhs < rhs;
  endfunction

  // ------------------------------------------------ stage 1: sample
  logic [N_FMQ-1:0]  s1_ne;
  logic [OCC_W-1:0]  s1_occ  [N_FMQ];
  logic [PRIO_W-1:0] s1_prio [N_FMQ];
  logic [QW-1:0]     s1_key  [N_FMQ];
  logic [SUM_W-1:0]  s1_psum;

  // ------------------------------------------------ stage 2: eligibility
  logic [N_FMQ-1:0]  s2_el;
  logic [QW-1:0]     s2_key [N_FMQ];

  // ------------------------------------------------ stage 3: group minima
  logic [NG-1:0]     s3_v;
  logic [QW-1:0]     s3_key [NG];
  logic [FMQ_W-1:0]  s3_idx [NG];

  // ------------------------------------------------ stage 4/5: overall min
  logic              s4_v,   s5_v;
  logic [FMQ_W-1:0]  s4_idx, s5_idx;

  logic [NG-1:0]     g_v;
  logic [QW-1:0]     g_key [NG];
  logic [FMQ_W-1:0]  g_idx [NG];
  always_comb begin
    for (int g = 0; g < NG; g++) begin
      g_v[g]   = 1'b0;
      g_key[g] = '0;
      g_idx[g] = '0;
      for (int j = 0; j < GS; j++) begin
        int i;
        i = g * GS + j;
        if (i < N_FMQ) begin
          if (s2_el[i] && (!g_v[g] || (s2_key[i] < g_key[g]))) begin
            g_v[g]   = 1'b1;
            g_key[g] = s2_key[i];
            g_idx[g] = FMQ_W'(i);
          end
        end
      end
    end
  end

  logic             m_v;
  logic [QW-1:0]    m_key;
  logic [FMQ_W-1:0] m_idx;
  always_comb begin
    m_v   = 1'b0;
    m_key = '0;
    m_idx = '0;
    for (int g = 0; g < NG; g++) begin
      if (s3_v[g] && (!m_v || (s3_key[g] < m_key))) begin
        m_v   = 1'b1;
        m_key = s3_key[g];
        m_idx = s3_idx[g];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_ne   <= '0;
      s1_psum <= '0;
      s2_el   <= '0;
      s3_v    <= '0;
      s4_v    <= 1'b0;
      s4_idx  <= '0;
      s5_v    <= 1'b0;
      s5_idx  <= '0;
      for (int i = 0; i < N_FMQ; i++) begin
        s1_occ[i]  <= '0;
        s1_prio[i] <= '0;
        s1_key[i]  <= '0;
        s2_key[i]  <= '0;
      end
      for (int g = 0; g < NG; g++) begin
        s3_key[g] <= '0;
        s3_idx[g] <= '0;
      end
    end else begin
      // 1
      s1_ne   <= nonempty;
      s1_psum <= psum_live;
      for (int i = 0; i < N_FMQ; i++) begin
        s1_occ[i]  <= occ[i];
        s1_prio[i] <= p_eff[i];
        s1_key[i]  <= key[i];
      end
      // 2
      for (int i = 0; i < N_FMQ; i++) begin
        s2_el[i]  <= s1_ne[i] && under_limit(s1_occ[i], s1_psum, s1_prio[i]);
        s2_key[i] <= s1_key[i];
      end
      // 3
      s3_v <= g_v;
      for (int g = 0; g < NG; g++) begin
        s3_key[g] <= g_key[g];
        s3_idx[g] <= g_idx[g];
      end
      // 4
      s4_v   <= m_v;
      s4_idx <= m_idx;
      // 5
      s5_v   <= s4_v;
      s5_idx <= s4_idx;
    end
  end

  // final check against live state
  assign grant_fmq   = s5_idx;
  assign grant_valid = s5_v && pu_free && nonempty[s5_idx]
                    && under_limit(occ[s5_idx], psum_live, p_eff[s5_idx]);

endmodule
