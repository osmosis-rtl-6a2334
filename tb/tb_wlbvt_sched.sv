// tb_wlbvt_sched -- self-checking test of the WLBVT PU scheduler.
//  1. Latency: with all PUs free, a descriptor appearing in an FMQ is granted
//     exactly 5 cycles later.
//  2. Virtual-time counters: bvt and total_occ are compared with the
//     testbench's own counts, the throughput key with the real-valued ratio.
//  3. Fairness (the paper's Congestor/Victim experiment): two always-backlogged
//     tenants on 8 PUs, the Congestor's kernels taking twice as long. WLBVT
//     must give each about 4 PUs; the weight limit must never be exceeded.
//  4. Priorities 3:1 must give about 6:2 PUs.
//  5. Work conservation: with the Victim idle the Congestor takes all PUs.
// The testbench plays the PUs: a grant occupies one PU for the tenant's
// kernel time.
module tb_wlbvt_sched;
  import osmosis_pkg::*;
  localparam int NF = 8, NP = 8, OW = 4, QW = OW + 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NF-1:0] nonempty;
  logic [OW-1:0] occ [NF];
  logic [PRIO_W-1:0] prio [NF];
  logic pu_free, grant_valid;
  logic [FMQ_W-1:0] grant_fmq;
  logic [BVT_W-1:0] bvt [NF], total_occ [NF];
  logic [QW-1:0] key [NF];
  wlbvt_sched #(.N_FMQ(NF), .N_PU(NP)) dut (.*);

  // PU model
  int  pu_left [NP];
  int  pu_fmq  [NP];
  int  kt [NF];           // kernel time per FMQ
  bit  backlog [NF];      // FMQ always has packets
  longint m_bvt [NF], m_tot [NF];
  longint acc_occ [NF];
  int  over_limit = 0;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  always_comb begin
    int n;
    pu_free = 0;
    for (int p = 0; p < NP; p++) if (pu_left[p] == 0) pu_free = 1;
    for (int f = 0; f < NF; f++) begin
      n = 0;
      for (int p = 0; p < NP; p++) if (pu_left[p] != 0 && pu_fmq[p] == f) n++;
      occ[f] = OW'(n);
      nonempty[f] = backlog[f];
    end
  end

  // PU model and reference counters
  always @(posedge clk) if (rst_n) begin
    int s; bit placed;
    s = 0;
    for (int f = 0; f < NF; f++) begin
      if (nonempty[f] || occ[f] != 0) m_bvt[f]++;
      m_tot[f] += occ[f];
      acc_occ[f] += occ[f];
      if (nonempty[f]) s += prio[f];
    end
    if (grant_valid) begin
      // weight limit: occ < ceil(NP*prio/S)
      if (s > 0 && occ[grant_fmq] >= (NP * prio[grant_fmq] + s - 1) / s) over_limit++;
      placed = 0;
      for (int p = 0; p < NP; p++)
        if (!placed && pu_left[p] == 0) begin pu_left[p] <= kt[grant_fmq]; pu_fmq[p] <= grant_fmq; placed = 1; end
    end
    for (int p = 0; p < NP; p++) if (pu_left[p] > 0) pu_left[p] <= pu_left[p] - 1;
  end

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic reset_all();
    rst_n = 0;
    for (int p = 0; p < NP; p++) begin pu_left[p] = 0; pu_fmq[p] = 0; end
    for (int f = 0; f < NF; f++) begin backlog[f] = 0; prio[f] = 1; kt[f] = 100; m_bvt[f] = 0; m_tot[f] = 0; acc_occ[f] = 0; end
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
  endtask

  task automatic run(int cycles);
    for (int f = 0; f < NF; f++) acc_occ[f] = 0;
    repeat (cycles) @(posedge clk);
  endtask

  initial begin
    int t0, lat;
    real r0, r1, exp_key;
    // ---------------------------------------------------- 1. latency
    reset_all();
    repeat (50) @(posedge clk);
    @(negedge clk); backlog[2] = 1; t0 = 0; lat = -1;
    for (int c = 0; c < 20 && lat < 0; c++) begin
      if (grant_valid) lat = c;
      @(negedge clk);
    end
    chk(lat == 5, $sformatf("decision latency %0d cycles, expected 5", lat));
    chk(grant_fmq == 2 || lat != 5, "granted the only non-empty FMQ");
    backlog[2] = 0;
    // ---------------------------------------------------- 3. fairness
    reset_all();
    kt[0] = 400; kt[1] = 200;        // FMQ 0 = Congestor, FMQ 1 = Victim
    backlog[0] = 1; backlog[1] = 1;
    run(2000);                       // warm-up
    run(20000);
    r0 = real'(acc_occ[0]) / 20000.0; r1 = real'(acc_occ[1]) / 20000.0;
    $display("equal priority: congestor %.2f PUs, victim %.2f PUs", r0, r1);
    chk(r0 > 3.5 && r0 < 4.5 && r1 > 3.5 && r1 < 4.5, "equal split of 8 PUs");
    chk(r0 + r1 > 7.5, "all PUs used");
    chk(over_limit == 0, "weight limit never exceeded");
    // ---------------------------------------------------- 2. counters and key
    @(negedge clk);
    for (int f = 0; f < 2; f++) begin
      chk(bvt[f] == 64'(m_bvt[f]), "bvt counter");
      chk(total_occ[f] == 64'(m_tot[f]), "total occupation counter");
      exp_key = real'(m_tot[f]) / (real'(m_bvt[f]) * real'(prio[f])) * 65536.0;
      chk((real'(key[f]) - exp_key) < 0.01 * exp_key && (exp_key - real'(key[f])) < 0.01 * exp_key, "throughput key");
    end
    // ---------------------------------------------------- 4. priorities 3:1
    reset_all();
    kt[0] = 300; kt[1] = 300; prio[0] = 3; prio[1] = 1;
    backlog[0] = 1; backlog[1] = 1;
    run(2000);
    run(20000);
    r0 = real'(acc_occ[0]) / 20000.0; r1 = real'(acc_occ[1]) / 20000.0;
    $display("priority 3:1: %.2f : %.2f PUs", r0, r1);
    chk(r0 > 5.5 && r0 < 6.5 && r1 > 1.5 && r1 < 2.5, "3:1 split");
    chk(over_limit == 0, "weight limit never exceeded (priorities)");
    // ---------------------------------------------------- 5. work conservation
    reset_all();
    kt[0] = 400; kt[1] = 200;
    backlog[0] = 1;
    run(2000);
    run(10000);
    r0 = real'(acc_occ[0]) / 10000.0;
    chk(r0 > 7.5, "lone tenant takes all PUs");
    // victim arrives: congestor must come down to about half
    backlog[1] = 1;
    run(4000);
    run(10000);
    r0 = real'(acc_occ[0]) / 10000.0; r1 = real'(acc_occ[1]) / 10000.0;
    chk(r0 < 4.6 && r1 > 3.4, "victim regains its share");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
