// tb_pu_dispatch -- self-checking test of kernel dispatch and the watchdog.
// Random grants for 4 FMQs onto 4 PUs; the testbench plays the PUs (each
// kernel runs a random number of cycles) and checks the task contents, the
// lowest-free-PU choice, the per-FMQ occupation, and that a kernel running
// past its FMQ's cycle limit is killed exactly limit+1 cycles after its task
// was presented, with a timeout event.
module tb_pu_dispatch;
  import osmosis_pkg::*;
  localparam int NF = 4, NP = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic grant_valid, pu_free, deq_valid, task_valid;
  logic [FMQ_W-1:0] grant_fmq, deq_fmq;
  desc_t deq_desc;
  logic [31:0] cycle_limit [NF];
  logic [PTR_W-1:0] kernel_ptr [NF];
  task_t task_o;
  logic [NP-1:0] pu_done, pu_kill, pu_busy, ev_valid;
  logic [FMQ_W-1:0] pu_fmq [NP];
  logic [2:0] occ [NF];
  event_t ev [NP];
  pu_dispatch #(.N_FMQ(NF), .N_PU(NP)) dut (.*);

  // model state
  bit   busy [NP];
  int   fmq_of [NP], age [NP], run_len [NP];
  int   seq = 0;
  int   kills = 0, dones = 0, starts = 0;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  assign deq_desc = '{ptr: 32'h1000_0000 + 32'(seq), len: 16'(seq)};

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int exp_pu; bit exp_task; int exp_fmq; desc_t exp_desc;
    grant_valid = 0; grant_fmq = 0; pu_done = 0;
    for (int f = 0; f < NF; f++) begin
      kernel_ptr[f] = 32'hA000 + 32'(f) * 16;
      cycle_limit[f] = (f == 3) ? 0 : 32'(20 + 10 * f);   // FMQ 3 unlimited
    end
    for (int p = 0; p < NP; p++) begin busy[p] = 0; age[p] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    exp_task = 0; exp_pu = 0; exp_fmq = 0; exp_desc = '0;
    for (int t = 0; t < 20000; t++) begin
      bit g, free; int gf, lowest;
      @(negedge clk);
      // check the task presented this cycle
      chk(task_valid == exp_task, "task_valid");
      if (exp_task) chk(task_o.pu == PU_W'(exp_pu) && task_o.fmq == FMQ_W'(exp_fmq) && task_o.desc == exp_desc
                        && task_o.kernel_ptr == kernel_ptr[exp_fmq], "task contents");
      // occupation and busy flags
      for (int f = 0; f < NF; f++) begin
        int n; n = 0;
        for (int p = 0; p < NP; p++) if (busy[p] && fmq_of[p] == f) n++;
        chk(int'(occ[f]) == n, "occupation");
      end
      // PU behaviour: finish after run_len cycles
      pu_done = '0;
      for (int p = 0; p < NP; p++) if (busy[p] && age[p] == run_len[p]) pu_done[p] = 1;
      // new grant
      g = ($urandom_range(0, 1) != 0); gf = $urandom_range(0, NF-1);
      grant_valid = g; grant_fmq = FMQ_W'(gf);
      free = 0; lowest = 0;
      for (int p = NP-1; p >= 0; p--) if (!busy[p]) begin free = 1; lowest = p; end
      #1;
      chk(pu_free == free, "pu_free");
      chk(deq_valid == (g && free) && (!deq_valid || deq_fmq == FMQ_W'(gf)), "dequeue");
      exp_desc = deq_desc;
      @(posedge clk); #1;
      // model update at the clock edge
      for (int p = 0; p < NP; p++) if (busy[p]) begin
        int lim; lim = int'(cycle_limit[fmq_of[p]]);
        if (pu_done[p]) begin busy[p] = 0; dones++; end
        else if (lim != 0 && age[p] == lim) begin
          busy[p] = 0; kills++;
          chk(pu_kill[p] == 1, "kill pulse after limit cycles");
          chk(ev_valid[p] && ev[p].code == EV_TIMEOUT && ev[p].fmq == FMQ_W'(fmq_of[p]) && ev[p].pu == PU_W'(p),
              "timeout event");
        end else age[p]++;
      end
      for (int p = 0; p < NP; p++) if (pu_kill[p]) chk(!busy[p], "no spurious kill");
      exp_task = g && free;
      if (exp_task) begin
        busy[lowest] = 1; fmq_of[lowest] = gf; age[lowest] = 0;
        run_len[lowest] = $urandom_range(1, 70);
        exp_pu = lowest; exp_fmq = gf; seq++; starts++;
      end
    end
    chk(kills > 20 && dones > 20, "kills and completions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
