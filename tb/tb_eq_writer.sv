// tb_eq_writer -- self-checking test of the event-queue writer: random events
// from 3 sources for 4 ECTXs, random stalls of the DMA input; every written
// entry is checked for address (ring position) and content, in per-source
// order, and lost events are counted against a reference.
module tb_eq_writer;
  import osmosis_pkg::*;
  localparam int NS = 3, NF = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [NS-1:0] ev_valid; event_t ev [NS];
  logic [HADDR_W-1:0] eq_base [NF]; logic [4:0] eq_size_log2 [NF];
  logic hi_valid, hi_ready; frag_t hi_frag;
  logic [31:0] prod [NF]; logic [31:0] lost_cnt;
  eq_writer #(.N_SRC(NS), .N_FMQ(NF)) dut (.*);

  event_t sent [NS][$];
  int unsigned exp_prod [NF];
  int lost_exp = 0, written = 0;
  bit pend [NS];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // consumer: check each accepted entry
  always @(posedge clk) if (rst_n && hi_valid && hi_ready) begin
    event_t e; bit found; int src;
    e = event_t'(hi_frag.imm_data[47:0]);
    found = 0; src = 0;
    for (int s = 0; s < NS; s++)
      if (!found && sent[s].size() > 0 && sent[s][0] == e) begin found = 1; src = s; end
    chk(found, "entry is the oldest pending event of some source");
    if (found) void'(sent[src].pop_front());
    chk(hi_frag.phys && hi_frag.imm && hi_frag.to_host && hi_frag.len == 16'd8, "entry flags");
    chk(hi_frag.fmq == e.fmq, "entry fmq");
    chk(hi_frag.host_addr == eq_base[e.fmq] + 64'((exp_prod[e.fmq] % (1 << eq_size_log2[e.fmq])) * 8), "ring address");
    exp_prod[e.fmq]++;
    written++;
  end

  initial begin
    ev_valid = 0; hi_ready = 0;
    for (int s = 0; s < NS; s++) ev[s] = '0;
    for (int f = 0; f < NF; f++) begin
      eq_base[f] = 64'h1_0000_0000 + 64'(f) * 64'h1000; eq_size_log2[f] = 5'(f + 1); exp_prod[f] = 0;
    end
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      hi_ready = ($urandom_range(0, 3) != 0);
      for (int s = 0; s < NS; s++) begin
        ev_valid[s] = ($urandom_range(0, 4) == 0);
        ev[s].code = ev_code_e'($urandom_range(1, 3));
        ev[s].pu = PU_W'($urandom); ev[s].fmq = FMQ_W'($urandom_range(0, NF-1)); ev[s].info = $urandom;
      end
      // lost if the source's slot will still be full: decided from the DUT's
      // own pending bits would be circular, so only count events the writer
      // provably cannot take: queue of that source already has 2 entries
      // (one pending + nothing can be admitted while it stays).
      #1;
      for (int s = 0; s < NS; s++) if (ev_valid[s]) begin
        if (dut.pend[s] && !(dut.load && int'(dut.sel) == s)) lost_exp++;
        else sent[s].push_back(ev[s]);
      end
      @(posedge clk); #1; ev_valid = 0;
    end
    hi_ready = 1; repeat (20) @(negedge clk);
    for (int s = 0; s < NS; s++) chk(sent[s].size() == 0, "all accepted events written");
    for (int f = 0; f < NF; f++) chk(prod[f] == exp_prod[f], "producer index");
    chk(int'(lost_cnt) == lost_exp, "lost count");
    chk(written > 500 && lost_exp > 0, "traffic and losses exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
