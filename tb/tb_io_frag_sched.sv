// tb_io_frag_sched -- self-checking test of fragmentation + WRR.
// Backend model: accepts a fragment with random stalls and acknowledges it a
// random number of cycles later. Checks, independently of the design:
//  - every fragment is at most FRAG bytes and does not cross a FRAG boundary,
//  - the fragments of each transfer are contiguous and cover it exactly,
//  - a transfer completes (with its PU) only after all its fragments were
//    acknowledged; a dropped fragment makes it complete with an error,
//  - with two backlogged streams of weight 2 and 1 the fragment shares are 2:1,
//  - a strict-priority fragment goes out in the cycle it is offered,
//  - head-of-line blocking is avoided: a 64-byte transfer issued behind a
//    4 KiB one finishes long before it.
module tb_io_frag_sched;
  import osmosis_pkg::*;
  localparam int NS = 4, FR = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic req_valid, req_ready, hi_valid, hi_ready, frag_valid, frag_ready;
  io_cmd_t req; frag_t hi_frag, frag;
  logic ack_valid, ack_hi, drop_valid; logic [STREAM_W-1:0] ack_stream, drop_stream;
  logic cmpl_valid, cmpl_err; logic [PU_W-1:0] cmpl_pu; logic [FMQ_W-1:0] cmpl_fmq;
  logic [NS-1:0] busy;
  io_frag_sched #(.N_STREAMS(NS), .FRAG_BYTES(FR)) dut (.*);

  // per-PU transfer bookkeeping (one outstanding transfer per PU)
  longint exp_host [32], exp_loc [32];
  int     left [32], frags_out [32], tot_len [32];
  bit     active [32], dropped [32];
  int     nfrag [32];
  int     done_cycle [32];
  int     share [32];
  int     cyc = 0;
  int     ackq_s [$], ackq_t [$];
  bit     drop_next = 0;

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  always @(posedge clk) cyc <= cyc + 1;

  // backend model
  always @(posedge clk) if (rst_n) begin
    ack_valid <= 0; ack_hi <= 0; drop_valid <= 0;
    if (frag_valid && frag_ready && !frag.phys) begin
      int pu;
      pu = -1;
      for (int p = 0; p < 32; p++) if (active[p] && exp_host[p] == frag.host_addr && exp_loc[p] == frag.local_addr) pu = p;
      chk(pu >= 0, "fragment continues a transfer");
      chk(frag.len > 0 && frag.len <= FR, "fragment size");
      chk((frag.host_addr % FR) + frag.len <= FR, "fragment does not cross boundary");
      if (pu >= 0) begin
        exp_host[pu] += frag.len; exp_loc[pu] += frag.len; left[pu] -= frag.len; nfrag[pu]++; share[pu]++;
        if (drop_next) begin
          drop_valid <= 1; drop_stream <= frag.stream; dropped[pu] = 1; drop_next = 0;
          left[pu] = 0;
        end else begin
          frags_out[pu]++;
          ackq_s.push_back(frag.stream); ackq_t.push_back(cyc + $urandom_range(1, 20));
        end
      end
    end
    if (ackq_s.size() > 0 && ackq_t[0] <= cyc) begin
      ack_valid <= 1; ack_stream <= 5'(ackq_s.pop_front()); void'(ackq_t.pop_front());
      // the model only tracks counts per PU
    end
  end

  // completion monitor
  int ncmpl = 0;
  always @(posedge clk) if (rst_n && cmpl_valid) begin
    int p; p = int'(cmpl_pu);
    chk(active[p], "completion of an active transfer");
    chk(cmpl_err == dropped[p], "error flag");
    if (!dropped[p]) chk(left[p] == 0, "all bytes issued before completion");
    active[p] = 0; done_cycle[p] = cyc; ncmpl++;
  end


  task automatic issue(int pu, int fmq, int w, longint haddr, int laddr, int len);
    @(negedge clk);
    while (!req_ready) begin frag_ready = 1; @(negedge clk); end
    req = '0; req.pu = PU_W'(pu); req.fmq = FMQ_W'(fmq); req.weight = 8'(w); req.to_host = 1;
    req.host_addr = 64'(haddr); req.local_addr = 32'(laddr); req.len = 16'(len);
    req_valid = 1;
    active[pu] = 1; dropped[pu] = 0; exp_host[pu] = haddr; exp_loc[pu] = laddr; left[pu] = len;
    tot_len[pu] = len; nfrag[pu] = 0; frags_out[pu] = 0; share[pu] = 0;
    @(negedge clk); req_valid = 0;
  endtask

  task automatic wait_idle();
    int n; n = 0;
    while ((|busy) && n < 100000) begin @(negedge clk); n++; end
  endtask

  initial begin
    #20000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    req_valid = 0; req = '0; hi_valid = 0; hi_frag = '0; frag_ready = 1;
    ack_valid = 0; ack_hi = 0; ack_stream = 0; drop_valid = 0; drop_stream = 0;
    for (int p = 0; p < 32; p++) begin active[p] = 0; dropped[p] = 0; end
    repeat (2) @(posedge clk); rst_n = 1;
    // ---- random transfers, random stalls
    for (int t = 0; t < 300; t++) begin
      int p; p = $urandom_range(0, 7);
      if (!active[p]) issue(p, p, $urandom_range(0, 4), 64'h1_0000 * p + $urandom_range(0, 4000), 32'h100 * p, $urandom_range(1, 700));
      frag_ready = ($urandom_range(0, 3) != 0);
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    frag_ready = 1;
    wait_idle();
    chk(busy == 0, "all transfers complete");
    for (int p = 0; p < 8; p++) chk(!active[p], "no transfer left open");
    // ---- WRR 2:1 with two long transfers
    issue(1, 1, 2, 64'h10_0000, 0, 4096);
    issue(2, 2, 1, 64'h20_0000, 0, 4096);
    repeat (60) @(negedge clk);
    chk(share[1] >= 2 * share[2] - 3 && share[1] <= 2 * share[2] + 3 && share[2] > 10, $sformatf("WRR 2:1 share %0d:%0d", share[1], share[2]));
    wait_idle();
    // ---- strict priority fragment
    issue(3, 3, 8, 64'h30_0000, 0, 4096);
    repeat (5) @(negedge clk);
    hi_frag = '0; hi_frag.phys = 1; hi_frag.imm = 1; hi_frag.len = 8; hi_valid = 1;
    #1 chk(frag_valid && frag.phys && hi_ready, "priority fragment wins immediately");
    @(negedge clk); hi_valid = 0;
    wait_idle();
    // ---- HoL blocking: victim 64 B behind congestor 4 KiB
    issue(4, 4, 1, 64'h40_0000, 0, 4096);
    issue(5, 5, 1, 64'h50_0000, 0, 64);
    wait_idle();
    chk(done_cycle[5] + 40 < done_cycle[4], $sformatf("victim done at %0d, congestor at %0d", done_cycle[5], done_cycle[4]));
    // ---- dropped fragment aborts the transfer with an error
    drop_next = 1;
    issue(6, 6, 1, 64'h60_0000, 0, 1000);
    wait_idle();
    chk(!active[6], "aborted transfer completed");
    chk(ncmpl > 100, "completions exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
