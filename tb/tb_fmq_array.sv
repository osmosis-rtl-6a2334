// tb_fmq_array -- self-checking test of the FMQ descriptor FIFOs: random
// simultaneous enqueues and dequeues on 4 FMQs of depth 4, checked against
// SystemVerilog queues, including the depth limit and the per-FMQ byte limit.
module tb_fmq_array;
  import osmosis_pkg::*;
  localparam int N = 4, D = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic enq_valid, enq_ready, deq_valid;
  logic [FMQ_W-1:0] enq_fmq, deq_fmq;
  desc_t enq_desc, deq_desc;
  logic [31:0] buf_limit [N];
  logic [N-1:0] nonempty;
  logic [$clog2(D):0] count [N];
  logic [31:0] bytes [N];
  fmq_array #(.N_FMQ(N), .DEPTH(D)) dut (.*);

  desc_t q [N][$];
  int unsigned qb [N];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int full_seen = 0, limit_seen = 0;
    enq_valid = 0; deq_valid = 0; enq_fmq = 0; deq_fmq = 0; enq_desc = '0;
    buf_limit[0] = 0; buf_limit[1] = 300; buf_limit[2] = 0; buf_limit[3] = 1000;
    for (int i = 0; i < N; i++) qb[i] = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20000; t++) begin
      int ef, df; bit exp_ready, room, fits;
      @(negedge clk);
      ef = $urandom_range(0, N-1); df = $urandom_range(0, N-1);
      enq_valid = ($urandom_range(0, 2) != 0);
      enq_fmq = FMQ_W'(ef);
      enq_desc.ptr = $urandom; enq_desc.len = 16'($urandom_range(1, 200));
      deq_fmq = FMQ_W'(df);
      deq_valid = (q[df].size() > 0) && ($urandom_range(0, 1) != 0);
      #1;
      // outputs against the model
      for (int i = 0; i < N; i++) begin
        chk(nonempty[i] == (q[i].size() > 0), "nonempty");
        chk(int'(count[i]) == q[i].size(), "count");
        chk(bytes[i] == qb[i], "bytes");
      end
      if (q[df].size() > 0) chk(deq_desc == q[df][0], "head descriptor");
      room = q[ef].size() < D;
      fits = (buf_limit[ef] == 0) || (qb[ef] + enq_desc.len <= buf_limit[ef]);
      exp_ready = room && fits;
      chk(enq_ready == exp_ready, "enq_ready");
      if (enq_valid && !room) full_seen++;
      if (enq_valid && room && !fits) limit_seen++;
      @(posedge clk);
      if (deq_valid) begin qb[df] -= q[df][0].len; void'(q[df].pop_front()); end
      if (enq_valid && exp_ready) begin q[ef].push_back(enq_desc); qb[ef] += enq_desc.len; end
    end
    chk(full_seen > 0, "depth limit reached");
    chk(limit_seen > 0, "byte limit reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
