// tb_match_engine -- self-checking test of the packet matching engine.
// Eight rules (UDP three-tuple, TCP five-tuple, a duplicate rule to test the
// lowest-index tie break, a disabled rule) are checked against random headers
// drawn from the same address/port pools; the expected FMQ is computed by a
// plain reference loop. Also checks the one-cycle latency and back-pressure.
module tb_match_engine;
  import osmosis_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, out_hit;
  pkt_hdr_t in_hdr;
  match_rule_t rules [N];
  logic [FMQ_W-1:0] out_fmq;
  desc_t out_desc;

  match_engine #(.N_FMQ(N)) dut (.*);

  logic [127:0] ips [4] = '{128'h1, 128'h2001_0db8_0000_0000_0000_0000_0000_0042, 128'hffff_0a00_0001, 128'h77};
  logic [15:0]  ports [3] = '{16'd80, 16'd4791, 16'd9000};

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic void ref_match(input pkt_hdr_t h, output bit hit, output int idx);
    hit = 0; idx = 0;
    for (int i = 0; i < N; i++) begin
      bit m;
      if (!rules[i].valid) continue;
      if (rules[i].is_tcp)
        m = h.proto == 8'd6 && h.dst_ip == rules[i].dst_ip && h.dst_port == rules[i].dst_port
            && h.src_ip == rules[i].src_ip && h.src_port == rules[i].src_port;
      else
        m = h.proto == 8'd17 && h.dst_ip == rules[i].dst_ip && h.dst_port == rules[i].dst_port;
      if (m) begin hit = 1; idx = i; return; end
    end
  endfunction

  initial begin
    #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    bit eh; int ei;
    int hits = 0, misses = 0;
    for (int i = 0; i < N; i++) rules[i] = '0;
    rules[1] = '{valid:1, is_tcp:0, dst_ip:ips[1], dst_port:ports[0], src_ip:'0, src_port:'0};
    rules[2] = '{valid:1, is_tcp:1, dst_ip:ips[1], dst_port:ports[1], src_ip:ips[2], src_port:ports[2]};
    rules[4] = '{valid:1, is_tcp:0, dst_ip:ips[3], dst_port:ports[2], src_ip:'0, src_port:'0};
    rules[6] = '{valid:1, is_tcp:0, dst_ip:ips[1], dst_port:ports[0], src_ip:'0, src_port:'0}; // shadowed by 1
    rules[7] = '{valid:0, is_tcp:0, dst_ip:ips[0], dst_port:ports[0], src_ip:'0, src_port:'0}; // disabled
    in_valid = 0; in_hdr = '0; out_ready = 1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      pkt_hdr_t h;
      h.proto    = ($urandom_range(0, 1) != 0) ? 8'd6 : 8'd17;
      h.src_ip   = ips[$urandom_range(0, 3)];
      h.dst_ip   = ips[$urandom_range(0, 3)];
      h.src_port = ports[$urandom_range(0, 2)];
      h.dst_port = ports[$urandom_range(0, 2)];
      h.desc.ptr = $urandom;
      h.desc.len = 16'($urandom);
      @(negedge clk);
      in_valid = 1; in_hdr = h;
      chk(in_ready == 1, "ready while downstream ready");
      @(negedge clk);
      in_valid = 0;
      ref_match(h, eh, ei);
      chk(out_valid == 1, "valid one cycle after accept");
      chk(out_hit == eh, "hit flag");
      if (eh) begin chk(int'(out_fmq) == ei, "fmq index"); hits++; end else misses++;
      chk(out_desc == h.desc, "descriptor carried");
      if (t % 50 == 7) begin
        // back-pressure: result must be held while out_ready is low
        out_ready = 0;
        @(negedge clk);
        chk(out_valid == 1 && in_ready == 0 && out_desc == h.desc, "held under back-pressure");
        out_ready = 1;
      end
    end
    chk(hits > 50 && misses > 50, "both outcomes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
