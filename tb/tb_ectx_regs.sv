// tb_ectx_regs -- self-checking test of the ECTX register file: reset values,
// then random MMIO writes compared with a shadow copy kept by the testbench.
module tb_ectx_regs;
  import osmosis_pkg::*;
  localparam int N = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [FMQ_W-1:0] cfg_idx; logic [4:0] cfg_reg; logic [31:0] cfg_wdata;
  ectx_t ectx [N]; match_rule_t rules [N];
  ectx_regs #(.N_FMQ(N)) dut (.*);

  logic [31:0] shadow [N][24];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  function automatic logic [31:0] rd(int i, int r);
    case (r)
      0: return {30'd0, rules[i].is_tcp, rules[i].valid};
      1: return 32'(ectx[i].prio);
      2: return {16'd0, ectx[i].egr_prio, ectx[i].dma_prio};
      3: return ectx[i].cycle_limit;
      4: return ectx[i].pkt_buf_size;
      5: return ectx[i].kernel_ptr;
      6: return ectx[i].l1_base;
      7: return ectx[i].l1_size;
      8: return ectx[i].l2_base;
      9: return ectx[i].l2_size;
      10: return ectx[i].eq_base[31:0];
      11: return ectx[i].eq_base[63:32];
      12: return 32'(ectx[i].eq_size_log2);
      13: return {rules[i].src_port, rules[i].dst_port};
      16, 17, 18, 19: return rules[i].dst_ip[32*(r-16) +: 32];
      20, 21, 22, 23: return rules[i].src_ip[32*(r-20) +: 32];
      default: return 0;
    endcase
  endfunction

  function automatic logic [31:0] mask(int r);
    case (r)
      0: return 32'h3;  1: return 32'hffff;  2: return 32'hffff;  12: return 32'h1f;
      default: return 32'hffff_ffff;
    endcase
  endfunction

  function automatic bit used(int r);
    return (r <= 13) || (r >= 16 && r <= 23);
  endfunction

  initial begin
    #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_idx = 0; cfg_reg = 0; cfg_wdata = 0;
    for (int i = 0; i < N; i++) for (int r = 0; r < 24; r++) shadow[i][r] = 0;
    for (int i = 0; i < N; i++) begin shadow[i][1] = 1; shadow[i][2] = 32'h0101; end
    repeat (2) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < N; i++) for (int r = 0; r < 24; r++)
      if (used(r)) chk(rd(i, r) == shadow[i][r], $sformatf("reset value fmq %0d reg %0d", i, r));
    for (int t = 0; t < 3000; t++) begin
      int i, r;
      logic [31:0] d;
      i = $urandom_range(0, N-1); r = $urandom_range(0, 31); d = $urandom;
      cfg_we = 1; cfg_idx = FMQ_W'(i); cfg_reg = 5'(r); cfg_wdata = d;
      @(negedge clk);
      cfg_we = 0;
      if (used(r)) shadow[i][r] = d & mask(r);
      if (t % 10 == 0)
        for (int j = 0; j < N; j++) for (int q = 0; q < 24; q++)
          if (used(q)) chk(rd(j, q) == shadow[j][q], $sformatf("fmq %0d reg %0d", j, q));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
