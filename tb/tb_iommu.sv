// tb_iommu -- self-checking test of DMA address translation: programs a few
// page entries for different ECTXs and permissions, then sends random
// fragments and compares translation or fault with a reference lookup.
module tb_iommu;
  import osmosis_pkg::*;
  localparam int NE = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we; logic [2:0] cfg_idx; logic [2:0] cfg_reg; logic [31:0] cfg_wdata;
  logic in_valid, in_ready, out_valid, out_ready, fault_valid;
  frag_t in_frag, out_frag, fault_frag;
  iommu #(.N_ENTRIES(NE)) dut (.*);

  logic [51:0] vpn [NE], ppn [NE];
  logic [6:0]  efmq [NE];
  logic        erd [NE], ewr [NE], ev [NE];

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  task automatic wr(int i, int r, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_idx = 3'(i); cfg_reg = 3'(r); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  initial begin
    #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int nfault = 0, nok = 0;
    cfg_we = 0; cfg_idx = 0; cfg_reg = 0; cfg_wdata = 0; in_valid = 0; in_frag = '0; out_ready = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < NE; i++) begin
      vpn[i] = {20'($urandom_range(0, 3)), 32'(i * 7 + 1)};
      ppn[i] = {20'($urandom), 32'($urandom)};
      efmq[i] = 7'($urandom_range(0, 3));
      erd[i] = 1'($urandom); ewr[i] = 1'($urandom); ev[i] = (i != 5);
      wr(i, 1, vpn[i][31:0]); wr(i, 2, 32'(vpn[i][51:32]));
      wr(i, 3, ppn[i][31:0]); wr(i, 4, 32'(ppn[i][51:32]));
      wr(i, 0, {17'd0, efmq[i], 5'd0, ewr[i], erd[i], ev[i]});
    end
    for (int t = 0; t < 3000; t++) begin
      frag_t f; int k; bit hit; logic [51:0] p;
      k = $urandom_range(0, NE-1);
      f = '0;
      f.fmq = 7'($urandom_range(0, 3));
      f.to_host = 1'($urandom);
      f.phys = ($urandom_range(0, 9) == 0);
      f.stream = 5'($urandom);
      f.len = 16'($urandom_range(1, 512));
      f.host_addr = {($urandom_range(0, 3) == 0) ? 52'($urandom) : vpn[k], 12'($urandom)};
      hit = 0; p = '0;
      for (int i = 0; i < NE; i++)
        if (ev[i] && efmq[i] == f.fmq && vpn[i] == f.host_addr[63:12] && (f.to_host ? ewr[i] : erd[i])) begin
          hit = 1; p = ppn[i];
        end
      @(negedge clk); in_valid = 1; in_frag = f;
      chk(in_ready, "ready");
      @(negedge clk); in_valid = 0;
      if (f.phys) begin
        chk(out_valid && !fault_valid && out_frag == f, "physical passes unchanged");
      end else if (hit) begin
        nok++;
        chk(out_valid && !fault_valid, "translated");
        chk(out_frag.host_addr == {p, f.host_addr[11:0]}, "physical address");
        chk(out_frag.stream == f.stream && out_frag.len == f.len, "fields kept");
      end else begin
        nfault++;
        chk(!out_valid && fault_valid && fault_frag == f, "fault");
      end
    end
    // back-pressure holds the output
    @(negedge clk); in_valid = 1; in_frag = '0; in_frag.phys = 1; in_frag.len = 16'd9; out_ready = 0;
    @(negedge clk); in_frag.len = 16'd10;
    @(negedge clk); chk(out_valid && out_frag.len == 16'd9 && !in_ready, "held under back-pressure");
    out_ready = 1; in_valid = 0;
    chk(nok > 50 && nfault > 50, "hits and faults exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
