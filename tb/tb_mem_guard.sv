// tb_mem_guard -- self-checking test of relocation + protection: random
// segments and accesses (biased towards the segment end) against a reference.
module tb_mem_guard;
  import osmosis_pkg::*;
  int checks = 0, failures = 0;
  logic acc_valid, acc_l2; logic [PTR_W-1:0] acc_vaddr, l1_base, l1_size, l2_base, l2_size, acc_paddr;
  logic [3:0] acc_bytes; logic [PU_W-1:0] pu; logic [FMQ_W-1:0] fmq; logic acc_fault; event_t ev;
  mem_guard dut (.*);

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  initial begin
    #1000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int faults = 0;
    for (int t = 0; t < 5000; t++) begin
      longint unsigned b, s, v, n;
      l1_base = $urandom; l1_size = $urandom_range(0, 1 << 20);
      l2_base = $urandom; l2_size = $urandom_range(0, 1 << 22);
      acc_l2 = 1'($urandom); acc_valid = ($urandom_range(0, 9) != 0);
      acc_bytes = 4'(1 << $urandom_range(0, 3));
      pu = PU_W'($urandom); fmq = FMQ_W'($urandom);
      s = acc_l2 ? l2_size : l1_size;
      b = acc_l2 ? l2_base : l1_base;
      if ($urandom_range(0, 1) != 0) acc_vaddr = PTR_W'(s) - PTR_W'($urandom_range(0, 12));
      else acc_vaddr = $urandom_range(0, 1 << 23);
      #1;
      v = acc_vaddr; n = acc_bytes;
      chk(acc_paddr == PTR_W'(b + v), "relocated address");
      chk(acc_fault == (acc_valid && (v + n > s)), "protection check");
      if (acc_fault) begin
        faults++;
        chk(ev.code == EV_MEM && ev.pu == pu && ev.fmq == fmq && ev.info == acc_vaddr, "event content");
      end
    end
    chk(faults > 100, "faults exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
