// osmosis_env -- end-to-end test harness for osmosis_top, shared by the
// reduced-size test (tb_osmosis_top) and the default-size test
// (tb_osmosis_full). FULL=1 instantiates the top with its default parameters.
//
// The harness plays everything around the data plane: the host writing ECTX
// and IOMMU registers, the inbound engine, the PUs running kernels, the AXI
// DMA backend and the egress pipeline. Five traffic classes:
//   FMQ 0  Congestor, compute-bound, kernel 2x as long as the Victim's (UDP)
//   FMQ 1  Victim, compute-bound, small packet-buffer limit (UDP)
//   FMQ 2  IO tenant: each kernel DMA-writes 1 KiB to host memory and sends a
//          512-byte packet, TCP five-tuple rule, DMA priority 2
//   FMQ 3  misbehaving tenant: kernel never ends (watchdog), touches memory
//          outside its segment, and DMAs to an unmapped host page
//   other  packets matching no rule (normal NIC path)
// Checks: every matched packet is run once, by its FMQ, in FIFO order;
// unmatched packets go to the host; Congestor and Victim get comparable PU
// time while both are backlogged; each IO kernel's transfers complete; every
// error becomes an event-queue entry in FMQ 3's ring. Every mechanism
// (match hit/miss, FMQ back-pressure, weight limit engaged, watchdog kill,
// memory fault, IOMMU fault, event write, multi-fragment transfer, WRR
// interleaving, priority bypass for events) is counted and must occur.
module osmosis_env
  import osmosis_pkg::*;
#(
  parameter bit FULL = 1'b0
) (
  output int checks,
  output int failures,
  output bit finished
);
  localparam int NF  = FULL ? N_FMQ_DEF : 8;
  localparam int NP  = FULL ? N_PU_DEF : 8;
  localparam int NS  = FULL ? 32 : 4;
  localparam int FR  = FULL ? 512 : 64;

  localparam int N0 = FULL ? 300 : 120, N1 = FULL ? 300 : 120, N2 = FULL ? 40 : 20, N3 = 6, NU = 20;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_sel; logic [FMQ_W-1:0] cfg_idx; logic [4:0] cfg_reg; logic [31:0] cfg_wdata;
  logic pkt_valid, pkt_ready; pkt_hdr_t pkt_hdr;
  logic host_valid, host_ready; desc_t host_desc;
  logic task_valid; task_t task_o;
  logic [NP-1:0] pu_done, pu_kill, pu_acc_valid, pu_acc_l2, pu_acc_fault;
  logic [PTR_W-1:0] pu_acc_vaddr [NP], pu_acc_paddr [NP];
  logic [3:0] pu_acc_bytes [NP];
  logic dma_req_valid, dma_req_ready, dma_frag_valid, dma_frag_ready, dma_ack_valid, dma_ack_hi;
  io_cmd_t dma_req, egr_req; frag_t dma_frag, egr_frag;
  logic [STREAM_W-1:0] dma_ack_stream, egr_ack_stream;
  logic dma_cmpl_valid, dma_cmpl_err, egr_req_valid, egr_req_ready, egr_frag_valid, egr_frag_ready;
  logic egr_ack_valid, egr_cmpl_valid;
  logic [PU_W-1:0] dma_cmpl_pu, egr_cmpl_pu;
  logic [31:0] eq_prod [NF]; logic [31:0] eq_lost;

  if (FULL) begin : g_full
    osmosis_top dut (.*);
  end else begin : g_small
    osmosis_top #(.N_FMQ(NF), .N_PU(NP), .FMQ_DEPTH(8), .N_STREAMS(NS), .FRAG_BYTES(FR), .N_IOMMU(8)) dut (.*);
  end

  task automatic chk(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL %s", m); end
  endtask

  // ---------------------------------------------------------------- config
  localparam logic [127:0] VF_IP  = 128'h2001_0db8_0000_0000_0000_0000_0000_0001;
  localparam logic [127:0] CLI_IP = 128'h2001_0db8_0000_0000_0000_0000_0000_0099;
  localparam logic [63:0]  EQ3    = 64'h7000_0000;

  task automatic cfg(bit sel, int idx, ectx_reg_e r, logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_sel = sel; cfg_idx = FMQ_W'(idx); cfg_reg = r; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  task automatic cfg_ip(int idx, bit src, logic [127:0] ip);
    for (int w = 0; w < 4; w++) cfg(0, idx, ectx_reg_e'((src ? 20 : 16) + w), ip[32*w +: 32]);
  endtask

  // ---------------------------------------------------------------- stats
  int started [4], expected_seq [4], unmatched_seen = 0;
  int n_hit = 0, n_miss = 0, n_bp = 0, n_limit = 0, n_kill = 0, n_memf = 0, n_iommu_err = 0;
  int n_eqw = 0, n_multi = 0, n_interleave = 0, n_hi_bypass = 0, n_dma_ok = 0, n_egr = 0;
  longint occ_both [2];
  int cyc = 0;

  // ---------------------------------------------------------------- PUs
  int  pu_fmq_m [NP], pu_left [NP], pu_wait [NP];
  bit  pu_run [NP];
  io_cmd_t dq [$], eq_q [$];
  int  mem_fault_pu [$];

  always @(posedge clk) cyc <= cyc + 1;

  // the kernels' IO requests wait in dq (DMA) and eq_q (egress); the request
  // ports present the queue heads
  always @(posedge clk) if (!rst_n) begin
    pu_done <= '0;
    pu_acc_valid <= '0;
    dma_req_valid <= 0; dma_req <= '0; egr_req_valid <= 0; egr_req <= '0;
  end else begin
    pu_done <= '0;
    pu_acc_valid <= '0;
    if (dma_req_valid && dma_req_ready) void'(dq.pop_front());
    if (egr_req_valid && egr_req_ready) void'(eq_q.pop_front());
    if (task_valid) begin
      int p, f, s;
      p = int'(task_o.pu); f = int'(task_o.fmq);
      chk(!pu_run[p], "task to an idle PU");
      chk(f < 4, "task of a configured FMQ");
      if (f < 4) begin
        s = int'(task_o.desc.ptr[23:0]);  // the pointer carries class and sequence number
        chk(s == expected_seq[f], $sformatf("FMQ %0d FIFO order: got %0d expected %0d", f, s, expected_seq[f]));
        expected_seq[f] = s + 1;
        chk(task_o.desc.ptr[31:24] == 8'(f) && task_o.desc.len == 16'd64, "descriptor");
        chk(task_o.kernel_ptr == 32'h0100_0000 * 32'(f + 1), "kernel pointer");
        started[f]++;
      end
      pu_run[p] = 1; pu_fmq_m[p] = f; pu_wait[p] = 0;
      case (f)
        0: pu_left[p] = 200;
        1: pu_left[p] = 100;
        2: begin
          io_cmd_t c;
          pu_left[p] = 20; pu_wait[p] = 2;
          c = '0; c.pu = PU_W'(p); c.to_host = 1; c.local_addr = 32'h1000;
          c.host_addr = 64'h4000_0000 + 64'((s % 4) * 4096); c.len = 16'd1024;
          dq.push_back(c);
          c.host_addr = 64'h0; c.len = 16'd512;
          eq_q.push_back(c);
        end
        default: begin
          io_cmd_t c;
          pu_left[p] = -1;       // never ends
          c = '0; c.pu = PU_W'(p); c.to_host = 1; c.host_addr = 64'h5000_0000; c.len = 16'd256;
          dq.push_back(c);
          mem_fault_pu.push_back(p);
        end
      endcase
    end
    // a misbehaving kernel touches L2 past its segment
    if (mem_fault_pu.size() > 0) begin
      int p; p = mem_fault_pu.pop_front();
      pu_acc_valid[p] <= 1; pu_acc_l2[p] <= 1; pu_acc_vaddr[p] <= 32'h2000; pu_acc_bytes[p] <= 4'd4;
    end
    for (int p = 0; p < NP; p++) begin
      if (pu_kill[p]) begin
        chk(pu_run[p] && pu_fmq_m[p] == 3, "only the misbehaving tenant is killed");
        pu_run[p] = 0; n_kill++;
      end
      if (pu_run[p] && pu_left[p] > 0) pu_left[p]--;
      if (pu_run[p] && pu_left[p] == 0 && pu_wait[p] == 0) begin
        pu_done[p] <= 1; pu_run[p] = 0;
      end
      if (pu_acc_fault[p]) n_memf++;
    end
    if (dma_cmpl_valid) begin
      if (dma_cmpl_err) n_iommu_err++;
      else begin n_dma_ok++; pu_wait[dma_cmpl_pu]--; end
    end
    if (egr_cmpl_valid) begin n_egr++; pu_wait[egr_cmpl_pu]--; end
    dma_req_valid <= dq.size() > 0;
    dma_req       <= dq.size() > 0 ? dq[0] : '0;
    egr_req_valid <= eq_q.size() > 0;
    egr_req       <= eq_q.size() > 0 ? eq_q[0] : '0;
  end

  // ---------------------------------------------------------------- backends
  int  dack_s [$], dack_t [$], dack_h [$], eack_s [$], eack_t [$];
  int  last_stream = -1;
  int  frags_per_pu [NP];
  always @(posedge clk) if (!rst_n) begin
    dma_ack_valid <= 0; egr_ack_valid <= 0;
  end else begin
    dma_ack_valid <= 0; egr_ack_valid <= 0;
    if (dma_frag_valid && dma_frag_ready) begin
      if (dma_frag.imm) begin
        event_t e;
        e = event_t'(dma_frag.imm_data[47:0]);
        chk(dma_frag.fmq == 3 && e.fmq == 3, "event belongs to the misbehaving tenant");
        chk(dma_frag.host_addr >= EQ3 && dma_frag.host_addr < EQ3 + 16 * 8 && dma_frag.host_addr[2:0] == 0, "event in its ring");
        n_eqw++;
        if (last_stream >= 0) n_hi_bypass++;  // an event overtook queued tenant data
        dack_h.push_back(1);
      end else begin
        chk(dma_frag.host_addr[63:12] >= 52'h0_0000_0010 && dma_frag.host_addr[63:12] < 52'h0_0000_0014, "translated to the mapped physical pages");
        chk(dma_frag.len <= 16'(FR), "fragment size");
        if (last_stream >= 0 && last_stream != int'(dma_frag.stream)) n_interleave++;
        last_stream = int'(dma_frag.stream);
        dack_h.push_back(0);
      end
      dack_s.push_back(int'(dma_frag.stream)); dack_t.push_back(cyc + 8);
    end
    if (dack_s.size() > 0 && dack_t[0] <= cyc) begin
      dma_ack_valid <= 1; dma_ack_stream <= STREAM_W'(dack_s.pop_front());
      dma_ack_hi <= 1'(dack_h.pop_front()); void'(dack_t.pop_front());
    end
    if (egr_frag_valid && egr_frag_ready) begin
      eack_s.push_back(int'(egr_frag.stream)); eack_t.push_back(cyc + 4);
    end
    if (eack_s.size() > 0 && eack_t[0] <= cyc) begin
      egr_ack_valid <= 1; egr_ack_stream <= STREAM_W'(eack_s.pop_front()); void'(eack_t.pop_front());
    end
    if (!dma_frag_valid) last_stream = -1;
  end

  // ---------------------------------------------------------------- monitors
  always @(posedge clk) if (rst_n) begin
    int o0, o1;
    if (pkt_valid && !pkt_ready) n_bp++;
    if (host_valid && host_ready) unmatched_seen++;
    o0 = 0; o1 = 0;
    for (int p = 0; p < NP; p++) if (pu_run[p]) begin if (pu_fmq_m[p] == 0) o0++; if (pu_fmq_m[p] == 1) o1++; end
    // compare PU time only while both tenants have packets waiting
    if (accepted[0] - started[0] >= 2 && accepted[1] - started[1] >= 2 && accepted[2] + accepted[3] == 0) begin
      occ_both[0] += o0; occ_both[1] += o1;
    end
    // weight limit engaged: the Congestor has work and a PU is free, but holds its share
    if (o0 >= NP / 2 && o1 > 0 && o0 + o1 < NP && started[0] < N0) n_limit++;
  end

  // ---------------------------------------------------------------- stimulus
  int seq_sent [5], accepted [5];
  initial begin
    int order [$];
    checks = 0; failures = 0; finished = 0;
    cfg_we = 0; cfg_sel = 0; cfg_idx = 0; cfg_reg = 0; cfg_wdata = 0;
    pkt_valid = 0; pkt_hdr = '0; host_ready = 1; dma_frag_ready = 1; egr_frag_ready = 1;
    for (int p = 0; p < NP; p++) pu_run[p] = 0;
    for (int f = 0; f < 4; f++) begin started[f] = 0; expected_seq[f] = 0; end
    for (int k = 0; k < 5; k++) begin seq_sent[k] = 0; accepted[k] = 0; end
    occ_both[0] = 0; occ_both[1] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // ECTX set-up by the control plane
    for (int f = 0; f < 4; f++) begin
      cfg_ip(f, 0, VF_IP);
      cfg(0, f, R_PORTS, {16'd0, 16'(1000 + f)});
      cfg(0, f, R_KERNEL, 32'h0100_0000 * 32'(f + 1));
      cfg(0, f, R_L1_SIZE, 32'h1000);
      cfg(0, f, R_L2_BASE, 32'h0010_0000 * 32'(f));
      cfg(0, f, R_L2_SIZE, 32'h1000);
    end
    cfg_ip(2, 1, CLI_IP);
    cfg(0, 2, R_PORTS, {16'd5555, 16'd1002});
    cfg(0, 2, R_IOPRIO, 32'h0102);
    cfg(0, 1, R_PKTBUF, 32'd3 * 32'd64);
    cfg(0, 3, R_CYCLIM, 32'd300);
    cfg(0, 3, R_EQ_LO, EQ3[31:0]);
    cfg(0, 3, R_EQ_HI, EQ3[63:32]);
    cfg(0, 3, R_EQ_SIZE, 32'd4);
    for (int f = 0; f < 4; f++) cfg(0, f, R_CTRL, (f == 2) ? 32'h3 : 32'h1);
    // IOMMU: FMQ 2 may write virtual pages 0x40000..0x40003 -> physical 0x10..0x13
    for (int e = 0; e < 4; e++) begin
      cfg(1, e, ectx_reg_e'(1), 32'h0004_0000 + 32'(e));
      cfg(1, e, ectx_reg_e'(2), 32'h0);
      cfg(1, e, ectx_reg_e'(3), 32'h10 + 32'(e));
      cfg(1, e, ectx_reg_e'(4), 32'h0);
      cfg(1, e, ectx_reg_e'(0), 32'h0000_0205);   // fmq 2, write, valid
    end
    // traffic: a random interleaving of all classes
    // phase 1: Congestor and Victim only
    for (int i = 0; i < N0 - N0 / 2; i++) order.push_back(0);
    for (int i = 0; i < N1; i++) order.push_back(1);
    order.shuffle();
    // phase 2: the IO tenant, the misbehaving tenant and unmatched traffic
    // join the Congestor's remaining packets
    begin
      int rest [$];
      for (int i = 0; i < N0 / 2; i++) rest.push_back(0);
      for (int i = 0; i < N2; i++) rest.push_back(2);
      for (int i = 0; i < N3; i++) rest.push_back(3);
      for (int i = 0; i < NU; i++) rest.push_back(4);
      rest.shuffle();
      foreach (rest[k]) order.push_back(rest[k]);
    end
    $display("traffic starts at cycle %0d", cyc);
    foreach (order[k]) begin
      int c; pkt_hdr_t h;
      c = order[k];
      h = '0;
      h.proto = (c == 2) ? PROTO_TCP : PROTO_UDP;
      h.dst_ip = VF_IP; h.src_ip = CLI_IP; h.src_port = 16'd5555;
      h.dst_port = (c == 4) ? 16'd9999 : 16'(1000 + c);
      h.desc.ptr = (32'(c) << 24) | 32'(seq_sent[c]);
      h.desc.len = 16'd64;
      seq_sent[c]++;
      if (c == 4) n_miss++; else n_hit++;
      @(negedge clk);
      pkt_valid = 1; pkt_hdr = h;
      @(posedge clk);
      while (!pkt_ready) @(posedge clk);
      accepted[c]++;
      #1 pkt_valid = 0;
    end
    // drain
    begin
      int n; n = 0;
      while (n < 200000 && !(started[0] == N0 && started[1] == N1 && started[2] == N2 && started[3] == N3
                             && n_dma_ok == N2 && n_egr == N2 && n_kill == N3 && int'(eq_prod[3]) == 3 * N3
                             && dq.size() == 0)) begin
        @(negedge clk); n++;
        if (n % 20000 == 0)
          $display("drain %0d: started %0d %0d %0d %0d dma %0d egr %0d kill %0d eq %0d dq %0d", n, started[0], started[1], started[2], started[3], n_dma_ok, n_egr, n_kill, eq_prod[3], dq.size());
      end
      repeat (50) @(negedge clk);
    end
    // ------------------------------------------------------------ results
    chk(started[0] == N0 && started[1] == N1 && started[2] == N2 && started[3] == N3, "every matched packet ran once");
    chk(unmatched_seen == NU, "unmatched packets to the host path");
    chk(n_dma_ok == N2 && n_egr == N2, "IO kernels' transfers completed");
    chk(n_iommu_err == N3, "illegal DMA aborted with error");
    chk(n_kill == N3, "runaway kernels killed");
    chk(n_memf == N3, "segment violations flagged");
    chk(int'(eq_prod[3]) == 3 * N3 && n_eqw == 3 * N3 && eq_lost == 0, "every error written to the event queue");
    chk(occ_both[0] * 10 > occ_both[1] * 7 && occ_both[1] * 10 > occ_both[0] * 7,
        $sformatf("Congestor/Victim PU time %0d / %0d", occ_both[0], occ_both[1]));
    n_multi = (FR < 1024) ? n_dma_ok : 0;
    $display("mechanisms: hit=%0d miss=%0d backpressure=%0d limit=%0d kill=%0d memfault=%0d iommu=%0d eq=%0d multifrag=%0d interleave=%0d bypass=%0d",
             n_hit, n_miss, n_bp, n_limit, n_kill, n_memf, n_iommu_err, n_eqw, n_multi, n_interleave, n_hi_bypass);
    chk(n_hit > 0, "mechanism: match hit");
    chk(n_miss > 0, "mechanism: match miss");
    chk(n_bp > 0, "mechanism: FMQ back-pressure");
    chk(n_limit > 0, "mechanism: WLBVT weight limit");
    chk(n_kill > 0, "mechanism: watchdog");
    chk(n_memf > 0, "mechanism: memory protection");
    chk(n_iommu_err > 0, "mechanism: IOMMU fault");
    chk(n_eqw > 0, "mechanism: event queue write");
    chk(n_multi > 0, "mechanism: DMA fragmentation");
    chk(n_interleave > 0, "mechanism: WRR interleaving");
    chk(n_hi_bypass > 0, "mechanism: event priority bypass");
    finished = 1;
  end
endmodule
