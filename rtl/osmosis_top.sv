// osmosis_top -- the OSMOSIS multi-tenant data plane of an on-path SmartNIC.
//
// Data path of a packet:
//   inbound header -> match_engine -> fmq_array (FIFO of its flow)
//   -> wlbvt_sched picks a flow when a PU is free -> pu_dispatch starts the
//   flow's kernel on that PU (task_*).
// While it runs, a kernel
//   - reads/writes its L1/L2 segments through a mem_guard per PU (pu_acc_*),
//   - issues host DMA transfers (dma_req_*): io_frag_sched u_dma cuts them
//     into fragments, interleaves flows by WRR with their DMA priority, the
//     iommu translates and checks each fragment, and fragments leave on
//     dma_frag_* to the AXI/PCIe backend, which acknowledges on dma_ack_*,
//   - sends packets (egr_req_*): the same fragmentation/WRR in u_egr, with
//     the egress priority, towards the egress pipeline (egr_frag_*).
// It ends with pu_done, or is killed by the watchdog (pu_kill) after its
// flow's cycle limit. Timeouts, segment violations and IOMMU faults become
// events that eq_writer writes into the flow's event queue through the DMA
// engine's strict-priority input.
// The host configures everything through cfg_*: cfg_sel 0 = ECTX registers
// of FMQ cfg_idx (ectx_reg_e), cfg_sel 1 = IOMMU entry cfg_idx.
//
// Packets that match no flow are handed back on host_* for the normal NIC
// path. PUs, L1/L2 memories, the inbound and egress pipelines and the host
// interface are outside this module; their signals are ports.
//
// Block structure, schedulers and policies follow the paper; port shapes,
// the single request port per IO engine and all timing are this design's.
module osmosis_top
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ      = N_FMQ_DEF,
  parameter int unsigned N_PU       = N_PU_DEF,
  parameter int unsigned FMQ_DEPTH  = 64,
  parameter int unsigned N_STREAMS  = 32,
  parameter int unsigned FRAG_BYTES = 512,
  parameter int unsigned N_IOMMU    = 64,
  localparam int unsigned OCC_W     = $clog2(N_PU + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host configuration (MMIO writes)
  input  logic                cfg_we,
  input  logic                cfg_sel,
  input  logic [FMQ_W-1:0]    cfg_idx,
  input  logic [4:0]          cfg_reg,
  input  logic [31:0]         cfg_wdata,
  // inbound packets (parsed header + descriptor into the L2 packet buffer)
  input  logic                pkt_valid,
  output logic                pkt_ready,
  input  pkt_hdr_t            pkt_hdr,
  // unmatched packets for the normal NIC path
  output logic                host_valid,
  input  logic                host_ready,
  output desc_t               host_desc,
  // kernel start / end
  output logic                task_valid,
  output task_t               task_o,
  input  logic [N_PU-1:0]     pu_done,
  output logic [N_PU-1:0]     pu_kill,
  // PU memory accesses
  input  logic [N_PU-1:0]     pu_acc_valid,
  input  logic [N_PU-1:0]     pu_acc_l2,
  input  logic [PTR_W-1:0]    pu_acc_vaddr [N_PU],
  input  logic [3:0]          pu_acc_bytes [N_PU],
  output logic [PTR_W-1:0]    pu_acc_paddr [N_PU],
  output logic [N_PU-1:0]     pu_acc_fault,
  // host DMA requests from kernels (fmq and weight fields are filled here)
  input  logic                dma_req_valid,
  output logic                dma_req_ready,
  input  io_cmd_t             dma_req,
  output logic                dma_frag_valid,
  input  logic                dma_frag_ready,
  output frag_t               dma_frag,
  input  logic                dma_ack_valid,
  input  logic [STREAM_W-1:0] dma_ack_stream,
  input  logic                dma_ack_hi,
  output logic                dma_cmpl_valid,
  output logic [PU_W-1:0]     dma_cmpl_pu,
  output logic                dma_cmpl_err,
  // egress send requests from kernels
  input  logic                egr_req_valid,
  output logic                egr_req_ready,
  input  io_cmd_t             egr_req,
  output logic                egr_frag_valid,
  input  logic                egr_frag_ready,
  output frag_t               egr_frag,
  input  logic                egr_ack_valid,
  input  logic [STREAM_W-1:0] egr_ack_stream,
  output logic                egr_cmpl_valid,
  output logic [PU_W-1:0]     egr_cmpl_pu,
  // event queue state
  output logic [31:0]         eq_prod [N_FMQ],
  output logic [31:0]         eq_lost
);

  localparam int unsigned N_SRC = 2 * N_PU + 1;

  // ------------------------------------------------------------ ECTX state
  ectx_t       ectx  [N_FMQ];
  match_rule_t rules [N_FMQ];

  ectx_regs #(.N_FMQ(N_FMQ)) u_regs (
    .clk, .rst_n,
    .cfg_we    (cfg_we && !cfg_sel),
    .cfg_idx   (cfg_idx),
    .cfg_reg   (cfg_reg),
    .cfg_wdata (cfg_wdata),
    .ectx      (ectx),
    .rules     (rules)
  );

  logic [PRIO_W-1:0]  prio        [N_FMQ];
  logic [31:0]        cycle_limit [N_FMQ];
  logic [PTR_W-1:0]   kernel_ptr  [N_FMQ];
  logic [31:0]        buf_limit   [N_FMQ];
  logic [HADDR_W-1:0] eq_base     [N_FMQ];
  logic [4:0]         eq_size     [N_FMQ];
  always_comb
    for (int i = 0; i < N_FMQ; i++) begin
      prio[i]        = ectx[i].prio;
      cycle_limit[i] = ectx[i].cycle_limit;
      kernel_ptr[i]  = ectx[i].kernel_ptr;
      buf_limit[i]   = ectx[i].pkt_buf_size;
      eq_base[i]     = ectx[i].eq_base;
      eq_size[i]     = ectx[i].eq_size_log2;
    end

  // ------------------------------------------------------------ matching
  logic             me_valid, me_ready, me_hit;
  logic [FMQ_W-1:0] me_fmq;
  desc_t            me_desc;
  logic             enq_ready;

  match_engine #(.N_FMQ(N_FMQ)) u_match (
    .clk, .rst_n,
    .in_valid  (pkt_valid),
    .in_ready  (pkt_ready),
    .in_hdr    (pkt_hdr),
    .rules     (rules),
    .out_valid (me_valid),
    .out_ready (me_ready),
    .out_hit   (me_hit),
    .out_fmq   (me_fmq),
    .out_desc  (me_desc)
  );

  assign me_ready   = me_hit ? enq_ready : host_ready;
  assign host_valid = me_valid && !me_hit;
  assign host_desc  = me_desc;

  // ------------------------------------------------------------ FMQs
  logic             deq_valid;
  logic [FMQ_W-1:0] deq_fmq;
  desc_t            deq_desc;
  logic [N_FMQ-1:0] nonempty;
  logic [$clog2(FMQ_DEPTH):0] fmq_count [N_FMQ];
  logic [31:0]      fmq_bytes [N_FMQ];

  fmq_array #(.N_FMQ(N_FMQ), .DEPTH(FMQ_DEPTH)) u_fmq (
    .clk, .rst_n,
    .enq_valid (me_valid && me_hit),
    .enq_ready (enq_ready),
    .enq_fmq   (me_fmq),
    .enq_desc  (me_desc),
    .deq_valid (deq_valid),
    .deq_fmq   (deq_fmq),
    .deq_desc  (deq_desc),
    .buf_limit (buf_limit),
    .nonempty  (nonempty),
    .count     (fmq_count),
    .bytes     (fmq_bytes)
  );

  // ------------------------------------------------------------ PU scheduling
  logic             grant_valid, pu_free;
  logic [FMQ_W-1:0] grant_fmq;
  logic [OCC_W-1:0] occ [N_FMQ];
  logic [BVT_W-1:0] bvt [N_FMQ];
  logic [BVT_W-1:0] total_occ [N_FMQ];
  logic [OCC_W+16-1:0] key [N_FMQ];

  wlbvt_sched #(.N_FMQ(N_FMQ), .N_PU(N_PU), .FRAC_W(16)) u_sched (
    .clk, .rst_n,
    .nonempty    (nonempty),
    .occ         (occ),
    .prio        (prio),
    .pu_free     (pu_free),
    .grant_valid (grant_valid),
    .grant_fmq   (grant_fmq),
    .bvt         (bvt),
    .total_occ   (total_occ),
    .key         (key)
  );

  logic [N_PU-1:0]  pu_busy;
  logic [FMQ_W-1:0] pu_fmq [N_PU];
  logic [N_PU-1:0]  wd_ev_valid;
  event_t           wd_ev [N_PU];

  pu_dispatch #(.N_FMQ(N_FMQ), .N_PU(N_PU)) u_disp (
    .clk, .rst_n,
    .grant_valid (grant_valid),
    .grant_fmq   (grant_fmq),
    .pu_free     (pu_free),
    .deq_valid   (deq_valid),
    .deq_fmq     (deq_fmq),
    .deq_desc    (deq_desc),
    .cycle_limit (cycle_limit),
    .kernel_ptr  (kernel_ptr),
    .task_valid  (task_valid),
    .task_o      (task_o),
    .pu_done     (pu_done),
    .pu_kill     (pu_kill),
    .pu_busy     (pu_busy),
    .pu_fmq      (pu_fmq),
    .occ         (occ),
    .ev_valid    (wd_ev_valid),
    .ev          (wd_ev)
  );

  // ------------------------------------------------------------ memory guards
  event_t mg_ev [N_PU];
  for (genvar p = 0; p < N_PU; p++) begin : g_guard
    mem_guard u_guard (
      .acc_valid (pu_acc_valid[p]),
      .acc_l2    (pu_acc_l2[p]),
      .acc_vaddr (pu_acc_vaddr[p]),
      .acc_bytes (pu_acc_bytes[p]),
      .pu        (PU_W'(p)),
      .fmq       (pu_fmq[p]),
      .l1_base   (ectx[pu_fmq[p]].l1_base),
      .l1_size   (ectx[pu_fmq[p]].l1_size),
      .l2_base   (ectx[pu_fmq[p]].l2_base),
      .l2_size   (ectx[pu_fmq[p]].l2_size),
      .acc_paddr (pu_acc_paddr[p]),
      .acc_fault (pu_acc_fault[p]),
      .ev        (mg_ev[p])
    );
  end

  // ------------------------------------------------------------ DMA engine
  io_cmd_t dma_cmd, egr_cmd;
  always_comb begin
    dma_cmd        = dma_req;
    dma_cmd.fmq    = pu_fmq[dma_req.pu];
    dma_cmd.weight = ectx[pu_fmq[dma_req.pu]].dma_prio;
    egr_cmd        = egr_req;
    egr_cmd.fmq    = pu_fmq[egr_req.pu];
    egr_cmd.weight = ectx[pu_fmq[egr_req.pu]].egr_prio;
  end

  logic  hi_valid, hi_ready;
  frag_t hi_frag;
  logic  df_valid, df_ready;
  frag_t df;
  logic  flt_valid;
  frag_t flt_frag;

  io_frag_sched #(.N_STREAMS(N_STREAMS), .FRAG_BYTES(FRAG_BYTES)) u_dma (
    .clk, .rst_n,
    .req_valid   (dma_req_valid),
    .req_ready   (dma_req_ready),
    .req         (dma_cmd),
    .hi_valid    (hi_valid),
    .hi_ready    (hi_ready),
    .hi_frag     (hi_frag),
    .frag_valid  (df_valid),
    .frag_ready  (df_ready),
    .frag        (df),
    .ack_valid   (dma_ack_valid),
    .ack_stream  (dma_ack_stream),
    .ack_hi      (dma_ack_hi),
    .drop_valid  (flt_valid),
    .drop_stream (flt_frag.stream),
    .cmpl_valid  (dma_cmpl_valid),
    .cmpl_pu     (dma_cmpl_pu),
    .cmpl_fmq    (),
    .cmpl_err    (dma_cmpl_err),
    .busy        ()
  );

  iommu #(.N_ENTRIES(N_IOMMU)) u_iommu (
    .clk, .rst_n,
    .cfg_we      (cfg_we && cfg_sel),
    .cfg_idx     ($clog2(N_IOMMU)'(cfg_idx)),
    .cfg_reg     (cfg_reg[2:0]),
    .cfg_wdata   (cfg_wdata),
    .in_valid    (df_valid),
    .in_ready    (df_ready),
    .in_frag     (df),
    .out_valid   (dma_frag_valid),
    .out_ready   (dma_frag_ready),
    .out_frag    (dma_frag),
    .fault_valid (flt_valid),
    .fault_frag  (flt_frag)
  );

  // ------------------------------------------------------------ egress engine
  io_frag_sched #(.N_STREAMS(N_STREAMS), .FRAG_BYTES(FRAG_BYTES)) u_egr (
    .clk, .rst_n,
    .req_valid   (egr_req_valid),
    .req_ready   (egr_req_ready),
    .req         (egr_cmd),
    .hi_valid    (1'b0),
    .hi_ready    (),
    .hi_frag     ('0),
    .frag_valid  (egr_frag_valid),
    .frag_ready  (egr_frag_ready),
    .frag        (egr_frag),
    .ack_valid   (egr_ack_valid),
    .ack_stream  (egr_ack_stream),
    .ack_hi      (1'b0),
    .drop_valid  (1'b0),
    .drop_stream ('0),
    .cmpl_valid  (egr_cmpl_valid),
    .cmpl_pu     (egr_cmpl_pu),
    .cmpl_fmq    (),
    .cmpl_err    (),
    .busy        ()
  );

  // ------------------------------------------------------------ event queue
  logic [N_SRC-1:0] ev_valid;
  event_t           ev [N_SRC];
  always_comb begin
    for (int p = 0; p < N_PU; p++) begin
      ev_valid[p]        = wd_ev_valid[p];
      ev[p]              = wd_ev[p];
      ev_valid[N_PU + p] = pu_acc_fault[p];
      ev[N_PU + p]       = mg_ev[p];
    end
    ev_valid[2*N_PU]  = flt_valid;
    ev[2*N_PU].code   = EV_IOMMU;
    ev[2*N_PU].pu     = '0;
    ev[2*N_PU].fmq    = flt_frag.fmq;
    ev[2*N_PU].info   = flt_frag.host_addr[31:0];
  end

  eq_writer #(.N_SRC(N_SRC), .N_FMQ(N_FMQ)) u_eq (
    .clk, .rst_n,
    .ev_valid     (ev_valid),
    .ev           (ev),
    .eq_base      (eq_base),
    .eq_size_log2 (eq_size),
    .hi_valid     (hi_valid),
    .hi_ready     (hi_ready),
    .hi_frag      (hi_frag),
    .prod         (eq_prod),
    .lost_cnt     (eq_lost)
  );

endmodule
