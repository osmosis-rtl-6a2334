// io_frag_sched -- hardware transfer fragmentation with weighted round-robin
// arbitration, for one IO engine (instantiated once for host DMA, once for
// egress).
//
// Kernels on different PUs issue IO transfers of very different sizes. If the
// engine served them whole and in order, a 4 KiB transfer would block the
// 64-byte transfer behind it (head-of-line blocking). Here every accepted
// transfer occupies one of N_STREAMS stream slots and is cut into fragments of
// at most FRAG_BYTES that never cross a FRAG_BYTES-aligned host address (so a
// fragment never crosses a 4 KiB page either). Fragments of different streams
// are interleaved by weighted round robin: the stream whose turn it is may send
// up to `weight` fragments in a row (weight = the issuing FMQ's DMA or egress
// priority, 0 counts as 1), then the turn passes to the next stream holding
// work. Many fragments may be outstanding at the backend; a stream completes
// when all its bytes were issued and all its fragments were acknowledged.
//
// A second input, hi_*, carries single fragments of control traffic (event
// queue writes). It has strict priority over the WRR streams; its fragments
// have phys=1 and their acknowledgements (ack_hi=1) are ignored.
//
// Interface:
//   req_valid/req_ready/req     accept a transfer (one per cycle)
//   frag_valid/frag_ready/frag  one fragment per cycle to the AXI backend
//   ack_valid/ack_stream/ack_hi a fragment completed at the backend
//   drop_valid/drop_stream      a fragment was refused (IOMMU fault); the
//                               stream is aborted and completes with error
//   cmpl_valid/cmpl_pu/cmpl_err transfer finished (combinational, one per
//                               cycle; the slot is freed at the clock edge)
// A transfer accepted in cycle t can issue its first fragment in cycle t+1.
//
// Fragmentation in hardware, WRR with the FMQ's IO priority and the top
// priority of event-queue traffic follow the paper; stream count, the WRR
// burst rule and the alignment rule are this design's choices.
module io_frag_sched
  import osmosis_pkg::*;
#(
  parameter int unsigned N_STREAMS  = 32,
  parameter int unsigned FRAG_BYTES = 512   // power of two
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                req_valid,
  output logic                req_ready,
  input  io_cmd_t             req,
  input  logic                hi_valid,
  output logic                hi_ready,
  input  frag_t               hi_frag,
  output logic                frag_valid,
  input  logic                frag_ready,
  output frag_t               frag,
  input  logic                ack_valid,
  input  logic [STREAM_W-1:0] ack_stream,
  input  logic                ack_hi,
  input  logic                drop_valid,
  input  logic [STREAM_W-1:0] drop_stream,
  output logic                cmpl_valid,
  output logic [PU_W-1:0]     cmpl_pu,
  output logic [FMQ_W-1:0]    cmpl_fmq,
  output logic                cmpl_err,
  output logic [N_STREAMS-1:0] busy
);

  localparam int unsigned FB = $clog2(FRAG_BYTES);
  localparam int unsigned SI = $clog2(N_STREAMS) > 0 ? $clog2(N_STREAMS) : 1;

  io_cmd_t           cmd  [N_STREAMS];
  logic [LEN_W-1:0]  rem  [N_STREAMS];
  logic [LEN_W-1:0]  outst[N_STREAMS];
  logic [N_STREAMS-1:0] err;

  logic [SI-1:0]       cur;
  logic [IOPRIO_W-1:0] credit;

  // ---------------------------------------------------------- allocation
  logic [SI-1:0] free_slot;
  always_comb begin
    req_ready = 1'b0;
    free_slot = '0;
    for (int s = N_STREAMS - 1; s >= 0; s--)
      if (!busy[s]) begin
        req_ready = 1'b1;
        free_slot = SI'(s);
      end
  end

  // ---------------------------------------------------------- completion
  logic [N_STREAMS-1:0] done;
  logic [SI-1:0]        done_slot;
  always_comb begin
    for (int s = 0; s < N_STREAMS; s++)
      done[s] = busy[s] && (rem[s] == '0) && (outst[s] == '0);
    cmpl_valid = 1'b0;
    done_slot  = '0;
    for (int s = N_STREAMS - 1; s >= 0; s--)
      if (done[s]) begin
        cmpl_valid = 1'b1;
        done_slot  = SI'(s);
      end
  end
  assign cmpl_pu  = cmd[done_slot].pu;
  assign cmpl_fmq = cmd[done_slot].fmq;
  assign cmpl_err = err[done_slot];

  // ---------------------------------------------------------- WRR choice
  logic [N_STREAMS-1:0] pend;
  always_comb
    for (int s = 0; s < N_STREAMS; s++) pend[s] = busy[s] && (rem[s] != '0);

  logic          use_cur, any_pend;
  logic [SI-1:0] nxt, sel;
  always_comb begin
    use_cur  = pend[cur] && (credit != '0);
    any_pend = |pend;
    nxt      = cur;
    // first pending stream after cur, wrapping around (cur itself last)
    for (int k = N_STREAMS; k >= 1; k--) begin
      int s;
      s = (int'(cur) + k) % N_STREAMS;
      if (pend[s]) nxt = SI'(s);
    end
    sel = use_cur ? cur : nxt;
  end

  logic [IOPRIO_W-1:0] w_nxt;
  assign w_nxt = (cmd[nxt].weight == '0) ? IOPRIO_W'(1) : cmd[nxt].weight;

  // length of the next fragment of stream sel
  logic [LEN_W-1:0] to_bound, flen;
  always_comb begin
    to_bound = LEN_W'(FRAG_BYTES) - LEN_W'(cmd[sel].host_addr[FB-1:0]);
    flen     = (rem[sel] < to_bound) ? rem[sel] : to_bound;
  end

  always_comb begin
    hi_ready = frag_ready;
    if (hi_valid) begin
      frag_valid = 1'b1;
      frag       = hi_frag;
    end else begin
      frag_valid      = any_pend;
      frag            = '0;
      frag.stream     = STREAM_W'(sel);
      frag.fmq        = cmd[sel].fmq;
      frag.to_host    = cmd[sel].to_host;
      frag.local_addr = cmd[sel].local_addr;
      frag.host_addr  = cmd[sel].host_addr;
      frag.len        = flen;
    end
  end

  logic fire;
  assign fire = !hi_valid && any_pend && frag_ready;

  // ---------------------------------------------------------- state
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy   <= '0;
      err    <= '0;
      cur    <= '0;
      credit <= '0;
      for (int s = 0; s < N_STREAMS; s++) begin
        cmd[s]   <= '0;
        rem[s]   <= '0;
        outst[s] <= '0;
      end
    end else begin
      if (fire) begin
        if (use_cur) credit <= credit - 1'b1;
        else begin
          cur    <= nxt;
          credit <= w_nxt - 1'b1;
        end
      end
      for (int s = 0; s < N_STREAMS; s++) begin
        logic f, a, d;
        f = fire && (sel == SI'(s));
        a = ack_valid && !ack_hi && (ack_stream == STREAM_W'(s));
        d = drop_valid && (drop_stream == STREAM_W'(s));
        outst[s] <= outst[s] + LEN_W'(f) - LEN_W'(a) - LEN_W'(d);
        if (f) begin
          cmd[s].local_addr <= cmd[s].local_addr + PTR_W'(flen);
          cmd[s].host_addr  <= cmd[s].host_addr + HADDR_W'(flen);
        end
        if (d) begin
          err[s] <= 1'b1;
          rem[s] <= '0;          // abort the rest of the transfer
        end else if (f) begin
          rem[s] <= rem[s] - flen;
        end
        if (cmpl_valid && (done_slot == SI'(s))) begin
          busy[s] <= 1'b0;
        end
        if (req_valid && req_ready && (free_slot == SI'(s))) begin
          busy[s]  <= 1'b1;
          err[s]   <= 1'b0;
          cmd[s]   <= req;
          rem[s]   <= req.len;
          outst[s] <= '0;
        end
      end
    end
  end

  a_req_len: assert property (@(posedge clk) disable iff (!rst_n) req_valid |-> req.len != '0);

endmodule
