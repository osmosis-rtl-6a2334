// fmq_array -- the descriptor FIFOs of all flow management queues.
//
// Each FMQ is a FIFO of packet descriptors (pointer into the L2 packet buffer
// plus length). All FIFOs share one descriptor memory: FMQ i owns the DEPTH
// words starting at i*DEPTH and keeps its own head, tail and count. Besides the
// depth limit, each FMQ may hold at most buf_limit[i] bytes of packets (the
// SLO "packet buffer size"; 0 = no byte limit). Packets are never dropped:
// enq_ready tells the ingress side whether the offered packet fits, and it has
// to wait (link-level flow control) until it does.
//
// Interface: one enqueue and one dequeue per cycle, to the same or different
// FMQs. deq_desc is the head of deq_fmq, read combinationally, and is valid
// whenever nonempty[deq_fmq] is set; asserting deq_valid pops it at the clock
// edge. Counts, bytes and nonempty update on the clock edge after the access.
//
// The FIFO-per-flow structure follows the paper; the shared memory, the depth
// and the byte accounting are this design's choices.
module fmq_array
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ = N_FMQ_DEF,
  parameter int unsigned DEPTH = 64   // power of two
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             enq_valid,
  output logic             enq_ready,
  input  logic [FMQ_W-1:0] enq_fmq,
  input  desc_t            enq_desc,
  input  logic             deq_valid,
  input  logic [FMQ_W-1:0] deq_fmq,
  output desc_t            deq_desc,
  input  logic [31:0]      buf_limit [N_FMQ],
  output logic [N_FMQ-1:0] nonempty,
  output logic [$clog2(DEPTH):0] count [N_FMQ],
  output logic [31:0]      bytes [N_FMQ]
);

  localparam int unsigned AW = $clog2(DEPTH);

  desc_t          mem [N_FMQ*DEPTH];
  logic [AW-1:0]  head [N_FMQ];
  logic [AW-1:0]  tail [N_FMQ];

  logic        room;
  logic [32:0] bytes_after;

  always_comb begin
    room        = count[enq_fmq] < (AW+1)'(DEPTH);
    bytes_after = {1'b0, bytes[enq_fmq]} + 33'(enq_desc.len);
    enq_ready   = room && ((buf_limit[enq_fmq] == '0) || (bytes_after <= {1'b0, buf_limit[enq_fmq]}));
  end

  logic do_enq, do_deq;
  assign do_enq = enq_valid && enq_ready;
  assign do_deq = deq_valid && nonempty[deq_fmq];

  assign deq_desc = mem[int'(deq_fmq)*DEPTH + int'(head[deq_fmq])];

  always_comb
    for (int i = 0; i < N_FMQ; i++) nonempty[i] = count[i] != '0;

  always_ff @(posedge clk) begin
    if (do_enq) mem[int'(enq_fmq)*DEPTH + int'(tail[enq_fmq])] <= enq_desc;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FMQ; i++) begin
        head[i]  <= '0;
        tail[i]  <= '0;
        count[i] <= '0;
        bytes[i] <= '0;
      end
    end else begin
      for (int i = 0; i < N_FMQ; i++) begin
        logic e, d;
        e = do_enq && (enq_fmq == FMQ_W'(i));
        d = do_deq && (deq_fmq == FMQ_W'(i));
        if (e) tail[i] <= tail[i] + 1'b1;
        if (d) head[i] <= head[i] + 1'b1;
        count[i] <= count[i] + (AW+1)'(e) - (AW+1)'(d);
        bytes[i] <= bytes[i] + (e ? 32'(enq_desc.len) : 32'd0) - (d ? 32'(deq_desc.len) : 32'd0);
      end
    end
  end

  // a dequeue must target a non-empty FMQ
  a_deq_nonempty: assert property (@(posedge clk) disable iff (!rst_n) deq_valid |-> nonempty[deq_fmq]);

endmodule
