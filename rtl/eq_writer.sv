// eq_writer -- posts error events to the event queue (EQ) of the offending
// execution context.
//
// Error events come from many places at once: the kernel watchdog of every
// PU (timeout), the memory guard of every PU (segment violation) and the
// IOMMU (illegal host access). Each source has a one-entry pending slot; the
// writer serves pending slots in round-robin order, one event per cycle. For
// every event it forms an 8-byte write whose data is the event itself
// (immediate data: {16'b0, code, pu, fmq, info}) and whose address is the
// next entry of the ECTX's ring, eq_base + (index mod 2**eq_size_log2) * 8,
// then advances that ECTX's producer index. The write goes to the DMA
// engine's strict-priority input, so control traffic is never queued behind
// tenant data. An event arriving while its source's slot is still full is
// lost and counted in lost_cnt.
//
// Interface: ev_valid/ev per source (one-cycle pulses); hi_valid/hi_ready/
// hi_frag towards the DMA engine (registered, held until taken); eq_base and
// eq_size_log2 per FMQ from the ECTX registers; prod (producer index per FMQ)
// for the host API to poll. An event pulsed in cycle t can appear on hi_*
// in cycle t+2 at the earliest.
//
// Reporting errors through a per-ECTX EQ at top IO priority follows the
// paper; the entry format, ring addressing and loss policy are this design's
// choices.
module eq_writer
  import osmosis_pkg::*;
#(
  parameter int unsigned N_SRC = 2 * N_PU_DEF + 1,
  parameter int unsigned N_FMQ = N_FMQ_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [N_SRC-1:0]   ev_valid,
  input  event_t             ev [N_SRC],
  input  logic [HADDR_W-1:0] eq_base      [N_FMQ],
  input  logic [4:0]         eq_size_log2 [N_FMQ],
  output logic               hi_valid,
  input  logic               hi_ready,
  output frag_t              hi_frag,
  output logic [31:0]        prod [N_FMQ],
  output logic [31:0]        lost_cnt
);

  localparam int unsigned SI = $clog2(N_SRC) > 0 ? $clog2(N_SRC) : 1;

  logic [N_SRC-1:0] pend;
  event_t           pev [N_SRC];
  logic [SI-1:0]    last;

  logic          load, any;
  logic [SI-1:0] sel;
  always_comb begin
    any = |pend;
    sel = last;
    for (int k = N_SRC; k >= 1; k--) begin
      int s;
      s = (int'(last) + k) % N_SRC;
      if (pend[s]) sel = SI'(s);
    end
    load = any && (!hi_valid || hi_ready);
  end

  event_t           e;
  logic [31:0]      slot;
  assign e    = pev[sel];
  assign slot = prod[e.fmq] & ((32'd1 << eq_size_log2[e.fmq]) - 32'd1);

  logic [31:0] n_lost;
  always_comb begin
    n_lost = '0;
    for (int s = 0; s < N_SRC; s++)
      if (ev_valid[s] && pend[s] && !(load && (sel == SI'(s)))) n_lost = n_lost + 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend     <= '0;
      last     <= SI'(N_SRC - 1);
      hi_valid <= 1'b0;
      hi_frag  <= '0;
      lost_cnt <= '0;
      for (int s = 0; s < N_SRC; s++) pev[s] <= '0;
      for (int f = 0; f < N_FMQ; f++) prod[f] <= '0;
    end else begin
      lost_cnt <= lost_cnt + n_lost;
      if (hi_valid && hi_ready) hi_valid <= 1'b0;
      if (load) begin
        last             <= sel;
        hi_valid         <= 1'b1;
        hi_frag          <= '0;
        hi_frag.fmq      <= e.fmq;
        hi_frag.to_host  <= 1'b1;
        hi_frag.phys     <= 1'b1;
        hi_frag.imm      <= 1'b1;
        hi_frag.imm_data <= 64'(e);
        hi_frag.host_addr <= eq_base[e.fmq] + HADDR_W'({slot, 3'b000});
        hi_frag.len      <= LEN_W'(8);
        prod[e.fmq]      <= prod[e.fmq] + 1'b1;
      end
      for (int s = 0; s < N_SRC; s++) begin
        if (load && (sel == SI'(s))) pend[s] <= 1'b0;
        if (ev_valid[s] && (!pend[s] || (load && (sel == SI'(s))))) begin
          pend[s] <= 1'b1;
          pev[s]  <= ev[s];
        end
      end
    end
  end

endmodule
