// iommu -- address translation and access check for host DMA fragments.
//
// A kernel names host memory by virtual address. Before a DMA fragment leaves
// the SmartNIC, its host address is translated page by page (4 KiB pages by
// default) through a fully associative table of N_ENTRIES entries. An entry
// maps one virtual page of one ECTX (identified by its FMQ) to a physical page
// and says whether the ECTX may read it, write it, or both. A fragment whose
// page has no entry for its ECTX, or lacks the needed permission, is not sent:
// it leaves on fault_valid/fault_frag instead, so that the DMA engine can
// abort the transfer and an event can be written to the ECTX's event queue.
// Fragments marked phys (event-queue writes set up by the control plane) pass
// untranslated. Fragments never cross a page, so one lookup per fragment is
// enough.
//
// Table writes (cfg_*): register 0 = {fmq[14:8], wr[2], rd[1], valid[0]},
// 1/2 = virtual page number low/high word, 3/4 = physical page number
// low/high word. Write register 0 last.
//
// Timing: one registered stage with valid/ready; a fragment accepted in cycle
// t appears on out_* (or fault_*) in cycle t+1. fault_valid is a one-cycle
// pulse and needs no ready.
//
// The function (translation plus range check, set up by the control plane)
// follows the paper; the table organisation, page size and the absence of a
// page-table walker are this design's choices.
module iommu
  import osmosis_pkg::*;
#(
  parameter int unsigned N_ENTRIES = 64,
  parameter int unsigned PAGE_BITS = 12,
  localparam int unsigned PN_W     = HADDR_W - PAGE_BITS,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [IDX_W-1:0] cfg_idx,
  input  logic [2:0]       cfg_reg,
  input  logic [31:0]      cfg_wdata,
  input  logic             in_valid,
  output logic             in_ready,
  input  frag_t            in_frag,
  output logic             out_valid,
  input  logic             out_ready,
  output frag_t            out_frag,
  output logic             fault_valid,
  output frag_t            fault_frag
);

  typedef struct packed {
    logic             valid;
    logic             rd;
    logic             wr;
    logic [FMQ_W-1:0] fmq;
    logic [PN_W-1:0]  vpn;
    logic [PN_W-1:0]  ppn;
  } entry_t;

  entry_t tbl [N_ENTRIES];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N_ENTRIES; e++) tbl[e] <= '0;
    end else if (cfg_we) begin
      case (cfg_reg)
        3'd0: begin
          tbl[cfg_idx].valid <= cfg_wdata[0];
          tbl[cfg_idx].rd    <= cfg_wdata[1];
          tbl[cfg_idx].wr    <= cfg_wdata[2];
          tbl[cfg_idx].fmq   <= cfg_wdata[8 +: FMQ_W];
        end
        3'd1: tbl[cfg_idx].vpn[31:0]      <= cfg_wdata;
        3'd2: tbl[cfg_idx].vpn[PN_W-1:32] <= cfg_wdata[PN_W-33:0];
        3'd3: tbl[cfg_idx].ppn[31:0]      <= cfg_wdata;
        3'd4: tbl[cfg_idx].ppn[PN_W-1:32] <= cfg_wdata[PN_W-33:0];
        default: ;
      endcase
    end
  end

  // lookup
  logic            hit;
  logic [PN_W-1:0] ppn;
  always_comb begin
    hit = 1'b0;
    ppn = '0;
    for (int e = 0; e < N_ENTRIES; e++) begin
      if (tbl[e].valid && (tbl[e].fmq == in_frag.fmq)
          && (tbl[e].vpn == in_frag.host_addr[HADDR_W-1:PAGE_BITS])
          && (in_frag.to_host ? tbl[e].wr : tbl[e].rd)) begin
        hit = 1'b1;
        ppn = tbl[e].ppn;
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid   <= 1'b0;
      out_frag    <= '0;
      fault_valid <= 1'b0;
      fault_frag  <= '0;
    end else begin
      fault_valid <= 1'b0;
      if (in_ready) begin
        out_valid <= 1'b0;
        if (in_valid) begin
          if (in_frag.phys) begin
            out_valid <= 1'b1;
            out_frag  <= in_frag;
          end else if (hit) begin
            out_valid <= 1'b1;
            out_frag  <= in_frag;
            out_frag.host_addr <= {ppn, in_frag.host_addr[PAGE_BITS-1:0]};
          end else begin
            fault_valid <= 1'b1;
            fault_frag  <= in_frag;
          end
        end
      end
    end
  end

endmodule
