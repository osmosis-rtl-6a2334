// ectx_regs -- per-FMQ MMIO register file holding the hardware part of each
// execution context (ECTX).
//
// The host control plane creates a tenant's ECTX by writing, into the FMQ's
// register window, the matching rule, the SLO knobs (compute priority, DMA and
// egress priority, kernel cycle limit, packet buffer size), the kernel entry
// pointer, the L1/L2 memory segments and the location of the event queue. The
// file decodes one 32-bit write per cycle (cfg_idx selects the FMQ, cfg_reg the
// register, see ectx_reg_e in osmosis_pkg) and presents all contexts in
// parallel to the data plane. New values are visible the cycle after the write.
//
// Reset: all rules invalid, every priority 1 (all tenants equal by default),
// cycle limit and packet-buffer limit 0 (= no limit), everything else 0.
// What the registers hold follows the paper; the register map, the reset
// values and the write-only access are this design's choices.
module ectx_regs
  import osmosis_pkg::*;
#(
  parameter int unsigned N_FMQ = N_FMQ_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cfg_we,
  input  logic [FMQ_W-1:0] cfg_idx,
  input  logic [4:0]       cfg_reg,
  input  logic [31:0]      cfg_wdata,
  output ectx_t            ectx  [N_FMQ],
  output match_rule_t      rules [N_FMQ]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N_FMQ; i++) begin
        ectx[i]          <= '0;
        ectx[i].prio     <= PRIO_W'(1);
        ectx[i].dma_prio <= IOPRIO_W'(1);
        ectx[i].egr_prio <= IOPRIO_W'(1);
        rules[i]         <= '0;
      end
    end else if (cfg_we && (int'(cfg_idx) < N_FMQ)) begin
      case (ectx_reg_e'(cfg_reg))
        R_CTRL:    begin rules[cfg_idx].valid  <= cfg_wdata[0];
                         rules[cfg_idx].is_tcp <= cfg_wdata[1]; end
        R_PRIO:    ectx[cfg_idx].prio         <= cfg_wdata[PRIO_W-1:0];
        R_IOPRIO:  begin ectx[cfg_idx].dma_prio <= cfg_wdata[7:0];
                         ectx[cfg_idx].egr_prio <= cfg_wdata[15:8]; end
        R_CYCLIM:  ectx[cfg_idx].cycle_limit  <= cfg_wdata;
        R_PKTBUF:  ectx[cfg_idx].pkt_buf_size <= cfg_wdata;
        R_KERNEL:  ectx[cfg_idx].kernel_ptr   <= cfg_wdata;
        R_L1_BASE: ectx[cfg_idx].l1_base      <= cfg_wdata;
        R_L1_SIZE: ectx[cfg_idx].l1_size      <= cfg_wdata;
        R_L2_BASE: ectx[cfg_idx].l2_base      <= cfg_wdata;
        R_L2_SIZE: ectx[cfg_idx].l2_size      <= cfg_wdata;
        R_EQ_LO:   ectx[cfg_idx].eq_base[31:0]  <= cfg_wdata;
        R_EQ_HI:   ectx[cfg_idx].eq_base[63:32] <= cfg_wdata;
        R_EQ_SIZE: ectx[cfg_idx].eq_size_log2 <= cfg_wdata[4:0];
        R_PORTS:   begin rules[cfg_idx].dst_port <= cfg_wdata[15:0];
                         rules[cfg_idx].src_port <= cfg_wdata[31:16]; end
        R_DIP0:    rules[cfg_idx].dst_ip[31:0]   <= cfg_wdata;
        R_DIP1:    rules[cfg_idx].dst_ip[63:32]  <= cfg_wdata;
        R_DIP2:    rules[cfg_idx].dst_ip[95:64]  <= cfg_wdata;
        R_DIP3:    rules[cfg_idx].dst_ip[127:96] <= cfg_wdata;
        R_SIP0:    rules[cfg_idx].src_ip[31:0]   <= cfg_wdata;
        R_SIP1:    rules[cfg_idx].src_ip[63:32]  <= cfg_wdata;
        R_SIP2:    rules[cfg_idx].src_ip[95:64]  <= cfg_wdata;
        R_SIP3:    rules[cfg_idx].src_ip[127:96] <= cfg_wdata;
        default: ;
      endcase
    end
  end

endmodule
