// osmosis_pkg -- types and constants shared by the OSMOSIS data-plane blocks.
//
// OSMOSIS multiplexes the processing units (PUs), the host DMA path and the
// egress path of an on-path SmartNIC between tenants. Every tenant flow owns a
// flow management queue (FMQ): a FIFO of packet descriptors plus the part of
// the flow's execution context (ECTX) that the hardware needs: matching rule,
// priorities, kernel cycle limit, memory segments and event-queue location.
//
// Sizes that follow the paper: 128 FMQs, 32 PUs (4 clusters x 8 cores),
// 64-bit virtual-time counter, 16-bit compute priority, 32-bit packet
// pointer. The 8-bit DMA / egress priorities mirror the SLO record of the
// control-plane API. Everything else here (address widths of the host side,
// the event format, the fragment record) is this design's own choice.
package osmosis_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned N_FMQ_DEF  = 128;
  localparam int unsigned N_PU_DEF   = 32;
  localparam int unsigned BVT_W      = 64;   // virtual time / PU-cycle counters
  localparam int unsigned PRIO_W     = 16;   // compute priority
  localparam int unsigned IOPRIO_W   = 8;    // DMA and egress priority
  localparam int unsigned PTR_W      = 32;   // local (sNIC) addresses
  localparam int unsigned LEN_W      = 16;   // packet / transfer length in bytes
  localparam int unsigned HADDR_W    = 64;   // host addresses
  localparam int unsigned FMQ_W      = 7;    // enough for N_FMQ <= 128
  localparam int unsigned PU_W       = 5;    // enough for N_PU  <= 32
  localparam int unsigned STREAM_W   = 5;    // enough for 32 IO streams

  // ------------------------------------------------------------ protocols
  localparam logic [7:0] PROTO_TCP = 8'd6;
  localparam logic [7:0] PROTO_UDP = 8'd17;

  // ----------------------------------------------------- packet descriptor
  typedef struct packed {
    logic [PTR_W-1:0] ptr;   // packet address in the L2 packet buffer
    logic [LEN_W-1:0] len;   // packet length in bytes
  } desc_t;

  // parsed header handed over by the inbound engine
  typedef struct packed {
    logic [7:0]   proto;
    logic [127:0] src_ip;
    logic [127:0] dst_ip;
    logic [15:0]  src_port;
    logic [15:0]  dst_port;
    desc_t        desc;
  } pkt_hdr_t;

  // matching rule of one ECTX
  typedef struct packed {
    logic         valid;
    logic         is_tcp;    // 1: match 5-tuple over TCP, 0: 3-tuple over UDP
    logic [127:0] dst_ip;
    logic [15:0]  dst_port;
    logic [127:0] src_ip;    // TCP only
    logic [15:0]  src_port;  // TCP only
  } match_rule_t;

  // hardware part of an execution context
  typedef struct packed {
    logic [PRIO_W-1:0]   prio;         // compute priority (WLBVT weight)
    logic [IOPRIO_W-1:0] dma_prio;     // DMA WRR weight
    logic [IOPRIO_W-1:0] egr_prio;     // egress WRR weight
    logic [31:0]         cycle_limit;  // per-kernel cycle budget, 0 = none
    logic [31:0]         pkt_buf_size; // bytes the FMQ may hold, 0 = FIFO depth only
    logic [PTR_W-1:0]    kernel_ptr;   // kernel entry point in L2 kernel buffer
    logic [PTR_W-1:0]    l1_base;
    logic [PTR_W-1:0]    l1_size;
    logic [PTR_W-1:0]    l2_base;
    logic [PTR_W-1:0]    l2_size;
    logic [HADDR_W-1:0]  eq_base;      // event ring, host physical address
    logic [4:0]          eq_size_log2; // ring holds 2**eq_size_log2 entries
  } ectx_t;

  // MMIO register numbers inside one FMQ's window (cfg_reg)
  typedef enum logic [4:0] {
    R_CTRL      = 5'd0,   // [0] rule valid, [1] TCP
    R_PRIO      = 5'd1,   // [15:0]
    R_IOPRIO    = 5'd2,   // [7:0] DMA, [15:8] egress
    R_CYCLIM    = 5'd3,
    R_PKTBUF    = 5'd4,
    R_KERNEL    = 5'd5,
    R_L1_BASE   = 5'd6,
    R_L1_SIZE   = 5'd7,
    R_L2_BASE   = 5'd8,
    R_L2_SIZE   = 5'd9,
    R_EQ_LO     = 5'd10,
    R_EQ_HI     = 5'd11,
    R_EQ_SIZE   = 5'd12,
    R_PORTS     = 5'd13,  // [15:0] dst port, [31:16] src port
    R_DIP0      = 5'd16,  // dst IP, word 0 = bits 31:0 ... word 3 = bits 127:96
    R_DIP1      = 5'd17,
    R_DIP2      = 5'd18,
    R_DIP3      = 5'd19,
    R_SIP0      = 5'd20,
    R_SIP1      = 5'd21,
    R_SIP2      = 5'd22,
    R_SIP3      = 5'd23
  } ectx_reg_e;

  // task handed to a PU
  typedef struct packed {
    logic [PU_W-1:0]  pu;
    logic [FMQ_W-1:0] fmq;
    desc_t            desc;
    logic [PTR_W-1:0] kernel_ptr;
  } task_t;

  // IO transfer requested by a kernel (DMA read/write or egress send)
  typedef struct packed {
    logic [PU_W-1:0]     pu;
    logic [FMQ_W-1:0]    fmq;
    logic [IOPRIO_W-1:0] weight;     // the FMQ's IO priority
    logic                to_host;    // 1: local -> host (write), 0: host -> local (read)
    logic [PTR_W-1:0]    local_addr;
    logic [HADDR_W-1:0]  host_addr;  // host virtual address (DMA) or egress buffer address
    logic [LEN_W-1:0]    len;        // bytes, > 0
  } io_cmd_t;

  // one fragment sent to the AXI backend
  typedef struct packed {
    logic [STREAM_W-1:0] stream;
    logic [FMQ_W-1:0]    fmq;
    logic                to_host;
    logic                phys;       // host_addr already physical (no IOMMU)
    logic                imm;        // write imm_data instead of reading local memory
    logic [63:0]         imm_data;
    logic [PTR_W-1:0]    local_addr;
    logic [HADDR_W-1:0]  host_addr;
    logic [LEN_W-1:0]    len;
  } frag_t;

  // error event
  typedef enum logic [3:0] {
    EV_NONE     = 4'd0,
    EV_TIMEOUT  = 4'd1,   // kernel exceeded its cycle limit
    EV_MEM      = 4'd2,   // L1/L2 segment violation
    EV_IOMMU    = 4'd3    // DMA to a page the ECTX may not access
  } ev_code_e;

  typedef struct packed {
    ev_code_e         code;
    logic [PU_W-1:0]  pu;
    logic [FMQ_W-1:0] fmq;
    logic [31:0]      info;   // faulting address (low 32 bits) or cycle count
  } event_t;

endpackage
