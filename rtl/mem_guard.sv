// mem_guard -- relocation registers and physical memory protection for one PU
// memory port.
//
// Each ECTX gets a contiguous segment of cluster L1 memory and of L2 memory,
// allocated statically by the control plane. A kernel addresses its segment
// from 0: the guard adds the segment base (relocation) and checks that the
// whole access, offset + size, lies inside the segment (protection). Both are
// combinational, so the access does not take an extra cycle. A violating
// access is flagged with acc_fault and described by ev (an EV_MEM event for
// the ECTX's event queue); it is up to the PU to suppress it.
//
// Interface: acc_valid, acc_l2 (0 = L1, 1 = L2), acc_vaddr (offset in the
// segment), acc_bytes (1..8); the segment registers of the FMQ the PU is
// currently serving; acc_paddr and acc_fault in the same cycle.
//
// Relocation plus range check follows the paper; offsets starting at 0 and
// the access-size check are this design's choices.
module mem_guard
  import osmosis_pkg::*;
(
  input  logic             acc_valid,
  input  logic             acc_l2,
  input  logic [PTR_W-1:0] acc_vaddr,
  input  logic [3:0]       acc_bytes,
  input  logic [PU_W-1:0]  pu,
  input  logic [FMQ_W-1:0] fmq,
  input  logic [PTR_W-1:0] l1_base,
  input  logic [PTR_W-1:0] l1_size,
  input  logic [PTR_W-1:0] l2_base,
  input  logic [PTR_W-1:0] l2_size,
  output logic [PTR_W-1:0] acc_paddr,
  output logic             acc_fault,
  output event_t           ev
);

  logic [PTR_W-1:0] base, size;
  logic [PTR_W:0]   end_off;

  always_comb begin
    base      = acc_l2 ? l2_base : l1_base;
    size      = acc_l2 ? l2_size : l1_size;
    end_off   = {1'b0, acc_vaddr} + (PTR_W+1)'(acc_bytes);
    acc_paddr = base + acc_vaddr;
    acc_fault = acc_valid && (end_off > {1'b0, size});
    ev.code   = acc_fault ? EV_MEM : EV_NONE;
    ev.pu     = pu;
    ev.fmq    = fmq;
    ev.info   = acc_vaddr;
  end

endmodule
