// addr_xlate: shared pointer to system virtual address.
//
// The address of the element a shared pointer names is the base address of
// the owning thread plus the pointer's virtual address field; the
// load/store format adds a short displacement on top, used to reach a
// member of a structure. The displacement is sign-extended (this design's
// choice, as for ordinary Alpha displacements). The resulting system
// virtual address then goes through the core's normal TLB.
// Purely combinational: one adder chain, no state.
module addr_xlate
  import pgas_pkg::*;
#(
  parameter int unsigned ADDR_W = 64
) (
  input  logic [ADDR_W-1:0] base,   // base address of ptr.thread
  input  logic [VA_W-1:0]   va,     // ptr.va
  input  logic [DISP_W-1:0] disp,   // signed displacement, bytes
  output logic [ADDR_W-1:0] sysaddr
);

  always_comb begin
    sysaddr = base + ADDR_W'(va) + ADDR_W'(signed'(disp));
  end

endmodule
