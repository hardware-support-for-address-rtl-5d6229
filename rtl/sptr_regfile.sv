// sptr_regfile: register file for 64-bit shared pointers.
//
// A 32-bit host core cannot keep a 64-bit shared pointer in one integer
// register, so the PGAS unit has its own register file, organised like the
// floating-point register file of the host: two 64-bit reads and one
// 64-bit write per cycle. The number of registers (32, a 5-bit register
// field) is this design's choice.
// Reads are combinational; the write takes effect at the clock edge, so a
// read in the cycle after a write sees the new value. Registers are not
// reset.
module sptr_regfile
  import pgas_pkg::*;
#(
  parameter int unsigned N = NREGS,
  parameter int unsigned W = PTR_W
) (
  input  logic                 clk,
  input  logic [$clog2(N)-1:0] ra_idx,
  output logic [W-1:0]         ra_data,
  input  logic [$clog2(N)-1:0] rb_idx,
  output logic [W-1:0]         rb_data,
  input  logic                 wr_en,
  input  logic [$clog2(N)-1:0] wr_idx,
  input  logic [W-1:0]         wr_data
);

  logic [W-1:0] regs_q [N];

  always_ff @(posedge clk) begin
    if (wr_en) regs_q[wr_idx] <= wr_data;
  end

  assign ra_data = regs_q[ra_idx];
  assign rb_data = regs_q[rb_idx];

endmodule
