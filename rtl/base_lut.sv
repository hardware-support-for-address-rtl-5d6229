// base_lut: table of per-thread base addresses.
//
// Each UPC thread's part of the shared space starts at its own base
// address in the system virtual address space. The table holds one base
// address per thread; set_base_address writes an entry and every shared
// load or store reads the entry of the thread its pointer names. A table
// (rather than bases at fixed intervals computed from the thread number)
// is the option the published prototype uses.
//
// One write port and one read port, both synchronous: a read address
// presented in cycle t gives rd_base in cycle t+1, which maps onto block
// RAM. A write and a read of the same entry in the same cycle return the
// old value. Only the low log2(MAX_THREADS) bits of the thread number
// index the table. Entries come out of reset unset; software programs
// every entry it uses before the first shared access.
module base_lut #(
  parameter int unsigned MAX_THREADS = 64,  // entries
  parameter int unsigned ADDR_W      = 64   // system virtual address width
) (
  input  logic                           clk,
  input  logic                           wr_en,
  input  logic [$clog2(MAX_THREADS)-1:0] wr_thread,
  input  logic [ADDR_W-1:0]              wr_base,
  input  logic                           rd_en,
  input  logic [$clog2(MAX_THREADS)-1:0] rd_thread,
  output logic [ADDR_W-1:0]              rd_base
);

  logic [ADDR_W-1:0] table_q [MAX_THREADS];

  always_ff @(posedge clk) begin
    if (wr_en) table_q[wr_thread] <= wr_base;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_base <= table_q[rd_thread];
  end

endmodule
