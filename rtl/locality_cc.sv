// locality_cc: locality condition code of a shared pointer.
//
// Compares the thread a pointer names with the thread that runs the code
// and returns one of four codes:
//   0  the element belongs to the running thread (local),
//   1  it sits behind the same memory controller,
//   2  it can be reached by the shared load/store instructions,
//   3  it is on another node.
// The four codes are the published ones; how threads are grouped is this
// design's choice: threads are numbered so that consecutive groups of
// THREADS_PER_MC share a memory controller and consecutive groups of
// THREADS_PER_NODE share a node (a node's memory is reachable by shared
// loads and stores). Both group sizes are powers of two. The defaults
// describe the 4-core prototype: one DDR3 controller serves all four
// threads, so code 2 cannot occur there.
// Combinational.
module locality_cc
  import pgas_pkg::*;
#(
  parameter int unsigned THREADS_PER_MC   = 4,
  parameter int unsigned THREADS_PER_NODE = 4
) (
  input  logic [THREAD_W-1:0] thread,
  input  logic [THREAD_W-1:0] my_thread,
  output logic [1:0]          cc
);

  localparam int LG_MC   = $clog2(THREADS_PER_MC);
  localparam int LG_NODE = $clog2(THREADS_PER_NODE);

  always_comb begin
    if (thread == my_thread)                          cc = 2'd0;
    else if ((thread >> LG_MC) == (my_thread >> LG_MC))     cc = 2'd1;
    else if ((thread >> LG_NODE) == (my_thread >> LG_NODE)) cc = 2'd2;
    else                                              cc = 2'd3;
  end

endmodule
