// threads_reg: the THREADS special register.
//
// Holds the number of UPC threads of the running program, set at run time
// by set_threads so that one executable runs with any thread count, and
// the number of the running thread, which the locality code compares
// against. The hardware handles only a power-of-two THREADS: the register
// gives log2(THREADS) to the incrementer and flags a count that is not a
// power of two (pow2 low), for which software must use its own code.
// Storing the running thread's number in the same write is this design's
// choice. Reset value: one thread, thread 0.
module threads_reg
  import pgas_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                wr_en,
  input  logic [THREAD_W:0]   wr_threads,    // 1 .. 2**THREAD_W
  input  logic [THREAD_W-1:0] wr_my_thread,
  output logic [THREAD_W:0]   threads,
  output logic [THREAD_W-1:0] my_thread,
  output logic [LOG2_W-1:0]   lg_threads,
  output logic                pow2
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      threads   <= (THREAD_W+1)'(1);
      my_thread <= '0;
    end else if (wr_en) begin
      threads   <= wr_threads;
      my_thread <= wr_my_thread;
    end
  end

  // log2 by priority encoding: position of the highest set bit.
  always_comb begin
    lg_threads = '0;
    for (int i = 0; i <= THREAD_W; i++)
      if (threads[i]) lg_threads = LOG2_W'(i);
    pow2 = (threads != '0) && ((threads & (threads - 1'b1)) == '0);
  end

endmodule
