// tb_threads_reg: reset value, writes of every thread count 1..256 with the
// log2 and power-of-two flag worked out by counting, and hold when wr_en
// is low.
module tb_threads_reg;
  import pgas_pkg::*;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [THREAD_W:0] wr_threads = '0, threads;
  logic [THREAD_W-1:0] wr_my_thread = '0, my_thread;
  logic [LOG2_W-1:0] lg_threads;
  logic pow2;
  int checks = 0, failures = 0;

  threads_reg dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    checks++;
    if (threads !== 9'd1 || my_thread !== '0 || lg_threads !== '0 || !pow2) failures++;
    rst_n = 1;
    for (int n = 1; n <= 256; n++) begin
      int lg, p;
      @(negedge clk); wr_en = 1; wr_threads = 9'(n); wr_my_thread = 8'(n - 1);
      @(negedge clk); wr_en = 0; wr_threads = 9'(3);
      lg = 0; p = 1;
      while (p * 2 <= n) begin p *= 2; lg++; end
      checks++;
      if (threads !== 9'(n) || my_thread !== 8'(n - 1)) failures++;
      checks++;
      if (pow2 !== (p == n)) begin failures++; $display("FAIL: pow2 n=%0d", n); end
      if (p == n) begin
        checks++;
        if (lg_threads !== 5'(lg)) begin failures++; $display("FAIL: lg n=%0d got %0d", n, lg_threads); end
      end
      @(negedge clk);
      checks++;
      if (threads !== 9'(n)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
