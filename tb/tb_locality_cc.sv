// tb_locality_cc: exhaustive check of the four locality codes for every
// pair of threads 0..63 with two threads per memory controller and eight
// per node, plus the 4-thread single-controller default.
module tb_locality_cc;
  import pgas_pkg::*;
  logic [THREAD_W-1:0] thread, my_thread;
  logic [1:0] cc, cc4;
  int checks = 0, failures = 0;

  locality_cc #(.THREADS_PER_MC(2), .THREADS_PER_NODE(8)) dut (.*);
  locality_cc dut4 (.thread(thread), .my_thread(my_thread), .cc(cc4));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen [4];
    seen = '{0, 0, 0, 0};
    for (int m = 0; m < 64; m++)
      for (int t = 0; t < 64; t++) begin
        int e;
        thread = THREAD_W'(t); my_thread = THREAD_W'(m); #1;
        if (t == m) e = 0;
        else if (t / 2 == m / 2) e = 1;
        else if (t / 8 == m / 8) e = 2;
        else e = 3;
        seen[e]++;
        checks++;
        if (cc !== 2'(e)) begin
          failures++;
          $display("FAIL: t=%0d m=%0d cc=%0d exp %0d", t, m, cc, e);
        end
        if (t < 4 && m < 4) begin
          checks++;
          if (cc4 !== ((t == m) ? 2'd0 : 2'd1)) failures++;
        end
      end
    checks++;
    if (seen[0] == 0 || seen[1] == 0 || seen[2] == 0 || seen[3] == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
