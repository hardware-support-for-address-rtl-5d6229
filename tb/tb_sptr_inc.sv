// tb_sptr_inc: self-checking test of the two-stage shared pointer
// incrementer. A reference model runs the pointer arithmetic with true
// division and remainder (floor semantics for negative increments) and
// the test compares every result. Inputs are issued every cycle, so the
// test also checks the two-cycle latency and one-per-cycle throughput,
// and it checks that en low freezes the pipeline. Directed cases include
// the UPC array "shared [4] int arrayA[32]" on 4 threads.
module tb_sptr_inc;
  import pgas_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b1;
  logic in_valid = 1'b0;
  sptr_t in_ptr = '0;
  logic signed [PTR_W-1:0] in_inc = '0;
  logic [LOG2_W-1:0] in_lg_bsize = '0, in_lg_esize = '0, in_lg_threads = '0;
  logic out_valid;
  sptr_t out_ptr;

  int checks = 0, failures = 0;

  sptr_inc dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint fdiv(longint a, longint b);
    if (a >= 0) return a / b;
    return -((-a + b - 1) / b);
  endfunction

  function automatic sptr_t ref_inc(sptr_t p, longint inc, int lb, int le, int lt);
    longint bs = longint'(1) << lb, es = longint'(1) << le, nt = longint'(1) << lt;
    longint phinc = longint'(p.phase) + inc;
    longint thinc = fdiv(phinc, bs);
    longint nph   = phinc - thinc * bs;
    longint tsum  = longint'(p.thread) + thinc;
    longint binc  = fdiv(tsum, nt);
    longint nth   = tsum - binc * nt;
    longint ea    = (nph - longint'(p.phase)) + binc * bs;
    sptr_t r;
    r.phase  = PHASE_W'(nph);
    r.thread = THREAD_W'(nth);
    r.va     = VA_W'(longint'(p.va) + ea * es);
    return r;
  endfunction

  sptr_t exp_q[$];
  int    issue_cyc_q[$];
  int    cyc = 0;
  // counts the clock edges at which the pipeline advances
  always @(posedge clk) if (en) cyc <= cyc + 1;

  // scoreboard: check every output as it appears
  always @(negedge clk) begin
    if (rst_n && en && out_valid) begin
      sptr_t e;
      int ic;
      e = exp_q.pop_front();
      ic = issue_cyc_q.pop_front();
      checks++;
      if (out_ptr !== e) begin
        failures++;
        $display("FAIL: got th=%0d ph=%0d va=%h exp th=%0d ph=%0d va=%h",
                 out_ptr.thread, out_ptr.phase, out_ptr.va, e.thread, e.phase, e.va);
      end
      checks++;
      if (cyc - ic != 2) begin
        failures++;
        $display("FAIL: latency %0d cycles, expected 2", cyc - ic);
      end
    end
  end

  task automatic issue(sptr_t p, longint inc, int lb, int le, int lt);
    @(negedge clk);
    in_valid      = 1'b1;
    in_ptr        = p;
    in_inc        = inc;
    in_lg_bsize   = LOG2_W'(lb);
    in_lg_esize   = LOG2_W'(le);
    in_lg_threads = LOG2_W'(lt);
    exp_q.push_back(ref_inc(p, inc, lb, le, lt));
    issue_cyc_q.push_back(cyc);
    @(posedge clk);
    #1 in_valid = 1'b0;
  endtask

  sptr_t ptrA, p;
  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);

    // shared [4] int arrayA[32], 4 threads: ptrA = [Th=0, Ph=2, Va=0x3f08]
    ptrA = '{phase: 16'd2, thread: 8'd0, va: 40'h3f08};
    issue(ptrA, 1, 2, 2, 2);
    issue(ptrA, 2, 2, 2, 2);
    @(posedge clk); @(posedge clk);
    // directed expected values worked out by hand
    begin
      sptr_t b, c;
      b = ref_inc(ptrA, 1, 2, 2, 2);
      c = ref_inc(ptrA, 2, 2, 2, 2);
      checks++;
      if (!(b.thread == 0 && b.phase == 3 && b.va == 40'h3f0c)) failures++;
      checks++;
      if (!(c.thread == 1 && c.phase == 0 && c.va == 40'h3f00)) failures++;
      // wrap from the last thread back to thread 0, next block row
      p = '{phase: 16'd3, thread: 8'd3, va: 40'h3f0c};
      c = ref_inc(p, 1, 2, 2, 2);
      checks++;
      if (!(c.thread == 0 && c.phase == 0 && c.va == 40'h3f10)) failures++;
    end
    p = '{phase: 16'd3, thread: 8'd3, va: 40'h3f0c};
    issue(p, 1, 2, 2, 2);
    issue(p, -1, 2, 2, 2);

    // random back-to-back stream, one per cycle
    for (int i = 0; i < 3000; i++) begin
      int lb, le, lt;
      longint inc;
      lb = $urandom_range(0, 12);
      le = $urandom_range(0, 4);
      lt = $urandom_range(0, 6);
      p.phase  = PHASE_W'($urandom) & PHASE_W'((1 << lb) - 1);
      p.thread = THREAD_W'($urandom) & THREAD_W'((1 << lt) - 1);
      p.va     = VA_W'({$urandom, $urandom}) & 40'h00_ffff_ffff;
      p.va     = p.va | 40'h10_0000_0000;
      case ($urandom_range(0, 3))
        0: inc = longint'(1) << $urandom_range(0, 20);
        1: inc = longint'($urandom_range(0, 100000));
        2: inc = -longint'($urandom_range(0, 5000));
        default: inc = longint'($urandom_range(0, 7));
      endcase
      issue(p, inc, lb, le, lt);
      // occasionally freeze the pipeline for a few cycles
      if (($urandom & 31) == 0) begin
        @(negedge clk);
        en = 1'b0;
        repeat ($urandom_range(1, 3)) @(negedge clk);
        en = 1'b1;
      end
    end
    repeat (4) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results never appeared", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
