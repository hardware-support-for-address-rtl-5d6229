// tb_pgas_unit: end-to-end test of the PGAS unit at its default
// parameters, running the UPC vector addition c[i] = a[i] + b[i] over
// three arrays declared "shared [4] int x[N]" on 4 threads.
//
// The test bench plays the host core: it fills pointer registers through
// the register move port, programs THREADS and the base address table
// with the unit's own instructions, and for every element issues
//   ldl  r10,[r1]      inc_imm r1,+1    ldl r11,[r2]    inc_imm r2,+1
//   (host adds the two loaded values, moves the sum into r12)
//   stl  r12,[r3]      inc_reg r3,r20 (r20 = +1)
//   inc_imm r4,+2      inc_reg r4,r21 (r21 = -1, back to back)
// A memory model with random back-pressure and random load latency serves
// the memory port. Expected values are computed independently: the array
// layout from the UPC distribution rule (element i lives on thread
// (i/4)%4 at local index (i/16)*4 + i%4) and the pointer values from a
// division-based model of the increment. The test checks every register
// write-back, the final memory contents, the condition code and branch
// decision after every increment, the two-cycle increment latency with
// one increment issued per cycle, four shared loads issued on consecutive
// cycles, and the status flags. It counts how
// often each mechanism occurs (interlock stall, write-port conflict,
// memory back-pressure, overlapping loads, thread wrap-around, locality codes 0 and 1,
// illegal word, non-power-of-two THREADS) and fails if one never occurs.
module tb_pgas_unit;
  import pgas_pkg::*;

  localparam int T  = 4;    // UPC threads
  localparam int BS = 4;    // block size (elements)
  localparam int N  = 64;   // array length
  localparam longint BASE0 = 64'hff0a_0000_0000;

  logic clk = 0, rst_n = 0;
  logic instr_valid = 0;
  logic [31:0] instr = '0;
  logic instr_ready, instr_illegal;
  logic mv_valid = 0;
  logic [4:0] mv_idx = '0;
  logic [63:0] mv_data = '0;
  logic mv_ready;
  logic mem_req_valid, mem_req_ready = 0, mem_req_we;
  logic [63:0] mem_req_addr, mem_req_wdata;
  mem_size_e mem_req_size;
  logic mem_resp_valid = 0;
  logic [63:0] mem_resp_rdata = '0;
  logic [1:0] cc;
  logic cc_valid;
  logic [3:0] cb_cond = '0;
  logic cb_taken;
  logic [THREAD_W:0] threads;
  logic [THREAD_W-1:0] my_thread;
  logic threads_pow2;
  logic wb_valid;
  logic [4:0] wb_idx;
  logic [63:0] wb_data;

  pgas_unit dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_stall = 0, n_conflict = 0, n_backpressure = 0, n_wrap = 0;
  int n_cc[4] = '{0, 0, 0, 0};
  int n_overlap = 0, n_illegal = 0, n_nonpow2 = 0, n_load = 0, n_store = 0, n_inc = 0;

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- memory
  logic [7:0] mem [longint];
  // loads are answered in request order, 1 to 3 cycles after acceptance
  logic [63:0] rq_data [$];
  int          rq_due  [$];
  int          last_due = 0;

  function automatic logic [63:0] mem_read(longint a, int nbytes);
    logic [63:0] v = '0;
    for (int k = 0; k < nbytes; k++)
      v[8*k +: 8] = mem.exists(a + k) ? mem[a + k] : 8'h00;
    return v;
  endfunction

  bit always_ready = 0;
  always @(negedge clk) mem_req_ready <= always_ready || ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end
    if (mem_req_valid && !mem_req_ready) n_backpressure++;
    if (mem_req_valid && mem_req_ready) begin
      int nb;
      nb = 1 << mem_req_size;
      if (mem_req_we) begin
        for (int k = 0; k < nb; k++) mem[longint'(mem_req_addr) + k] = mem_req_wdata[8*k +: 8];
        n_store++;
      end else begin
        int due;
        due = cyc + 1 + $urandom_range(0, 2);
        if (due <= last_due) due = last_due + 1;
        last_due = due;
        if (rq_due.size() > 0) n_overlap++;
        rq_data.push_back(mem_read(longint'(mem_req_addr), nb));
        rq_due.push_back(due);
        n_load++;
      end
    end
  end

  // A write-port conflict shows as an increment result written three
  // cycles after issue, right after a cycle that wrote load data.
  int inc_issue [32];
  logic resp_prev = 1'b0;
  always @(posedge clk) begin
    if (wb_valid && resp_prev && !mem_resp_valid && inc_issue[wb_idx] == cyc - 3) n_conflict++;
    resp_prev <= mem_resp_valid;
  end

  // ------------------------------------------------------- reference model
  logic [63:0] rf [32];       // expected register contents
  logic [63:0] seen [32];     // last write-back seen per register
  int          wb_cyc [32];
  always @(posedge clk) if (wb_valid) begin
    seen[wb_idx]   = wb_data;
    wb_cyc[wb_idx] = cyc;
  end

  function automatic longint fdiv(longint a, longint b);
    if (a >= 0) return a / b;
    return -((-a + b - 1) / b);
  endfunction

  function automatic sptr_t ref_inc(sptr_t p, longint inc, int bs, int es, int nt);
    longint phinc = longint'(p.phase) + inc;
    longint thinc = fdiv(phinc, bs);
    longint nph   = phinc - thinc * bs;
    longint tsum  = longint'(p.thread) + thinc;
    longint binc  = fdiv(tsum, nt);
    longint ea    = (nph - longint'(p.phase)) + binc * bs;
    sptr_t r;
    r.phase  = PHASE_W'(nph);
    r.thread = THREAD_W'(tsum - binc * nt);
    r.va     = VA_W'(longint'(p.va) + ea * es);
    return r;
  endfunction

  function automatic int thr(logic [63:0] p);
    sptr_t q = p;
    return int'(q.thread);
  endfunction

  function automatic longint elem_addr(longint off, int i);
    int th = (i / BS) % T;
    int li = (i / (BS * T)) * BS + (i % BS);
    return BASE0 + (longint'(th) << 32) + off + longint'(li) * 4;
  endfunction

  // ------------------------------------------------------- instruction set
  function automatic logic [31:0] w_ldst(int fn, int ra, int rb, int disp);
    return (32'd5 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'(fn) << 11) | 32'(disp & 2047);
  endfunction
  function automatic logic [31:0] w_inc(bit reg_form, int ra, int rb_or_lginc, int lg_es, int lg_bs, int rc);
    return (32'd6 << 26) | (32'(ra) << 21) | (32'(rb_or_lginc) << 16) | (32'(reg_form) << 15)
         | (32'(lg_es) << 10) | (32'(lg_bs) << 5) | 32'(rc);
  endfunction

  int last_issue;
  task automatic issue(logic [31:0] w);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = w;
    #1;
    while (!instr_ready) begin
      n_stall++;
      @(negedge clk);
      #1;
    end
    last_issue = cyc;
    @(posedge clk);
    #1 instr_valid = 1'b0;
  endtask

  task automatic move(int r, logic [63:0] v);
    @(negedge clk);
    mv_valid = 1'b1; mv_idx = 5'(r); mv_data = v;
    #1;
    while (!mv_ready) begin @(negedge clk); #1; end
    @(posedge clk);
    #1 mv_valid = 1'b0;
    rf[r] = v;
  endtask

  task automatic drain();
    repeat (3) @(negedge clk);
    #1;
    while (!(cc_valid && !mem_req_valid && rq_due.size() == 0 && !mem_resp_valid)) begin @(negedge clk); #1; end
    repeat (3) @(negedge clk);
  endtask

  // increment register ra into rc; the expected value follows the model
  task automatic inc_imm(int ra, int lg_inc, int rc);
    sptr_t e;
    e = ref_inc(sptr_t'(rf[ra]), longint'(1) << lg_inc, BS, 4, T);
    if (int'(e.thread) < thr(rf[ra])) n_wrap++;
    issue(w_inc(0, ra, lg_inc, 2, 2, rc));
    inc_issue[rc] = last_issue;
    rf[rc] = 64'(e);
    n_inc++;
  endtask
  task automatic inc_reg(int ra, int rb, int rc);
    sptr_t e;
    e = ref_inc(sptr_t'(rf[ra]), longint'(rf[rb]), BS, 4, T);
    if (int'(e.thread) < thr(rf[ra]) && longint'(rf[rb]) > 0) n_wrap++;
    issue(w_inc(1, ra, rb, 2, 2, rc));
    inc_issue[rc] = last_issue;
    rf[rc] = 64'(e);
    n_inc++;
  endtask

  task automatic check_cc(int r);
    int e;
    @(negedge clk); #1;
    while (!cc_valid) begin @(negedge clk); #1; end
    e = (thr(rf[r]) == 0) ? 0 : 1;
    n_cc[cc]++;
    check(cc == 2'(e), $sformatf("cc %0d expected %0d", cc, e));
    cb_cond = 4'($urandom);
    #1;
    // CB0 (9) branches on local, CB123 (1) on remote, CBA (8) always
    if (cb_cond == 4'd9)  check(cb_taken == (e == 0), "CB0");
    if (cb_cond == 4'd1)  check(cb_taken == (e != 0), "CB123");
    if (cb_cond == 4'd8)  check(cb_taken, "CBA");
    if (cb_cond == 4'd0)  check(!cb_taken, "CBN");
  endtask

  task automatic check_reg(int r, string what);
    check(seen[r] === rf[r], $sformatf("%s: r%0d = %h expected %h", what, r, seen[r], rf[r]));
  endtask

  // ------------------------------------------------------------- program
  logic [31:0] av [N], bv [N];
  initial begin
    for (int r = 0; r < 32; r++) begin rf[r] = '0; seen[r] = '1; wb_cyc[r] = 0; inc_issue[r] = -10; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    check(threads == 9'd1 && threads_pow2, "reset THREADS");

    // array contents in each thread's local space
    for (int i = 0; i < N; i++) begin
      av[i] = $urandom; bv[i] = $urandom;
      for (int k = 0; k < 4; k++) begin
        mem[elem_addr(64'h1000, i) + k] = av[i][8*k +: 8];
        mem[elem_addr(64'h2000, i) + k] = bv[i][8*k +: 8];
      end
    end

    // an unknown func code is flagged
    @(negedge clk); instr_valid = 1; instr = w_ldst(31, 0, 0, 0); #1;
    if (instr_ready) begin @(posedge clk); #1 check(instr_illegal, "illegal flag"); n_illegal++; end
    @(negedge clk); instr_valid = 0;

    // set_threads: first a count the hardware cannot handle, then 4
    move(30, 64'd3); move(31, 64'd0);
    issue(w_ldst(16, 30, 31, 0));
    @(negedge clk);
    check(threads == 9'd3 && !threads_pow2, "THREADS=3 flagged");
    if (!threads_pow2) n_nonpow2++;
    move(30, 64'(T));
    issue(w_ldst(16, 30, 31, 0));
    @(negedge clk);
    check(threads == 9'(T) && threads_pow2 && my_thread == 0, "THREADS=4");

    // set_base_address for threads 0..3
    for (int t = 0; t < T; t++) begin
      move(30, 64'(t)); move(31, BASE0 + (64'(t) << 32));
      issue(w_ldst(17, 30, 31, 0));
    end

    // pointers to a[0], b[0], c[0] and the walker; increments +1 / -1
    move(1, {16'd0, 8'd0, 40'h1000});
    move(2, {16'd0, 8'd0, 40'h2000});
    move(3, {16'd0, 8'd0, 40'h3000});
    move(4, {16'd0, 8'd0, 40'h1000});
    move(20, 64'd1);
    move(21, -64'sd1);

    // burst: five independent increments, one per cycle, two-cycle latency
    for (int k = 0; k < 5; k++) move(5 + k, {16'(k % 4), 8'(k % 4), 40'h4000});
    begin
      int issued [5];
      for (int k = 0; k < 5; k++) begin
        inc_imm(5 + k, k, 22 + k);
        issued[k] = last_issue;
      end
      drain();
      for (int k = 0; k < 5; k++) begin
        check_reg(22 + k, "burst");
        check(wb_cyc[22 + k] - issued[k] == 2, $sformatf("increment latency %0d", wb_cyc[22 + k] - issued[k]));
        if (k > 0) check(issued[k] - issued[k - 1] == 1, "one increment per cycle");
      end
    end

    // burst: four independent shared loads, one per cycle, overlapping
    always_ready = 1;
    move(7, {16'd1, 8'd1, 40'h1004});  // a[5]
    begin
      int issued [4];
      for (int k = 0; k < 4; k++) begin
        issue(w_ldst(2, (k % 2) ? 7 : 1, 13 + k, 0));
        issued[k] = last_issue;
      end
      drain();
      for (int k = 1; k < 4; k++) check(issued[k] - issued[k - 1] == 1, "one shared load per cycle");
      rf[13] = 64'(av[0]); rf[14] = 64'(av[5]); rf[15] = 64'(av[0]); rf[16] = 64'(av[5]);
      for (int k = 0; k < 4; k++) check_reg(13 + k, "load burst");
    end
    always_ready = 0;

    // vector addition
    for (int i = 0; i < N; i++) begin
      logic [31:0] sum;
      issue(w_ldst(2, 1, 10, 0));          // ldl r10,[r1]
      inc_imm(1, 0, 1);
      issue(w_ldst(2, 2, 11, 0));          // ldl r11,[r2]
      inc_imm(2, 0, 2);
      inc_imm(4, 1, 4);                    // walker +2
      inc_reg(4, 21, 4);                   // walker -1, depends on the line above
      check_cc(4);
      drain();
      rf[10] = 64'(av[i]); rf[11] = 64'(bv[i]);
      check_reg(10, "load a");
      check_reg(11, "load b");
      check_reg(1, "ptr a");
      check_reg(2, "ptr b");
      check_reg(4, "walker");
      check(seen[4] === seen[1], "walker (+2, -1) follows pointer a (+1)");
      sum = av[i] + bv[i];
      move(12, 64'(sum));
      issue(w_ldst(10, 3, 12, 0));         // stl r12,[r3]
      inc_reg(3, 20, 3);
      check_cc(3);
      drain();
      check_reg(3, "ptr c");
    end

    // shared load with a displacement: a[1] read as a[0] + 4 bytes
    move(6, {16'd0, 8'd0, 40'h1000});
    issue(w_ldst(2, 6, 13, 4));
    drain();
    rf[13] = 64'(av[1]);
    check_reg(13, "displacement load");

    // results in memory
    for (int i = 0; i < N; i++) begin
      logic [31:0] got;
      got = 32'(mem_read(elem_addr(64'h3000, i), 4));
      check(got == av[i] + bv[i], $sformatf("c[%0d] = %h expected %h", i, got, av[i] + bv[i]));
    end

    // every mechanism must have happened
    check(n_stall > 0,        "no interlock stall seen");
    check(n_conflict > 0,     "no write-port conflict seen");
    check(n_backpressure > 0, "no memory back-pressure seen");
    check(n_wrap > 0,         "no thread wrap-around seen");
    check(n_cc[0] > 0,        "no local code seen");
    check(n_cc[1] > 0,        "no same-controller code seen");
    check(n_overlap > 0,      "no overlapping loads seen");
    check(n_illegal > 0,      "no illegal word seen");
    check(n_nonpow2 > 0,      "no non-power-of-two THREADS seen");
    check(n_load == 2 * N + 5 && n_store == N, "load/store count");
    $display("mechanisms: overlap=%0d stall=%0d conflict=%0d backpressure=%0d wrap=%0d cc0=%0d cc1=%0d inc=%0d ld=%0d st=%0d",
             n_overlap, n_stall, n_conflict, n_backpressure, n_wrap, n_cc[0], n_cc[1], n_inc, n_load, n_store);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
