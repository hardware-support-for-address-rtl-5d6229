// tb_vadd_threads: one vector-addition program run at THREADS = 1, 2 and 4,
// with the thread count set at run time, at the unit's default parameters.
//
// The UPC statement is
//   upc_forall (i = 0; i < N; i++; &c[i]) c[i] = a[i] + b[i];
// over three arrays declared "shared [4] int x[64]". Each UPC thread walks
// all N elements with the pointer increment and uses the locality branch
// (CB0, taken when the element is local) to pick the elements it owns, the
// way compiled code skips the iterations of other threads. Because THREADS
// sits in a register, the instruction stream is the same for every thread
// count; only the set_threads and set_base_address operands differ. Running
// at any thread count without recompiling is the point of the run-time
// THREADS register, and the test checks it. One unit plays each
// thread in turn, so thread t runs with set_threads(T, t).
//
// Expected values come from the test bench alone: the UPC layout rule for
// addresses and ownership, and a division-based model of the increment.
// Checked: every pointer register after every step, the branch decision for
// every element, that every memory request goes to the running thread's own
// segment, that each thread touches exactly N/T elements, and every element
// of c for each thread count. The memory model applies random back-pressure
// and a random load latency of 1 to 3 cycles, answering in order.
module tb_vadd_threads;
  import pgas_pkg::*;

  localparam int BS = 4;    // block size (elements)
  localparam int N  = 64;   // array length
  localparam longint BASE0 = 64'hff0a_0000_0000;
  localparam logic [3:0] CB0 = 4'd9;

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
  logic [3:0] cb_cond = CB0;
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

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- memory
  logic [7:0] mem [longint];
  logic [63:0] rq_data [$];
  int          rq_due  [$];
  int          last_due = 0;
  int          cur_thread = 0;
  int          n_req = 0, n_foreign = 0;

  function automatic logic [63:0] mem_read(longint a, int nbytes);
    logic [63:0] v = '0;
    for (int k = 0; k < nbytes; k++)
      v[8*k +: 8] = mem.exists(a + k) ? mem[a + k] : 8'h00;
    return v;
  endfunction

  always @(negedge clk) mem_req_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) begin
    mem_resp_valid <= 1'b0;
    if (rq_due.size() > 0 && rq_due[0] <= cyc) begin
      mem_resp_valid <= 1'b1;
      mem_resp_rdata <= rq_data.pop_front();
      void'(rq_due.pop_front());
    end
    if (mem_req_valid && mem_req_ready) begin
      int nb;
      nb = 1 << mem_req_size;
      n_req++;
      // upc_forall with affinity &c[i]: every access is to the own segment
      if (((longint'(mem_req_addr) - BASE0) >>> 32) != longint'(cur_thread)) n_foreign++;
      if (mem_req_we) begin
        for (int k = 0; k < nb; k++) mem[longint'(mem_req_addr) + k] = mem_req_wdata[8*k +: 8];
      end else begin
        int due;
        due = cyc + 1 + $urandom_range(0, 2);
        if (due <= last_due) due = last_due + 1;
        last_due = due;
        rq_data.push_back(mem_read(longint'(mem_req_addr), nb));
        rq_due.push_back(due);
      end
    end
  end

  // ------------------------------------------------------- reference model
  logic [63:0] rf [32];
  logic [63:0] seen [32];
  always @(posedge clk) if (wb_valid) seen[wb_idx] = wb_data;

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

  // UPC layout: element i of "shared [BS] int x[]" on nt threads
  function automatic int owner(int i, int nt);
    return (i / BS) % nt;
  endfunction
  function automatic longint elem_addr(longint off, int i, int nt);
    int li = (i / (BS * nt)) * BS + (i % BS);
    return BASE0 + (longint'(owner(i, nt)) << 32) + off + longint'(li) * 4;
  endfunction

  // ------------------------------------------------------- instruction set
  function automatic logic [31:0] w_ldst(int fn, int ra, int rb, int disp);
    return (32'd5 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'(fn) << 11) | 32'(disp & 2047);
  endfunction
  function automatic logic [31:0] w_inc_reg(int ra, int rb, int lg_es, int lg_bs, int rc);
    return (32'd6 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'd1 << 15)
         | (32'(lg_es) << 10) | (32'(lg_bs) << 5) | 32'(rc);
  endfunction

  task automatic issue(logic [31:0] w);
    @(negedge clk);
    instr_valid = 1'b1;
    instr = w;
    #1;
    while (!instr_ready) begin @(negedge clk); #1; end
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
    repeat (2) @(negedge clk);
  endtask

  // rc = ra + rf[rb] elements, element size 4, block size 4
  task automatic inc(int ra, int rb, int rc, int nt);
    rf[rc] = 64'(ref_inc(sptr_t'(rf[ra]), longint'(rf[rb]), BS, 4, nt));
    issue(w_inc_reg(ra, rb, 2, 2, rc));
  endtask

  task automatic check_reg(int r, string what);
    check(seen[r] === rf[r], $sformatf("%s: r%0d = %h expected %h", what, r, seen[r], rf[r]));
  endtask

  // ------------------------------------------------------------- program
  logic [31:0] av [N], bv [N];
  int n_local [4];
  int n_skipped = 0, n_counts = 0;

  initial begin
    for (int r = 0; r < 32; r++) begin rf[r] = '0; seen[r] = '1; end
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int lg = 0; lg <= 2; lg++) begin
      int nt;
      nt = 1 << lg;
      // fresh arrays, laid out for this thread count
      mem.delete();
      for (int i = 0; i < N; i++) begin
        av[i] = $urandom; bv[i] = $urandom;
        for (int k = 0; k < 4; k++) begin
          mem[elem_addr(64'h1000, i, nt) + k] = av[i][8*k +: 8];
          mem[elem_addr(64'h2000, i, nt) + k] = bv[i][8*k +: 8];
        end
      end

      for (int t = 0; t < nt; t++) begin
        cur_thread = t;
        n_local[t] = 0;
        // start-up code: THREADS and MYTHREAD, then the base table
        move(30, 64'(nt)); move(31, 64'(t));
        issue(w_ldst(16, 30, 31, 0));
        @(negedge clk);
        check(threads == 9'(nt) && my_thread == 8'(t) && threads_pow2, "set_threads");
        for (int u = 0; u < nt; u++) begin
          move(30, 64'(u)); move(31, BASE0 + (64'(u) << 32));
          issue(w_ldst(17, 30, 31, 0));
        end

        // the same loop for every thread count
        move(1, {16'd0, 8'd0, 40'h1000});     // &a[0]
        move(2, {16'd0, 8'd0, 40'h2000});     // &b[0]
        move(3, {16'd0, 8'd0, 40'h3000});     // &c[0]
        move(20, 64'd1);
        move(22, 64'd0);
        inc(1, 22, 1, nt);                    // +0: locality of a[0]
        for (int i = 0; i < N; i++) begin
          logic mine;
          drain();
          mine = (owner(i, nt) == t);
          check(cb_taken == mine, $sformatf("T=%0d thread %0d: branch for element %0d", nt, t, i));
          if (cb_taken) begin
            issue(w_ldst(2, 1, 10, 0));       // ldl r10,[r1]
            issue(w_ldst(2, 2, 11, 0));       // ldl r11,[r2]
            drain();
            rf[10] = 64'(av[i]); rf[11] = 64'(bv[i]);
            check_reg(10, "load a");
            check_reg(11, "load b");
            move(12, 64'(av[i] + bv[i]));
            issue(w_ldst(10, 3, 12, 0));      // stl r12,[r3]
            n_local[t]++;
          end else n_skipped++;
          inc(2, 20, 2, nt);
          inc(3, 20, 3, nt);
          inc(1, 20, 1, nt);
        end
        drain();
        check_reg(1, "ptr a");
        check_reg(2, "ptr b");
        check_reg(3, "ptr c");
        check(n_local[t] == N / nt, $sformatf("T=%0d thread %0d did %0d elements", nt, t, n_local[t]));
      end

      for (int i = 0; i < N; i++) begin
        logic [31:0] got;
        got = 32'(mem_read(elem_addr(64'h3000, i, nt), 4));
        check(got == av[i] + bv[i], $sformatf("T=%0d c[%0d] = %h expected %h", nt, i, got, av[i] + bv[i]));
      end
      n_counts++;
    end

    check(n_counts == 3, "three thread counts run");
    check(n_skipped > 0, "no remote element skipped");
    check(n_req > 0 && n_foreign == 0, $sformatf("%0d accesses outside the own segment", n_foreign));
    $display("requests=%0d skipped=%0d", n_req, n_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
