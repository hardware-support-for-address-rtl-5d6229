// tb_matmul: UPC matrix multiplication C = A x B run through the PGAS
// unit, on 8 threads grouped two per memory controller and four per node,
// so that all four locality codes occur.
//
// The matrices are "shared [16] int X[16][16]": one row per block, rows
// dealt round robin to the 8 threads (row i on thread i%8, at local row
// i/8). For every row the host switches the running thread to the row's
// owner with set_threads, as each UPC thread would compute its own rows.
// For each C[i][j] it walks A[i][*] with a +1 increment and B[*][j] with a
// +16 increment (one row, crossing to the next thread every step),
// loading both operands through shared loads; the host multiplies and
// accumulates, moves the sum into a register and stores it through a
// shared pointer to C[i][j]. The result is compared with a plain integer
// matrix product, the pointer values with a division-based model of the
// increment, and the condition code and branch decision with the owner of
// every B element. The run fails if any of the four codes never occurs.
module tb_matmul;
  import pgas_pkg::*;

  localparam int T  = 8;
  localparam int NN = 16;
  localparam longint BASE0 = 64'h0000_4000_0000_0000;
  localparam longint OFF_A = 64'h1_0000, OFF_B = 64'h2_0000, OFF_C = 64'h3_0000;

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

  pgas_unit #(.THREADS_PER_MC(2), .THREADS_PER_NODE(4)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;
  int n_cc[4] = '{0, 0, 0, 0};

  task automatic check(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory model: random back-pressure, load latency 1..3 cycles
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
      if (mem_req_we)
        for (int k = 0; k < nb; k++) mem[longint'(mem_req_addr) + k] = mem_req_wdata[8*k +: 8];
      else begin : load
        int due;
        due = cyc + 1 + $urandom_range(0, 2);
        if (due <= last_due) due = last_due + 1;
        last_due = due;
        rq_data.push_back(mem_read(longint'(mem_req_addr), nb));
        rq_due.push_back(due);
      end
    end
  end

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

  // element (i,k) of a matrix at local offset off
  function automatic longint elem_addr(longint off, int i, int k);
    return BASE0 + (longint'(i % T) << 36) + off + longint'((i / T) * NN + k) * 4;
  endfunction
  function automatic logic [63:0] elem_ptr(longint off, int i, int k);
    sptr_t p;
    p.thread = THREAD_W'(i % T);
    p.phase  = PHASE_W'(k);
    p.va     = VA_W'(off + longint'((i / T) * NN + k) * 4);
    return 64'(p);
  endfunction

  function automatic logic [31:0] w_ldst(int fn, int ra, int rb);
    return (32'd5 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'(fn) << 11);
  endfunction
  function automatic logic [31:0] w_inc(bit reg_form, int ra, int rb_or_lginc, int lg_es, int lg_bs, int rc);
    return (32'd6 << 26) | (32'(ra) << 21) | (32'(rb_or_lginc) << 16) | (32'(reg_form) << 15)
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
  endtask

  task automatic drain();
    repeat (3) @(negedge clk);
    #1;
    while (!(cc_valid && !mem_req_valid && rq_due.size() == 0 && !mem_resp_valid)) begin @(negedge clk); #1; end
    repeat (3) @(negedge clk);
  endtask

  function automatic int code_of(int th, int me);
    if (th == me) return 0;
    if (th / 2 == me / 2) return 1;
    if (th / 4 == me / 4) return 2;
    return 3;
  endfunction

  logic [31:0] a [NN][NN], b [NN][NN];

  initial begin
    for (int r = 0; r < 32; r++) seen[r] = '0;
    for (int i = 0; i < NN; i++)
      for (int k = 0; k < NN; k++) begin
        a[i][k] = $urandom_range(0, 1000);
        b[i][k] = $urandom_range(0, 1000);
        for (int q = 0; q < 4; q++) begin
          mem[elem_addr(OFF_A, i, k) + q] = a[i][k][8*q +: 8];
          mem[elem_addr(OFF_B, i, k) + q] = b[i][k][8*q +: 8];
        end
      end
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int t = 0; t < T; t++) begin
      move(30, 64'(t)); move(31, BASE0 + (64'(t) << 36));
      issue(w_ldst(17, 30, 31));
    end
    move(20, 64'(NN));           // row stride for inc_reg

    for (int i = 0; i < NN; i++) begin
      move(30, 64'(T)); move(31, 64'(i % T));
      issue(w_ldst(16, 30, 31));   // running thread = owner of row i
      for (int j = 0; j < NN; j++) begin
        logic [31:0] acc;
        sptr_t pa, pb;
        acc = 0;
        pa = elem_ptr(OFF_A, i, 0);
        pb = elem_ptr(OFF_B, 0, j);
        move(1, 64'(pa));
        move(2, 64'(pb));
        for (int k = 0; k < NN; k++) begin
          int e;
          issue(w_ldst(2, 1, 10));                 // ldl r10,[r1]
          issue(w_inc(0, 1, 0, 2, 4, 1));          // r1 += 1
          issue(w_ldst(2, 2, 11));                 // ldl r11,[r2]
          if (k[0]) issue(w_inc(0, 2, 4, 2, 4, 2)); // r2 += 16 (immediate)
          else      issue(w_inc(1, 2, 20, 2, 4, 2)); // r2 += r20 (register)
          pa = ref_inc(pa, 1, NN, 4, T);
          pb = ref_inc(pb, NN, NN, 4, T);
          drain();
          check(seen[10] == 64'(a[i][k]) && seen[11] == 64'(b[k][j]),
                $sformatf("operands of C[%0d][%0d] k=%0d", i, j, k));
          check(seen[1] == 64'(pa) && seen[2] == 64'(pb), "pointer values");
          e = code_of(int'(pb.thread), i % T);
          n_cc[cc]++;
          check(cc == 2'(e), $sformatf("cc %0d expected %0d", cc, e));
          cb_cond = 4'd5; #1;               // CB23: off the memory controller
          check(cb_taken == (e >= 2), "CB23");
          acc += 32'(seen[10]) * 32'(seen[11]);
        end
        move(12, 64'(acc));
        move(3, elem_ptr(OFF_C, i, j));
        issue(w_ldst(10, 3, 12));                  // stl r12,[r3]
        drain();
      end
    end

    for (int i = 0; i < NN; i++)
      for (int j = 0; j < NN; j++) begin
        logic [31:0] e;
        e = 0;
        for (int k = 0; k < NN; k++) e += a[i][k] * b[k][j];
        check(32'(mem_read(elem_addr(OFF_C, i, j), 4)) == e, $sformatf("C[%0d][%0d]", i, j));
      end
    for (int c = 0; c < 4; c++) check(n_cc[c] > 0, $sformatf("locality code %0d never seen", c));
    $display("codes: %0d %0d %0d %0d", n_cc[0], n_cc[1], n_cc[2], n_cc[3]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
