// sptr_inc: shared pointer incrementer, two pipeline stages.
//
// Advances a UPC shared pointer {thread, phase, va} by a signed number of
// elements, the computation that software does with divisions and
// multiplications:
//   phinc     = phase + inc
//   thinc     = phinc / bsize          new phase = phinc % bsize
//   blockinc  = (thread + thinc) / THREADS
//   new thread= (thread + thinc) % THREADS
//   new va    = va + ((new phase - phase) + blockinc*bsize) * esize
// Block size, element size and THREADS are powers of two and arrive as
// log2 values, so every division is an arithmetic right shift, every
// remainder a mask and every product a left shift. The shifts are
// arithmetic, which makes negative increments step backwards correctly
// (floor division); the handling of negative increments is this design's
// choice, the rest follows the published algorithm.
//
// Stage 1 forms the new phase and the thread carry; stage 2 forms the new
// thread, the block carry and the new virtual address. A pointer accepted
// in cycle t (in_valid with en high) leaves in cycle t+2 on out_valid; one
// pointer can enter every cycle. en low freezes both stages.
// Block sizes above 2**PHASE_W elements do not fit the phase field and
// are left to the software fallback.
module sptr_inc
  import pgas_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     en,
  input  logic                     in_valid,
  input  sptr_t                    in_ptr,
  input  logic signed [PTR_W-1:0]  in_inc,       // increment, in elements
  input  logic [LOG2_W-1:0]        in_lg_bsize,
  input  logic [LOG2_W-1:0]        in_lg_esize,
  input  logic [LOG2_W-1:0]        in_lg_threads,
  output logic                     out_valid,
  output sptr_t                    out_ptr
);

  localparam int AW = PTR_W + 8;  // internal arithmetic width

  // ---- stage 1 -------------------------------------------------------
  logic signed [AW-1:0] phinc, thinc;
  logic [PHASE_W-1:0]   nphase;

  always_comb begin
    phinc  = AW'(signed'({1'b0, in_ptr.phase})) + AW'(in_inc);
    thinc  = phinc >>> in_lg_bsize;
    nphase = PHASE_W'(phinc & ((AW'(1) <<< in_lg_bsize) - AW'(1)));
  end

  logic                 s1_valid;
  logic signed [AW-1:0] s1_thinc;
  logic [PHASE_W-1:0]   s1_nphase, s1_phase;
  logic [THREAD_W-1:0]  s1_thread;
  logic [VA_W-1:0]      s1_va;
  logic [LOG2_W-1:0]    s1_lg_bsize, s1_lg_esize, s1_lg_threads;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else if (en) s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      s1_thinc      <= thinc;
      s1_nphase     <= nphase;
      s1_phase      <= in_ptr.phase;
      s1_thread     <= in_ptr.thread;
      s1_va         <= in_ptr.va;
      s1_lg_bsize   <= in_lg_bsize;
      s1_lg_esize   <= in_lg_esize;
      s1_lg_threads <= in_lg_threads;
    end
  end

  // ---- stage 2 -------------------------------------------------------
  logic signed [AW-1:0] tsum, blockinc, eaddrinc, vainc;
  logic [THREAD_W-1:0]  nthread;
  logic [VA_W-1:0]      nva;

  always_comb begin
    tsum     = AW'(signed'({1'b0, s1_thread})) + s1_thinc;
    blockinc = tsum >>> s1_lg_threads;
    nthread  = THREAD_W'(tsum & ((AW'(1) <<< s1_lg_threads) - AW'(1)));
    eaddrinc = AW'(signed'({1'b0, s1_nphase})) - AW'(signed'({1'b0, s1_phase}))
             + (blockinc <<< s1_lg_bsize);
    vainc    = eaddrinc <<< s1_lg_esize;
    nva      = s1_va + VA_W'(vainc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else if (en) out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      out_ptr.phase  <= s1_nphase;
      out_ptr.thread <= nthread;
      out_ptr.va     <= nva;
    end
  end

endmodule
