// pgas_unit: per-core hardware support for UPC shared pointers.
//
// The unit sits beside a host core's integer pipeline, as a coprocessor
// whose instructions the core fetches and hands over one at a time. It
// holds shared pointers in its own 64-bit register file and executes:
//   * pointer increments (immediate or register increment): two-stage
//     incrementer, one per cycle, result written back two cycles after
//     issue together with a locality condition code;
//   * shared loads and stores: the pointer's thread indexes the base
//     address table, the base, the pointer's virtual address and the short
//     displacement form the system virtual address, and the access goes
//     out on the memory port towards the core's load/store unit;
//   * set_threads and set_base_address, which program the THREADS
//     register and the base address table at run time.
// The incrementer, the locality codes, the base-address table, the 2-read
// 1-write pointer register file and the instruction formats follow the
// published design. The issue handshake, the interlocks, the memory port,
// the register move port and the write-back port are this design's own.
//
// Timing. An instruction is taken in the cycle instr_valid && instr_ready
// (stage ID: decode and register read). It passes stage S1 (incrementer
// stage 1, base-table read) and stage S2 (incrementer stage 2, registered
// system address). An increment writes its destination at the end of S2;
// a shared load or store puts its request on the memory port in S2 and
// holds it until mem_req_ready. A load's data arrives on mem_resp_valid,
// at least one cycle later, already aligned and sized by the memory side;
// it is zero-extended into the data register. Up to LDQ_DEPTH loads may
// wait for data; the memory side answers them in request order, so shared
// loads issue back to back like ordinary loads.
// Interlocks: an instruction whose source or destination register is the
// destination of an increment in S1/S2 or of a load still waiting for data
// waits in ID (stall). A load also waits while LDQ_DEPTH loads are in
// flight. When an increment result and load data want the single
// write port in the same cycle, the load wins and the pipeline holds one
// cycle. A register move (mv_*, the host filling a pointer register) is
// taken only when nothing is in flight.
// The condition code of the latest increment is on cc; cc_valid is low
// while an increment is in flight. cb_taken evaluates the coprocessor
// branch condition cb_cond against it.
// Every register-file write is shown on wb_valid/wb_idx/wb_data.
module pgas_unit
  import pgas_pkg::*;
#(
  parameter int unsigned MAX_THREADS      = 64,  // base address table entries
  parameter int unsigned ADDR_W           = 64,  // system virtual address width
  parameter int unsigned THREADS_PER_MC   = 4,
  parameter int unsigned THREADS_PER_NODE = 4,
  parameter int unsigned LDQ_DEPTH        = 4   // loads in flight on the memory port
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // instruction from the host core
  input  logic                  instr_valid,
  input  logic [31:0]           instr,
  output logic                  instr_ready,
  output logic                  instr_illegal,  // taken word is no PGAS op
  // register move from the host core
  input  logic                  mv_valid,
  input  logic [REG_IDX_W-1:0]  mv_idx,
  input  logic [PTR_W-1:0]      mv_data,
  output logic                  mv_ready,
  // memory port towards the core's load/store unit
  output logic                  mem_req_valid,
  input  logic                  mem_req_ready,
  output logic                  mem_req_we,
  output logic [ADDR_W-1:0]     mem_req_addr,
  output mem_size_e             mem_req_size,
  output logic [63:0]           mem_req_wdata,
  input  logic                  mem_resp_valid,
  input  logic [63:0]           mem_resp_rdata,
  // condition code and coprocessor branch
  output logic [1:0]            cc,
  output logic                  cc_valid,
  input  logic [3:0]            cb_cond,
  output logic                  cb_taken,
  // status
  output logic [THREAD_W:0]     threads,
  output logic [THREAD_W-1:0]   my_thread,
  output logic                  threads_pow2,
  // register write-back trace
  output logic                  wb_valid,
  output logic [REG_IDX_W-1:0]  wb_idx,
  output logic [PTR_W-1:0]      wb_data
);

  localparam int TIDX_W = $clog2(MAX_THREADS);

  // ------------------------------------------------------------------
  // ID: decode and register read
  // ------------------------------------------------------------------
  logic      pgas;
  pgas_dec_t dec;

  pgas_decoder u_dec (
    .instr (instr),
    .pgas  (pgas),
    .dec   (dec)
  );

  logic [PTR_W-1:0] ra_data, rb_data;
  logic             rf_we;
  logic [REG_IDX_W-1:0] rf_widx;
  logic [PTR_W-1:0] rf_wdata;

  sptr_regfile u_rf (
    .clk     (clk),
    .ra_idx  (dec.ra),
    .ra_data (ra_data),
    .rb_idx  (dec.rb),
    .rb_data (rb_data),
    .wr_en   (rf_we),
    .wr_idx  (rf_widx),
    .wr_data (rf_wdata)
  );

  sptr_t ra_ptr;
  assign ra_ptr = sptr_t'(ra_data);

  // Pipeline state.
  typedef enum logic [1:0] {K_INC, K_LD, K_ST} kind_e;

  logic                 s1_valid, s2_valid;
  kind_e                s1_kind, s2_kind;
  logic [REG_IDX_W-1:0] s1_dest, s2_dest;
  mem_size_e            s1_size, s2_size;
  logic [DISP_W-1:0]    s1_disp;
  logic [VA_W-1:0]      s1_va;
  logic [63:0]          s1_wdata, s2_wdata;
  logic [ADDR_W-1:0]    s2_addr;

  // Loads waiting for data, oldest first (responses come back in order).
  localparam int LQ_W = $clog2(LDQ_DEPTH + 1);
  logic [LQ_W-1:0]      lq_count;
  logic [REG_IDX_W-1:0] lq_dest [LDQ_DEPTH];
  mem_size_e            lq_size [LDQ_DEPTH];
  logic                 ld_pend;
  logic [REG_IDX_W-1:0] ld_dest;
  mem_size_e            ld_size;
  assign ld_pend = (lq_count != '0);
  assign ld_dest = lq_dest[0];
  assign ld_size = lq_size[0];

  // Which registers the ID instruction reads and writes.
  logic use_ra, use_rb, wr_rb, wr_rc, is_inc, is_mem, is_set;
  always_comb begin
    is_inc = (dec.op == OP_INC_IMM) || (dec.op == OP_INC_REG);
    is_mem = (dec.op == OP_LD) || (dec.op == OP_ST);
    is_set = (dec.op == OP_SET_THREADS) || (dec.op == OP_SET_BASE);
    use_ra = is_inc || is_mem || is_set;
    use_rb = (dec.op == OP_INC_REG) || (dec.op == OP_ST) || is_set;
    wr_rb  = (dec.op == OP_LD);
    wr_rc  = is_inc;
  end

  // Register r is the destination of an operation still in flight.
  function automatic logic busy_reg(input logic [REG_IDX_W-1:0] r,
                                    input logic s1v, input kind_e s1k,
                                    input logic [REG_IDX_W-1:0] s1d,
                                    input logic s2v, input kind_e s2k,
                                    input logic [REG_IDX_W-1:0] s2d,
                                    input logic [LQ_W-1:0] cnt,
                                    input logic [REG_IDX_W-1:0] qd [LDQ_DEPTH]);
    logic b;
    b = (s1v && (s1k != K_ST) && (s1d == r)) ||
        (s2v && (s2k != K_ST) && (s2d == r));
    for (int i = 0; i < LDQ_DEPTH; i++)
      if (LQ_W'(i) < cnt && qd[i] == r) b = 1'b1;
    return b;
  endfunction

  // loads in S1, S2 or waiting for data
  logic [LQ_W+1:0] loads_in_flight;
  assign loads_in_flight = (LQ_W+2)'(lq_count)
                         + (LQ_W+2)'(s1_valid && s1_kind == K_LD)
                         + (LQ_W+2)'(s2_valid && s2_kind == K_LD);

  logic hazard, adv, wb_conflict, pipe_empty, mv_take, id_take;

  always_comb begin
    hazard = 1'b0;
    if (use_ra && busy_reg(dec.ra, s1_valid, s1_kind, s1_dest, s2_valid, s2_kind, s2_dest, lq_count, lq_dest))
      hazard = 1'b1;
    if ((use_rb || wr_rb) && busy_reg(dec.rb, s1_valid, s1_kind, s1_dest, s2_valid, s2_kind, s2_dest, lq_count, lq_dest))
      hazard = 1'b1;
    if (wr_rc && busy_reg(dec.rc, s1_valid, s1_kind, s1_dest, s2_valid, s2_kind, s2_dest, lq_count, lq_dest))
      hazard = 1'b1;
    // a load needs a free entry in the pending-load queue
    if (dec.op == OP_LD && loads_in_flight >= (LQ_W+2)'(LDQ_DEPTH))
      hazard = 1'b1;
  end

  logic inc_out_valid;
  sptr_t inc_out_ptr;

  assign wb_conflict = inc_out_valid && mem_resp_valid;
  assign adv         = !(s2_valid && (s2_kind != K_INC) && !mem_req_ready) && !wb_conflict;
  assign pipe_empty  = !s1_valid && !s2_valid && !ld_pend;
  assign mv_ready    = pipe_empty;
  assign mv_take     = mv_valid && mv_ready;
  assign instr_ready = adv && !hazard && !mv_take;
  assign id_take     = instr_valid && instr_ready;
  assign instr_illegal = id_take && (!pgas || dec.op == OP_ILLEGAL);

  // ------------------------------------------------------------------
  // THREADS register and base address table (written from ID)
  // ------------------------------------------------------------------
  logic [LOG2_W-1:0] lg_threads;

  threads_reg u_thr (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_en        (id_take && dec.op == OP_SET_THREADS),
    .wr_threads   (ra_data[THREAD_W:0]),
    .wr_my_thread (rb_data[THREAD_W-1:0]),
    .threads      (threads),
    .my_thread    (my_thread),
    .lg_threads   (lg_threads),
    .pow2         (threads_pow2)
  );

  logic [ADDR_W-1:0] lut_base;

  base_lut #(.MAX_THREADS(MAX_THREADS), .ADDR_W(ADDR_W)) u_lut (
    .clk       (clk),
    .wr_en     (id_take && dec.op == OP_SET_BASE),
    .wr_thread (ra_data[TIDX_W-1:0]),
    .wr_base   (rb_data[ADDR_W-1:0]),
    .rd_en     (adv),
    .rd_thread (ra_ptr.thread[TIDX_W-1:0]),
    .rd_base   (lut_base)
  );

  // ------------------------------------------------------------------
  // Incrementer (ID -> S1 -> S2)
  // ------------------------------------------------------------------
  logic signed [PTR_W-1:0] inc_val;
  assign inc_val = (dec.op == OP_INC_REG) ? signed'(rb_data)
                                          : signed'(PTR_W'(1) << dec.lg_inc);

  sptr_inc u_inc (
    .clk           (clk),
    .rst_n         (rst_n),
    .en            (adv),
    .in_valid      (id_take && is_inc),
    .in_ptr        (ra_ptr),
    .in_inc        (inc_val),
    .in_lg_bsize   (dec.lg_bsize),
    .in_lg_esize   (dec.lg_esize),
    .in_lg_threads (lg_threads),
    .out_valid     (inc_out_valid),
    .out_ptr       (inc_out_ptr)
  );

  // ------------------------------------------------------------------
  // Address translation (S1 -> S2)
  // ------------------------------------------------------------------
  logic [ADDR_W-1:0] s1_sysaddr;

  addr_xlate #(.ADDR_W(ADDR_W)) u_xlate (
    .base    (lut_base),
    .va      (s1_va),
    .disp    (s1_disp),
    .sysaddr (s1_sysaddr)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s2_valid <= 1'b0;
    end else if (adv) begin
      s1_valid <= id_take && (is_inc || is_mem);
      s2_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      s1_kind  <= is_inc ? K_INC : (dec.op == OP_LD ? K_LD : K_ST);
      s1_dest  <= is_inc ? dec.rc : dec.rb;
      s1_size  <= dec.size;
      s1_disp  <= dec.disp;
      s1_va    <= ra_ptr.va;
      s1_wdata <= rb_data;
      s2_kind  <= s1_kind;
      s2_dest  <= s1_dest;
      s2_size  <= s1_size;
      s2_addr  <= s1_sysaddr;
      s2_wdata <= s1_wdata;
    end
  end

  // ------------------------------------------------------------------
  // Memory port (S2)
  // ------------------------------------------------------------------
  assign mem_req_valid = s2_valid && (s2_kind != K_INC);
  assign mem_req_we    = (s2_kind == K_ST);
  assign mem_req_addr  = s2_addr;
  assign mem_req_size  = s2_size;
  always_comb begin
    unique case (s2_size)
      SZ_B:    mem_req_wdata = {56'd0, s2_wdata[7:0]};
      SZ_W:    mem_req_wdata = {48'd0, s2_wdata[15:0]};
      SZ_L:    mem_req_wdata = {32'd0, s2_wdata[31:0]};
      default: mem_req_wdata = s2_wdata;
    endcase
  end

  logic lq_push, lq_pop;
  assign lq_push = mem_req_valid && mem_req_ready && !mem_req_we;
  assign lq_pop  = mem_resp_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) lq_count <= '0;
    else lq_count <= lq_count + LQ_W'(lq_push) - LQ_W'(lq_pop);
  end

  // shift-register queue: entry 0 is the oldest load
  always_ff @(posedge clk) begin
    for (int i = 0; i < LDQ_DEPTH; i++) begin
      logic [LQ_W-1:0] tail;
      tail = lq_pop ? lq_count - LQ_W'(1) : lq_count;
      if (lq_push && LQ_W'(i) == tail) begin
        lq_dest[i] <= s2_dest;
        lq_size[i] <= s2_size;
      end else if (lq_pop && i + 1 < LDQ_DEPTH) begin
        lq_dest[i] <= lq_dest[i + 1];
        lq_size[i] <= lq_size[i + 1];
      end
    end
  end

  logic [63:0] ld_data;
  always_comb begin
    unique case (ld_size)
      SZ_B:    ld_data = {56'd0, mem_resp_rdata[7:0]};
      SZ_W:    ld_data = {48'd0, mem_resp_rdata[15:0]};
      SZ_L:    ld_data = {32'd0, mem_resp_rdata[31:0]};
      default: ld_data = mem_resp_rdata;
    endcase
  end

  // ------------------------------------------------------------------
  // Write-back: load data, else increment result, else register move
  // ------------------------------------------------------------------
  always_comb begin
    rf_we    = 1'b0;
    rf_widx  = '0;
    rf_wdata = '0;
    if (mem_resp_valid) begin
      rf_we = 1'b1; rf_widx = ld_dest; rf_wdata = ld_data;
    end else if (inc_out_valid) begin
      rf_we = 1'b1; rf_widx = s2_dest; rf_wdata = PTR_W'(inc_out_ptr);
    end else if (mv_take) begin
      rf_we = 1'b1; rf_widx = mv_idx; rf_wdata = mv_data;
    end
  end

  assign wb_valid = rf_we;
  assign wb_idx   = rf_widx;
  assign wb_data  = rf_wdata;

  // ------------------------------------------------------------------
  // Locality condition code and coprocessor branch
  // ------------------------------------------------------------------
  logic [1:0] new_cc;

  locality_cc #(.THREADS_PER_MC(THREADS_PER_MC), .THREADS_PER_NODE(THREADS_PER_NODE)) u_cc (
    .thread    (inc_out_ptr.thread),
    .my_thread (my_thread),
    .cc        (new_cc)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) cc <= 2'd0;
    else if (inc_out_valid && !mem_resp_valid) cc <= new_cc;
  end

  assign cc_valid = !(s1_valid && s1_kind == K_INC) && !(s2_valid && s2_kind == K_INC);

  cb_eval u_cb (
    .cond  (cb_cond),
    .cc    (cc),
    .taken (cb_taken)
  );

  // ------------------------------------------------------------------
  // Handshake rules
  // ------------------------------------------------------------------
  a_resp_only_when_pending: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> ld_pend);
  a_queue_bound: assert property (@(posedge clk) disable iff (!rst_n)
    lq_count <= LQ_W'(LDQ_DEPTH));
  a_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid && $stable(mem_req_addr) && $stable(mem_req_we));

endmodule
