// pgas_pkg: types and constants shared by the PGAS address-mapping unit.
//
// A UPC shared pointer has three fields: the thread that owns the element,
// the phase (position inside the current block) and the virtual address of
// the element inside that thread's local part of the shared space. The
// pointer fills one 64-bit register, as UPC implementations usually do. The
// split of the 64 bits into fields is this design's choice:
//   [63:48] phase  (16 bits, block sizes up to 2**16 elements)
//   [47:40] thread ( 8 bits, up to 256 UPC threads)
//   [39:0]  va     (40 bits, offset inside the thread's shared segment)
// Block size, element size and increment are carried as log2 values, the
// 5-bit encoding of the instruction format, so every size is a power of two.
package pgas_pkg;

  localparam int PTR_W     = 64;
  localparam int PHASE_W   = 16;
  localparam int THREAD_W  = 8;
  localparam int VA_W      = 40;
  localparam int LOG2_W    = 5;   // width of an encoded power of two
  localparam int NREGS     = 32;  // shared-pointer registers
  localparam int REG_IDX_W = 5;
  localparam int DISP_W    = 11;  // "Short disp" of the load/store format

  typedef struct packed {
    logic [PHASE_W-1:0]  phase;
    logic [THREAD_W-1:0] thread;
    logic [VA_W-1:0]     va;
  } sptr_t;

  // Operations of the unit (Table 1 of the instruction set extension,
  // with the register move used by the host to fill pointer registers).
  typedef enum logic [2:0] {
    OP_NOP,
    OP_LD,          // pgas_ld*  : load through a shared pointer
    OP_ST,          // pgas_st*  : store through a shared pointer
    OP_INC_IMM,     // pgas_inc_imm
    OP_INC_REG,     // pgas_inc_reg
    OP_SET_THREADS, // set_threads
    OP_SET_BASE,    // set_base_address
    OP_ILLEGAL
  } pgas_op_e;

  // Access size of a shared load or store.
  typedef enum logic [1:0] {
    SZ_B = 2'd0,  // 8 bits
    SZ_W = 2'd1,  // 16 bits
    SZ_L = 2'd2,  // 32 bits
    SZ_Q = 2'd3   // 64 bits
  } mem_size_e;

  // Decoded instruction.
  typedef struct packed {
    pgas_op_e              op;
    logic [REG_IDX_W-1:0]  ra;       // pointer source
    logic [REG_IDX_W-1:0]  rb;       // increment / data register
    logic [REG_IDX_W-1:0]  rc;       // pointer destination
    logic [LOG2_W-1:0]     lg_inc;   // immediate increment, log2
    logic [LOG2_W-1:0]     lg_esize; // element size in bytes, log2
    logic [LOG2_W-1:0]     lg_bsize; // block size in elements, log2
    mem_size_e             size;
    logic                  is_float; // S_float / T_float variant
    logic [DISP_W-1:0]     disp;     // signed byte displacement
  } pgas_dec_t;

  // Function codes of the shared load/store format (bits 15:11).
  localparam logic [4:0] FN_LDBU = 5'd0;
  localparam logic [4:0] FN_LDWU = 5'd1;
  localparam logic [4:0] FN_LDL  = 5'd2;
  localparam logic [4:0] FN_LDQ  = 5'd3;
  localparam logic [4:0] FN_LDS  = 5'd4;
  localparam logic [4:0] FN_LDT  = 5'd5;
  localparam logic [4:0] FN_STB  = 5'd8;
  localparam logic [4:0] FN_STW  = 5'd9;
  localparam logic [4:0] FN_STL  = 5'd10;
  localparam logic [4:0] FN_STQ  = 5'd11;
  localparam logic [4:0] FN_STS  = 5'd12;
  localparam logic [4:0] FN_STT  = 5'd13;
  localparam logic [4:0] FN_SET_THREADS = 5'd16;
  localparam logic [4:0] FN_SET_BASE    = 5'd17;

  // Opcodes taken from the unused Alpha opcode space (bits 31:26).
  localparam logic [5:0] OPC_PGAS_LDST = 6'h05;
  localparam logic [5:0] OPC_PGAS_INC  = 6'h06;

endpackage
