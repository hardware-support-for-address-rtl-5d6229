// pgas_decoder: decodes the PGAS instruction words.
//
// Three 32-bit formats, with the published field positions:
//   shared load/store   [31:26] opcode [25:21] RA [20:16] RB [15:11] func
//                       [10:0] short displacement
//   increment immediate [31:26] opcode [25:21] RA [20:16] Increm [15] 0
//                       [14:10] Esize [9:5] Bsize [4:0] RC
//   increment register  [31:26] opcode [25:21] RA [20:16] RB [15] 1
//                       [14:10] Esize [9:5] Bsize [4:0] RC
// Esize, Bsize and Increm are log2 values (a 5-bit field names any power of
// two up to 2**31). For loads and stores RA holds the shared pointer and
// RB the data; for increments RA is the source pointer, RC the destination
// and RB the register holding the increment.
// This design's choices: the two opcode values, the func codes (0..5 the
// loads bu/wu/l/q/s/t, 8..13 the stores b/w/l/q/s/t), and the encoding of
// set_threads (func 16: THREADS from RA, running thread from RB) and
// set_base_address (func 17: thread number from RA, base address from RB)
// in the load/store format. Any other word decodes as OP_NOP (not a PGAS
// instruction, pgas low) or OP_ILLEGAL (PGAS opcode, unknown func).
// Combinational.
module pgas_decoder
  import pgas_pkg::*;
#(
  parameter logic [5:0] OPC_LDST = OPC_PGAS_LDST,
  parameter logic [5:0] OPC_INC  = OPC_PGAS_INC
) (
  input  logic [31:0] instr,
  output logic        pgas,  // the word is a PGAS instruction
  output pgas_dec_t   dec
);

  logic [4:0] func;
  assign func = instr[15:11];

  always_comb begin
    dec          = '0;
    dec.op       = OP_NOP;
    dec.ra       = instr[25:21];
    dec.rb       = instr[20:16];
    dec.lg_inc   = instr[20:16];
    dec.rc       = instr[4:0];
    dec.lg_esize = instr[14:10];
    dec.lg_bsize = instr[9:5];
    dec.disp     = instr[10:0];
    pgas         = 1'b0;
    if (instr[31:26] == OPC_LDST) begin
      pgas = 1'b1;
      dec.lg_esize = '0;
      dec.lg_bsize = '0;
      dec.rc       = '0;
      unique case (func)
        FN_LDBU: begin dec.op = OP_LD; dec.size = SZ_B; end
        FN_LDWU: begin dec.op = OP_LD; dec.size = SZ_W; end
        FN_LDL:  begin dec.op = OP_LD; dec.size = SZ_L; end
        FN_LDQ:  begin dec.op = OP_LD; dec.size = SZ_Q; end
        FN_LDS:  begin dec.op = OP_LD; dec.size = SZ_L; dec.is_float = 1'b1; end
        FN_LDT:  begin dec.op = OP_LD; dec.size = SZ_Q; dec.is_float = 1'b1; end
        FN_STB:  begin dec.op = OP_ST; dec.size = SZ_B; end
        FN_STW:  begin dec.op = OP_ST; dec.size = SZ_W; end
        FN_STL:  begin dec.op = OP_ST; dec.size = SZ_L; end
        FN_STQ:  begin dec.op = OP_ST; dec.size = SZ_Q; end
        FN_STS:  begin dec.op = OP_ST; dec.size = SZ_L; dec.is_float = 1'b1; end
        FN_STT:  begin dec.op = OP_ST; dec.size = SZ_Q; dec.is_float = 1'b1; end
        FN_SET_THREADS: dec.op = OP_SET_THREADS;
        FN_SET_BASE:    dec.op = OP_SET_BASE;
        default:        dec.op = OP_ILLEGAL;
      endcase
    end else if (instr[31:26] == OPC_INC) begin
      pgas = 1'b1;
      dec.disp = '0;
      dec.op = instr[15] ? OP_INC_REG : OP_INC_IMM;
    end else begin
      dec.ra = '0; dec.rb = '0; dec.rc = '0; dec.lg_inc = '0;
      dec.lg_esize = '0; dec.lg_bsize = '0; dec.disp = '0;
    end
  end

endmodule
