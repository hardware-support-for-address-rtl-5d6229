// tb_pgas_decoder: assembles instruction words field by field from the
// three formats and checks every decoded field, for all func codes and for
// random register numbers, sizes and displacements; words with other
// opcodes must not decode as PGAS instructions.
module tb_pgas_decoder;
  import pgas_pkg::*;
  logic [31:0] instr;
  logic pgas;
  pgas_dec_t dec;
  int checks = 0, failures = 0;

  pgas_decoder dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ok(logic c, string what);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s (instr %h)", what, instr);
    end
  endtask

  initial begin
    for (int i = 0; i < 3000; i++) begin
      int ra, rb, rc, fn, disp, es, bs, kind;
      ra = $urandom_range(0, 31); rb = $urandom_range(0, 31); rc = $urandom_range(0, 31);
      fn = $urandom_range(0, 31); disp = $urandom_range(0, 2047);
      es = $urandom_range(0, 31); bs = $urandom_range(0, 31);
      kind = $urandom_range(0, 3);
      if (kind == 0) begin
        // load/store format: opcode 5, RA, RB, func, disp
        instr = (32'd5 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'(fn) << 11) | 32'(disp);
        #1;
        expect_ok(pgas, "ldst is pgas");
        expect_ok(dec.ra == 5'(ra) && dec.rb == 5'(rb), "ldst registers");
        if (fn <= 5) begin
          expect_ok(dec.op == OP_LD, "load op");
          expect_ok(dec.size == mem_size_e'((fn == 4) ? 2 : (fn == 5) ? 3 : fn), "load size");
          expect_ok(dec.is_float == (fn >= 4), "load float");
          expect_ok(dec.disp == 11'(disp), "disp");
        end else if (fn >= 8 && fn <= 13) begin
          expect_ok(dec.op == OP_ST, "store op");
          expect_ok(dec.size == mem_size_e'((fn == 12) ? 2 : (fn == 13) ? 3 : fn - 8), "store size");
          expect_ok(dec.is_float == (fn >= 12), "store float");
        end else if (fn == 16) expect_ok(dec.op == OP_SET_THREADS, "set_threads");
        else if (fn == 17) expect_ok(dec.op == OP_SET_BASE, "set_base");
        else expect_ok(dec.op == OP_ILLEGAL, "illegal func");
      end else if (kind == 1 || kind == 2) begin
        // increment formats: opcode 6, RA, Increm/RB, reg bit, Esize, Bsize, RC
        instr = (32'd6 << 26) | (32'(ra) << 21) | (32'(rb) << 16) | (32'(kind == 2) << 15)
              | (32'(es & 31) << 10) | (32'(bs) << 5) | 32'(rc);
        #1;
        expect_ok(pgas, "inc is pgas");
        expect_ok(dec.op == ((kind == 2) ? OP_INC_REG : OP_INC_IMM), "inc op");
        expect_ok(dec.ra == 5'(ra) && dec.rc == 5'(rc), "inc registers");
        if (kind == 2) expect_ok(dec.rb == 5'(rb), "inc rb");
        else expect_ok(dec.lg_inc == 5'(rb), "inc increm");
        expect_ok(dec.lg_esize == 5'(es) && dec.lg_bsize == 5'(bs), "esize/bsize");
      end else begin
        int opc;
        do opc = $urandom_range(0, 63); while (opc == 5 || opc == 6);
        instr = (32'(opc) << 26) | 26'($urandom);
        #1;
        expect_ok(!pgas && dec.op == OP_NOP, "non-pgas word");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
