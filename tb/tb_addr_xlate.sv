// tb_addr_xlate: checks base + va + sign-extended displacement, with the
// ptrC example (thread 1 base 0xff0b00000000, va 0x3f00 -> 0xff0b00003f00)
// and random operands against an independent 64-bit sum.
module tb_addr_xlate;
  import pgas_pkg::*;
  logic [63:0] base, sysaddr;
  logic [VA_W-1:0] va;
  logic [DISP_W-1:0] disp;
  int checks = 0, failures = 0;

  addr_xlate #(.ADDR_W(64)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base = 64'hff0b_0000_0000; va = 40'h3f00; disp = '0; #1;
    checks++; if (sysaddr !== 64'hff0b_0000_3f00) failures++;
    disp = 11'd8; #1;
    checks++; if (sysaddr !== 64'hff0b_0000_3f08) failures++;
    disp = 11'h7f8; #1;   // -8
    checks++; if (sysaddr !== 64'hff0b_0000_3ef8) failures++;
    for (int i = 0; i < 2000; i++) begin
      longint d;
      base = {$urandom, $urandom} & 64'h0000_ffff_ffff_fff0;
      va   = VA_W'({$urandom, $urandom});
      disp = DISP_W'($urandom);
      d    = (disp >= 1024) ? longint'(disp) - 2048 : longint'(disp);
      #1;
      checks++;
      if (sysaddr !== 64'(longint'(base) + longint'(va) + d)) begin
        failures++;
        $display("FAIL: %h + %h + %0d = %h", base, va, d, sysaddr);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
