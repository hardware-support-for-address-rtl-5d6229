// tb_cb_eval: checks all 16 branch conditions against all 4 codes. The
// expected sets are written out as the mnemonic's digits (CB013 branches
// on codes 0, 1 and 3), independent of the bit masks of the design.
module tb_cb_eval;
  logic [3:0] cond;
  logic [1:0] cc;
  logic taken;
  int checks = 0, failures = 0;
  string names [16] = '{"", "123", "12", "13", "1", "23", "2", "3",
                        "0123", "0", "03", "02", "023", "01", "013", "012"};

  cb_eval dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 16; c++)
      for (int v = 0; v < 4; v++) begin
        logic e;
        e = 1'b0;
        for (int k = 0; k < names[c].len(); k++)
          if (names[c][k] == 8'(48 + v)) e = 1'b1;
        cond = 4'(c); cc = 2'(v); #1;
        checks++;
        if (taken !== e) begin
          failures++;
          $display("FAIL: cond %0d cc %0d taken %b", c, v, taken);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
