// tb_sptr_regfile: random writes and two simultaneous reads per cycle
// against a model array; a write is visible on both ports from the next
// cycle on.
module tb_sptr_regfile;
  logic clk = 0, wr_en = 0;
  logic [4:0] ra_idx = '0, rb_idx = '0, wr_idx = '0;
  logic [63:0] ra_data, rb_data, wr_data = '0;
  logic [63:0] model [32];
  int checks = 0, failures = 0;

  sptr_regfile dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 32; r++) begin
      @(negedge clk); wr_en = 1; wr_idx = 5'(r); wr_data = {$urandom, $urandom}; model[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      ra_idx = 5'($urandom); rb_idx = 5'($urandom);
      wr_en = $urandom_range(0, 1); wr_idx = 5'($urandom); wr_data = {$urandom, $urandom};
      #1;
      checks += 2;
      if (ra_data !== model[ra_idx]) begin failures++; $display("FAIL: port a r%0d", ra_idx); end
      if (rb_data !== model[rb_idx]) begin failures++; $display("FAIL: port b r%0d", rb_idx); end
      @(posedge clk);
      if (wr_en) model[wr_idx] = wr_data;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
