// tb_base_lut: writes base addresses for every thread, reads them back in
// random order and checks the value and the one-cycle read latency,
// including the base addresses of the 4-thread example (0xff0a00000000
// onwards) and read-during-write behaviour (old value returned).
module tb_base_lut;
  localparam int MT = 64;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [5:0] wr_thread = '0, rd_thread = '0;
  logic [63:0] wr_base = '0, rd_base;
  logic [63:0] model [MT];
  int checks = 0, failures = 0;

  base_lut #(.MAX_THREADS(MT), .ADDR_W(64)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(int t, logic [63:0] b);
    @(negedge clk); wr_en = 1; wr_thread = 6'(t); wr_base = b; rd_en = 0;
    @(negedge clk); wr_en = 0; model[t] = b;
  endtask

  task automatic rd_check(int t);
    @(negedge clk); rd_en = 1; rd_thread = 6'(t);
    @(posedge clk); #1;
    rd_en = 0;
    checks++;
    if (rd_base !== model[t]) begin
      failures++;
      $display("FAIL: thread %0d base %h exp %h", t, rd_base, model[t]);
    end
  endtask

  initial begin
    for (int t = 0; t < MT; t++) wr(t, {$urandom, $urandom});
    for (int t = 0; t < 4; t++) wr(t, 64'hff0a_0000_0000 + (64'(t) << 32));
    rd_check(1);
    checks++;
    if (rd_base !== 64'hff0b_0000_0000) failures++;
    for (int i = 0; i < 500; i++) rd_check($urandom_range(0, MT - 1));
    // the read result holds while rd_en is low
    rd_check(3);
    @(negedge clk); rd_thread = 6'd7; @(negedge clk);
    checks++;
    if (rd_base !== model[3]) failures++;
    // read and write of the same entry in one cycle: old value
    @(negedge clk); rd_en = 1; rd_thread = 6'd5; wr_en = 1; wr_thread = 6'd5; wr_base = 64'h1234;
    @(posedge clk); #1; rd_en = 0; wr_en = 0;
    checks++;
    if (rd_base !== model[5]) failures++;
    model[5] = 64'h1234;
    rd_check(5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
