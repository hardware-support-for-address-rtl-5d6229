// cb_eval: coprocessor branch condition.
//
// The locality code (0..3) produced with every pointer increment feeds the
// coprocessor branch, which may branch on any set of code values. The
// 4-bit condition field uses the SPARC V8 coprocessor branch encoding
// (CBN, CB123, CB12, CB13, CB1, CB23, CB2, CB3, CBA, CB0, CB03, CB02,
// CB023, CB01, CB013, CB012 for 0..15); the encoding is taken from the
// SPARC V8 architecture, the published design names only CB123.
// Combinational.
module cb_eval (
  input  logic [3:0] cond,
  input  logic [1:0] cc,
  output logic       taken
);

  logic [3:0] accept;  // bit i set: branch when cc == i

  always_comb begin
    unique case (cond)
      4'd0:  accept = 4'b0000;  // CBN
      4'd1:  accept = 4'b1110;  // CB123
      4'd2:  accept = 4'b0110;  // CB12
      4'd3:  accept = 4'b1010;  // CB13
      4'd4:  accept = 4'b0010;  // CB1
      4'd5:  accept = 4'b1100;  // CB23
      4'd6:  accept = 4'b0100;  // CB2
      4'd7:  accept = 4'b1000;  // CB3
      4'd8:  accept = 4'b1111;  // CBA
      4'd9:  accept = 4'b0001;  // CB0
      4'd10: accept = 4'b1001;  // CB03
      4'd11: accept = 4'b0101;  // CB02
      4'd12: accept = 4'b1101;  // CB023
      4'd13: accept = 4'b0011;  // CB01
      4'd14: accept = 4'b1011;  // CB013
      default: accept = 4'b0111; // CB012
    endcase
    taken = accept[cc];
  end

endmodule
