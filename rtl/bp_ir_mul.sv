// bp_ir_mul: 2-bit x 2-bit particle multiplier with a 3-bit encoded result.
//
// A product of two 2-bit particles is one of 0, 1, 2, 3, 4, 6 or 9. As in the
// paper, the value 9 is written as 3'b111 and every other value in plain
// binary, so an intermediate result (IR) needs only 3 bits through the one-hot
// selection multiplexers; bp_pkg::ir_dec restores the 4-bit value after
// selection. The three output bits reduce to three AND terms and one OR:
//   ir3[2] = x1&y1, ir3[1] = x1&y0 | x0&y1, ir3[0] = x0&y0.
// (the gate-level form is this design's own derivation of that encoding).
// Purely combinational; a 1-bit particle is passed in with its upper bit zero.
module bp_ir_mul (
  input  logic [1:0] x,
  input  logic [1:0] y,
  output logic [2:0] ir3
);
  always_comb begin
    ir3[2] = x[1] & y[1];
    ir3[1] = (x[1] & y[0]) | (x[0] & y[1]);
    ir3[0] = x[0] & y[0];
  end
endmodule
