// tb_bp_ir_mul: exhaustive check of the 2-bit particle multiplier.
// For all 16 operand pairs the 3-bit code must decode (bp_pkg::ir_dec) to
// the integer product x*y, and the code itself must equal the product for
// every value except 9, which must be 3'b111.
module tb_bp_ir_mul;
  import bp_pkg::*;
  logic [1:0] x, y;
  logic [2:0] ir3;
  int checks = 0, failures = 0;

  bp_ir_mul dut (.x, .y, .ir3);

  initial begin
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 4; j++) begin
        x = 2'(i); y = 2'(j);
        #1;
        checks++;
        if (int'(ir_dec(ir3)) != i*j) begin
          failures++;
          $display("FAIL %0d*%0d decoded %0d", i, j, ir_dec(ir3));
        end
        checks++;
        if (ir3 != ((i*j == 9) ? 3'b111 : 3'(i*j))) begin
          failures++;
          $display("FAIL %0d*%0d code %b", i, j, ir3);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
