// tb_bp_operand_queue: checks the Q=2 operand queue and its zero-value filter.
// Phase 1 blocks the output and checks that exactly Q non-zero operations are
// accepted while zero ones keep being accepted (and flagged as filtered).
// Phase 2 pushes and pops at random and checks, against a reference list of
// the operations that should survive the filter, order and content of all
// that come out, including zero operations tagged 'last'.
module tb_bp_operand_queue;
  import bp_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, filtered;
  mac_op_t in_op, out_op;

  bp_operand_queue #(.Q(2), .FILTER(1'b1)) dut (.*);

  mac_op_t expq [$];
  int n_filt_exp = 0, n_filt_seen = 0;

  function automatic mac_op_t rand_op();
    mac_op_t o;
    o = mac_op_t'($urandom);
    if (($urandom % 3) == 0) o.w.mag = '0;
    if (($urandom % 4) == 0) o.a.mag = '0;
    o.last = ($urandom % 5) == 0;
    return o;
  endfunction

  function automatic bit zero_op(input mac_op_t o);
    return (o.w.mag == 0 || o.a.mag == 0) && !o.last;
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (filtered) n_filt_seen++;
    if (out_valid && out_ready) begin
      checks++;
      if (expq.size() == 0 || out_op != expq[0]) begin
        failures++;
        $display("FAIL out %h", out_op);
      end
      if (expq.size()) void'(expq.pop_front());
    end
    if (in_valid && in_ready) begin
      if (zero_op(in_op)) n_filt_exp++;
      else expq.push_back(in_op);
    end
  end

  int accepted;
  initial begin
    in_valid = 0; in_op = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // Phase 1: output blocked.
    accepted = 0;
    for (int i = 0; i < 6; i++) begin
      in_op = rand_op(); in_op.w.mag = 7'h11; in_op.a.mag = 7'h05; in_valid = 1;
      @(negedge clk);
      if (in_ready) accepted++;
      @(posedge clk); #1;
    end
    checks++;
    if (accepted != 2) begin failures++; $display("FAIL capacity %0d", accepted); end
    // zero op still accepted while full
    in_op = rand_op(); in_op.w.mag = '0; in_op.last = 0;
    @(negedge clk);
    checks++;
    if (!in_ready) begin failures++; $display("FAIL zero op not accepted when full"); end
    @(posedge clk); #1;
    in_valid = 0;
    // Phase 2: random traffic.
    for (int i = 0; i < 2000; i++) begin
      in_valid  = ($urandom % 4) != 0;
      in_op     = rand_op();
      out_ready = ($urandom % 3) != 0;
      @(posedge clk); #1;
    end
    in_valid = 0; out_ready = 1;
    repeat (5) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d ops lost", expq.size()); end
    checks++;
    if (n_filt_seen != n_filt_exp) begin
      failures++; $display("FAIL filtered %0d expected %0d", n_filt_seen, n_filt_exp);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
