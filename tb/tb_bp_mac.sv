// tb_bp_mac: self-checking testbench for the particlization MAC unit.
//
// Drives random sign-magnitude operand streams (per-bit zero probability swept
// from 0.5 to 0.9, plus all-zero and all-ones operands) into an exact and an
// approximate instance. Reference sums are computed here from plain integer
// products; the approximate reference drops every particle product whose
// particle indices sum to 0 or 1. The initiation interval of every operation
// is checked against max(1, largest number of non-zero IRs in one group),
// which is the paper's 1-to-4-cycle schedule. A second phase throttles
// out_ready to exercise the result hold.
module tb_bp_mac;
  import bp_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  // Two DUTs fed with the same stream.
  logic in_valid;
  sm8_t in_w, in_a;
  logic in_last;
  logic out_ready;
  logic rdy_e, rdy_x, ov_e, ov_x, busy_e, busy_x;
  logic signed [ACC_W-1:0] acc_e, acc_x;

  // Both units take an operation only when both can, so they see the same
  // stream even though the approximate one can be faster.
  logic v_both;
  assign v_both = in_valid & rdy_e & rdy_x;

  bp_mac #(.APPROX(1'b0)) u_exact (
    .clk, .rst_n, .in_valid(v_both), .in_ready(rdy_e), .in_w, .in_a, .in_last,
    .out_valid(ov_e), .out_ready, .out_acc(acc_e), .busy(busy_e));
  bp_mac #(.APPROX(1'b1)) u_apx (
    .clk, .rst_n, .in_valid(v_both), .in_ready(rdy_x), .in_w, .in_a, .in_last,
    .out_valid(ov_x), .out_ready, .out_acc(acc_x), .busy(busy_x));

  // ----------------------------------------------------------- reference
  function automatic int part(input int mag, input int i);
    return (i == 3) ? ((mag >> 6) & 1) : ((mag >> (2*i)) & 3);
  endfunction

  function automatic int ref_prod(input sm8_t w, input sm8_t a, input bit apx);
    int s;
    s = 0;
    for (int ia = 0; ia < 4; ia++)
      for (int iw = 0; iw < 4; iw++)
        if (!(apx && (ia + iw) <= 1))
          s += part(int'(a.mag), ia) * part(int'(w.mag), iw) << (2*(ia+iw));
    return (w.sign ^ a.sign) ? -s : s;
  endfunction

  // cycles = max over anti-diagonals of the count of non-zero products
  function automatic int ref_cycles(input sm8_t w, input sm8_t a, input bit apx);
    int cnt [7];
    int m;
    foreach (cnt[k]) cnt[k] = 0;
    for (int ia = 0; ia < 4; ia++)
      for (int iw = 0; iw < 4; iw++)
        if (part(int'(a.mag), ia) != 0 && part(int'(w.mag), iw) != 0 && !(apx && (ia+iw) <= 1))
          cnt[ia+iw]++;
    m = 1;
    foreach (cnt[k]) if (cnt[k] > m) m = cnt[k];
    return m;
  endfunction

  function automatic sm8_t rand_sm(input int pct_zero);
    sm8_t v;
    for (int b = 0; b < 8; b++) v[b] = (($urandom % 100) >= pct_zero);
    return v;
  endfunction

  // ------------------------------------------------------------ scoreboard
  int exp_e [$];
  int exp_x [$];
  int run_e, run_x;

  always @(posedge clk) if (rst_n) begin
    if (ov_e && out_ready) begin
      checks++;
      if (exp_e.size() == 0 || acc_e != exp_e[0]) begin
        failures++;
        $display("FAIL exact result %0d expected %0d", acc_e, exp_e.size() ? exp_e[0] : 0);
      end
      if (exp_e.size()) void'(exp_e.pop_front());
    end
    if (ov_x && out_ready) begin
      checks++;
      if (exp_x.size() == 0 || acc_x != exp_x[0]) begin
        failures++;
        $display("FAIL approx result %0d expected %0d", acc_x, exp_x.size() ? exp_x[0] : 0);
      end
      if (exp_x.size()) void'(exp_x.pop_front());
    end
  end

  // ---------------------------------------------------------------- stimulus
  // Phase 1: drive only the exact unit's handshake timing (both units see the
  // same operations; the approximate one is checked for values only, with
  // in_valid gated so that it too accepts each operation exactly once).
  int cyc_since_load;
  int exp_ii;
  int first_load;

  task automatic run_ops(input int n_ops, input int red_len, input bit throttle);
    sm8_t w, a;
    int pz;
    bit ok;
    int k;
    k = 0;
    run_e = 0; run_x = 0;
    first_load = 1;
    for (int n = 0; n < n_ops; n++) begin
      pz = 50 + 10 * ($urandom % 5);
      case ($urandom % 16)
        0: begin w = 8'h7f; a = 8'hff; end        // worst case, 4 cycles
        1: begin w = 8'h00; a = rand_sm(pz); end  // zero operand
        default: begin w = rand_sm(pz); a = rand_sm(pz); end
      endcase
      k++;
      in_w = w; in_a = a; in_last = (k == red_len); in_valid = 1'b1;
      // wait for both units to accept
      // sample the handshake just before each rising edge
      do begin
        @(negedge clk);
        if (throttle) out_ready = ($urandom % 3) != 0;
        #1 ok = rdy_e && rdy_x;
        @(posedge clk);
      end while (!ok);
      if (!throttle) begin
        if (!first_load) begin
          checks++;
          if (cyc_since_load != exp_ii) begin
            failures++;
            $display("FAIL II %0d expected %0d", cyc_since_load, exp_ii);
          end
        end
        first_load = 0;
      end
      exp_ii = ref_cycles(w, a, 1'b0);
      run_e += ref_prod(w, a, 1'b0);
      run_x += ref_prod(w, a, 1'b1);
      if (k == red_len) begin
        exp_e.push_back(run_e);
        exp_x.push_back(run_x);
        run_e = 0; run_x = 0; k = 0;
      end
      #1 in_valid = 1'b0;
    end
  endtask

  // cycles between load handshakes of the exact unit
  always @(posedge clk) begin
    if (in_valid && rdy_e && rdy_x) cyc_since_load <= 1;
    else cyc_since_load <= cyc_since_load + 1;
  end

  initial begin
    in_valid = 1'b0; in_w = '0; in_a = '0; in_last = 1'b0; out_ready = 1'b1;
    cyc_since_load = 0; exp_ii = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    #1;
    // The approximate unit may finish earlier; the exact one sets the pace
    // as long as its II >= the approximate one's, which always holds.
    run_ops(399, 7, 1'b0);
    run_ops(200, 1, 1'b1);
    run_ops(201, 3, 1'b1);
    out_ready = 1'b1;
    repeat (20) @(posedge clk);
    checks++;
    if (exp_e.size() != 0 || exp_x.size() != 0) begin
      failures++;
      $display("FAIL %0d/%0d results never appeared", exp_e.size(), exp_x.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
