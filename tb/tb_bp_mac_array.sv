// tb_bp_mac_array: end-to-end check of a reduced 4 x 6 quasi-synchronous array.
//
// The testbench acts as the weight and activation caches: it pushes skewed
// weight entries (row r of step s carries weight s-r of that row) and feeds
// every column its activation stream, inserting random gaps per column so the
// columns drift apart. Operands are random sign-magnitude values with many
// zero bits and some zero values. Every returned sum is checked against an
// integer reference sum_i W[r][i]*A[c][i] over one reduction of length NRED.
// It also counts that group stalls (a column waiting for one of its PEs),
// divergence stalls (a column waiting because the weight buffer cannot serve
// it yet), zero-value filtering and multi-cycle products all happened.
module tb_bp_mac_array;
  import bp_pkg::*;
  localparam int ROWS = 4, COLS = 6, Q = 2, E = 3;
  localparam int NRED = 5, NTILE = 6, L = NRED * NTILE, S = L + ROWS - 1;
  localparam int RW = $clog2(ROWS);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic                    clear;
  logic                    w_push_valid, w_push_ready;
  wlane_t                  w_push_data [ROWS];
  logic [COLS-1:0]         a_valid, a_ready, r_valid, r_ready;
  alane_t                  a_data [COLS];
  logic signed [ACC_W-1:0] r_data [COLS];
  logic [RW-1:0]           r_row [COLS];

  bp_mac_array #(.ROWS(ROWS), .COLS(COLS), .Q(Q), .E(E)) dut (.*);

  sm8_t W [ROWS][L];
  sm8_t A [COLS][L];
  int   expq [ROWS][COLS][$];
  int   wstep;
  int   astep [COLS];
  int   got;

  function automatic sm8_t rand_sm();
    sm8_t v;
    if (($urandom % 5) == 0) return sm8_t'(($urandom % 2) << 7); // zero value
    for (int b = 0; b < 8; b++) v[b] = ($urandom % 100) >= 60;
    return v;
  endfunction

  function automatic int smval(input sm8_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  // drive the weight entry for step wstep
  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      int i;
      i = wstep - r;
      w_push_data[r].valid = (i >= 0 && i < L);
      w_push_data[r].last  = (i >= 0 && i < L) && ((i % NRED) == NRED - 1);
      w_push_data[r].w     = (i >= 0 && i < L) ? W[r][i] : '0;
    end
    for (int c = 0; c < COLS; c++) begin
      a_data[c].valid = astep[c] < L;
      a_data[c].a     = (astep[c] < L) ? A[c][astep[c]] : '0;
    end
  end

  // mechanism counters
  int n_group_stall = 0, n_div_stall = 0, n_filtered = 0, n_multi = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < COLS; c++) begin
      if (dut.col_avail[c] && a_valid[c] && !dut.col_step[c]) n_group_stall++;
      if (!dut.col_avail[c] && a_valid[c] && dut.u_wbuf.count != 0) n_div_stall++;
      for (int r = 0; r < ROWS; r++) begin
        if (dut.pe_filt[r][c]) n_filtered++;
      end
    end
  end

  // a product still being worked on after a compute cycle
  for (genvar c = 0; c < COLS; c++) begin : g_mc
    for (genvar r = 0; r < ROWS; r++) begin : g_mr
      always @(posedge clk)
        if (rst_n && dut.g_col[c].g_row[r].u_pe.u_mac.busy_q &&
            !dut.g_col[c].g_row[r].u_pe.u_mac.done) n_multi++;
    end
  end

  // result checking
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < COLS; c++)
      if (r_valid[c] && r_ready[c]) begin
        checks++;
        got++;
        if (expq[r_row[c]][c].size() == 0 || expq[r_row[c]][c][0] != r_data[c]) begin
          failures++;
          $display("FAIL r%0d c%0d got %0d exp %0d", r_row[c], c, r_data[c],
                   expq[r_row[c]][c].size() ? expq[r_row[c]][c][0] : 0);
        end
        if (expq[r_row[c]][c].size()) void'(expq[r_row[c]][c].pop_front());
      end
  end

  bit wpush;
  logic [COLS-1:0] astep_fire;
  initial begin
    clear = 0; w_push_valid = 0; a_valid = '0; r_ready = '1; wstep = 0; got = 0;
    foreach (astep[c]) astep[c] = 0;
    foreach (W[r, i]) W[r][i] = rand_sm();
    foreach (A[c, i]) A[c][i] = rand_sm();
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < COLS; c++)
        for (int t = 0; t < NTILE; t++) begin
          int s;
          s = 0;
          for (int n = 0; n < NRED; n++)
            s += smval(W[r][t*NRED+n]) * smval(A[c][t*NRED+n]);
          expq[r][c].push_back(s);
        end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    while (got < ROWS * COLS * NTILE) begin
      w_push_valid = wstep < S;
      for (int c = 0; c < COLS; c++)
        a_valid[c] = (astep[c] < S) && (($urandom % 8) != 0 || c == 0);
      r_ready = ($urandom % 4 == 0) ? '0 : '1;
      #3;
      wpush = w_push_valid && w_push_ready;
      astep_fire = a_valid & a_ready;
      @(posedge clk); #1;
      if (wpush) wstep++;
      for (int c = 0; c < COLS; c++) if (astep_fire[c]) astep[c]++;
    end
    repeat (5) @(posedge clk);
    checks++;
    if (n_group_stall == 0) begin failures++; $display("FAIL no group stall"); end
    checks++;
    if (n_div_stall == 0) begin failures++; $display("FAIL no divergence stall"); end
    checks++;
    if (n_filtered == 0) begin failures++; $display("FAIL no zero-value filtering"); end
    checks++;
    if (n_multi == 0) begin failures++; $display("FAIL no multi-cycle product"); end
    $display("group stalls %0d, divergence stalls %0d, filtered %0d, multi-cycle %0d",
             n_group_stall, n_div_stall, n_filtered, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog, %0d results", got);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
