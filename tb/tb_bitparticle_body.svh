// Shared body of the top-level testbenches: host-port tasks, reference model,
// run-time bounds and mechanism counters. Included inside a testbench module
// that declares ROWS, COLS, MAXL, the port signals and 'dut'.

  sm8_t W [ROWS][MAXL];
  sm8_t A [COLS][MAXL];
  int   rimg [COLS][int];   // expected result-cache contents
  int   cyc = 0;
  always @(posedge clk) cyc++;

  function automatic sm8_t rand_sm();
    sm8_t v;
    if (($urandom % 5) == 0) return sm8_t'(($urandom % 2) << 7); // zero value
    for (int b = 0; b < 8; b++) v[b] = ($urandom % 100) >= 60;
    return v;
  endfunction

  function automatic int smval(input sm8_t v);
    return v.sign ? -int'(v.mag) : int'(v.mag);
  endfunction

  task automatic init_ports();
    host_w_we = 0; host_a_we = 0; host_r_re = 0;
    host_w_bank = '0; host_a_bank = '0; host_r_bank = '0;
    host_w_addr = '0; host_a_addr = '0; host_r_addr = '0;
    host_w_data = '0; host_a_data = '0;
    start = 0; cfg_accum = 0; cfg_nred = '0; cfg_ntile = '0;
    cfg_w_base = '0; cfg_a_base = '0; cfg_r_base = '0;
  endtask

  // one run: fill, start, wait, read back and compare; with 'accum' the
// results add to what the previous run left at the same addresses
  task automatic run_layer(input int nred, input int ntile, input int wb,
                           input int ab, input int rb, input bit accum);
    int len, t0, t1, exp, steps;
    logic signed [ACC_W-1:0] got;
    len = nred * ntile;
    foreach (W[r, i]) W[r][i] = rand_sm();
    foreach (A[c, i]) A[c][i] = rand_sm();
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < len; i++) begin
        host_w_we = 1; host_w_bank = $bits(host_w_bank)'(r);
        host_w_addr = $bits(host_w_addr)'(wb + i); host_w_data = W[r][i];
        @(posedge clk); #1;
      end
    host_w_we = 0;
    for (int c = 0; c < COLS; c++)
      for (int i = 0; i < len; i++) begin
        host_a_we = 1; host_a_bank = $bits(host_a_bank)'(c);
        host_a_addr = $bits(host_a_addr)'(ab + i); host_a_data = A[c][i];
        @(posedge clk); #1;
      end
    host_a_we = 0;
    cfg_nred = 16'(nred); cfg_ntile = 16'(ntile);
    cfg_w_base = $bits(cfg_w_base)'(wb); cfg_a_base = $bits(cfg_a_base)'(ab);
    cfg_r_base = $bits(cfg_r_base)'(rb);
    cfg_accum = accum;
    start = 1;
    t0 = cyc;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    t1 = cyc;
    // schedule bounds
    steps = len + ROWS - 1;
    checks++;
    if (t1 - t0 < steps || t1 - t0 > 4 * len + 4 * ROWS + 20) begin
      failures++;
      $display("FAIL run time %0d cycles for %0d steps", t1 - t0, steps);
    end
    $display("run nred=%0d ntile=%0d: %0d cycles, %0d steps", nred, ntile, t1 - t0, steps);
    // read back
    for (int c = 0; c < COLS; c++)
      for (int t = 0; t < ntile; t++)
        for (int r = 0; r < ROWS; r++) begin
          host_r_re = 1; host_r_bank = $bits(host_r_bank)'(c);
          host_r_addr = $bits(host_r_addr)'(rb + t * ROWS + r);
          @(posedge clk); #1;
          host_r_re = 0;
          got = host_r_rdata;
          exp = 0;
          for (int n = 0; n < nred; n++)
            exp += smval(W[r][t*nred+n]) * smval(A[c][t*nred+n]);
          if (accum) exp += rimg[c][rb + t * ROWS + r];
          rimg[c][rb + t * ROWS + r] = exp;
          checks++;
          if (got != exp) begin
            failures++;
            $display("FAIL r%0d c%0d t%0d got %0d exp %0d", r, c, t, got, exp);
          end
        end
  endtask

  // ------------------------------------------------------- mechanism counters
  int n_group_stall = 0, n_div_stall = 0, n_filtered = 0;
  int n_multi = 0, n_single = 0, n_res_wait = 0;
  always @(posedge clk) if (rst_n) begin
    for (int c = 0; c < COLS; c++) begin
      if (dut.u_array.col_avail[c] && dut.u_array.a_valid[c] && !dut.u_array.col_step[c])
        n_group_stall++;
      if (!dut.u_array.col_avail[c] && dut.u_array.a_valid[c] && dut.u_array.wb_count != 0)
        n_div_stall++;
      for (int r = 0; r < ROWS; r++) begin
        if (dut.u_array.pe_filt[r][c]) n_filtered++;
        if (dut.u_array.po_valid[r][c] && !dut.u_array.po_ready[r][c]) n_res_wait++;
      end
    end
  end
  for (genvar c = 0; c < COLS; c++) begin : g_mc
    for (genvar r = 0; r < ROWS; r++) begin : g_mr
      always @(posedge clk) if (rst_n) begin
        if (dut.u_array.g_col[c].g_row[r].u_pe.u_mac.busy_q) begin
          if (!dut.u_array.g_col[c].g_row[r].u_pe.u_mac.done) n_multi++;
          else n_single++;
        end
      end
    end
  end

  task automatic check_mechanisms();
    $display("group stalls %0d, divergence stalls %0d, filtered %0d, multi-cycle %0d, single-cycle %0d, result waits %0d",
             n_group_stall, n_div_stall, n_filtered, n_multi, n_single, n_res_wait);
    checks++; if (n_group_stall == 0) begin failures++; $display("FAIL no group stall"); end
    checks++; if (n_div_stall == 0) begin failures++; $display("FAIL no divergence stall"); end
    checks++; if (n_filtered == 0) begin failures++; $display("FAIL no zero-value filtering"); end
    checks++; if (n_multi == 0) begin failures++; $display("FAIL no multi-cycle product"); end
    checks++; if (n_single == 0) begin failures++; $display("FAIL no single-cycle product"); end
    checks++; if (n_res_wait == 0) begin failures++; $display("FAIL no result-port wait"); end
  endtask
