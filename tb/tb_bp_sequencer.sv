// tb_bp_sequencer: checks the streams the sequencer builds for a reduced
// 3 x 4 array. The caches are modelled by one-cycle-latency read ports whose
// data is a fixed function of bank and address; the array side accepts
// weight entries and activations with random back-pressure and returns
// results with random row tags. Checked: every weight entry has the skewed
// content (row r of step s = word w_base+s-r, valid for 0<=s-r<L, 'last' at
// the end of each reduction), every column receives its L activations in
// order followed by ROWS-1 bubbles, every result is written to bank c at
// r_base + t*ROWS + r with its data, 'done' comes once all results are in,
// and with no back-pressure one weight entry leaves per cycle. A run with
// accumulation checks that each result is written one cycle after it
// arrives, added to the word read from its address.
module tb_bp_sequencer;
  import bp_pkg::*;
  localparam int ROWS = 3, COLS = 4, WD = 256, AD = 256, RD = 64;
  localparam int WAW = $clog2(WD), AAW = $clog2(AD), RAW = $clog2(RD), RW = $clog2(ROWS);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, busy, done;
  logic [15:0] cfg_nred, cfg_ntile;
  logic [WAW-1:0] cfg_w_base;
  logic [AAW-1:0] cfg_a_base;
  logic [RAW-1:0] cfg_r_base;
  logic cfg_accum;
  logic [COLS-1:0] r_rd_en;
  logic [RAW-1:0]  r_rd_addr [COLS];
  logic [ACC_W-1:0] r_rd_data [COLS];
  logic [ROWS-1:0] w_rd_en;
  logic [WAW-1:0]  w_rd_addr [ROWS];
  logic [7:0]      w_rd_data [ROWS];
  logic [COLS-1:0] a_rd_en;
  logic [AAW-1:0]  a_rd_addr [COLS];
  logic [7:0]      a_rd_data [COLS];
  logic [COLS-1:0] r_wr_en;
  logic [RAW-1:0]  r_wr_addr [COLS];
  logic [ACC_W-1:0] r_wr_data [COLS];
  logic arr_clear, w_push_valid, w_push_ready;
  wlane_t w_push_data [ROWS];
  logic [COLS-1:0] a_valid, a_ready, r_valid, r_ready;
  alane_t a_data [COLS];
  logic signed [ACC_W-1:0] r_data [COLS];
  logic [RW-1:0] r_row [COLS];

  bp_sequencer #(.ROWS(ROWS), .COLS(COLS), .WDEPTH(WD), .ADEPTH(AD), .RDEPTH(RD)) dut (.*);

  function automatic logic [7:0] wword(input int r, input int a); return 8'(a * 7 + r * 3 + 1); endfunction
  function automatic logic [ACC_W-1:0] rword(input int c, input int a); return ACC_W'(a * 13 + c * 1000 - 77); endfunction
  function automatic logic [7:0] aword(input int c, input int a); return 8'(a * 5 + c * 11 + 2); endfunction

  // cache models
  always_ff @(posedge clk) begin
    for (int r = 0; r < ROWS; r++) if (w_rd_en[r]) w_rd_data[r] <= wword(r, int'(w_rd_addr[r]));
    for (int c = 0; c < COLS; c++) if (a_rd_en[c]) a_rd_data[c] <= aword(c, int'(a_rd_addr[c]));
    for (int c = 0; c < COLS; c++) if (r_rd_en[c]) r_rd_data[c] <= rword(c, int'(r_rd_addr[c]));
  end

  int nred, ntile, len, wb, ab, rb;
  int wstep, astep [COLS], rcount [COLS], tcnt [COLS][ROWS];
  bit backpressure;
  bit accum_run;
  logic [63:0] wq [COLS][$];
  int done_seen;
  int w_pushes, w_cycles;
  int cyc = 0, w_first, w_last;
  always @(posedge clk) cyc++;

  always @(posedge clk) if (rst_n && busy) begin
    // weight entries
    if (w_push_valid && w_push_ready) begin
      for (int r = 0; r < ROWS; r++) begin
        int i;
        bit v, l;
        i = wstep - r;
        v = (i >= 0 && i < len);
        l = v && (i % nred == nred - 1);
        checks++;
        if (w_push_data[r].valid != v || w_push_data[r].last != l ||
            (v && w_push_data[r].w != sm8_t'(wword(r, wb + i)))) begin
          failures++;
          $display("FAIL w step %0d row %0d: v%b l%b w%h", wstep, r,
                   w_push_data[r].valid, w_push_data[r].last, w_push_data[r].w);
        end
      end
      if (w_pushes == 0) w_first = cyc;
      w_last = cyc;
      wstep++;
      w_pushes++;
    end
    if (!backpressure) w_cycles++;
    // activations
    for (int c = 0; c < COLS; c++)
      if (a_valid[c] && a_ready[c]) begin
        checks++;
        if (a_data[c].valid != (astep[c] < len) ||
            (astep[c] < len && a_data[c].a != sm8_t'(aword(c, ab + astep[c])))) begin
          failures++;
          $display("FAIL a col %0d step %0d: v%b a%h", c, astep[c], a_data[c].valid, a_data[c].a);
        end
        astep[c]++;
      end
    // results: expected writes, straight away or one cycle later (accumulate)
    for (int c = 0; c < COLS; c++) begin
      if (r_valid[c]) begin
        int a;
        a = rb + tcnt[c][r_row[c]] * ROWS + int'(r_row[c]);
        if (accum_run) wq[c].push_back({32'(a), 32'(r_data[c]) + 32'(rword(c, a))});
        else           wq[c].push_back({32'(a), 32'(r_data[c])});
        tcnt[c][r_row[c]]++;
        rcount[c]++;
      end
    end
    // write-port check, after this cycle's expected writes have been queued
    for (int c = 0; c < COLS; c++)
      if (r_wr_en[c]) begin
        checks++;
        if (wq[c].size() == 0 || {32'(r_wr_addr[c]), 32'(r_wr_data[c])} != wq[c][0]) begin
          failures++;
          $display("FAIL r col %0d write addr %0d data %0d", c, r_wr_addr[c], $signed(r_wr_data[c]));
        end
        if (wq[c].size()) void'(wq[c].pop_front());
      end
  end

  always @(posedge clk) if (rst_n && done) done_seen++;

  task automatic run(input int nr, input int nt, input int w0, input int a0, input int r0, input bit bp, input bit acc);
    int steps, rowsent [COLS][ROWS];
    accum_run = acc; cfg_accum = acc;
    nred = nr; ntile = nt; len = nr * nt; wb = w0; ab = a0; rb = r0; backpressure = bp;
    steps = len + ROWS - 1;
    wstep = 0; done_seen = 0; w_pushes = 0; w_cycles = 0;
    foreach (astep[c]) begin astep[c] = 0; rcount[c] = 0; end
    foreach (tcnt[c, r]) begin tcnt[c][r] = 0; rowsent[c][r] = 0; end
    cfg_nred = 16'(nr); cfg_ntile = 16'(nt);
    cfg_w_base = WAW'(w0); cfg_a_base = AAW'(a0); cfg_r_base = RAW'(r0);
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin
      w_push_ready = bp ? ($urandom % 3 != 0) : 1'b1;
      for (int c = 0; c < COLS; c++) begin
        a_ready[c] = bp ? ($urandom % 3 != 0) : 1'b1;
        // return results once the streams are flowing
        r_valid[c] = 0;
        if (astep[c] > 2 && ($urandom % 3) == 0) begin
          int r;
          r = $urandom % ROWS;
          if (rowsent[c][r] < nt) begin
            r_valid[c] = 1; r_row[c] = RW'(r); r_data[c] = $signed(32'($urandom));
            rowsent[c][r]++;
          end
        end
      end
      @(posedge clk); #1;
    end
    r_valid = '0;
    foreach (wq[c]) begin
      checks++;
      if (wq[c].size() != 0) begin failures++; $display("FAIL col %0d: %0d writes missing", c, wq[c].size()); end
    end
    checks++;
    if (wstep != steps) begin failures++; $display("FAIL %0d weight entries, expected %0d", wstep, steps); end
    foreach (astep[c]) begin
      checks++;
      if (astep[c] != steps || rcount[c] != ROWS * nt) begin
        failures++; $display("FAIL col %0d: %0d steps %0d results", c, astep[c], rcount[c]);
      end
    end
    @(posedge clk); #1;
    checks++;
    if (done_seen != 1 || busy) begin failures++; $display("FAIL done %0d busy %b", done_seen, busy); end
  endtask

  initial begin
    start = 0; cfg_accum = 0; cfg_nred = '0; cfg_ntile = '0; cfg_w_base = '0; cfg_a_base = '0; cfg_r_base = '0;
    w_push_ready = 0; a_ready = '0; r_valid = '0; foreach (r_row[c]) begin r_row[c] = '0; r_data[c] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run(4, 3, 10, 20, 5, 1'b1, 1'b0);
    run(2, 5, 0, 0, 30, 1'b1, 1'b1);
    run(3, 20, 0, 100, 0, 1'b0, 1'b0);
    // one weight entry per cycle while the array never pushes back
    checks++;
    if (w_last - w_first + 1 != len + ROWS - 1) begin
      failures++; $display("FAIL weight rate: %0d entries over %0d cycles", w_pushes, w_last - w_first + 1);
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
