// tb_bp_weight_buffer: checks the E+1-entry weight buffer with 8 columns.
// Entries are pushed in order, lane r of step s carrying the magnitude
// (s*5 + r) mod 128, so every weight a column selects can be checked against
// the step it is at. Columns step at random whenever their entry is available.
// The test checks the selected lanes, that a column is available exactly when
// its step has been pushed and is fewer than E+1 steps ahead of the slowest
// column, and that the buffer never holds more than E+1 entries.
module tb_bp_weight_buffer;
  import bp_pkg::*;
  localparam int ROWS = 4, COLS = 8, E = 3, N = E + 1, DW = $clog2(N + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic push_valid, push_ready, clear;
  wlane_t push_data [ROWS];
  wlane_t entry [N][ROWS];
  logic [COLS-1:0] col_step, col_avail;
  logic [DW-1:0] col_sel [COLS];
  logic [DW-1:0] count;

  bp_weight_buffer #(.ROWS(ROWS), .COLS(COLS), .E(E)) dut (.*);

  int steps [COLS];
  int pushed;
  int min_s;
  int total_steps;
  bit will_push;

  always_comb
    for (int r = 0; r < ROWS; r++) begin
      push_data[r].valid = 1'b1;
      push_data[r].last  = 1'b0;
      push_data[r].w     = sm8_t'({1'b0, 7'((pushed * 5 + r) % 128)});
    end

  initial begin
    clear = 0; push_valid = 0; col_step = '0; pushed = 0;
    foreach (steps[c]) steps[c] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      push_valid = ($urandom % 5) != 0;
      min_s = steps[0];
      foreach (steps[c]) if (steps[c] < min_s) min_s = steps[c];
      for (int c = 0; c < COLS; c++) begin
        // availability rule
        checks++;
        if (col_avail[c] != (steps[c] < pushed && steps[c] - min_s < N)) begin
          failures++;
          $display("FAIL avail col %0d steps %0d min %0d pushed %0d", c, steps[c], min_s, pushed);
        end
        col_step[c] = col_avail[c] && (($urandom % 4) < ((c % 4) + 1));
        if (col_step[c]) begin
          for (int r = 0; r < ROWS; r++) begin
            checks++;
            if (entry[col_sel[c]][r].w.mag != 7'((steps[c] * 5 + r) % 128)) begin
              failures++;
              $display("FAIL col %0d step %0d row %0d weight %0d", c, steps[c], r,
                       entry[col_sel[c]][r].w.mag);
            end
          end
        end
      end
      checks++;
      if (count > N) begin failures++; $display("FAIL count %0d", count); end
      #3 will_push = push_valid && push_ready;
      @(posedge clk);
      #1;
      if (will_push) pushed++;
      foreach (steps[c]) if (col_step[c]) steps[c]++;
    end
    total_steps = 0;
    foreach (steps[c]) total_steps += steps[c];
    checks++;
    if (total_steps < 1000) begin failures++; $display("FAIL little progress %0d", total_steps); end
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
