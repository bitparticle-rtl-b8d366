// bp_weight_buffer: weight buffer that gives the array inter-group elasticity.
//
// Every entry is one group step's worth of weights: one lane per PE row
// (ROWS=16). The buffer keeps the latest E+1 entries (E=3 in the paper, so 4
// entries): entry 0 is the oldest, still needed by the slowest column group,
// and higher entries are younger. Each column group c has a lag register d[c]
// = (steps done by column c) - (step of entry 0), which is also the select of
// the per-PE weight multiplexer: a PE in row r of column c uses lane r of
// entry d[c]. A column may take a step only while its entry is present
// (d[c] < count); the buffer holds at most E+1 entries, so columns never
// drift apart by more than the buffer can serve. When every column has moved
// past entry 0, that entry is dropped and all lags decrement.
//
// One entry can be pushed per cycle (push_valid/push_ready, ready while not
// full or while an entry leaves in the same cycle). 'clear' empties the buffer
// and zeroes the lags at the start of a run.
// The entry count E+1 and the per-MAC selection follow the paper; the lag
// registers and the shift-down organisation are this design's own.
module bp_weight_buffer
  import bp_pkg::*;
#(
  parameter int unsigned ROWS = 16,
  parameter int unsigned COLS = 32,
  parameter int unsigned E    = 3,
  localparam int unsigned N   = E + 1,
  localparam int unsigned DW  = $clog2(N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push_valid,
  output logic          push_ready,
  input  wlane_t        push_data [ROWS],
  output wlane_t        entry     [N][ROWS],
  input  logic [COLS-1:0] col_step,
  output logic [COLS-1:0] col_avail,
  output logic [DW-1:0]   col_sel [COLS],
  output logic [DW-1:0]   count
);
  wlane_t        ent [N][ROWS];
  logic [DW-1:0] cnt;
  logic [DW-1:0] lag [COLS];
  logic [DW-1:0] lag_inc [COLS];
  logic          pop, push;
  logic          all_past;

  always_comb begin
    all_past = 1'b1;
    for (int c = 0; c < COLS; c++) begin
      lag_inc[c] = lag[c] + DW'(col_step[c]);
      if (lag_inc[c] == '0) all_past = 1'b0;
      col_avail[c] = lag[c] < cnt;
      col_sel[c]   = lag[c];
    end
    pop        = (cnt != '0) && all_past;
    push_ready = (cnt < DW'(N)) || pop;
    push       = push_valid && push_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      cnt <= '0;
      for (int c = 0; c < COLS; c++) lag[c] <= '0;
    end else begin
      for (int c = 0; c < COLS; c++) lag[c] <= lag_inc[c] - DW'(pop);
      cnt <= cnt + DW'(push) - DW'(pop);
      for (int i = 0; i < N; i++) begin
        if (pop && i < N - 1) ent[i] <= ent[i+1];
        if (push && DW'(i) == cnt - DW'(pop)) ent[i] <= push_data;
      end
    end
  end

  always_comb
    for (int i = 0; i < N; i++) entry[i] = ent[i];

  assign count = cnt;

  for (genvar c = 0; c < COLS; c++) begin : g_chk
    a_step_needs_weight: assert property (@(posedge clk) disable iff (!rst_n)
      col_step[c] |-> col_avail[c]);
  end
endmodule
