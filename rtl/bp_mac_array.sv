// bp_mac_array: ROWS x COLS (16 x 32) quasi-synchronous array of MAC PEs.
//
// Data movement (follows the paper): a weight-buffer entry holds one weight
// per row, shared by all PEs of that row; activations enter each column at
// the top and move one row down per step of that column, so row r of column
// c works on the activation that entered column c r steps earlier.
//
// Quasi-synchronisation (follows the paper): each column is a group. A
// column takes a step only when every PE in it accepts its operation in the
// same cycle (into its Q-entry operand queue, or by zero-value filtering);
// on a step the activation chain of that column shifts down by one. Columns
// step independently of each other, limited by the E+1-entry weight buffer,
// which gives each column the weight entry of the step it is at through its
// lag select (the per-MAC weight multiplexer).
//
// Interfaces:
//  * w_push_*: one weight entry (ROWS lanes: weight, valid, last) per cycle.
//  * a_*[c]: one activation lane per step of column c; a lane with
//    valid=0 is a bubble that still moves through the chain but gives no
//    operation (used to fill and drain the skew). a_ready[c] is the column's
//    step signal and depends combinationally on a_valid[c] and a_data[c].
//  * r_*[c]: finished sums of column c with the row they came from; when
//    several PEs of a column finish together the lowest row goes first (own
//    choice; the paper only says results go to a result-cache bank per column).
//  * clear resets the weight buffer between runs.
// A PE's operation is valid only if both its weight lane and its activation
// lane are valid (own choice for the skewed fill and drain).
// Lint note: wb_count, pe_filt and pe_busy are reported unused. They carry no
// function in the array and are kept as named observation points (buffer
// occupancy, filtered operations, busy MACs) that the testbenches count.
module bp_mac_array
  import bp_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 32,
  parameter int unsigned Q      = 2,
  parameter int unsigned E      = 3,
  parameter bit          FILTER = 1'b1,
  parameter bit          APPROX = 1'b0,
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    w_push_valid,
  output logic                    w_push_ready,
  input  wlane_t                  w_push_data [ROWS],
  input  logic [COLS-1:0]         a_valid,
  output logic [COLS-1:0]         a_ready,
  input  alane_t                  a_data [COLS],
  output logic [COLS-1:0]         r_valid,
  input  logic [COLS-1:0]         r_ready,
  output logic signed [ACC_W-1:0] r_data [COLS],
  output logic [RW-1:0]           r_row  [COLS]
);
  localparam int unsigned N  = E + 1;
  localparam int unsigned DW = $clog2(N + 1);
  localparam int unsigned SW = $clog2(N);     // entry select width

  // ------------------------------------------------------- weight buffer
  wlane_t          wb_entry [N][ROWS];
  logic [COLS-1:0] col_step, col_avail;
  logic [DW-1:0]   col_sel [COLS];
  logic [DW-1:0]   wb_count;

  bp_weight_buffer #(.ROWS(ROWS), .COLS(COLS), .E(E)) u_wbuf (
    .clk, .rst_n, .clear,
    .push_valid(w_push_valid), .push_ready(w_push_ready), .push_data(w_push_data),
    .entry(wb_entry), .col_step, .col_avail, .col_sel, .count(wb_count)
  );

  // ------------------------------------------------------------ PE grid
  alane_t                  act      [ROWS][COLS];
  alane_t                  achain   [ROWS][COLS]; // row r's register feeds row r+1
  logic                    pe_valid [ROWS][COLS];
  logic                    pe_ready [ROWS][COLS];
  mac_op_t                 pe_op    [ROWS][COLS];
  logic                    accept   [ROWS][COLS];
  logic                    po_valid [ROWS][COLS];
  logic                    po_ready [ROWS][COLS];
  logic signed [ACC_W-1:0] po_acc   [ROWS][COLS];
  logic                    pe_filt  [ROWS][COLS];
  logic                    pe_busy  [ROWS][COLS];

  for (genvar c = 0; c < COLS; c++) begin : g_col
    for (genvar r = 0; r < ROWS; r++) begin : g_row
      wlane_t wl;
      always_comb begin
        act[r][c]      = (r == 0) ? a_data[c] : achain[(r == 0) ? 0 : r-1][c];
        wl             = wb_entry[SW'(col_sel[c])][r];   // per-MAC weight select
        pe_op[r][c].w  = wl.w;
        pe_op[r][c].a  = act[r][c].a;
        pe_op[r][c].last = wl.last;
        pe_valid[r][c] = wl.valid && act[r][c].valid;
      end
      // kept apart from the block above so the PE's ready never appears to
      // feed its own operand
      assign accept[r][c] = !pe_valid[r][c] || pe_ready[r][c];

      bp_pe #(.Q(Q), .FILTER(FILTER), .APPROX(APPROX)) u_pe (
        .clk, .rst_n,
        .in_valid (col_step[c] && pe_valid[r][c]),
        .in_ready (pe_ready[r][c]),
        .in_op    (pe_op[r][c]),
        .out_valid(po_valid[r][c]),
        .out_ready(po_ready[r][c]),
        .out_acc  (po_acc[r][c]),
        .filtered (pe_filt[r][c]),
        .busy     (pe_busy[r][c])
      );

      // activation chain register of this PE (feeds the row below)
      always_ff @(posedge clk) begin
        if (!rst_n) achain[r][c] <= '0;
        else if (col_step[c]) achain[r][c] <= act[r][c];
      end
    end

    // group step: every PE of the column accepts in the same cycle
    always_comb begin
      logic all_ok;
      all_ok = 1'b1;
      for (int r = 0; r < ROWS; r++) all_ok &= accept[r][c];
      col_step[c] = col_avail[c] && a_valid[c] && all_ok;
    end
    assign a_ready[c] = col_step[c];

    // result arbitration: lowest row first
    always_comb begin
      logic found;
      found      = 1'b0;
      r_valid[c] = 1'b0;
      r_data[c]  = '0;
      r_row[c]   = '0;
      for (int r = 0; r < ROWS; r++) begin
        po_ready[r][c] = 1'b0;
        if (po_valid[r][c] && !found) begin
          found          = 1'b1;
          r_valid[c]     = 1'b1;
          r_data[c]      = po_acc[r][c];
          r_row[c]       = RW'(r);
          po_ready[r][c] = r_ready[c];
        end
      end
    end
  end
endmodule
