// bp_sequencer: streams one layer tile from the caches through the array.
//
// A run computes NTILE outputs in every PE, each the sum of NRED products.
// Operands are expected in the caches in stream order: bank r of the weight
// cache holds the weights of PE row r, bank c of the activation cache the
// activations of column c, both starting at a base address, so operation i of
// a PE uses weight word w_base+i of its row and activation word a_base+i of
// its column. Laying a convolution out this way (im2col order, dataflow (a)
// with OXu x OYu = 32 or dataflow (b) with Bu = 32) is left to whoever fills
// the caches; the paper leaves mapping and tiling to an external mapper.
//
// Per run, with L = NRED*NTILE and S = L + ROWS - 1 group steps:
//  * weight side: for step s the row-r lane reads weight s-r (valid for
//    0 <= s-r < L, tagged 'last' at the end of each reduction). This skew
//    matches the activations moving one row down per step.
//  * activation side: column c reads activation s for s < L and sends
//    bubbles for the remaining ROWS-1 steps that drain the skew. Every column
//    has its own step counter, so columns proceed at their own pace.
//  * both sides issue a cache read only when a 2-entry prefetch FIFO is sure
//    to have room for the word one cycle later, which keeps one step per
//    cycle per column when nothing stalls.
//  * results: PE (r, c)'s t-th sum is written to result bank c at
//    r_base + t*ROWS + r, or added to the word already there when
//    cfg_accum is set (partial sums of a reduction split across runs). The
//    run ends when every column has written ROWS*NTILE results; 'done'
//    pulses for one cycle.
// The skewed stream order and the result layout are this design's own
// choices; the caches, their banking and the stepping scheme follow the paper.
// NRED and NTILE must be at least 1 and the streams must fit the banks.
// r_ready is tied high: a result port is written to the cache in the cycle
// it is offered, so the array's result handshake never waits here.
module bp_sequencer
  import bp_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 32,
  parameter int unsigned WDEPTH = 4096,
  parameter int unsigned ADEPTH = 4096,
  parameter int unsigned RDEPTH = 1024,
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned AAW   = $clog2(ADEPTH),
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned RW    = (ROWS > 1) ? $clog2(ROWS) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // run control
  input  logic                    start,
  input  logic [15:0]             cfg_nred,
  input  logic [15:0]             cfg_ntile,
  input  logic [WAW-1:0]          cfg_w_base,
  input  logic [AAW-1:0]          cfg_a_base,
  input  logic [RAW-1:0]          cfg_r_base,
  input  logic                    cfg_accum,
  output logic                    busy,
  output logic                    done,
  // weight cache read ports
  output logic [ROWS-1:0]         w_rd_en,
  output logic [WAW-1:0]          w_rd_addr [ROWS],
  input  logic [7:0]              w_rd_data [ROWS],
  // activation cache read ports
  output logic [COLS-1:0]         a_rd_en,
  output logic [AAW-1:0]          a_rd_addr [COLS],
  input  logic [7:0]              a_rd_data [COLS],
  // result cache read ports (partial-sum accumulation)
  output logic [COLS-1:0]         r_rd_en,
  output logic [RAW-1:0]          r_rd_addr [COLS],
  input  logic [ACC_W-1:0]        r_rd_data [COLS],
  // result cache write ports
  output logic [COLS-1:0]         r_wr_en,
  output logic [RAW-1:0]          r_wr_addr [COLS],
  output logic [ACC_W-1:0]        r_wr_data [COLS],
  // array side
  output logic                    arr_clear,
  output logic                    w_push_valid,
  input  logic                    w_push_ready,
  output wlane_t                  w_push_data [ROWS],
  output logic [COLS-1:0]         a_valid,
  input  logic [COLS-1:0]         a_ready,
  output alane_t                  a_data [COLS],
  input  logic [COLS-1:0]         r_valid,
  output logic [COLS-1:0]         r_ready,
  input  logic signed [ACC_W-1:0] r_data [COLS],
  input  logic [RW-1:0]           r_row  [COLS]
);
  typedef wlane_t [ROWS-1:0] wentry_t;

  // ------------------------------------------------------------ run state
  logic [15:0]    nred;
  logic [31:0]    len;        // L
  logic [31:0]    nsteps;     // S
  logic [15:0]    res_target; // results per column
  logic [WAW-1:0] w_base;
  logic [AAW-1:0] a_base;
  logic [RAW-1:0] r_base;
  logic           busy_q;
  logic           all_done;

  // ------------------------------------------------------- weight side
  logic [31:0]   ws;                 // next step to read
  logic [15:0]   wmod [ROWS];        // position inside the reduction
  logic          w_pend;
  logic [ROWS-1:0] w_pend_valid, w_pend_last;
  logic          w_issue;
  wentry_t       wf_in, wf_out;
  logic          wf_in_ready;
  logic [1:0]    wf_count;
  logic          wf_pop;

  always_comb begin
    wf_pop  = w_push_valid && w_push_ready;
    w_issue = busy_q && (ws < nsteps) &&
              (32'(wf_count) + 32'(w_pend) - 32'(wf_pop) < 32'd2);
    for (int r = 0; r < ROWS; r++) begin
      logic signed [32:0] i;
      i = $signed({1'b0, ws}) - 33'(r);
      w_rd_en[r]   = w_issue && (i >= 0) && (i < $signed({1'b0, len}));
      w_rd_addr[r] = w_base + WAW'(i);
    end
    for (int r = 0; r < ROWS; r++) begin
      wf_in[r].valid = w_pend_valid[r];
      wf_in[r].last  = w_pend_last[r];
      wf_in[r].w     = w_pend_valid[r] ? sm8_t'(w_rd_data[r]) : '0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      w_pend       <= 1'b0;
      w_pend_valid <= '0;
      w_pend_last  <= '0;
      ws           <= '0;
      for (int r = 0; r < ROWS; r++) wmod[r] <= '0;
    end else if (start && !busy_q) begin
      w_pend <= 1'b0;
      ws     <= '0;
      for (int r = 0; r < ROWS; r++) wmod[r] <= '0;
    end else begin
      w_pend <= w_issue;
      if (w_issue) begin
        ws <= ws + 1;
        for (int r = 0; r < ROWS; r++) begin
          w_pend_valid[r] <= w_rd_en[r];
          w_pend_last[r]  <= w_rd_en[r] && (wmod[r] == nred - 1'b1);
          if (w_rd_en[r]) wmod[r] <= (wmod[r] == nred - 1'b1) ? '0 : wmod[r] + 1'b1;
        end
      end
    end
  end

  bp_fifo #(.T(wentry_t), .DEPTH(2)) u_wfifo (
    .clk, .rst_n, .clear(start && !busy_q),
    .in_valid(w_pend), .in_ready(wf_in_ready), .in_data(wf_in),
    .out_valid(w_push_valid), .out_ready(w_push_ready), .out_data(wf_out),
    .count(wf_count)
  );

  always_comb
    for (int r = 0; r < ROWS; r++) w_push_data[r] = wf_out[r];

  // --------------------------------------------------- activation side
  for (genvar c = 0; c < COLS; c++) begin : g_act
    logic [31:0] as;
    logic        pend, pend_valid, issue, pop;
    logic [1:0]  cnt;
    alane_t      in_lane;
    logic        in_ready_unused;

    always_comb begin
      pop          = a_valid[c] && a_ready[c];
      issue        = busy_q && (as < nsteps) &&
                     (32'(cnt) + 32'(pend) - 32'(pop) < 32'd2);
      a_rd_en[c]   = issue && (as < len);
      a_rd_addr[c] = a_base + AAW'(as);
      in_lane.valid = pend_valid;
      in_lane.a     = pend_valid ? sm8_t'(a_rd_data[c]) : '0;
    end

    always_ff @(posedge clk) begin
      if (!rst_n) begin
        as <= '0; pend <= 1'b0; pend_valid <= 1'b0;
      end else if (start && !busy_q) begin
        as <= '0; pend <= 1'b0;
      end else begin
        pend <= issue;
        if (issue) begin
          as         <= as + 1;
          pend_valid <= a_rd_en[c];
        end
      end
    end

    bp_fifo #(.T(alane_t), .DEPTH(2)) u_afifo (
      .clk, .rst_n, .clear(start && !busy_q),
      .in_valid(pend), .in_ready(in_ready_unused), .in_data(in_lane),
      .out_valid(a_valid[c]), .out_ready(a_ready[c]), .out_data(a_data[c]),
      .count(cnt)
    );
  end

  // ------------------------------------------------------- result side
  // Without accumulation a result is written straight away. With cfg_accum
  // the old word is read first and old+new is written one cycle later, so a
  // reduction split over several runs (C tiled into C1 x C0) adds up in the
  // result cache. Every address is written once per run, so the
  // read-modify-write pipeline has no hazards.
  logic [RAW-1:0]   tile_cnt [COLS][ROWS];
  logic [15:0]      res_cnt  [COLS];
  logic             accum;
  logic [RAW-1:0]   res_addr [COLS];
  logic [COLS-1:0]  rmw_v;
  logic [RAW-1:0]   rmw_addr [COLS];
  logic [ACC_W-1:0] rmw_data [COLS];

  always_comb begin
    r_ready  = '1;
    all_done = (rmw_v == '0);
    for (int c = 0; c < COLS; c++) begin
      res_addr[c]  = r_base + RAW'(tile_cnt[c][r_row[c]] * RAW'(ROWS)) + RAW'(r_row[c]);
      r_rd_en[c]   = busy_q && accum && r_valid[c];
      r_rd_addr[c] = res_addr[c];
      if (accum) begin
        r_wr_en[c]   = rmw_v[c];
        r_wr_addr[c] = rmw_addr[c];
        r_wr_data[c] = rmw_data[c] + r_rd_data[c];
      end else begin
        r_wr_en[c]   = busy_q && r_valid[c];
        r_wr_addr[c] = res_addr[c];
        r_wr_data[c] = r_data[c];
      end
      if (res_cnt[c] != res_target) all_done = 1'b0;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      done   <= 1'b0;
      accum  <= 1'b0;
      rmw_v  <= '0;
      nred <= '0; len <= '0; nsteps <= '0; res_target <= '0;
      w_base <= '0; a_base <= '0; r_base <= '0;
      for (int c = 0; c < COLS; c++) begin
        res_cnt[c]  <= '0;
        rmw_addr[c] <= '0;
        rmw_data[c] <= '0;
        for (int r = 0; r < ROWS; r++) tile_cnt[c][r] <= '0;
      end
    end else begin
      done <= 1'b0;
      if (start && !busy_q) begin
        busy_q     <= 1'b1;
        accum      <= cfg_accum;
        nred       <= cfg_nred;
        len        <= 32'(cfg_nred) * 32'(cfg_ntile);
        nsteps     <= 32'(cfg_nred) * 32'(cfg_ntile) + 32'(ROWS - 1);
        res_target <= 16'(cfg_ntile * 16'(ROWS));
        w_base     <= cfg_w_base;
        a_base     <= cfg_a_base;
        r_base     <= cfg_r_base;
        for (int c = 0; c < COLS; c++) begin
          res_cnt[c] <= '0;
          for (int r = 0; r < ROWS; r++) tile_cnt[c][r] <= '0;
        end
      end else if (busy_q) begin
        for (int c = 0; c < COLS; c++) begin
          rmw_v[c]    <= accum && r_valid[c];
          rmw_addr[c] <= res_addr[c];
          rmw_data[c] <= r_data[c];
          if (r_valid[c]) begin
            res_cnt[c]            <= res_cnt[c] + 1'b1;
            tile_cnt[c][r_row[c]] <= tile_cnt[c][r_row[c]] + 1'b1;
          end
        end
        if (all_done) begin
          busy_q <= 1'b0;
          done   <= 1'b1;
        end
      end
    end
  end

  assign busy      = busy_q;
  assign arr_clear = start && !busy_q;

  // the prefetch FIFOs are sized so that a word read from a cache always
  // finds room when it arrives
  a_wfifo_room: assert property (@(posedge clk) disable iff (!rst_n) w_pend |-> wf_in_ready);
endmodule
