// bitparticle_top: BitParticle accelerator core.
//
// A 16 x 32 array of particlization MAC units (dual-factor bit-sparsity
// exploiting, 1-4 cycles per 8-bit sign-magnitude product) run under the
// quasi-synchronous scheme: each column is a group that steps as a whole
// when all its PEs accept (Q=2 operand queues with zero-value filtering),
// while columns may drift apart by the depth of an E+1 = 4 entry weight
// buffer. Weights come from a 16-bank weight cache (64 KB, one bank per PE
// row), activations from a 32-bank activation cache (128 KB, one bank per
// column) and enter each column at the top, results go to a 32-bank result
// cache (128 KB). A sequencer streams one run (NTILE outputs per PE, each a
// reduction of NRED products) from the caches through the array.
//
// External interface (own choice; the paper only names a DRAM interface):
//  * host_w_* / host_a_*: write one word into a weight / activation bank.
//  * host_r_*: read one result word; host_r_rdata is valid the cycle after
//    host_r_re.
//  * start + cfg_*: launch a run when busy is low; done pulses at its end.
//    With cfg_accum set, results are added to the result-cache words
//    already at their addresses (partial sums); the host must not read the
//    result cache during such a run.
// Sizes, banking, Q, E and the array shape are the paper's; the result word
// width (32 bits) and the cache port organisation are this design's own.
module bitparticle_top
  import bp_pkg::*;
#(
  parameter int unsigned ROWS   = 16,
  parameter int unsigned COLS   = 32,
  parameter int unsigned Q      = 2,
  parameter int unsigned E      = 3,
  parameter bit          FILTER = 1'b1,
  parameter bit          APPROX = 1'b0,
  parameter int unsigned WDEPTH = 4096,  // 64 KB / 16 banks / 1 byte
  parameter int unsigned ADEPTH = 4096,  // 128 KB / 32 banks / 1 byte
  parameter int unsigned RDEPTH = 1024,  // 128 KB / 32 banks / 4 bytes
  localparam int unsigned WAW   = $clog2(WDEPTH),
  localparam int unsigned AAW   = $clog2(ADEPTH),
  localparam int unsigned RAW   = $clog2(RDEPTH),
  localparam int unsigned RBW   = (ROWS > 1) ? $clog2(ROWS) : 1,
  localparam int unsigned CBW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // weight cache fill
  input  logic              host_w_we,
  input  logic [RBW-1:0]    host_w_bank,
  input  logic [WAW-1:0]    host_w_addr,
  input  logic [7:0]        host_w_data,
  // activation cache fill
  input  logic              host_a_we,
  input  logic [CBW-1:0]    host_a_bank,
  input  logic [AAW-1:0]    host_a_addr,
  input  logic [7:0]        host_a_data,
  // result cache drain
  input  logic              host_r_re,
  input  logic [CBW-1:0]    host_r_bank,
  input  logic [RAW-1:0]    host_r_addr,
  output logic [ACC_W-1:0]  host_r_rdata,
  // run control
  input  logic              start,
  input  logic [15:0]       cfg_nred,
  input  logic [15:0]       cfg_ntile,
  input  logic [WAW-1:0]    cfg_w_base,
  input  logic [AAW-1:0]    cfg_a_base,
  input  logic [RAW-1:0]    cfg_r_base,
  input  logic              cfg_accum,
  output logic              busy,
  output logic              done
);
  // ------------------------------------------------------------- caches
  logic [ROWS-1:0]  wc_wr_en, wc_rd_en;
  logic [WAW-1:0]   wc_wr_addr [ROWS], wc_rd_addr [ROWS];
  logic [7:0]       wc_wr_data [ROWS], wc_rd_data [ROWS];

  logic [COLS-1:0]  ac_wr_en, ac_rd_en;
  logic [AAW-1:0]   ac_wr_addr [COLS], ac_rd_addr [COLS];
  logic [7:0]       ac_wr_data [COLS], ac_rd_data [COLS];

  logic [COLS-1:0]  rc_wr_en, rc_rd_en;
  logic [RAW-1:0]   rc_wr_addr [COLS], rc_rd_addr [COLS];
  logic [ACC_W-1:0] rc_wr_data [COLS], rc_rd_data [COLS];
  logic [CBW-1:0]   r_bank_q;
  logic [COLS-1:0]  seq_r_rd_en;
  logic [RAW-1:0]   seq_r_rd_addr [COLS];

  always_comb begin
    for (int r = 0; r < ROWS; r++) begin
      wc_wr_en[r]   = host_w_we && (host_w_bank == RBW'(r));
      wc_wr_addr[r] = host_w_addr;
      wc_wr_data[r] = host_w_data;
    end
    for (int c = 0; c < COLS; c++) begin
      ac_wr_en[c]   = host_a_we && (host_a_bank == CBW'(c));
      ac_wr_addr[c] = host_a_addr;
      ac_wr_data[c] = host_a_data;
      // the sequencer owns the read port during an accumulating run
      rc_rd_en[c]   = seq_r_rd_en[c] || (host_r_re && (host_r_bank == CBW'(c)));
      rc_rd_addr[c] = seq_r_rd_en[c] ? seq_r_rd_addr[c] : host_r_addr;
    end
    host_r_rdata = rc_rd_data[r_bank_q];
  end

  always_ff @(posedge clk) begin
    if (!rst_n)         r_bank_q <= '0;
    else if (host_r_re) r_bank_q <= host_r_bank;
  end

  bp_cache #(.BANKS(ROWS), .DEPTH(WDEPTH), .WIDTH(8)) u_wcache (
    .clk, .wr_en(wc_wr_en), .wr_addr(wc_wr_addr), .wr_data(wc_wr_data),
    .rd_en(wc_rd_en), .rd_addr(wc_rd_addr), .rd_data(wc_rd_data));

  bp_cache #(.BANKS(COLS), .DEPTH(ADEPTH), .WIDTH(8)) u_acache (
    .clk, .wr_en(ac_wr_en), .wr_addr(ac_wr_addr), .wr_data(ac_wr_data),
    .rd_en(ac_rd_en), .rd_addr(ac_rd_addr), .rd_data(ac_rd_data));

  bp_cache #(.BANKS(COLS), .DEPTH(RDEPTH), .WIDTH(ACC_W)) u_rcache (
    .clk, .wr_en(rc_wr_en), .wr_addr(rc_wr_addr), .wr_data(rc_wr_data),
    .rd_en(rc_rd_en), .rd_addr(rc_rd_addr), .rd_data(rc_rd_data));

  // ---------------------------------------------------------- sequencer
  logic                    arr_clear;
  logic                    w_push_valid, w_push_ready;
  wlane_t                  w_push_data [ROWS];
  logic [COLS-1:0]         a_valid, a_ready, r_valid, r_ready;
  alane_t                  a_data [COLS];
  logic signed [ACC_W-1:0] r_data [COLS];
  logic [RBW-1:0]          r_row  [COLS];

  bp_sequencer #(.ROWS(ROWS), .COLS(COLS), .WDEPTH(WDEPTH), .ADEPTH(ADEPTH),
                 .RDEPTH(RDEPTH)) u_seq (
    .clk, .rst_n,
    .start, .cfg_nred, .cfg_ntile, .cfg_w_base, .cfg_a_base, .cfg_r_base, .cfg_accum,
    .busy, .done,
    .w_rd_en(wc_rd_en), .w_rd_addr(wc_rd_addr), .w_rd_data(wc_rd_data),
    .a_rd_en(ac_rd_en), .a_rd_addr(ac_rd_addr), .a_rd_data(ac_rd_data),
    .r_rd_en(seq_r_rd_en), .r_rd_addr(seq_r_rd_addr), .r_rd_data(rc_rd_data),
    .r_wr_en(rc_wr_en), .r_wr_addr(rc_wr_addr), .r_wr_data(rc_wr_data),
    .arr_clear,
    .w_push_valid, .w_push_ready, .w_push_data,
    .a_valid, .a_ready, .a_data,
    .r_valid, .r_ready, .r_data, .r_row
  );

  // ---------------------------------------------------------- MAC array
  bp_mac_array #(.ROWS(ROWS), .COLS(COLS), .Q(Q), .E(E), .FILTER(FILTER),
                 .APPROX(APPROX)) u_array (
    .clk, .rst_n, .clear(arr_clear),
    .w_push_valid, .w_push_ready, .w_push_data,
    .a_valid, .a_ready, .a_data,
    .r_valid, .r_ready, .r_data, .r_row
  );
endmodule
