// tb_bitparticle_top_full: end-to-end test of the accelerator core at its
// full size (16 x 32 array, 64 KB / 128 KB / 128 KB caches, Q=2, E=3), with
// no parameter overridden. One run of three outputs per PE, each a reduction
// of nine products: the caches
// are filled over the host ports with random sign-magnitude operands (about
// 60% zero bits, 20% zero values), a run is started, and after 'done' every
// result word is read back and compared with an integer reference. The run
// time is checked against the bounds that follow from the schedule: at least
// one cycle per group step, at most four cycles (the slowest product) per
// operation plus the skew. Internal events are counted to show that each
// mechanism of the design occurred: group stalls, divergence stalls between
// columns, zero-value filtering, multi-cycle products, single-cycle products,
// and results of one column waiting for the result port.
module tb_bitparticle_top_full;
  import bp_pkg::*;
  localparam int ROWS = 16, COLS = 32, WDEPTH = 4096, ADEPTH = 4096, RDEPTH = 1024;
  localparam int WAW = $clog2(WDEPTH), AAW = $clog2(ADEPTH), RAW = $clog2(RDEPTH);
  localparam int RBW = $clog2(ROWS), CBW = $clog2(COLS);
  localparam int MAXL = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic              host_w_we, host_a_we, host_r_re;
  logic [RBW-1:0]    host_w_bank;
  logic [CBW-1:0]    host_a_bank, host_r_bank;
  logic [WAW-1:0]    host_w_addr;
  logic [AAW-1:0]    host_a_addr;
  logic [RAW-1:0]    host_r_addr;
  logic [7:0]        host_w_data, host_a_data;
  logic [ACC_W-1:0]  host_r_rdata;
  logic              start, busy, done;
  logic [15:0]       cfg_nred, cfg_ntile;
  logic [WAW-1:0]    cfg_w_base;
  logic [AAW-1:0]    cfg_a_base;
  logic [RAW-1:0]    cfg_r_base;
  logic              cfg_accum;

  bitparticle_top dut (.*);

  `include "tb_bitparticle_body.svh"

  initial begin
    init_ports();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_layer(9, 3, 100, 2000, 300, 1'b0);  // NRED=9 (a 3x3 kernel), NTILE=3
    check_mechanisms();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
