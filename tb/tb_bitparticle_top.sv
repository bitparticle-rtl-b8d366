// tb_bitparticle_top: end-to-end test of the accelerator core at a reduced
// size (4 x 8 array, small caches), through its external ports only for data.
//
// Two runs with different reduction lengths and base addresses: the caches
// are filled over the host ports with random sign-magnitude operands (about
// 60% zero bits, 20% zero values), a run is started, and after 'done' every
// result word is read back and compared with an integer reference. The run
// time is checked against the bounds that follow from the schedule: at least
// one cycle per group step, at most four cycles (the slowest product) per
// operation plus the skew. Internal events are counted to show that each
// mechanism of the design occurred: group stalls, divergence stalls between
// columns, zero-value filtering, multi-cycle products, single-cycle products,
// results of one column waiting for the result port, and a run that adds
// to the partial sums left by the previous one.
module tb_bitparticle_top;
  import bp_pkg::*;
  localparam int ROWS = 4, COLS = 8, WDEPTH = 256, ADEPTH = 256, RDEPTH = 64;
  localparam int WAW = $clog2(WDEPTH), AAW = $clog2(ADEPTH), RAW = $clog2(RDEPTH);
  localparam int RBW = $clog2(ROWS), CBW = $clog2(COLS);
  localparam int MAXL = 64;

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

  bitparticle_top #(.ROWS(ROWS), .COLS(COLS), .WDEPTH(WDEPTH), .ADEPTH(ADEPTH),
                    .RDEPTH(RDEPTH)) dut (.*);

  `include "tb_bitparticle_body.svh"

  initial begin
    init_ports();
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    run_layer(5, 3, 7, 11, 2, 1'b0);     // NRED=5, NTILE=3
    run_layer(1, 4, 0, 100, 20, 1'b0);   // NRED=1: every product ends an output
    run_layer(16, 2, 30, 0, 40, 1'b0);
    run_layer(7, 2, 60, 60, 40, 1'b1);   // second part of a split reduction
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
