// tb_bp_cache: writes random words to random addresses of every bank of a
// reduced 4-bank cache, reads them back with the one-cycle latency and
// compares with a reference copy; also checks that banks are independent
// (simultaneous writes to the same address of different banks) and that the
// read register holds its value while rd_en is low.
module tb_bp_cache;
  localparam int BANKS = 4, DEPTH = 64, WIDTH = 16, AW = $clog2(DEPTH);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [BANKS-1:0] wr_en, rd_en;
  logic [AW-1:0]    wr_addr [BANKS], rd_addr [BANKS];
  logic [WIDTH-1:0] wr_data [BANKS], rd_data [BANKS];

  bp_cache #(.BANKS(BANKS), .DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  logic [WIDTH-1:0] ref_mem [BANKS][DEPTH];
  logic [WIDTH-1:0] held [BANKS];

  initial begin
    wr_en = '0; rd_en = '0;
    foreach (wr_addr[b]) begin wr_addr[b] = '0; rd_addr[b] = '0; wr_data[b] = '0; end
    @(posedge clk); #1;
    // fill everything
    for (int a = 0; a < DEPTH; a++) begin
      for (int b = 0; b < BANKS; b++) begin
        wr_en[b] = 1; wr_addr[b] = AW'(a); wr_data[b] = WIDTH'($urandom);
        ref_mem[b][a] = wr_data[b];
      end
      @(posedge clk); #1;
    end
    wr_en = '0;
    // random reads and writes
    for (int i = 0; i < 2000; i++) begin
      for (int b = 0; b < BANKS; b++) begin
        rd_en[b] = 1; rd_addr[b] = AW'($urandom);
        wr_en[b] = ($urandom % 2); wr_addr[b] = AW'($urandom); wr_data[b] = WIDTH'($urandom);
        if (wr_en[b] && wr_addr[b] == rd_addr[b]) wr_en[b] = 0; // avoid read-during-write
      end
      @(posedge clk); #1;
      for (int b = 0; b < BANKS; b++) begin
        checks++;
        if (rd_data[b] != ref_mem[b][rd_addr[b]]) begin
          failures++;
          $display("FAIL bank %0d addr %0d got %h exp %h", b, rd_addr[b], rd_data[b], ref_mem[b][rd_addr[b]]);
        end
        if (wr_en[b]) ref_mem[b][wr_addr[b]] = wr_data[b];
      end
    end
    // read register holds while rd_en is low
    wr_en = '0;
    foreach (held[b]) held[b] = rd_data[b];
    rd_en = '0;
    foreach (rd_addr[b]) rd_addr[b] = rd_addr[b] + 1'b1;
    repeat (3) @(posedge clk);
    #1;
    for (int b = 0; b < BANKS; b++) begin
      checks++;
      if (rd_data[b] != held[b]) begin failures++; $display("FAIL hold bank %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
