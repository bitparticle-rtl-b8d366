// bp_cache: banked on-chip cache, one independent bank per PE row or column.
//
// The paper gives three of these: a 64 KB weight cache with 16 banks (one per
// PE row) and 128 KB activation and result caches with 32 banks (one per PE
// column). Each bank here is a simple two-port RAM of DEPTH words of WIDTH
// bits: one write port and one read port with one cycle of read latency.
// Defaults give the weight cache (16 banks x 4096 x 8 bit = 64 KB); the top
// instantiates the activation cache as 32 x 4096 x 8 bit and the result cache
// as 32 x 1024 x 32 bit (both 128 KB). The paper calls these caches but gives
// no tag or replacement scheme; they are modelled as software-managed
// scratchpads filled and drained over the external port (own choice).
// Contents are not reset.
module bp_cache #(
  parameter int unsigned BANKS = 16,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic [BANKS-1:0] wr_en,
  input  logic [AW-1:0]    wr_addr [BANKS],
  input  logic [WIDTH-1:0] wr_data [BANKS],
  input  logic [BANKS-1:0] rd_en,
  input  logic [AW-1:0]    rd_addr [BANKS],
  output logic [WIDTH-1:0] rd_data [BANKS]
);
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [WIDTH-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[b]) mem[wr_addr[b]] <= wr_data[b];
      if (rd_en[b]) rd_data[b] <= mem[rd_addr[b]];
    end
  end
endmodule
