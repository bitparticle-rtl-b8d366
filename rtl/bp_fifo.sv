// bp_fifo: small synchronous FIFO with a valid/ready handshake on both sides.
//
// DEPTH entries of type T held in a circular buffer. in_ready is high when an
// entry is free or when the head is leaving in the same cycle, so a full FIFO
// still sustains one transfer per cycle. Output is the head entry (no
// registered read latency). Active-low synchronous reset empties it; 'clear'
// does the same during operation. Helper used by the operand queue and by the
// sequencer's prefetch stages; the structure is this design's own choice.
module bp_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic clear,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  T                          mem [DEPTH];
  logic [PW-1:0]             rd_ptr, wr_ptr;
  localparam int unsigned   CW = $clog2(DEPTH + 1);
  logic [CW-1:0]             cnt;
  logic                      push, pop;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_comb begin
    out_valid = (cnt != 0);
    out_data  = mem[rd_ptr];
    pop       = out_valid && out_ready;
    in_ready  = (cnt < ($clog2(DEPTH+1))'(DEPTH)) || pop;
    push      = in_valid && in_ready;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= in_data;
        wr_ptr      <= inc(wr_ptr);
      end
      if (pop) rd_ptr <= inc(rd_ptr);
      cnt <= cnt + CW'(push) - CW'(pop);
    end
  end

  assign count = cnt;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    cnt <= ($clog2(DEPTH+1))'(DEPTH));
endmodule
