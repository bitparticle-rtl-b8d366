// bp_operand_queue: per-PE operand queue with zero-value filtering.
//
// Sits between a column of the array and one MAC unit. It holds up to Q
// pending MAC operations (the paper's Q=2), so a PE can accept operands for
// the next group steps while it is still busy with a slow product; this is
// the intra-group elasticity of the quasi-synchronous scheme.
//
// Zero-value filtering (FILTER=1): an operation whose weight or activation
// magnitude is zero is accepted but not stored, so it costs the MAC unit no
// cycle. Own choice where the paper is silent: a zero operation that carries
// the 'last' tag is stored anyway (as a zero product), because it closes an
// output's reduction and the MAC unit must see it to emit the sum.
//
// Interface: in_valid/in_ready (in_ready is high when the operation would be
// filtered, or the queue has room, or the head leaves this cycle) and
// out_valid/out_ready towards the MAC unit. 'filtered' pulses for each
// operation dropped by the filter.
// Lint note: the FIFO's occupancy output 'count' is left unused here; the
// queue only needs its ready/valid handshake.
module bp_operand_queue
  import bp_pkg::*;
#(
  parameter int unsigned Q      = 2,
  parameter bit          FILTER = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  mac_op_t in_op,
  output logic    out_valid,
  input  logic    out_ready,
  output mac_op_t out_op,
  output logic    filtered
);
  logic is_zero, drop, f_in_ready;
  logic [$clog2(Q+1)-1:0] count;

  always_comb begin
    is_zero  = (in_op.w.mag == '0) || (in_op.a.mag == '0);
    drop     = FILTER && is_zero && !in_op.last;
    in_ready = drop || f_in_ready;
    filtered = in_valid && drop;
  end

  bp_fifo #(.T(mac_op_t), .DEPTH(Q)) u_fifo (
    .clk, .rst_n, .clear(1'b0),
    .in_valid (in_valid && !drop),
    .in_ready (f_in_ready),
    .in_data  (in_op),
    .out_valid,
    .out_ready,
    .out_data (out_op),
    .count
  );
endmodule
