// bp_pe: one processing element of the MAC array: an operand queue (Q
// entries, zero-value filter) in front of a particlization MAC unit.
//
// An operation offered on in_valid/in_ready counts as accepted by the PE as
// soon as the queue takes it (or filters it away); the MAC unit then drains
// the queue at its own 1-4 cycle pace. Results leave on out_valid/out_ready
// when an operation tagged 'last' completes. The pairing of queue and MAC
// unit follows the paper's figure of the quasi-synchronous array.
module bp_pe
  import bp_pkg::*;
#(
  parameter int unsigned Q      = 2,
  parameter bit          FILTER = 1'b1,
  parameter bit          APPROX = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  mac_op_t                 in_op,
  output logic                    out_valid,
  input  logic                    out_ready,
  output logic signed [ACC_W-1:0] out_acc,
  output logic                    filtered,
  output logic                    busy
);
  logic    q_valid, q_ready;
  mac_op_t q_op;

  bp_operand_queue #(.Q(Q), .FILTER(FILTER)) u_queue (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_op,
    .out_valid(q_valid), .out_ready(q_ready), .out_op(q_op),
    .filtered
  );

  bp_mac #(.APPROX(APPROX), .ACC_WIDTH(ACC_W)) u_mac (
    .clk, .rst_n,
    .in_valid(q_valid), .in_ready(q_ready),
    .in_w(q_op.w), .in_a(q_op.a), .in_last(q_op.last),
    .out_valid, .out_ready, .out_acc, .busy
  );
endmodule
