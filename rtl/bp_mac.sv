// bp_mac: particlization-based, dual-factor bit-sparsity MAC unit.
//
// Function: accumulates products of 8-bit sign-magnitude weights and
// activations into a signed two's-complement accumulator. Each product costs
// 1 to 4 cycles depending on how many non-zero particle products it has.
//
// How it works (follows the paper's MAC unit):
//  * Load cycle: W and A go into operand buffers. Each particle is OR-reduced
//    to a non-zero flag and a cross-AND of the two flag vectors gives the
//    16-bit non-zero vector, stored in the non-zero register.
//  * Compute cycles (1..4): the buffered particles drive a 4x4 array of 2-bit
//    multipliers (3-bit encoded IRs). Every group picks one still-set IR by
//    priority, giving a one-hot select per group; set 0 ({15},{7,10,13},
//    {2,5,8},{0}) and set 1 ({11,14},{3,6,9,12},{1,4}) are each concatenated
//    into a 13-bit partial product:
//      PP0 = {g15[0], g7_10_13[3:0], g2_5_8[3:0], g0[3:0]}
//      PP1 = {1'b0, g11_14[1:0], g3_6_9_12[3:0], g1_4[3:0], 2'b00}
//    PP0+PP1 is formed by one adder, negated when sign(W) xor sign(A) is set,
//    and added to the accumulator. Selected bits are cleared from the
//    non-zero register.
//  * The product completes in the cycle in which no set bit is left after the
//    clear (every group had at most one IR left); a new operand pair may be
//    loaded in that same cycle, so the initiation interval is 1 to 4 cycles.
//  * APPROX=1 gives the approximate variant: IRs of groups 1-4 and 0 are never
//    marked non-zero, so they are neither selected nor accumulated.
//
// Interface: in_valid/in_ready handshake for one operation (in_w, in_a,
// in_last). When an operation tagged 'last' completes, the accumulated sum is
// copied to out_acc with out_valid held until out_ready, and the accumulator
// restarts from zero. If the output register is still full when a 'last'
// operation is about to complete, the unit holds in that cycle.
//
// Own choices (the paper is silent): within a group the lowest IR id is
// selected first; a product whose IRs are all zero still takes one compute
// cycle; the accumulator is ACC_W (32) bits; active-low synchronous reset.
// Lint note: bits [2:1] of m15 and bit [2] of m11_14 are reported unused.
// IR 15 is a 1-bit x 1-bit product and IRs 11/14 are 1-bit x 2-bit products,
// so those code bits are always zero and the PP fields take only the low bits.
module bp_mac
  import bp_pkg::*;
#(
  parameter bit          APPROX = 1'b0,
  parameter int unsigned ACC_WIDTH = ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  output logic                        in_ready,
  input  sm8_t                        in_w,
  input  sm8_t                        in_a,
  input  logic                        in_last,
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic signed [ACC_WIDTH-1:0] out_acc,
  output logic                        busy
);

  // ---------------------------------------------------------------- state
  sm8_t                        w_buf, a_buf;
  logic                        last_q;
  logic [NUM_IR-1:0]           nz_q;
  logic                        busy_q;
  logic signed [ACC_WIDTH-1:0] acc_q;
  logic                        out_valid_q;
  logic signed [ACC_WIDTH-1:0] out_q;

  // ------------------------------------------------ non-zero vector (load)
  logic [3:0]        pnz_w, pnz_a;
  logic [NUM_IR-1:0] nz_load;
  always_comb begin
    for (int i = 0; i < 4; i++) begin
      pnz_w[i] = |particle(in_w.mag, i);
      pnz_a[i] = |particle(in_a.mag, i);
    end
    for (int ia = 0; ia < 4; ia++)
      for (int iw = 0; iw < 4; iw++)
        nz_load[4*ia+iw] = pnz_a[ia] & pnz_w[iw];
    if (APPROX) nz_load &= ~APPROX_DROP;
  end

  // ----------------------------------------------------- IR matrix (compute)
  logic [2:0] ir3 [NUM_IR];
  for (genvar ia = 0; ia < 4; ia++) begin : g_ir_row
    for (genvar iw = 0; iw < 4; iw++) begin : g_ir_col
      bp_ir_mul u_mul (
        .x  (particle(a_buf.mag, ia)),
        .y  (particle(w_buf.mag, iw)),
        .ir3(ir3[4*ia+iw])
      );
    end
  end

  // ------------------------------------------- per-group priority selection
  // Lowest set id of each group wins; 'sel' is the union of the one-hot
  // selects of all seven groups.
  function automatic logic [NUM_IR-1:0] pick_lowest(input logic [NUM_IR-1:0] v);
    return v & (~v + 1'b1);
  endfunction

  logic [NUM_IR-1:0] sel;
  always_comb begin
    sel = pick_lowest(nz_q & G15)      | pick_lowest(nz_q & G7_10_13) |
          pick_lowest(nz_q & G2_5_8)   | pick_lowest(nz_q & G0)       |
          pick_lowest(nz_q & G11_14)   | pick_lowest(nz_q & G3_6_9_12)|
          pick_lowest(nz_q & G1_4);
  end

  // One-hot multiplexer: AND-OR of the 3-bit IRs of a group.
  function automatic logic [2:0] onehot_mux(input logic [NUM_IR-1:0] s,
                                            input logic [NUM_IR-1:0] grp,
                                            input logic [2:0] irs [NUM_IR]);
    logic [2:0] r;
    r = '0;
    for (int k = 0; k < NUM_IR; k++)
      if (grp[k]) r |= irs[k] & {3{s[k]}};
    return r;
  endfunction

  logic [2:0]      m15, m7_10_13, m2_5_8, m0, m11_14, m3_6_9_12, m1_4;
  logic [PP_W-1:0] pp0, pp1;
  logic [PP_W:0]   pp_sum;
  logic signed [ACC_WIDTH-1:0] prod;
  logic            prod_neg;
  always_comb begin
    m15       = onehot_mux(sel, G15,       ir3);
    m7_10_13  = onehot_mux(sel, G7_10_13,  ir3);
    m2_5_8    = onehot_mux(sel, G2_5_8,    ir3);
    m0        = onehot_mux(sel, G0,        ir3);
    m11_14    = onehot_mux(sel, G11_14,    ir3);
    m3_6_9_12 = onehot_mux(sel, G3_6_9_12, ir3);
    m1_4      = onehot_mux(sel, G1_4,      ir3);
    // Static concatenation; groups of 2-bit x 2-bit IRs are decoded to 4 bits
    // (five decoders). IRs involving the 1-bit particle never exceed 3.
    pp0 = {m15[0], ir_dec(m7_10_13), ir_dec(m2_5_8), ir_dec(m0)};
    pp1 = {1'b0, m11_14[1:0], ir_dec(m3_6_9_12), ir_dec(m1_4), 2'b00};
    pp_sum   = {1'b0, pp0} + {1'b0, pp1};
    prod_neg = w_buf.sign ^ a_buf.sign;
    prod     = prod_neg ? -$signed({{(ACC_WIDTH-PP_W-1){1'b0}}, pp_sum})
                        :  $signed({{(ACC_WIDTH-PP_W-1){1'b0}}, pp_sum});
  end

  // --------------------------------------------------------------- control
  logic [NUM_IR-1:0]           nz_left;
  logic                        done, hold, step, load;
  logic signed [ACC_WIDTH-1:0] acc_next;
  always_comb begin
    nz_left  = nz_q & ~sel;
    done     = busy_q && (nz_left == '0);
    hold     = done && last_q && out_valid_q && !out_ready;
    step     = busy_q && !hold;
    in_ready = !busy_q || (done && !hold);
    load     = in_valid && in_ready;
    acc_next = acc_q + prod;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy_q      <= 1'b0;
      nz_q        <= '0;
      acc_q       <= '0;
      out_valid_q <= 1'b0;
      out_q       <= '0;
      w_buf       <= '0;
      a_buf       <= '0;
      last_q      <= 1'b0;
    end else begin
      if (out_valid_q && out_ready) out_valid_q <= 1'b0;
      if (step) begin
        nz_q <= nz_left;
        if (done && last_q) begin
          out_q       <= acc_next;
          out_valid_q <= 1'b1;
          acc_q       <= '0;
        end else begin
          acc_q <= acc_next;
        end
      end
      if (load) begin
        w_buf  <= in_w;
        a_buf  <= in_a;
        last_q <= in_last;
        nz_q   <= nz_load;
        busy_q <= 1'b1;
      end else if (step && done) begin
        busy_q <= 1'b0;
      end
    end
  end

  assign out_valid = out_valid_q;
  assign out_acc   = out_q;
  assign busy      = busy_q;

  // A completed 'last' operation never overwrites an unread result.
  a_no_overwrite: assert property (@(posedge clk) disable iff (!rst_n)
    (step && done && last_q) |-> (!out_valid_q || out_ready));

endmodule
