// bp_pkg: types and constants shared by the BitParticle MAC unit, array and
// system blocks.
//
// Operands are 8-bit sign-magnitude numbers (1 sign bit, 7 magnitude bits).
// The magnitude is cut into four particles of 1, 2, 2 and 2 bits; particle i
// carries LSB weight 2*i (particle 3 is the single bit 6). The 16 products of
// particle pairs are the intermediate results (IRs); IR id = 4*ia + iw, where
// ia/iw are the activation/weight particle indices, so id 15 is the product of
// the two top particles and id 0 of the two bottom ones. IRs whose ids lie on
// one anti-diagonal (same ia+iw) share an LSB weight and form a group.
// The 3-bit IR encoding (9 written as 3'b111) follows the paper; the
// accumulator width (ACC_W) is this design's own choice. The group masks
// (G*) and APPROX_DROP list each group's IR ids in one place; the MAC unit
// spells most groups out bit by bit, so lint reports those masks, like the
// width constants, as unused where a module does not read them.
package bp_pkg;

  localparam int unsigned MAG_W  = 7;   // magnitude bits of an 8-bit SM operand
  localparam int unsigned PP_W   = 13;  // width of one concatenated partial product
  localparam int unsigned NUM_IR = 16;  // 4 x 4 particle products
  localparam int unsigned ACC_W  = 32;  // accumulator / result width (assumed)

  // 8-bit sign-magnitude operand
  typedef struct packed {
    logic             sign;
    logic [MAG_W-1:0] mag;
  } sm8_t;

  // One MAC operation as it travels through an operand queue. 'last' marks the
  // final product of an output's reduction: when it completes, the MAC unit
  // emits its accumulator and restarts from zero.
  typedef struct packed {
    sm8_t w;
    sm8_t a;
    logic last;
  } mac_op_t;

  // One row lane of a weight-buffer entry.
  typedef struct packed {
    logic valid;
    logic last;
    sm8_t w;
  } wlane_t;

  // One column lane of the activation stream; valid=0 is a bubble.
  typedef struct packed {
    logic valid;
    sm8_t a;
  } alane_t;

  // IR groups (same LSB weight). Set 0: {15}, {7,10,13}, {2,5,8}, {0};
  // set 1: {11,14}, {3,6,9,12}, {1,4}. Each mask has one bit per IR id.
  localparam logic [15:0] G15      = 16'b1000_0000_0000_0000;
  localparam logic [15:0] G7_10_13 = 16'b0010_0100_1000_0000;
  localparam logic [15:0] G2_5_8   = 16'b0000_0001_0010_0100;
  localparam logic [15:0] G0       = 16'b0000_0000_0000_0001;
  localparam logic [15:0] G11_14   = 16'b0100_1000_0000_0000;
  localparam logic [15:0] G3_6_9_12= 16'b0001_0010_0100_1000;
  localparam logic [15:0] G1_4     = 16'b0000_0000_0001_0010;
  // IRs dropped by the approximate variant: groups 1-4 and 0.
  localparam logic [15:0] APPROX_DROP = G1_4 | G0;

  // Particle i of a 7-bit magnitude (particle 3 is one bit wide).
  function automatic logic [1:0] particle(input logic [MAG_W-1:0] mag, input int unsigned i);
    case (i)
      3:       return {1'b0, mag[6]};
      2:       return mag[5:4];
      1:       return mag[3:2];
      default: return mag[1:0];
    endcase
  endfunction

  // 3-bit encoded IR back to its 4-bit value (only 9 needs the fourth bit).
  function automatic logic [3:0] ir_dec(input logic [2:0] ir3);
    return (ir3 == 3'b111) ? 4'd9 : {1'b0, ir3};
  endfunction

endpackage
