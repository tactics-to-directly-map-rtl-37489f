// const_mult: multiplication of a streaming activation by one constant
// kernel weight, specialised to that weight at elaboration.
//
// Because a trained kernel is fixed, each multiplier of a directly-mapped
// CNN is its own piece of logic and can be tailored to its operand:
//   weight 0      -> no hardware, the product is constant zero
//   weight +-1    -> a wire, or a two's complement negation
//   weight +-2^k  -> a left shift by k, negated for a negative weight
//   other         -> a generic signed multiplier in logic elements
// The four cases follow the paper; the selection by generate is how this
// design makes the specialisation explicit instead of leaving it to the
// synthesis tool's constant propagation (which would reach the same logic).
//
// Interface: x is a B-bit signed code, p the full 2B-bit signed product
// x*WEIGHT. WEIGHT must be a B-bit code, -2^(B-1) .. 2^(B-1)-1.
// Timing: purely combinational.
module const_mult
  import cnn_pkg::*;
#(
  parameter int unsigned B      = 3,
  parameter int          WEIGHT = 3
) (
  input  logic signed [B-1:0]   x,
  output logic signed [2*B-1:0] p
);

  localparam mult_kind_e  KIND  = mult_kind(WEIGHT);
  localparam int unsigned MAG   = (WEIGHT < 0) ? int'(-WEIGHT) : int'(WEIGHT);
  localparam int unsigned SHIFT = log2u(MAG);

  initial begin
    assert (WEIGHT >= -(2 ** (B - 1)) && WEIGHT < 2 ** (B - 1))
      else $error("const_mult: WEIGHT %0d is not a %0d-bit code", WEIGHT, B);
  end

  // x sign-extended to the product width, so that negating -2^(B-1) and
  // shifting cannot overflow.
  logic signed [2*B-1:0] xe;
  assign xe = (2*B)'(x);

  if (KIND == MK_ZERO) begin : g_zero
    assign p = '0;
  end else if (KIND == MK_ONE) begin : g_one
    if (WEIGHT > 0) begin : g_pos
      assign p = xe;
    end else begin : g_neg
      assign p = -xe;
    end
  end else if (KIND == MK_POW2) begin : g_pow2
    if (WEIGHT > 0) begin : g_pos
      assign p = xe <<< SHIFT;
    end else begin : g_neg
      assign p = -(xe <<< SHIFT);
    end
  end else begin : g_other
    localparam logic signed [2*B-1:0] WE = (2*B)'(WEIGHT);
    assign p = xe * WE;
  end

endmodule
