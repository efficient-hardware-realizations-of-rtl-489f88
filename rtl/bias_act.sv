// bias_act: the bias adder and activation function that follow every inner
// product in all three architectures (the "+" with input b and the sigmoid-shaped
// box of the paper's neuron diagrams).
//
// Purely combinational. The inner product y carries FRAC+Q fractional bits. The
// integer bias b (scaled by 2**Q like the weights) is aligned by a left shift of
// FRAC and added; the sum s is shifted right arithmetically by Q (rounding toward
// minus infinity) to give a = s / 2**Q with FRAC fractional bits, and the
// activation selected by act is applied with saturation to the DW-bit output:
//
//   lin    : z = sat(a)                      (range of a DW-bit signed number)
//   relu   : z = sat(max(a, 0))
//   satlin : z = min(max(a, 0), 1.0)
//   hsig   : z = min(max(a/4 + 0.5, 0), 1.0)   (a/4 as an arithmetic shift)
//   htanh  : z = min(max(a, -1.0), 1.0)
//
// with 1.0 = 2**FRAC. The set of functions is the paper's; the slope 1/4 of the
// hard sigmoid, the fixed-point format and the truncating rescale are this
// design's choices (the paper does not define them). act is a port so that the
// single activation unit of SMAC_ANN can switch function from layer to layer;
// the other architectures tie it to a constant.
module bias_act
  import ann_pkg::*;
#(
  parameter int AW = ACC_W,  // width of the inner product y
  parameter int Q  = DEF_Q   // quantization value: weights and biases are scaled by 2**Q
) (
  input  logic signed [AW-1:0] y,
  input  logic signed [BW-1:0] b,
  input  act_e                 act,
  output logic signed [DW-1:0] z
);

  localparam int SW = AW + 1;
  localparam logic signed [SW-1:0] ONE  = SW'(1) <<< FRAC;
  localparam logic signed [SW-1:0] HALF = SW'(1) <<< (FRAC - 1);
  localparam logic signed [SW-1:0] ZMAX = SW'((1 << (DW - 1)) - 1);
  localparam logic signed [SW-1:0] ZMIN = -SW'(1 << (DW - 1));

  logic signed [SW-1:0] s, a, h, r;

  function automatic logic signed [SW-1:0] clip(logic signed [SW-1:0] v,
                                                logic signed [SW-1:0] lo,
                                                logic signed [SW-1:0] hi);
    if (v < lo) return lo;
    if (v > hi) return hi;
    return v;
  endfunction

  always_comb begin
    s = SW'(y) + (SW'(b) <<< FRAC);
    a = s >>> Q;
    h = (a >>> 2) + HALF;
    unique case (act)
      ACT_LIN:    r = clip(a, ZMIN, ZMAX);
      ACT_RELU:   r = clip(a, '0, ZMAX);
      ACT_SATLIN: r = clip(a, '0, ONE);
      ACT_HSIG:   r = clip(h, '0, ONE);
      ACT_HTANH:  r = clip(a, -ONE, ONE);
      default:    r = clip(a, ZMIN, ZMAX);
    endcase
    z = r[DW-1:0];
  end

endmodule
