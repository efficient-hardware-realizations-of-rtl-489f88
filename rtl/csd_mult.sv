// csd_mult: multiplierless multiplication of a variable by a constant
// (single constant multiplication, SCM) under the shift-adds architecture.
//
// The constant C is recoded at elaboration into canonical signed digits,
// C = sum d_i 2**i with d_i in {-1,0,+1} and no two adjacent nonzero digits.
// For every nonzero digit the input is shifted left by i (wiring only) and
// added or subtracted, which is the digit-based recoding (DBR) method the
// paper uses as its baseline shift-adds realization: a constant with t nonzero
// CSD digits costs t-1 adders/subtractors and no multiplier. Sharing work
// between constants is left to the blocks that use this one (mcm_block shares
// equal odd fundamentals); the optimizing algorithms the paper cites, which
// also share partial sums, are not reproduced.
//
// Combinational; x is signed XW bits, p = C*x is signed PW bits. Intermediate
// sums wrap modulo 2**PW, which is exact as long as the final product fits.
module csd_mult
  import ann_pkg::*;
#(
  parameter int C  = 11,       // the constant (must fit WW signed bits)
  parameter int XW = DW,       // input width
  parameter int PW = DW + WW   // product width
) (
  input  logic signed [XW-1:0] x,
  output logic signed [PW-1:0] p
);

  localparam csd_t D = csd_digits(C);

  logic signed [PW-1:0] xe;
  logic signed [PW-1:0] term [CSD_N];

  assign xe = PW'(x);

  for (genvar i = 0; i < CSD_N; i++) begin : g_digit
    if (D[i] == 1) begin : g_pos
      assign term[i] = xe <<< i;
    end else if (D[i] == -1) begin : g_neg
      assign term[i] = -(xe <<< i);
    end else begin : g_zero
      assign term[i] = '0;
    end
  end

  always_comb begin
    p = '0;
    for (int i = 0; i < CSD_N; i++) p = p + term[i];
  end

endmodule
