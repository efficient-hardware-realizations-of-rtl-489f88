// cmvm_block: multiplierless constant matrix-vector multiplication (CMVM),
// y_j = sum_i w(j,i) * x_i, for all the inner products of one layer at once.
//
// The products that share an input x_i form one multiple constant
// multiplication (the column of weights w(., i) times x_i), so each column is
// an mcm_block: every distinct odd fundamental of the column is built once from
// CSD shifts and adders/subtractors, and equal weights, or weights that differ
// only by sign or a power of two, reuse it. The N_IN column products of each
// row are then summed. No multiplier is used and zero weights produce no
// hardware. The layer's weights are taken from the network's flat weight table
// W starting at W_OFF, row j (neuron j) at W_OFF + j*N_IN.
// The paper realizes this block with an optimizing algorithm that also shares
// partial sums such as x_1 + x_2 across rows; that algorithm is published
// elsewhere and is not reproduced, so the adder count here is that of CSD
// recoding with equal fundamentals shared within a column. Combinational.
module cmvm_block
  import ann_pkg::*;
#(
  parameter int    N_IN  = 2,
  parameter int    N_OUT = 2,
  parameter wtab_t W     = '{0: 11, 1: 3, 2: 5, 3: 13, default: 0},
  parameter int    W_OFF = 0,
  parameter int    XW    = DW,
  parameter int    YW    = ACC_W
) (
  input  logic signed [XW-1:0] x [N_IN],
  output logic signed [YW-1:0] y [N_OUT]
);

  // pc[i][j] = w(j,i) * x_i
  logic signed [YW-1:0] pc [N_IN][N_OUT];

  for (genvar i = 0; i < N_IN; i++) begin : g_col
    mcm_block #(.NC(N_OUT), .C(W), .C_OFF(W_OFF + i), .C_STEP(N_IN),
                .XW(XW), .PW(YW)) u_mcm (
      .x(x[i]),
      .p(pc[i])
    );
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_row
    always_comb begin
      y[j] = '0;
      for (int i = 0; i < N_IN; i++) y[j] = y[j] + pc[i][j];
    end
  end

endmodule
