// parallel_layer: all neurons of one layer computed concurrently (parallel
// architecture). Neuron j forms the inner product y_j = sum_i w(j,i)*x_i, adds
// its bias and applies the layer's activation.
//
// MULTLESS = 0 describes every constant multiplication behaviourally (x * w
// with a constant w, left to synthesis); MULTLESS = 1 builds the whole layer's
// inner products as one multiplierless CMVM block of shift-adds. Both forms are
// the paper's. Weights come from the flat table W at W_OFF (neuron j, input i at
// W_OFF + j*N_IN + i), biases from B at B_OFF + j. Combinational: the parallel
// network has no registers between layers.
module parallel_layer
  import ann_pkg::*;
#(
  parameter int    N_IN     = 16,
  parameter int    N_OUT    = 16,
  parameter wtab_t W        = gen_weights(DEF_TOPO, DEF_NL, 1),
  parameter int    W_OFF    = 0,
  parameter btab_t B        = gen_biases(DEF_TOPO, DEF_NL, 1),
  parameter int    B_OFF    = 0,
  parameter int    Q        = DEF_Q,
  parameter act_e  ACT      = ACT_HTANH,
  parameter bit    MULTLESS = 1'b1
) (
  input  logic signed [DW-1:0] x [N_IN],
  output logic signed [DW-1:0] z [N_OUT]
);

  logic signed [ACC_W-1:0] y [N_OUT];

  if (MULTLESS) begin : g_cmvm
    cmvm_block #(
      .N_IN(N_IN), .N_OUT(N_OUT), .W(W), .W_OFF(W_OFF), .XW(DW), .YW(ACC_W)
    ) u_cmvm (
      .x(x),
      .y(y)
    );
  end else begin : g_behav
    for (genvar j = 0; j < N_OUT; j++) begin : g_row
      always_comb begin
        y[j] = '0;
        for (int i = 0; i < N_IN; i++)
          y[j] = y[j] + ACC_W'(x[i]) * ACC_W'(W[W_OFF + j*N_IN + i]);
      end
    end
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    bias_act #(.AW(ACC_W), .Q(Q)) u_act (
      .y  (y[j]),
      .b  (BW'(B[B_OFF + j])),
      .act(ACT),
      .z  (z[j])
    );
  end

endmodule
