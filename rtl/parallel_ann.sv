// parallel_ann: a whole feedforward network under the parallel architecture.
//
// The NL layers (parallel_layer) are chained combinationally; the outputs of
// the last layer are captured in flip-flops, as in the paper's experiments
// where output flip-flops were added for a fair comparison with the
// time-multiplexed designs. Interface: when in_valid is high the result for x
// is registered at that clock edge; z and out_valid (high for one cycle) are
// available the cycle after, i.e. a latency of one clock cycle. x need only be
// valid during that cycle. TOPO/NL/ACT/W/B describe the network (see ann_pkg).
module parallel_ann
  import ann_pkg::*;
#(
  parameter int    NL       = DEF_NL,
  parameter topo_t TOPO     = DEF_TOPO,
  parameter act_t  ACT      = DEF_ACT,
  parameter wtab_t W        = gen_weights(DEF_TOPO, DEF_NL, 1),
  parameter btab_t B        = gen_biases(DEF_TOPO, DEF_NL, 1),
  parameter int    Q        = DEF_Q,
  parameter bit    MULTLESS = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [DW-1:0] x [TOPO[0]],
  output logic                 out_valid,
  output logic signed [DW-1:0] z [TOPO[NL]]
);

  for (genvar k = 0; k < NL; k++) begin : g_layer
    logic signed [DW-1:0] xin  [TOPO[k]];
    logic signed [DW-1:0] zout [TOPO[k+1]];

    if (k == 0) begin : g_first
      assign xin = x;
    end else begin : g_next
      assign xin = g_layer[k-1].zout;
    end

    parallel_layer #(
      .N_IN(TOPO[k]), .N_OUT(TOPO[k+1]),
      .W(W), .W_OFF(w_off(TOPO, k)),
      .B(B), .B_OFF(b_off(TOPO, k)),
      .Q(Q), .ACT(ACT[k]), .MULTLESS(MULTLESS)
    ) u_layer (
      .x(xin),
      .z(zout)
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int j = 0; j < TOPO[NL]; j++) z[j] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int j = 0; j < TOPO[NL]; j++) z[j] <= g_layer[NL-1].zout[j];
    end
  end

endmodule
