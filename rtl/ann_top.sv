// ann_top: one feedforward network (default 16-16-10-10, hidden layers htanh,
// output layer hard sigmoid) realized under the three architectures side by
// side, sharing inputs, weights and biases, so that their results and
// latencies can be compared:
//
//   parallel     every weight has its own constant multiplier; one clock
//                cycle (input to output flip-flops). With PAR_MULTLESS the
//                constant multiplications are shift-adds CMVM blocks.
//   SMAC_NEURON  one MAC per neuron, layers run in turn; sum(inputs+1) = 45
//                cycles. With SN_MULTLESS each layer uses one shift-adds MCM
//                block instead of per-neuron multipliers.
//   SMAC_ANN     one MAC for the whole network; sum((inputs+2)*neurons) = 588
//                cycles.
//
// A single start pulse (with x valid, x held until the slowest engine is done)
// launches all three. par_valid pulses one cycle later with z_par; sn_done and
// sa_done rise when z_sn and z_sa are valid and stay high until the next start.
// In a product only the architecture that suits its area/latency budget would
// be kept; keeping the three in one top is this design's choice for
// comparison and verification. All three compute bit-identical outputs.
module ann_top
  import ann_pkg::*;
#(
  parameter int    NL           = DEF_NL,
  parameter topo_t TOPO         = DEF_TOPO,
  parameter act_t  ACT          = DEF_ACT,
  parameter wtab_t W            = gen_weights(DEF_TOPO, DEF_NL, 1),
  parameter btab_t B            = gen_biases(DEF_TOPO, DEF_NL, 1),
  parameter int    Q            = DEF_Q,
  parameter bit    PAR_MULTLESS = 1'b1,
  parameter bit    SN_MULTLESS  = 1'b1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] x [TOPO[0]],
  output logic                 par_valid,
  output logic signed [DW-1:0] z_par [TOPO[NL]],
  output logic                 sn_done,
  output logic [NL-1:0]        sn_layer_done,
  output logic signed [DW-1:0] z_sn [TOPO[NL]],
  output logic                 sa_done,
  output logic signed [DW-1:0] z_sa [TOPO[NL]]
);

  parallel_ann #(
    .NL(NL), .TOPO(TOPO), .ACT(ACT), .W(W), .B(B), .Q(Q), .MULTLESS(PAR_MULTLESS)
  ) u_parallel (
    .clk, .rst_n,
    .in_valid (start),
    .x        (x),
    .out_valid(par_valid),
    .z        (z_par)
  );

  smac_neuron_ann #(
    .NL(NL), .TOPO(TOPO), .ACT(ACT), .W(W), .B(B), .Q(Q), .MULTLESS(SN_MULTLESS)
  ) u_smac_neuron (
    .clk, .rst_n, .start,
    .x         (x),
    .done      (sn_done),
    .z         (z_sn),
    .layer_done(sn_layer_done)
  );

  smac_ann #(
    .NL(NL), .TOPO(TOPO), .ACT(ACT), .W(W), .B(B), .Q(Q)
  ) u_smac_ann (
    .clk, .rst_n, .start,
    .x   (x),
    .done(sa_done),
    .z   (z_sa)
  );

endmodule
