// smac_neuron_ann: a whole network under the SMAC_NEURON architecture, one MAC
// per neuron, layers computed one after the other.
//
// start (one cycle) starts layer 0; the done_pulse of layer k starts layer k+1,
// so a finished layer holds its registers (and so its outputs, which are the
// next layer's inputs) and does no further work until the next start. The
// network result z is valid when done is high, sum over layers of (inputs+1)
// clock cycles after start, start cycle included: 17+17+11 = 45 cycles for the
// default 16-16-10-10 network. x must be held stable until done.
module smac_neuron_ann
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
  input  logic                 start,
  input  logic signed [DW-1:0] x [TOPO[0]],
  output logic                 done,
  output logic signed [DW-1:0] z [TOPO[NL]],
  output logic [NL-1:0]        layer_done
);

  for (genvar k = 0; k < NL; k++) begin : g_layer
    logic signed [DW-1:0] xin  [TOPO[k]];
    logic signed [DW-1:0] zout [TOPO[k+1]];
    logic                 lstart, ldone, lpulse;

    if (k == 0) begin : g_first
      assign xin    = x;
      assign lstart = start;
    end else begin : g_next
      assign xin    = g_layer[k-1].zout;
      assign lstart = g_layer[k-1].lpulse;
    end

    smac_neuron_layer #(
      .N_IN(TOPO[k]), .N_OUT(TOPO[k+1]),
      .W(W), .W_OFF(w_off(TOPO, k)),
      .B(B), .B_OFF(b_off(TOPO, k)),
      .Q(Q), .ACT(ACT[k]), .MULTLESS(MULTLESS)
    ) u_layer (
      .clk, .rst_n,
      .start     (lstart),
      .x         (xin),
      .z         (zout),
      .done      (ldone),
      .done_pulse(lpulse)
    );

    assign layer_done[k] = ldone;
  end

  // busy: set by start, cleared by the last layer's done pulse. A layer's own
  // done flag still shows the previous result until that layer restarts, so
  // the network's done is the last layer's flag masked while busy.
  logic busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                       busy <= 1'b0;
    else if (start)                   busy <= 1'b1;
    else if (g_layer[NL-1].lpulse)    busy <= 1'b0;
  end

  assign done = layer_done[NL-1] & (~busy | g_layer[NL-1].lpulse);
  assign z    = g_layer[NL-1].zout;

endmodule
