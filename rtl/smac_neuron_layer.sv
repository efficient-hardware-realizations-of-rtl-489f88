// smac_neuron_layer: one layer of the SMAC_NEURON architecture, in which every
// neuron owns one MAC block and all MACs of the layer share one control
// counter and one input multiplexer.
//
// Operation: a start pulse clears the accumulators; then for N_IN cycles the
// counter (mac_ctrl) selects input x[sel], and each neuron j adds
// w(j,sel)*x[sel] to its register R_j. After N_IN+1 cycles done rises and the
// outputs z_j = act(R_j << sls_j + b_j) are valid (combinational from the held
// registers) until the next start. done_pulse starts the next layer.
//
// Shifted weights (from the paper's post-training for time-multiplexed
// designs): if all weights of neuron j are multiples of 2**sls_j, the MAC stores
// and multiplies c = w / 2**sls_j, so its multiplier, adder and register are
// sls_j bits narrower, and the inner product is restored by a left shift
// (wiring) in front of the bias adder. sls_j is computed at elaboration from
// the weight table.
//
// MULTLESS = 0: one mac_unit per neuron with a weight multiplexer (paper's
// Fig. of MAC-based layer). MULTLESS = 1: one mcm_block multiplies the selected
// input by every (shifted) weight of the layer; per-neuron multiplexers pick
// the neuron's product, which an adder and register accumulate (the paper's
// multiplierless SMAC_NEURON layer). x must stay stable from start to done.
module smac_neuron_layer
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
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] x [N_IN],
  output logic signed [DW-1:0] z [N_OUT],
  output logic                 done,
  output logic                 done_pulse
);

  localparam int    SW = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam wtab_t CT = shift_rows(W, W_OFF, N_IN, N_OUT);  // c = w >> sls_j

  logic          clr, en;
  logic [SW-1:0] sel;
  logic signed [DW-1:0] xs;

  mac_ctrl #(.N(N_IN), .SW(SW)) u_ctrl (
    .clk, .rst_n, .start,
    .clr, .en, .sel, .done, .done_pulse
  );

  // shared input multiplexer
  assign xs = x[sel];

  logic signed [DW+WW-1:0] mcm_p [N_IN*N_OUT];

  if (MULTLESS) begin : g_mcm
    mcm_block #(
      .NC(N_IN*N_OUT), .C(CT), .C_OFF(W_OFF), .XW(DW), .PW(DW+WW)
    ) u_mcm (
      .x(xs),
      .p(mcm_p)
    );
  end else begin : g_no_mcm
    assign mcm_p = '{default: '0};
  end

  for (genvar j = 0; j < N_OUT; j++) begin : g_neuron
    localparam int S  = sls_row(W, W_OFF + j*N_IN, N_IN);
    localparam int CW = WW - S;
    localparam int AW = ACC_W - S;

    logic signed [AW-1:0]    acc;
    logic signed [ACC_W-1:0] y;

    if (MULTLESS) begin : g_add
      logic signed [DW+WW-1:0] p;
      assign p = mcm_p[j*N_IN + int'(sel)];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)   acc <= '0;
        else if (clr) acc <= '0;
        else if (en)  acc <= acc + AW'(p);
      end
    end else begin : g_mac
      logic signed [CW-1:0] ws;
      assign ws = CW'(CT[W_OFF + j*N_IN + int'(sel)]);
      mac_unit #(.XW(DW), .CW(CW), .AW(AW)) u_mac (
        .clk, .rst_n, .clr, .en,
        .x(xs), .w(ws), .acc(acc)
      );
    end

    assign y = ACC_W'(acc) <<< S;

    bias_act #(.AW(ACC_W), .Q(Q)) u_act (
      .y  (y),
      .b  (BW'(B[B_OFF + j])),
      .act(ACT),
      .z  (z[j])
    );
  end

endmodule
