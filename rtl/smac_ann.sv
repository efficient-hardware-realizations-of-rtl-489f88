// smac_ann: a whole network computed on a single MAC block (the paper's
// SMAC_ANN architecture), the smallest and slowest of the three realizations.
//
// Datapath: a weight multiplexer over all network weights (w_idx), an input
// multiplexer that takes the primary inputs X in layer 0 and the previous
// layer's outputs afterwards, one multiplier-adder-register MAC, a bias
// multiplexer (b_idx), one activation unit whose function is switched per layer,
// and a demultiplexer into output registers, one per neuron of the widest
// layer. smac_ann_ctrl sequences it; see there for the cycle count,
// sum((inputs+2)*neurons) = 18*16+18*10+12*10 = 588 cycles for 16-16-10-10.
//
// Departure from the paper's figure: with a single bank of output registers
// fed straight back as inputs, neuron j of a layer would overwrite an output
// that later neurons of the same layer still read. Here the output registers
// are copied into an input bank at the last output cycle of each layer (the
// copy costs no cycle), and the input multiplexer reads that bank.
//
// Shifted weights: all weights are divided at elaboration by 2**sls, sls being
// the smallest number of trailing zeros over all nonzero weights (the quantity
// the paper's SMAC_ANN post-training maximizes); the multiplier, adder and
// register shrink by sls bits and the product is shifted back in front of the
// bias adder. Interface: pulse start with X valid and hold X until done; z holds
// the outputs of the last layer while done is high.
module smac_ann
  import ann_pkg::*;
#(
  parameter int    NL   = DEF_NL,
  parameter topo_t TOPO = DEF_TOPO,
  parameter act_t  ACT  = DEF_ACT,
  parameter wtab_t W    = gen_weights(DEF_TOPO, DEF_NL, 1),
  parameter btab_t B    = gen_biases(DEF_TOPO, DEF_NL, 1),
  parameter int    Q    = DEF_Q
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic signed [DW-1:0] x [TOPO[0]],
  output logic                 done,
  output logic signed [DW-1:0] z [TOPO[NL]]
);

  localparam int    S   = sls_all(W, TOPO, NL);
  localparam wtab_t CT  = shifted_weights(W, TOPO, NL, 1'b0);
  localparam int    CW  = WW - S;
  localparam int    AW  = ACC_W - S;
  localparam int    NB  = max_width(TOPO, NL, 1);    // output registers
  localparam int    NW  = w_off(TOPO, NL);            // weights in the network
  localparam int    NBI = b_off(TOPO, NL);            // biases in the network
  localparam int    IW  = $clog2(MAX_N);
  localparam int    LW  = (NL > 1) ? $clog2(NL) : 1;
  localparam int    WIW = $clog2(MAX_W);
  localparam int    BIW = $clog2(MAX_B);

  logic           clr, en, wr, layer_end;
  logic [LW-1:0]  layer;
  logic [IW-1:0]  nrn_idx, in_idx;
  logic [WIW-1:0] w_idx;
  logic [BIW-1:0] b_idx;

  smac_ann_ctrl #(.NL(NL), .TOPO(TOPO), .IW(IW), .LW(LW), .WIW(WIW), .BIW(BIW)) u_ctrl (
    .clk, .rst_n, .start,
    .clr, .en, .wr, .layer_end, .layer, .nrn_idx, .in_idx, .w_idx, .b_idx, .done
  );

  logic signed [DW-1:0] out_r [NB];   // output registers (one per neuron)
  logic signed [DW-1:0] in_r  [NB];   // previous layer's outputs

  // input multiplexer
  logic signed [DW-1:0] xs;
  always_comb begin
    xs = '0;
    if (layer == '0) begin
      for (int i = 0; i < TOPO[0]; i++) if (in_idx == IW'(i)) xs = x[i];
    end else begin
      for (int i = 0; i < NB; i++) if (in_idx == IW'(i)) xs = in_r[i];
    end
  end

  // weight, bias and activation multiplexers
  // (tables cut to the network's own entries at their hardware widths)
  logic signed [CW-1:0] wrom [NW];
  logic signed [BW-1:0] brom [NBI];
  logic signed [CW-1:0] ws;
  logic signed [BW-1:0] bs;
  act_e                 act;

  for (genvar n = 0; n < NW; n++) begin : g_wrom
    assign wrom[n] = CW'(CT[n]);
  end
  for (genvar n = 0; n < NBI; n++) begin : g_brom
    assign brom[n] = BW'(B[n]);
  end

  assign ws = (int'(w_idx) < NW)  ? wrom[w_idx] : '0;
  assign bs = (int'(b_idx) < NBI) ? brom[b_idx] : '0;
  always_comb begin
    act = ACT[0];
    for (int l = 0; l < NL; l++) if (layer == LW'(l)) act = ACT[l];
  end

  logic signed [AW-1:0]    acc;
  logic signed [ACC_W-1:0] y;
  logic signed [DW-1:0]    zn;

  mac_unit #(.XW(DW), .CW(CW), .AW(AW)) u_mac (
    .clk, .rst_n, .clr, .en,
    .x(xs), .w(ws), .acc(acc)
  );

  assign y = ACC_W'(acc) <<< S;

  bias_act #(.AW(ACC_W), .Q(Q)) u_act (
    .y(y), .b(bs), .act(act), .z(zn)
  );

  // output demultiplexer and registers; input bank copied at layer end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < NB; n++) begin
        out_r[n] <= '0;
        in_r[n]  <= '0;
      end
    end else if (wr) begin
      for (int n = 0; n < NB; n++) begin
        if (nrn_idx == IW'(n)) out_r[n] <= zn;
        if (layer_end)         in_r[n]  <= (nrn_idx == IW'(n)) ? zn : out_r[n];
      end
    end
  end

  for (genvar j = 0; j < TOPO[NL]; j++) begin : g_z
    assign z[j] = out_r[j];
  end

endmodule
