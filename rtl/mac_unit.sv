// mac_unit: multiply-accumulate block, the central unit of the time-multiplexed
// architectures: a multiplier, an adder and the accumulator register R.
//
// Each clock with en high adds x*w to R; clr (synchronous, has priority)
// empties R. The weight and input multiplexers that feed x and w, and the
// counter that drives their selects, sit around this block in the layer or
// network that uses it. R is visible as acc the cycle after the edge that
// wrote it. rst_n is an asynchronous active-low reset of R (the paper omits
// clock and reset from its figures; the reset style is this design's choice).
// Widths: x XW, w CW (signed), acc AW.
module mac_unit #(
  parameter int XW = 8,
  parameter int CW = 8,
  parameter int AW = 22
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 en,
  input  logic signed [XW-1:0] x,
  input  logic signed [CW-1:0] w,
  output logic signed [AW-1:0] acc
);

  logic signed [XW+CW-1:0] prod;

  assign prod = x * w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   acc <= '0;
    else if (clr) acc <= '0;
    else if (en)  acc <= acc + AW'(prod);
  end

endmodule
