// mac_ctrl: the control block of an SMAC_NEURON layer, a counter that steps the
// input/weight multiplexer selects through the N inputs of the layer.
//
// Timing: start (one cycle) clears the accumulators (clr = start) and loads the
// counter with 0. During the next N cycles en is high and sel = 0 .. N-1, so the
// MACs add w(sel)*x(sel). At the edge that ends the last of them, done rises and
// stays high until the next start, and done_pulse is high for that one cycle
// (used to start the next layer). A computation therefore takes N+1 clock
// cycles, start cycle included, as the paper states for a MAC neuron. Between
// done and the next start nothing toggles, which is the paper's gating of
// finished layers. A start while busy restarts the count.
module mac_ctrl #(
  parameter int N  = 16,
  parameter int SW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          clr,
  output logic          en,
  output logic [SW-1:0] sel,
  output logic          done,
  output logic          done_pulse
);

  logic run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      sel        <= '0;
      done       <= 1'b0;
      done_pulse <= 1'b0;
    end else begin
      done_pulse <= 1'b0;
      if (start) begin
        run  <= 1'b1;
        sel  <= '0;
        done <= 1'b0;
      end else if (run) begin
        if (sel == SW'(N - 1)) begin
          run        <= 1'b0;
          done       <= 1'b1;
          done_pulse <= 1'b1;
        end else begin
          sel <= sel + 1'b1;
        end
      end
    end
  end

  assign clr = start;
  assign en  = run & ~start;

  // done_pulse marks the first cycle of done; no accumulation while done
  a_pulse_in_done: assert property (@(posedge clk) disable iff (!rst_n) done_pulse |-> done);
  a_no_en_done:    assert property (@(posedge clk) disable iff (!rst_n) !(en && done));

endmodule
