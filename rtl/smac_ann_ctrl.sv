// smac_ann_ctrl: control block of the SMAC_ANN architecture (one MAC for the
// whole network). Three counters (layer, neuron within the layer, input within
// the neuron) sequence the multiplication of every weight by its input, the
// addition of each neuron's bias and the application of the activation.
//
// Per neuron: one clear cycle (clr, the accumulator is emptied), TOPO[layer]
// accumulate cycles (en, input select in_idx = 0..n-1), one output cycle (wr:
// bias added, activation applied, result stored in output register nrn_idx).
// The start cycle doubles as the clear cycle of the first neuron, so a whole
// network takes sum over layers of (inputs+2)*neurons cycles, start included,
// as the paper states; done rises at the edge that ends the last output cycle
// and stays high until the next start.
//
// Because the weights are stored layer by layer, neuron by neuron, input by
// input, the weight select w_idx is a plain counter advanced in every
// accumulate cycle, and the bias select b_idx one advanced in every output
// cycle; no multiplier forms addresses. layer_end marks the output cycle of a
// layer's last neuron.
module smac_ann_ctrl
  import ann_pkg::*;
#(
  parameter int    NL   = DEF_NL,
  parameter topo_t TOPO = DEF_TOPO,
  parameter int    IW   = $clog2(MAX_N),
  parameter int    LW   = (NL > 1) ? $clog2(NL) : 1,
  parameter int    WIW  = $clog2(MAX_W),
  parameter int    BIW  = $clog2(MAX_B)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           clr,
  output logic           en,
  output logic           wr,
  output logic           layer_end,
  output logic [LW-1:0]  layer,
  output logic [IW-1:0]  nrn_idx,
  output logic [IW-1:0]  in_idx,
  output logic [WIW-1:0] w_idx,
  output logic [BIW-1:0] b_idx,
  output logic           done
);

  typedef enum logic [1:0] {S_IDLE, S_CLR, S_ACC, S_OUT} state_e;
  state_e state;

  logic [IW-1:0] n_in_m1, n_out_m1;

  always_comb begin
    n_in_m1  = '0;
    n_out_m1 = '0;
    for (int l = 0; l < NL; l++)
      if (layer == LW'(l)) begin
        n_in_m1  = IW'(TOPO[l] - 1);
        n_out_m1 = IW'(TOPO[l+1] - 1);
      end
  end

  assign clr       = start | (state == S_CLR);
  assign en        = (state == S_ACC) & ~start;
  assign wr        = (state == S_OUT) & ~start;
  assign layer_end = wr & (nrn_idx == n_out_m1);

  // clear, accumulate and output cycles never overlap; nothing runs after done
  a_phases: assert property (@(posedge clk) disable iff (!rst_n)
                             !(clr && en) && !(en && wr) && !(clr && wr));
  a_idle_done: assert property (@(posedge clk) disable iff (!rst_n)
                                done && !start |-> !(en || wr || clr));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      layer   <= '0;
      nrn_idx <= '0;
      in_idx  <= '0;
      w_idx   <= '0;
      b_idx   <= '0;
      done    <= 1'b0;
    end else if (start) begin
      state   <= S_ACC;
      layer   <= '0;
      nrn_idx <= '0;
      in_idx  <= '0;
      w_idx   <= '0;
      b_idx   <= '0;
      done    <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: ;
        S_CLR: begin
          state  <= S_ACC;
          in_idx <= '0;
        end
        S_ACC: begin
          w_idx <= w_idx + 1'b1;
          if (in_idx == n_in_m1) state <= S_OUT;
          else                   in_idx <= in_idx + 1'b1;
        end
        S_OUT: begin
          b_idx <= b_idx + 1'b1;
          if (nrn_idx != n_out_m1) begin
            nrn_idx <= nrn_idx + 1'b1;
            state   <= S_CLR;
          end else if (layer != LW'(NL - 1)) begin
            layer   <= layer + 1'b1;
            nrn_idx <= '0;
            state   <= S_CLR;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
