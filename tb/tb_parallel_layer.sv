// tb_parallel_layer: a 6-input, 4-neuron layer taken from the middle of a
// weight table (nonzero offsets), built both with behavioural multipliers and
// as a shift-adds CMVM block, for each activation function, against the
// reference model on random inputs.
module tb_parallel_layer;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam topo_t T  = '{3, 6, 4, 0, 0};   // layer 1 of this table is tested
  localparam wtab_t W  = gen_weights(T, 2, 5);
  localparam btab_t B  = gen_biases(T, 2, 5);
  localparam int    WO = 3 * 6;
  localparam int    BO = 6;
  localparam act_e  FS [5] = '{ACT_LIN, ACT_RELU, ACT_SATLIN, ACT_HSIG, ACT_HTANH};

  logic signed [DW-1:0] x [6];
  logic signed [DW-1:0] zm [5][4];
  logic signed [DW-1:0] zb [5][4];

  int checks = 0, failures = 0;

  for (genvar f = 0; f < 5; f++) begin : g_f
    parallel_layer #(.N_IN(6), .N_OUT(4), .W(W), .W_OFF(WO), .B(B), .B_OFF(BO),
                     .Q(DEF_Q), .ACT(FS[f]), .MULTLESS(1'b1)) dut_m (.x(x), .z(zm[f]));
    parallel_layer #(.N_IN(6), .N_OUT(4), .W(W), .W_OFF(WO), .B(B), .B_OFF(BO),
                     .Q(DEF_Q), .ACT(FS[f]), .MULTLESS(1'b0)) dut_b (.x(x), .z(zb[f]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (300) begin
      foreach (x[i]) x[i] = DW'(rand_s8());
      #1;
      for (int f = 0; f < 5; f++)
        for (int j = 0; j < 4; j++) begin
          int y, e;
          y = 0;
          for (int i = 0; i < 6; i++) y += W[WO + j*6 + i] * int'(x[i]);
          e = ref_act(y, B[BO + j], DEF_Q, FS[f]);
          checks += 2;
          if (int'(zm[f][j]) != e) begin
            failures++;
            $display("FAIL multless f=%0d j=%0d z=%0d exp=%0d", f, j, zm[f][j], e);
          end
          if (int'(zb[f][j]) != e) begin
            failures++;
            $display("FAIL behav f=%0d j=%0d z=%0d exp=%0d", f, j, zb[f][j], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
