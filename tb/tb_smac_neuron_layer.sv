// tb_smac_neuron_layer: a 7-input, 4-neuron SMAC_NEURON layer in both forms
// (MAC per neuron, and MCM block plus multiplexers). The weights give the
// neurons different smallest left shifts (0, 1, 2, 0), so the narrowed MACs
// are exercised. Checks outputs against the reference model and that done
// rises exactly N_IN+1 cycles after start (start cycle included).
module tb_smac_neuron_layer;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int    NI = 7, NO = 4;
  localparam topo_t T  = '{NI, NO, 0, 0, 0};
  localparam wtab_t W  = gen_weights(T, 1, 4);
  localparam btab_t B  = gen_biases(T, 1, 4);

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [DW-1:0] x [NI];
  logic signed [DW-1:0] zm [NO], zb [NO];
  logic dm, db, pm, pb;

  int checks = 0, failures = 0, shifted = 0;

  smac_neuron_layer #(.N_IN(NI), .N_OUT(NO), .W(W), .B(B), .ACT(ACT_HTANH), .MULTLESS(1'b1))
    dut_m (.clk, .rst_n, .start, .x, .z(zm), .done(dm), .done_pulse(pm));
  smac_neuron_layer #(.N_IN(NI), .N_OUT(NO), .W(W), .B(B), .ACT(ACT_HTANH), .MULTLESS(1'b0))
    dut_b (.clk, .rst_n, .start, .x, .z(zb), .done(db), .done_pulse(pb));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t xv, e;
    int   cyc;
    for (int j = 0; j < NO; j++) if (sls_neuron(W, T, 0, j) > 0) shifted++;
    checks++;
    if (shifted == 0) begin failures++; $display("FAIL no neuron with sls > 0"); end
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (100) begin
      for (int n = 0; n < MAX_N; n++) xv[n] = 0;
      foreach (x[i]) begin
        xv[i] = rand_s8();
        x[i]  = DW'(xv[i]);
      end
      e = ref_net(T, 1, DEF_ACT, W, B, DEF_Q, xv);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!dm && cyc < 100) begin
        @(negedge clk);
        cyc++;
      end
      checks += 3;
      if (cyc != NI + 1) begin failures++; $display("FAIL latency %0d", cyc); end
      if (!db || !pm || !pb) failures++;
      for (int j = 0; j < NO; j++) begin
        checks += 2;
        if (int'(zm[j]) != e[j]) begin
          failures++;
          $display("FAIL multless j=%0d z=%0d exp=%0d", j, zm[j], e[j]);
        end
        if (int'(zb[j]) != e[j]) begin
          failures++;
          $display("FAIL mac j=%0d z=%0d exp=%0d", j, zb[j], e[j]);
        end
      end
      repeat (2) @(negedge clk);   // outputs are held after done
      for (int j = 0; j < NO; j++) begin
        checks++;
        if (int'(zm[j]) != e[j]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
