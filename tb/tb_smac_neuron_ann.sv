// tb_smac_neuron_ann: a 5-6-4-3 network under SMAC_NEURON in both forms.
// Checks the outputs, the latency sum(inputs+1) = 6+7+5 = 18 cycles, that the
// layers finish in order (each layer's done before the next) and that done is
// low while a new computation is in flight.
module tb_smac_neuron_ann;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int    NL = 3;
  localparam topo_t T  = '{5, 6, 4, 3, 0};
  localparam act_t  A  = '{ACT_HTANH, ACT_HTANH, ACT_HSIG, ACT_LIN};
  localparam wtab_t W  = gen_weights(T, NL, 2);
  localparam btab_t B  = gen_biases(T, NL, 2);
  localparam int    LAT = 6 + 7 + 5;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [DW-1:0] x [5];
  logic signed [DW-1:0] zm [3], zb [3];
  logic dm, db;
  logic [NL-1:0] ldm, ldb;

  int checks = 0, failures = 0;

  smac_neuron_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W), .B(B), .MULTLESS(1'b1)) dut_m (
    .clk, .rst_n, .start, .x, .done(dm), .z(zm), .layer_done(ldm));
  smac_neuron_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W), .B(B), .MULTLESS(1'b0)) dut_b (
    .clk, .rst_n, .start, .x, .done(db), .z(zb), .layer_done(ldb));

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
    int   cyc, lat [NL];
    logic [NL-1:0] prev;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (100) begin
      for (int n = 0; n < MAX_N; n++) xv[n] = 0;
      foreach (x[i]) begin
        xv[i] = rand_s8();
        x[i]  = DW'(xv[i]);
      end
      e = ref_net(T, NL, A, W, B, DEF_Q, xv);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      foreach (lat[k]) lat[k] = 0;
      prev = ldm;
      while (!dm && cyc < 200) begin
        checks++;
        if (db) failures++;
        // a layer's done flag shows the previous result until it restarts:
        // record the cycle at which it rises
        for (int k = 0; k < NL; k++) if (ldm[k] && !prev[k] && lat[k] == 0) lat[k] = cyc;
        prev = ldm;
        @(negedge clk);
        cyc++;
      end
      checks += 4;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d", cyc); end
      if (lat[0] != 6 || lat[1] != 6 + 7) begin
        failures++;
        $display("FAIL layer done times %0d %0d", lat[0], lat[1]);
      end
      if (!db) failures++;
      if (ldb != '1) failures++;
      for (int j = 0; j < 3; j++) begin
        checks += 2;
        if (int'(zm[j]) != e[j]) begin
          failures++;
          $display("FAIL multless j=%0d z=%0d exp=%0d", j, zm[j], e[j]);
        end
        if (int'(zb[j]) != e[j]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
