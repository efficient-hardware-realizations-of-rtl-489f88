// tb_smac_ann: a 5-6-4-3 network on a single MAC, once with weights that are
// all even (global smallest left shift 1, so the narrowed MAC is used) and once
// with unshifted weights. Checks the outputs against the reference model and
// the latency sum((inputs+2)*neurons) = 7*6 + 8*4 + 6*3 = 92 cycles.
module tb_smac_ann;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int    NL  = 3;
  localparam topo_t T   = '{5, 6, 4, 3, 0};
  localparam act_t  A   = '{ACT_HTANH, ACT_HTANH, ACT_HSIG, ACT_LIN};
  localparam wtab_t W0  = gen_weights(T, NL, 6);
  localparam wtab_t W1  = scale_w(gen_weights(T, NL, 7), 2);
  localparam btab_t B   = gen_biases(T, NL, 6);
  localparam int    LAT = 92;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [DW-1:0] x [5];
  logic signed [DW-1:0] z0 [3], z1 [3];
  logic d0, d1;

  int checks = 0, failures = 0;

  smac_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W0), .B(B), .Q(DEF_Q + 1)) dut0 (
    .clk, .rst_n, .start, .x, .done(d0), .z(z0));
  smac_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W1), .B(B), .Q(DEF_Q + 1)) dut1 (
    .clk, .rst_n, .start, .x, .done(d1), .z(z1));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t xv, e0, e1;
    int   cyc;
    checks += 2;
    if (sls_all(W1, T, NL) < 1) begin failures++; $display("FAIL W1 not shifted"); end
    if (sls_all(W0, T, NL) != 0) failures++;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (60) begin
      for (int n = 0; n < MAX_N; n++) xv[n] = 0;
      foreach (x[i]) begin
        xv[i] = rand_s8();
        x[i]  = DW'(xv[i]);
      end
      e0 = ref_net(T, NL, A, W0, B, DEF_Q + 1, xv);
      e1 = ref_net(T, NL, A, W1, B, DEF_Q + 1, xv);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!d0 && cyc < 1000) begin
        @(negedge clk);
        cyc++;
      end
      checks += 2;
      if (cyc != LAT) begin failures++; $display("FAIL latency %0d", cyc); end
      if (!d1) failures++;
      for (int j = 0; j < 3; j++) begin
        checks += 2;
        if (int'(z0[j]) != e0[j]) begin
          failures++;
          $display("FAIL sls0 j=%0d z=%0d exp=%0d", j, z0[j], e0[j]);
        end
        if (int'(z1[j]) != e1[j]) begin
          failures++;
          $display("FAIL sls1 j=%0d z=%0d exp=%0d", j, z1[j], e1[j]);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
