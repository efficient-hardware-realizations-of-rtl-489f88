// tb_ann_top: end-to-end test of the default 16-16-10-10 network with every
// parameter of the top at its default. For random input vectors it starts all
// three realizations with one pulse and checks each against the reference
// model and its latency: parallel 1 cycle, SMAC_NEURON 17+17+11 = 45 cycles,
// SMAC_ANN 18*16+18*10+12*10 = 588 cycles. It also counts how often each
// mechanism of the design occurred and fails if one never did: per-layer done
// gating in SMAC_NEURON, layer hand-over (output bank copy) in SMAC_ANN,
// neurons with narrowed (shifted) MACs, htanh clipping in a hidden layer, hsig
// clipping at the outputs, and a restart before the slowest engine finished.
module tb_ann_top;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int NI = DEF_TOPO[0];
  localparam int NO = DEF_TOPO[DEF_NL];
  localparam int LAT_SN = 17 + 17 + 11;
  localparam int LAT_SA = 18*16 + 18*10 + 12*10;
  localparam wtab_t W = gen_weights(DEF_TOPO, DEF_NL, 1);
  localparam btab_t B = gen_biases(DEF_TOPO, DEF_NL, 1);
  localparam int NVEC = 40;

  logic clk = 0, rst_n = 0, start = 0;
  logic signed [DW-1:0] x [NI];
  logic par_valid, sn_done, sa_done;
  logic [DEF_NL-1:0] sn_layer_done;
  logic signed [DW-1:0] z_par [NO], z_sn [NO], z_sa [NO];

  int checks = 0, failures = 0;
  int n_gate = 0, n_handover = 0, n_shifted = 0, n_htanh_clip = 0, n_hsig_clip = 0, n_restart = 0;

  ann_top u_top (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (NVEC * 700 + 2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  logic [DEF_NL-1:0] ld_q;
  always @(posedge clk) begin
    ld_q <= sn_layer_done;
    for (int k = 0; k < DEF_NL; k++) if (sn_layer_done[k] && !ld_q[k]) n_gate++;
    if (u_top.u_smac_ann.layer_end) n_handover++;
    if (par_valid)
      for (int j = 0; j < DEF_TOPO[1]; j++)
        if (u_top.u_parallel.g_layer[0].zout[j] == 8'sd64 ||
            u_top.u_parallel.g_layer[0].zout[j] == -8'sd64) n_htanh_clip++;
  end

  task automatic compare(string tag, const ref logic signed [DW-1:0] z [NO], vec_t e);
    for (int j = 0; j < NO; j++) begin
      checks++;
      if (int'(z[j]) != e[j]) begin
        failures++;
        $display("FAIL %s j=%0d z=%0d exp=%0d", tag, j, z[j], e[j]);
      end
    end
  endtask

  task automatic apply(output vec_t e);
    vec_t xv;
    for (int n = 0; n < MAX_N; n++) xv[n] = 0;
    foreach (x[i]) begin
      xv[i] = rand_s8();
      x[i]  = DW'(xv[i]);
    end
    e = ref_net(DEF_TOPO, DEF_NL, DEF_ACT, W, B, DEF_Q, xv);
  endtask

  initial begin
    vec_t e;
    int   cyc, t_sn;
    for (int k = 0; k < DEF_NL; k++)
      for (int j = 0; j < DEF_TOPO[k+1]; j++)
        if (sls_neuron(W, DEF_TOPO, k, j) > 0) n_shifted++;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // restart: a computation abandoned half-way is replaced by a new one
    apply(e);
    start = 1;
    @(negedge clk);
    start = 0;
    repeat (100) @(negedge clk);
    checks++;
    if (sa_done) failures++;
    n_restart++;

    for (int v = 0; v < NVEC; v++) begin
      apply(e);
      start = 1;
      @(negedge clk);
      start = 0;
      checks++;
      if (!par_valid) failures++;
      compare("parallel", z_par, e);
      for (int j = 0; j < NO; j++) if (e[j] == 0 || e[j] == 64) n_hsig_clip++;
      cyc  = 1;
      t_sn = 0;
      while (!sa_done && cyc < 2000) begin
        if (sn_done && t_sn == 0) begin
          t_sn = cyc;
          compare("smac_neuron", z_sn, e);
        end
        @(negedge clk);
        cyc++;
      end
      checks += 2;
      if (t_sn != LAT_SN) begin failures++; $display("FAIL smac_neuron latency %0d", t_sn); end
      if (cyc != LAT_SA)  begin failures++; $display("FAIL smac_ann latency %0d", cyc); end
      compare("smac_ann", z_sa, e);
      compare("smac_neuron held", z_sn, e);
      @(negedge clk);
    end

    $display("mechanisms: layer_gating=%0d layer_handover=%0d shifted_neurons=%0d htanh_clip=%0d hsig_clip=%0d restart=%0d",
             n_gate, n_handover, n_shifted, n_htanh_clip, n_hsig_clip, n_restart);
    checks += 6;
    if (n_gate == 0)       failures++;
    if (n_handover == 0)   failures++;
    if (n_shifted == 0)    failures++;
    if (n_htanh_clip == 0) failures++;
    if (n_hsig_clip == 0)  failures++;
    if (n_restart == 0)    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
