// tb_workloads: the five network structures of the experiments (16-10,
// 16-10-10, 16-16-10, 16-10-10-10, 16-16-10-10; hidden layers htanh, output
// layer hsig), each built as its own ann_top with its own weight set, run on
// random 16-feature input vectors. Checks all three architectures against the
// reference model and their latencies: parallel 1 cycle, SMAC_NEURON
// sum(inputs+1), SMAC_ANN sum((inputs+2)*neurons). Structures 0, 2 and 4 use
// the multiplierless (shift-adds) parallel and SMAC_NEURON datapaths, 1 and 3
// the behavioural constant multiplications, so both styles run end to end.
module tb_workloads;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int    NCFG = 5;
  // the five structures, selected by index
  function automatic int nl_of(int c);
    case (c)
      0:       return 1;
      1, 2:    return 2;
      default: return 3;
    endcase
  endfunction

  function automatic topo_t topo_of(int c);
    case (c)
      0:       return '{16, 10, 0, 0, 0};
      1:       return '{16, 10, 10, 0, 0};
      2:       return '{16, 16, 10, 0, 0};
      3:       return '{16, 10, 10, 10, 0};
      default: return '{16, 16, 10, 10, 0};
    endcase
  endfunction

  // hidden layers htanh, output layer hsig
  function automatic act_t act_of(int c);
    act_t a = '{ACT_LIN, ACT_LIN, ACT_LIN, ACT_LIN};
    for (int k = 0; k < nl_of(c); k++) a[k] = (k == nl_of(c) - 1) ? ACT_HSIG : ACT_HTANH;
    return a;
  endfunction

  localparam int    NVEC = 10;

  logic clk = 0, rst_n = 0;
  logic start [NCFG];
  logic signed [DW-1:0] x [16];
  logic par_valid [NCFG], sn_done [NCFG], sa_done [NCFG];
  logic signed [DW-1:0] z_par [NCFG][10], z_sn [NCFG][10], z_sa [NCFG][10];

  int checks = 0, failures = 0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam wtab_t W = gen_weights(topo_of(c), nl_of(c), 20 + c);
    localparam btab_t B = gen_biases(topo_of(c), nl_of(c), 20 + c);
    localparam int NLC = nl_of(c);
    logic [NLC-1:0] ld;
    ann_top #(.NL(nl_of(c)), .TOPO(topo_of(c)), .ACT(act_of(c)), .W(W), .B(B),
              .PAR_MULTLESS(c % 2 == 0), .SN_MULTLESS(c % 2 == 0)) u_top (
      .clk, .rst_n, .start(start[c]), .x,
      .par_valid(par_valid[c]), .z_par(z_par[c]),
      .sn_done(sn_done[c]), .sn_layer_done(ld), .z_sn(z_sn[c]),
      .sa_done(sa_done[c]), .z_sa(z_sa[c]));
  end

  always #5 clk = ~clk;

  initial begin
    repeat (NCFG * NVEC * 700 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int lat_sn(int c);
    int s = 0;
    for (int k = 0; k < nl_of(c); k++) s += topo_of(c)[k] + 1;
    return s;
  endfunction

  function automatic int lat_sa(int c);
    int s = 0;
    for (int k = 0; k < nl_of(c); k++) s += (topo_of(c)[k] + 2) * topo_of(c)[k+1];
    return s;
  endfunction

  task automatic cmp(string tag, int c, const ref logic signed [DW-1:0] z [NCFG][10], vec_t e);
    for (int j = 0; j < topo_of(c)[nl_of(c)]; j++) begin
      checks++;
      if (int'(z[c][j]) != e[j]) begin
        failures++;
        $display("FAIL cfg %0d %s j=%0d z=%0d exp=%0d", c, tag, j, z[c][j], e[j]);
      end
    end
  endtask

  wtab_t wt [NCFG];
  btab_t bt [NCFG];

  initial begin
    vec_t xv, e;
    int   cyc, t_sn;
    for (int c = 0; c < NCFG; c++) begin
      wt[c] = gen_weights(topo_of(c), nl_of(c), 20 + c);
      bt[c] = gen_biases(topo_of(c), nl_of(c), 20 + c);
    end
    foreach (start[c]) start[c] = 0;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NCFG; c++) begin
      repeat (NVEC) begin
        for (int n = 0; n < MAX_N; n++) xv[n] = 0;
        foreach (x[i]) begin
          xv[i] = rand_s8();
          x[i]  = DW'(xv[i]);
        end
        e = ref_net(topo_of(c), nl_of(c), act_of(c), wt[c], bt[c], DEF_Q, xv);
        start[c] = 1;
        @(negedge clk);
        start[c] = 0;
        checks++;
        if (!par_valid[c]) failures++;
        cmp("parallel", c, z_par, e);
        cyc  = 1;
        t_sn = 0;
        while (!sa_done[c] && cyc < 2000) begin
          if (sn_done[c] && t_sn == 0) begin
            t_sn = cyc;
            cmp("smac_neuron", c, z_sn, e);
          end
          @(negedge clk);
          cyc++;
        end
        checks += 2;
        if (t_sn != lat_sn(c)) begin failures++; $display("FAIL cfg %0d sn latency %0d", c, t_sn); end
        if (cyc != lat_sa(c))  begin failures++; $display("FAIL cfg %0d sa latency %0d", c, cyc); end
        cmp("smac_ann", c, z_sa, e);
        @(negedge clk);
      end
      $display("structure %0d: parallel 1, smac_neuron %0d, smac_ann %0d cycles", c, lat_sn(c), lat_sa(c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
