// tb_parallel_ann: a 5-6-4-3 network (htanh, htanh, hsig) in both constant
// multiplication styles; checks the outputs against the reference model and
// the one-cycle latency from in_valid to out_valid.
module tb_parallel_ann;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int    NL = 3;
  localparam topo_t T  = '{5, 6, 4, 3, 0};
  localparam act_t  A  = '{ACT_HTANH, ACT_HTANH, ACT_HSIG, ACT_LIN};
  localparam wtab_t W  = gen_weights(T, NL, 9);
  localparam btab_t B  = gen_biases(T, NL, 9);

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic signed [DW-1:0] x [5];
  logic signed [DW-1:0] zm [3], zb [3];
  logic vm, vb;

  int checks = 0, failures = 0;

  parallel_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W), .B(B), .MULTLESS(1'b1)) dut_m (
    .clk, .rst_n, .in_valid, .x, .out_valid(vm), .z(zm));
  parallel_ann #(.NL(NL), .TOPO(T), .ACT(A), .W(W), .B(B), .MULTLESS(1'b0)) dut_b (
    .clk, .rst_n, .in_valid, .x, .out_valid(vb), .z(zb));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    vec_t xv, e;
    foreach (x[i]) x[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (200) begin
      for (int n = 0; n < MAX_N; n++) xv[n] = 0;
      foreach (x[i]) begin
        xv[i] = rand_s8();
        x[i]  = DW'(xv[i]);
      end
      e = ref_net(T, NL, A, W, B, DEF_Q, xv);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      foreach (x[i]) x[i] = DW'(rand_s8());   // inputs no longer needed
      checks += 2;
      if (!vm || !vb) failures++;
      for (int j = 0; j < 3; j++) begin
        checks += 2;
        if (int'(zm[j]) != e[j]) begin
          failures++;
          $display("FAIL multless j=%0d z=%0d exp=%0d", j, zm[j], e[j]);
        end
        if (int'(zb[j]) != e[j]) failures++;
      end
      @(negedge clk);
      checks++;
      if (vm || vb) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
