// tb_mcm_block: one input times a set of constants, taken from an offset into a
// table, against direct multiplication for every 8-bit input value. A second
// instance holds constants that share odd fundamentals (3, 6, -12, 96, -3, a
// repeated 3, 11 and -11, 44) and zeros, so every way of reusing a product
// (same value, other sign, other power of two) is exercised.
module tb_mcm_block;
  import ann_pkg::*;

  localparam wtab_t C = '{0: 99, 1: 11, 2: -3, 3: 0, 4: 127, 5: -128, 6: 48, 7: -36, default: 0};

  logic signed [DW-1:0]    x;
  logic signed [DW+WW-1:0] p [6];

  localparam wtab_t S = '{0: 3, 1: 6, 2: -12, 3: 96, 4: -3, 5: 3, 6: 0, 7: 11, 8: -11, 9: 44, default: 0};
  logic signed [DW+WW-1:0] ps [10];

  int checks = 0, failures = 0;

  mcm_block #(.NC(6), .C(C), .C_OFF(1)) dut (.x(x), .p(p));
  mcm_block #(.NC(10), .C(S)) dut_s (.x(x), .p(ps));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      x = DW'(v);
      #1;
      for (int n = 0; n < 6; n++) begin
        checks++;
        if (int'(p[n]) != C[n+1] * v) begin
          failures++;
          $display("FAIL n=%0d x=%0d p=%0d", n, v, p[n]);
        end
      end
      for (int n = 0; n < 10; n++) begin
        checks++;
        if (int'(ps[n]) != S[n] * v) begin
          failures++;
          $display("FAIL shared n=%0d x=%0d p=%0d", n, v, ps[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
