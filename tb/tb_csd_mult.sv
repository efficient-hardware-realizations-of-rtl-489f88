// tb_csd_mult: shift-adds constant multipliers for a set of constants
// (including the paper's example constants 11, 3, 5, 13 and the extremes of an
// 8-bit weight) against direct multiplication, plus the CSD digit counts of the
// example constants (11 = 16-4-1, 3 = 4-1, 5 = 4+1, 13 = 16-4+1).
module tb_csd_mult;
  import ann_pkg::*;

  localparam int NCST = 10;
  localparam int CS [NCST] = '{11, 3, 5, 13, -7, 127, -128, 0, 85, -86};

  logic signed [DW-1:0]    x;
  logic signed [DW+WW-1:0] p [NCST];

  int checks = 0, failures = 0;

  for (genvar n = 0; n < NCST; n++) begin : g_dut
    csd_mult #(.C(CS[n]), .XW(DW), .PW(DW+WW)) dut (.x(x), .p(p[n]));
  end

  function automatic int nonzero(int c);
    csd_t d = csd_digits(c);
    int   s = 0;
    for (int i = 0; i < CSD_N; i++) if (d[i] != 0) s++;
    return s;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp_nz [4] = '{3, 2, 2, 3};
    for (int k = 0; k < 4; k++) begin
      checks++;
      if (nonzero(CS[k]) != exp_nz[k]) begin
        failures++;
        $display("FAIL CSD digits of %0d: %0d", CS[k], nonzero(CS[k]));
      end
    end
    for (int v = -128; v < 128; v++) begin
      x = DW'(v);
      #1;
      for (int n = 0; n < NCST; n++) begin
        checks++;
        if (int'(p[n]) != CS[n] * v) begin
          failures++;
          $display("FAIL C=%0d x=%0d p=%0d", CS[n], v, p[n]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
