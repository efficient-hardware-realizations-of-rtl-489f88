// tb_cmvm_block: the paper's CMVM example y1 = 11x1 + 3x2, y2 = 5x1 + 13x2
// (block defaults) and a 3x4 matrix over random inputs; its first column (-7, -128,
// 64) has two weights with the same odd fundamental, so one product is reused.
module tb_cmvm_block;
  import ann_pkg::*;

  localparam wtab_t W2 = '{0: -7, 1: 20, 2: 0, 3: 127, 4: -128, 5: 33,
                           6: 1, 7: -1, 8: 64, 9: -65, 10: 18, 11: 9, default: 0};

  logic signed [DW-1:0]    xa [2];
  logic signed [ACC_W-1:0] ya [2];
  logic signed [DW-1:0]    xb [4];
  logic signed [ACC_W-1:0] yb [3];

  int checks = 0, failures = 0;

  cmvm_block dut_a (.x(xa), .y(ya));
  cmvm_block #(.N_IN(4), .N_OUT(3), .W(W2), .W_OFF(0)) dut_b (.x(xb), .y(yb));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (500) begin
      int e;
      foreach (xa[i]) xa[i] = DW'($urandom);
      foreach (xb[i]) xb[i] = DW'($urandom);
      #1;
      checks += 2;
      if (int'(ya[0]) != 11*int'(xa[0]) + 3*int'(xa[1])) failures++;
      if (int'(ya[1]) != 5*int'(xa[0]) + 13*int'(xa[1])) failures++;
      for (int j = 0; j < 3; j++) begin
        e = 0;
        for (int i = 0; i < 4; i++) e += W2[j*4+i] * int'(xb[i]);
        checks++;
        if (int'(yb[j]) != e) begin
          failures++;
          $display("FAIL row %0d y=%0d exp=%0d", j, yb[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
