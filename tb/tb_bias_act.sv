// tb_bias_act: exhaustive corner values and random inner products and biases
// for every activation function, compared with the integer reference model.
module tb_bias_act;
  import ann_pkg::*;
  import ann_ref_pkg::*;

  localparam int Q = 6;

  logic signed [ACC_W-1:0] y;
  logic signed [BW-1:0]    b;
  act_e                    act;
  logic signed [DW-1:0]    z;

  int checks = 0, failures = 0;

  bias_act #(.AW(ACC_W), .Q(Q)) dut (.y(y), .b(b), .act(act), .z(z));

  task automatic check(int yv, int bv, act_e f);
    int exp;
    y   = ACC_W'(yv);
    b   = BW'(bv);
    act = f;
    #1;
    exp = ref_act(yv, bv, Q, f);
    checks++;
    if (int'(z) != exp) begin
      failures++;
      $display("FAIL act=%s y=%0d b=%0d z=%0d exp=%0d", f.name(), yv, bv, z, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    act_e fs [5] = '{ACT_LIN, ACT_RELU, ACT_SATLIN, ACT_HSIG, ACT_HTANH};
    int   ys [9] = '{0, 1, -1, 4096, -4096, 8191, -8193, 100000, -100000};
    foreach (fs[f]) foreach (ys[k]) begin
      check(ys[k], 0, fs[f]);
      check(ys[k], -3, fs[f]);
      check(ys[k], 17, fs[f]);
    end
    repeat (3000) begin
      int yv, bv;
      yv = int'($urandom_range(40000)) - 20000;
      bv = int'($urandom_range(255)) - 128;
      check(yv, bv, fs[$urandom_range(4)]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
