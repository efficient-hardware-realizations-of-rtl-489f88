// tb_mac_unit: random sequences of clear / accumulate / hold against a model
// accumulator, checked after every clock edge.
module tb_mac_unit;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [7:0]  x, w;
  logic signed [21:0] acc;
  int   model = 0;
  int   checks = 0, failures = 0;

  mac_unit #(.XW(8), .CW(8), .AW(22)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    x = '0; w = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    checks++;
    if (acc != 0) failures++;
    repeat (2000) begin
      int r;
      r   = int'($urandom_range(19));
      clr = (r == 0);
      en  = (r > 2);
      x   = 8'($urandom);
      w   = 8'($urandom);
      @(posedge clk);
      if (clr)     model = 0;
      else if (en) model = model + int'(x) * int'(w);
      @(negedge clk);
      checks++;
      if (int'(acc) != model) begin
        failures++;
        $display("FAIL acc=%0d model=%0d", acc, model);
        model = int'(acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
