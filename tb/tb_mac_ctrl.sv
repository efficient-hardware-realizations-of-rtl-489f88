// tb_mac_ctrl: the select sequence 0..N-1 with en, clear on start, done after
// N+1 cycles (start cycle included), one-cycle done pulse, and a restart.
module tb_mac_ctrl;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, start = 0;
  logic clr, en, done, done_pulse;
  logic [2:0] sel;
  int checks = 0, failures = 0;

  mac_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_once();
    int cyc = 0, pulses = 0, nxt = 0;
    @(negedge clk);
    start = 1;
    #1;
    checks++;
    if (!clr || en) failures++;
    @(negedge clk);
    start = 0;
    #1;
    cyc = 1;
    while (!done) begin
      checks++;
      if (!en || int'(sel) != nxt || clr) begin
        failures++;
        $display("FAIL cycle %0d en=%b sel=%0d", cyc, en, sel);
      end
      nxt++;
      cyc++;
      @(negedge clk);
      #1;
    end
    checks += 3;
    if (cyc != N + 1) begin failures++; $display("FAIL cycles %0d", cyc); end
    if (!done_pulse) failures++;
    if (en) failures++;
    repeat (3) begin
      @(negedge clk);
      pulses += done_pulse;
      checks++;
      if (!done || en) failures++;
    end
    checks++;
    if (pulses != 0) failures++;
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    run_once();
    run_once();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
