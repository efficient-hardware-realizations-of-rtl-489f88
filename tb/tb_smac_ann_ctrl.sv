// tb_smac_ann_ctrl: the control sequence for a 3-2-4 network. Checks that the
// weight select runs 0,1,2,... through all accumulate cycles, the input select
// restarts at 0 for every neuron, the output cycles store neurons 0,1 then
// 0..3 with bias selects 0..5, layer_end marks the last neuron of each layer,
// and done rises after sum((inputs+2)*neurons) = 5*2 + 4*4 = 26 cycles.
module tb_smac_ann_ctrl;
  import ann_pkg::*;

  localparam int    NL = 2;
  localparam topo_t T  = '{3, 2, 4, 0, 0};

  logic clk = 0, rst_n = 0, start = 0;
  logic clr, en, wr, layer_end, done;
  logic [0:0] layer;
  logic [3:0] nrn_idx, in_idx;
  logic [9:0] w_idx;
  logic [5:0] b_idx;

  int checks = 0, failures = 0;

  smac_ann_ctrl #(.NL(NL), .TOPO(T), .IW(4), .LW(1), .WIW(10), .BIW(6)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_once();
    int cyc = 0, nw = 0, nb = 0, nclr = 0, ends = 0, lay = 0, nrn = 0, inp = 0;
    @(negedge clk);
    start = 1;
    #1;
    checks++;
    if (!clr || en || wr) failures++;
    nclr = 1;
    @(negedge clk);
    start = 0;
    #1;
    cyc = 1;
    while (!done && cyc < 100) begin
      if (clr) begin
        nclr++;
        inp = 0;
      end
      if (en) begin
        checks += 3;
        if (int'(w_idx) != nw) begin failures++; $display("FAIL w_idx %0d exp %0d", w_idx, nw); end
        if (int'(in_idx) != inp) begin failures++; $display("FAIL in_idx %0d exp %0d", in_idx, inp); end
        if (int'(layer) != lay) failures++;
        nw++;
        inp++;
      end
      if (wr) begin
        checks += 4;
        if (inp != T[lay]) begin failures++; $display("FAIL %0d inputs accumulated", inp); end
        if (int'(nrn_idx) != nrn) failures++;
        if (int'(b_idx) != nb) failures++;
        if (layer_end != (nrn == T[lay+1] - 1)) failures++;
        nb++;
        inp = 0;
        if (layer_end) begin
          ends++;
          lay++;
          nrn = 0;
        end else begin
          nrn++;
        end
      end
      @(negedge clk);
      #1;
      cyc++;
    end
    checks += 5;
    if (cyc != 26) begin failures++; $display("FAIL cycles %0d", cyc); end
    if (nw != 3*2 + 2*4) failures++;
    if (nb != 6) failures++;
    if (ends != 2) failures++;
    if (nclr != 6) begin failures++; $display("FAIL %0d clears", nclr); end
    repeat (3) begin
      @(negedge clk);
      checks++;
      if (!done || en || wr) failures++;
    end
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
