// tb_dsp_synapse: checks the 2x4 crossbar slice. Weights are loaded once into
// A:B and C, then held while the inputs change; for random spike pairs and
// cascade inputs the P output must equal, lane by lane (12-bit wrap), the
// selected weight bundles plus PCIN. Also checks the clock enable freeze and
// that weights do not change without cew.
module tb_dsp_synapse;
  logic clk = 0, rst_n = 0, ce = 1, cew = 0;
  logic [29:0] a; logic [17:0] b; logic [47:0] c, pcin, pcout;
  logic [8:0] opmode;
  int checks = 0, failures = 0;

  dsp_synapse dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [47:0] lanesum(input logic [47:0] x, y, z);
    logic [47:0] r;
    for (int l = 0; l < 4; l++) r[l*12 +: 12] = x[l*12 +: 12] + y[l*12 +: 12] + z[l*12 +: 12];
    return r;
  endfunction

  logic [47:0] wab, wc, exp_p;
  initial begin
    a = 0; b = 0; c = 0; pcin = 0; opmode = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int set = 0; set < 4; set++) begin
      // load a weight set
      wab = {$urandom, $urandom}; wc = {$urandom, $urandom};
      @(negedge clk); {a, b} = wab; c = wc; cew = 1;
      @(negedge clk); cew = 0; {a, b} = ~wab; c = ~wc;     // inputs change, weights must hold
      for (int i = 0; i < 40; i++) begin
        logic sx, sw;
        sx = $urandom; sw = $urandom;
        opmode = {{2{sw}}, 3'b001, 2'b00, {2{sx}}};
        pcin = {$urandom, $urandom};
        repeat (2) @(negedge clk);
        exp_p = lanesum(sx ? wab : 48'd0, sw ? wc : 48'd0, pcin);
        checks++;
        if (pcout !== exp_p) begin
          failures++;
          $display("FAIL set %0d vec %0d: sx=%0d sw=%0d pcout=%h exp=%h", set, i, sx, sw, pcout, exp_p);
        end
      end
      // clock enable low: P must freeze
      ce = 0; pcin = ~pcin; opmode = {2'b11, 3'b001, 2'b00, 2'b11};
      repeat (3) @(negedge clk);
      checks++;
      if (pcout !== exp_p) begin failures++; $display("FAIL ce=0 did not freeze P"); end
      ce = 1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
