// tb_pe_chain: streams one random 16-spike vector per cycle through a PE
// (8 cascaded slices) and compares each of the four column sums, 9 cycles
// later, with a direct sum of the selected INT8 weights. Half-way through the
// stream a new weight set is loaded together with one vector: vectors before
// it must use the old set, that vector and later ones the new set.
module tb_pe_chain;
  localparam int LAT = 9;
  logic clk = 0, rst_n = 0, ce = 1, w_load = 0;
  logic [15:0] spikes;
  logic [16*4*8-1:0] w_in;
  logic [3:0][11:0] psum;
  int checks = 0, failures = 0;

  pe_chain dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NV = 200;
  logic [15:0] vec [NV];
  int widx [NV];
  logic [16*4*8-1:0] wset [2];

  function automatic logic [11:0] colsum(input logic [15:0] s, input logic [16*4*8-1:0] w, input int col);
    int acc = 0;
    for (int r = 0; r < 16; r++) if (s[r]) acc += $signed(w[(r*4+col)*8 +: 8]);
    return 12'(acc);
  endfunction

  initial begin
    for (int k = 0; k < 2; k++) for (int i = 0; i < 16; i++) wset[k][i*32 +: 32] = $urandom;
    // make the extremes appear: all -128 in column 0 of set 1
    for (int r = 0; r < 16; r++) wset[1][(r*4)*8 +: 8] = 8'h80;
    spikes = 0; w_in = wset[0];
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk);
    for (int j = 0; j < NV + LAT + 2; j++) begin
      w_load = 0;
      if (j < NV) begin
        vec[j] = (j % 7 == 3) ? 16'hFFFF : 16'($urandom);
        spikes = vec[j];
        if (j == 0)      begin w_load = 1; w_in = wset[0]; end
        if (j == NV/2)   begin w_load = 1; w_in = wset[1]; end
        widx[j] = (j >= NV/2);
      end else spikes = 0;
      @(posedge clk);
      #1;
      if (j >= LAT - 1 && j - (LAT - 1) < NV) begin
        int v;
        v = j - (LAT - 1);
        for (int col = 0; col < 4; col++) begin
          checks++;
          if (psum[col] !== colsum(vec[v], wset[widx[v]], col)) begin
            failures++;
            if (failures < 10) $display("FAIL vec %0d col %0d: got %0d exp %0d", v, col,
                                        $signed(psum[col]), $signed(colsum(vec[v], wset[widx[v]], col)));
          end
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
