// tb_adder_tree: random signed 12-bit lane values from 9 PEs, including the
// most negative and most positive lane values; each of the four registered
// sums must equal the integer sum one cycle later.
module tb_adder_tree;
  logic clk = 0, rst_n = 0, ce = 1;
  logic [8:0][3:0][11:0] in_lanes;
  logic [3:0][15:0] sum;
  int checks = 0, failures = 0;

  adder_tree dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_lanes = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      int e [4];
      for (int p = 0; p < 9; p++) for (int l = 0; l < 4; l++) begin
        case (i % 3)
          0: in_lanes[p][l] = 12'($urandom);
          1: in_lanes[p][l] = 12'h800;          // -2048
          default: in_lanes[p][l] = 12'h7FF;    // +2047
        endcase
      end
      for (int l = 0; l < 4; l++) begin
        e[l] = 0;
        for (int p = 0; p < 9; p++) e[l] += $signed(in_lanes[p][l]);
      end
      @(negedge clk);
      for (int l = 0; l < 4; l++) begin
        checks++;
        if ($signed(sum[l]) !== 16'(e[l])) begin
          failures++;
          if (failures < 10) $display("FAIL i=%0d lane %0d got %0d exp %0d", i, l, $signed(sum[l]), e[l]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
