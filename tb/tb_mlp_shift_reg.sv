// tb_mlp_shift_reg: P = 16, K = 9. Sends 4 full groups of nine transfers and
// one group of five closed by in_last, with random gaps and back-pressure.
// Each output vector must hold its transfers in order, first in the lowest
// bits, with zero padding after an early in_last.
module tb_mlp_shift_reg;
  localparam int P = 16, K = 9;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, in_last = 0, out_valid, out_ready = 0;
  logic [P-1:0] in_data = 0; logic [K*P-1:0] out_data;
  int checks = 0, failures = 0;

  mlp_shift_reg #(.P(P), .K(K)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NT = 4*K + 5;
  logic [P-1:0] d [NT];
  initial begin
    for (int i = 0; i < NT; i++) d[i] = 16'($urandom);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    fork
      begin
        for (int i = 0; i < NT; i++) begin
          in_valid = ($urandom % 3 != 0); in_data = d[i]; in_last = (i == NT-1);
          @(posedge clk);
          if (!(in_valid && in_ready)) i--;
          @(negedge clk);
        end
        in_valid = 0; in_last = 0;
      end
      begin
        for (int v = 0; v < 5; v++) begin
          logic [K*P-1:0] e;
          e = '0;
          for (int k = 0; k < K; k++) if (v*K + k < NT) e[k*P +: P] = d[v*K + k];
          out_ready = ($urandom % 2 != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_data !== e) begin failures++; $display("FAIL vector %0d", v); end
          end else v--;
          @(negedge clk);
        end
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
