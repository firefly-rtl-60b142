// tb_stream_upsizer: x8 upsizer of 8-bit elements. Sends 80 numbered
// elements with random input gaps and random output back-pressure and
// checks that every output word holds 8 consecutive elements, first in the
// lowest byte. A second phase with both sides always ready checks the rate:
// 64 elements must take 64 cycles (one element per cycle, one word every 8).
module tb_stream_upsizer;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [7:0] in_data = 0; logic [63:0] out_data;
  int checks = 0, failures = 0;

  stream_upsizer #(.N(8), .EW(8)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int nel, input bit rnd, input int base, output int cycles);
    int sent = 0, words = 0, c0;
    c0 = $time / 10;
    fork
      begin
      while (sent < nel) begin
        in_valid = rnd ? ($urandom % 3 != 0) : 1; in_data = 8'(base + sent);
        @(posedge clk); if (in_valid && in_ready) sent++; @(negedge clk);
      end
      in_valid = 0;
      end
      while (words < nel / 8) begin
        out_ready = rnd ? ($urandom % 3 != 0) : 1;
        @(posedge clk);
        if (out_valid && out_ready) begin
          for (int i = 0; i < 8; i++) begin
            checks++;
            if (out_data[i*8 +: 8] !== 8'(base + words*8 + i)) begin
              failures++; $display("FAIL word %0d elem %0d got %0d", words, i, out_data[i*8 +: 8]);
            end
          end
          words++;
        end
        @(negedge clk);
      end
    join
    in_valid = 0; out_ready = 0;
    cycles = $time / 10 - c0;
  endtask

  initial begin
    int cyc;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    run(80, 1, 0, cyc);
    run(64, 0, 100, cyc);
    checks++;
    if (cyc > 65) begin failures++; $display("FAIL rate: 64 elements took %0d cycles", cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
