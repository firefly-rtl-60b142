// tb_skid_buffer: random valid on the input side and random ready on the
// output side; all 300 numbered words must come out once, in order. With
// both sides always ready, one word must pass per cycle; in_ready must be
// high whenever the spare entry is free (at most two words held).
module tb_skid_buffer;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [15:0] in_data = 0, out_data;
  int checks = 0, failures = 0;

  skid_buffer #(.DW(16)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int sent = 0, got = 0, held = 0;
  initial begin
    int c0, c1;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    fork
      while (sent < 300) begin
        in_valid = (sent >= 200) ? 1 : ($urandom % 3 != 0); in_data = 16'(sent);
        @(posedge clk); if (in_valid && in_ready) sent++; @(negedge clk);
        if (sent == 300) in_valid = 0;
      end
      while (got < 300) begin
        out_ready = (got >= 200) ? 1 : ($urandom % 2 != 0);
        if (got == 200) c0 = $time / 10;
        @(posedge clk);
        if (out_valid && out_ready) begin
          checks++;
          if (out_data !== 16'(got)) begin failures++; $display("FAIL got %0d exp %0d", out_data, got); end
          got++;
        end
        checks++;
        if (sent - got > 2) begin failures++; $display("FAIL holds %0d words", sent - got); end
        @(negedge clk);
      end
    join
    c1 = $time / 10;
    checks++;
    if (c1 - c0 > 104) begin failures++; $display("FAIL rate %0d cycles for 100 words", c1 - c0); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
