// tb_partial_reuse_fifo: DEPTH 16, 16-bit entries, reuse length L = 4,
// reuse times T = 3. Pushes the numbers 0..47 with random gaps and pops with
// random back-pressure. Expected output: every block of 4 numbers three
// times in a row (0..3,0..3,0..3,4..7,...). Also checks that the FIFO
// reports full once 16 entries from Start are occupied, that nothing is
// popped before a whole region is written, and counts the jumps and region
// releases.
module tb_partial_reuse_fifo;
  localparam int DW = 16, DEPTH = 16, L = 4, T = 3, NTOT = 48;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0] cfg_reuse_times = T;
  logic [4:0] cfg_reuse_len = L;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, reuse_jump, region_done;
  logic [DW-1:0] in_data = 0, out_data;
  int checks = 0, failures = 0, njump = 0, nreg = 0, pushed = 0, sawfull = 0;

  partial_reuse_fifo #(.DW(DW), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  always @(posedge clk) begin
    if (reuse_jump) njump++;
    if (region_done) nreg++;
  end

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    // phase 1: push 3 values only, output must stay empty
    for (int i = 0; i < 3; i++) begin
      in_valid = 1; in_data = 16'(pushed); @(posedge clk); pushed++; @(negedge clk);
    end
    in_valid = 0; out_ready = 1;
    repeat (4) @(negedge clk);
    checks++; if (out_valid) begin failures++; $display("FAIL popped before region full"); end
    // phase 2: fill without popping until full
    out_ready = 0;
    while (in_ready) begin
      in_valid = 1; in_data = 16'(pushed); @(posedge clk); pushed++; @(negedge clk);
    end
    in_valid = 0;
    checks++; if (pushed != DEPTH) begin failures++; $display("FAIL full after %0d pushes", pushed); end
    fork
      begin
        while (pushed < NTOT) begin
          in_valid = ($urandom % 3) != 0; in_data = 16'(pushed);
          @(posedge clk);
          if (in_valid && in_ready) pushed++;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int k = 0; k < NTOT * T; ) begin
          int exp_v;
          exp_v = (k / (L*T)) * L + (k % L);
          out_ready = ($urandom % 4) != 0;
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_data !== 16'(exp_v)) begin
              failures++;
              if (failures < 10) $display("FAIL pop %0d got %0d exp %0d", k, out_data, exp_v);
            end
            k++;
          end
          @(negedge clk);
        end
      end
    join
    checks++; if (njump != (NTOT/L)*(T-1)) begin failures++; $display("FAIL jumps %0d", njump); end
    checks++; if (nreg != NTOT/L) begin failures++; $display("FAIL regions %0d", nreg); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
