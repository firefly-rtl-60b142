// tb_line_buffer: P = 16. Streams two 5 x 7 random spike maps back to back
// with random input gaps and random output back-pressure, then a third map
// at full rate. Every output window is compared with the 3x3 same-padded
// neighbourhood computed from the stored maps, together with its centre
// address and the last-window flag. The full-rate map must take
// H*W + W + 1 cycles (one window per cycle plus the flush of one row).
module tb_line_buffer;
  import firefly_pkg::*;
  localparam int P = 16, H = 5, W = 7, NF = 3;
  logic clk = 0, rst_n = 0, clear = 0;
  logic [7:0] cfg_h = H, cfg_w = W;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, out_last;
  logic [P-1:0] in_pix = 0; logic [9*P-1:0] out_win; logic [11:0] out_addr;
  int checks = 0, failures = 0;
  logic [P-1:0] img [NF][H][W];

  line_buffer #(.P(P)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [9*P-1:0] window(int f, int y, int x);
    logic [9*P-1:0] r = '0;
    for (int kh = 0; kh < 3; kh++) for (int kw = 0; kw < 3; kw++) begin
      int yy = y + kh - 1, xx = x + kw - 1;
      if (yy >= 0 && yy < H && xx >= 0 && xx < W) r[(kh*3+kw)*P +: P] = img[f][yy][xx];
    end
    return r;
  endfunction

  int t_first, t_last;
  initial begin
    for (int f = 0; f < NF; f++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[f][y][x] = 16'($urandom);
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    fork
      begin
        for (int f = 0; f < NF; f++) for (int i = 0; i < H*W; i++) begin
          in_valid = (f == NF-1) ? 1 : ($urandom % 3 != 0);
          in_pix = img[f][i / W][i % W];
          if (f == NF-1 && i == 0) t_first = $time / 10;
          @(posedge clk);
          if (!(in_valid && in_ready)) i--;
          @(negedge clk);
        end
        in_valid = 0;
      end
      begin
        for (int f = 0; f < NF; f++) for (int i = 0; i < H*W; i++) begin
          out_ready = (f == NF-1) ? 1 : ($urandom % 3 != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            checks++;
            if (out_win !== window(f, i / W, i % W) || out_addr !== 12'(i) || out_last !== (i == H*W-1)) begin
              failures++;
              if (failures < 6) $display("FAIL frame %0d pix %0d: addr %0d last %0d", f, i, out_addr, out_last);
            end
            if (f == NF-1 && i == H*W-1) t_last = $time / 10;
          end else i--;
          @(negedge clk);
        end
      end
    join
    checks++;
    if (t_last - t_first + 1 > H*W + W + 1 + 1) begin
      failures++; $display("FAIL rate: frame took %0d cycles", t_last - t_first + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
