// tb_maxpool_unit: N = 16, 6 x 8 maps. Streams two random spike maps with
// pooling enabled (with gaps and a stall of the enable) and one with pooling
// disabled. Pooled outputs must be the OR of each 2x2 block in raster
// order with renumbered addresses; bypassed outputs must equal the inputs.
module tb_maxpool_unit;
  import firefly_pkg::*;
  localparam int N = 16, H = 6, W = 8;
  logic clk = 0, rst_n = 0, en = 1, cfg_en = 1, in_valid = 0, out_valid, pooled;
  logic [7:0] cfg_w = W;
  logic [N-1:0] in_spikes = 0, out_spikes;
  side_t in_side, out_side;
  int checks = 0, failures = 0;
  logic [N-1:0] img [H][W];
  logic [N-1:0] expq [$];
  int addrq [$];
  bit stalled = 0;

  maxpool_unit #(.N(N)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid && en) begin
    checks++;
    if (expq.size() == 0 || out_spikes !== expq[0] || out_side.addr !== 12'(addrq[0])) begin
      failures++;
      if (failures < 6) $display("FAIL got %h addr %0d", out_spikes, out_side.addr);
    end
    if (expq.size() != 0) begin void'(expq.pop_front()); void'(addrq.pop_front()); end
  end

  initial begin
    in_side = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    for (int f = 0; f < 3; f++) begin
      cfg_en = (f < 2);
      for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) img[y][x] = 16'($urandom) & 16'($urandom);
      if (cfg_en) begin
        for (int y = 0; y < H/2; y++) for (int x = 0; x < W/2; x++) begin
          expq.push_back(img[2*y][2*x] | img[2*y][2*x+1] | img[2*y+1][2*x] | img[2*y+1][2*x+1]);
          addrq.push_back(y*(W/2) + x);
        end
      end else begin
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin expq.push_back(img[y][x]); addrq.push_back(y*W+x); end
      end
      for (int i = 0; i < H*W; i++) begin
        in_valid = ($urandom % 4 != 0);
        en = !(f == 1 && i == 10 && !stalled);
        if (!en) stalled = 1;
        in_spikes = img[i / W][i % W];
        in_side = '0; in_side.addr = 12'(i); in_side.map_last = (i == H*W-1);
        @(negedge clk);
        if (!(in_valid && en)) i--;
      end
      in_valid = 0; en = 1;
      repeat (3) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d outputs missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
