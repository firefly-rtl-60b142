// tb_firefly_top: end-to-end test of the core at its default size (P = 16,
// a 144 x 16 array). Runs two layers back to back and compares every output
// spike with a behavioural model of the layer computed here:
//   1. SCNN layer, 4 x 6 map, 32 -> 32 channels (c_i = c_o = 2), T = 3,
//      LIF neurons (leak shift 1), 2x2 max pooling.
//   2. Fully connected layer, 288 -> 16 neurons (c_i = 2, c_o = 1), T = 2,
//      IF neurons, no pooling (mode switch to MLP).
// Weights are sent once per layer with random gaps, spikes with random gaps,
// and the output stream is randomly back-pressured. Counts how often the
// design's mechanisms occur (weight reuse jump, reuse region release, weight
// stall of the array, output stall, pooling, bypass, Thresh and Clear
// phases, MLP mode) and counts a failure for any that never happened.
module tb_firefly_top;
  import firefly_pkg::*;
  localparam int P = 16, M = 144, N = 16;

  logic clk = 0, rst_n = 0, start = 0, busy, done;
  cfg_t cfg;
  logic w_valid = 0, w_ready; logic [P*8-1:0] w_data = '0;
  logic s_valid = 0, s_ready, s_last = 0; logic [P-1:0] s_data = '0;
  logic o_valid, o_ready = 0, o_last; logic [P-1:0] o_data;
  int checks = 0, failures = 0;

  firefly_top dut (.*);
  always #5 clk = ~clk;
  int cycle = 0;
  always @(posedge clk) cycle++;
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- mechanism counters ----------------
  int n_jump = 0, n_region = 0, n_wstall = 0, n_ostall = 0, n_pool = 0, n_bypass = 0,
      n_thresh = 0, n_clear = 0, n_mlp = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.reuse_jump) n_jump++;
    if (dut.region_done) n_region++;
    if (dut.v_valid && dut.v_side.tile_first && dut.en && !dut.v_ready) n_wstall++;
    if (!dut.en) n_ostall++;
    if (dut.en && dut.pooled) n_pool++;
    if (dut.en && dut.p_valid && !dut.u_mp.cfg_en) n_bypass++;
    if (dut.en && dut.a_valid && dut.a_side.addr == 0 && dut.a_side.tile_last && !dut.a_side.step_last) n_thresh++;
    if (dut.en && dut.a_valid && dut.a_side.addr == 0 && dut.a_side.tile_last && dut.a_side.step_last) n_clear++;
    if (dut.cfg_q.mode == MODE_MLP && dut.v_valid && dut.v_ready) n_mlp++;
  end

  // ---------------- data and reference model ----------------
  // layer geometry
  int H, W, CIN, COUT, T, CI, CO, LEAK, LSH, POOL, MLP, VTH;
  logic in_spk [4][512][8][8];      // [t][cin][y][x]  (MLP: y=x=0, cin up to 288)
  logic signed [7:0] wt [32][512][3][3];
  logic [N-1:0] exp_words [$];

  task automatic gen_and_model();
    int V [32][8][8];
    logic o [4][32][8][8];
    for (int t = 0; t < T; t++) for (int c = 0; c < CIN; c++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++)
      in_spk[t][c][y][x] = ($urandom % 100) < 35;
    for (int co = 0; co < COUT; co++) for (int c = 0; c < CIN; c++) for (int kh = 0; kh < 3; kh++) for (int kw = 0; kw < 3; kw++)
      wt[co][c][kh][kw] = 8'($signed(($urandom % 61)) - 26);
    for (int co = 0; co < COUT; co++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) V[co][y][x] = 0;
    for (int t = 0; t < T; t++)
      for (int co = 0; co < COUT; co++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
        int I = 0, v;
        if (MLP) begin
          for (int c = 0; c < CIN; c++) if (in_spk[t][c][0][0]) I += wt[co][c][0][0];
        end else begin
          for (int c = 0; c < CIN; c++) for (int kh = 0; kh < 3; kh++) for (int kw = 0; kw < 3; kw++) begin
            int yy = y + kh - 1, xx = x + kw - 1;
            if (yy >= 0 && yy < H && xx >= 0 && xx < W && in_spk[t][c][yy][xx]) I += wt[co][c][kh][kw];
          end
        end
        v = V[co][y][x] + I;
        if (LEAK) v = v - (v >>> LSH);
        o[t][co][y][x] = (v >= VTH);
        V[co][y][x] = (v >= VTH) ? 0 : v;
      end
    // expected output order: group, timestep, (pooled) raster
    exp_words.delete();
    for (int g = 0; g < CO; g++) for (int t = 0; t < T; t++) begin
      if (POOL) begin
        for (int y = 0; y < H/2; y++) for (int x = 0; x < W/2; x++) begin
          logic [N-1:0] wv;
          for (int n = 0; n < N; n++)
            wv[n] = o[t][g*N+n][2*y][2*x] | o[t][g*N+n][2*y][2*x+1] | o[t][g*N+n][2*y+1][2*x] | o[t][g*N+n][2*y+1][2*x+1];
          exp_words.push_back(wv);
        end
      end else begin
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
          logic [N-1:0] wv;
          for (int n = 0; n < N; n++) wv[n] = o[t][g*N+n][y][x];
          exp_words.push_back(wv);
        end
      end
    end
  endtask

  // weight rows: group, input tile, row r = (kh*3+kw)*P + ch  (MLP: r = input index in tile)
  task automatic send_weights();
    for (int g = 0; g < CO; g++) for (int pi = 0; pi < CI; pi++) for (int r = 0; r < M; r++) begin
      logic [P*8-1:0] row;
      for (int o = 0; o < N; o++) begin
        if (MLP) row[o*8 +: 8] = wt[g*N+o][pi*M + r][0][0];
        else     row[o*8 +: 8] = wt[g*N+o][pi*P + r % P][(r/P)/3][(r/P)%3];
      end
      while ($urandom % 4 == 0) @(negedge clk);
      w_valid = 1; w_data = row;
      do @(posedge clk); while (!w_ready);
      @(negedge clk); w_valid = 0;
    end
  endtask

  task automatic send_spikes();
    for (int g = 0; g < CO; g++) for (int t = 0; t < T; t++) for (int pi = 0; pi < CI; pi++) begin
      if (MLP) begin
        for (int k = 0; k < 9; k++) begin
          logic [P-1:0] d;
          for (int ch = 0; ch < P; ch++) d[ch] = in_spk[t][pi*M + k*P + ch][0][0];
          while ($urandom % 3 == 0) @(negedge clk);
          s_valid = 1; s_data = d; s_last = 0;
          do @(posedge clk); while (!s_ready);
          @(negedge clk); s_valid = 0;
        end
      end else begin
        for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
          logic [P-1:0] d;
          for (int ch = 0; ch < P; ch++) d[ch] = in_spk[t][pi*P + ch][y][x];
          while ($urandom % 3 == 0) @(negedge clk);
          s_valid = 1; s_data = d; s_last = 0;
          do @(posedge clk); while (!s_ready);
          @(negedge clk); s_valid = 0;
        end
      end
    end
  endtask

  task automatic collect();
    int k = 0;
    int nexp = exp_words.size();
    while (k < nexp) begin
      o_ready = ($urandom % 4) != 0 || (k % 37 < 20 && 0);
      if (k > 4 && k < 40) o_ready = ($urandom % 8) == 0;   // heavy back-pressure phase
      @(posedge clk);
      if (o_valid && o_ready) begin
        checks++;
        if (o_data !== exp_words[k]) begin
          failures++;
          if (failures < 10) $display("FAIL out %0d: got %h exp %h", k, o_data, exp_words[k]);
        end
        if (o_last !== (k == nexp - 1)) begin failures++; $display("FAIL o_last at %0d", k); end
        k++;
      end
      @(negedge clk);
    end
    o_ready = 0;
  endtask

  task automatic run_layer(input int mlp, h, w, cin, cout, t, leak, lsh, pool, vth);
    int t0;
    MLP = mlp; H = h; W = w; CIN = cin; COUT = cout; T = t; LEAK = leak; LSH = lsh; POOL = pool; VTH = vth;
    CI = mlp ? cin / M : cin / P; CO = cout / N;
    gen_and_model();
    cfg = '0;
    cfg.mode = mlp ? MODE_MLP : MODE_CONV;
    cfg.h = 8'(h); cfg.w = 8'(w); cfg.ci = 8'(CI); cfg.co = 8'(CO); cfg.steps = 8'(t);
    cfg.leak_en = leak[0]; cfg.leak_shift = 4'(lsh); cfg.vth = 24'(vth); cfg.pool_en = pool[0];
    @(negedge clk); start = 1; @(negedge clk); start = 0; @(negedge clk);
    t0 = cycle;
    fork
      send_weights();
      send_spikes();
      collect();
    join
    repeat (3) @(negedge clk);
    checks++;
    if (busy) begin failures++; $display("FAIL busy still set after layer"); end
    $display("layer mlp=%0d done: %0d outputs in %0d cycles", mlp, exp_words.size(), cycle - t0);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(negedge clk); rst_n = 1;
    repeat (2) @(negedge clk);
    run_layer(0, 4, 6, 32, 32, 3, 1, 1, 1, 40);
    run_layer(1, 1, 1, 288, 16, 2, 0, 0, 0, 60);
    $display("mechanisms: reuse_jump=%0d region_release=%0d weight_stall=%0d out_stall=%0d pool=%0d bypass=%0d thresh=%0d clear=%0d mlp=%0d",
             n_jump, n_region, n_wstall, n_ostall, n_pool, n_bypass, n_thresh, n_clear, n_mlp);
    if (n_jump == 0)   begin failures++; $display("FAIL no reuse jump"); end
    if (n_region == 0) begin failures++; $display("FAIL no region release"); end
    if (n_wstall == 0) begin failures++; $display("FAIL no weight stall"); end
    if (n_ostall == 0) begin failures++; $display("FAIL no output stall"); end
    if (n_pool == 0)   begin failures++; $display("FAIL no pooling"); end
    if (n_bypass == 0) begin failures++; $display("FAIL no bypass"); end
    if (n_thresh == 0) begin failures++; $display("FAIL no thresh phase"); end
    if (n_clear == 0)  begin failures++; $display("FAIL no clear phase"); end
    if (n_mlp == 0)    begin failures++; $display("FAIL no MLP mode"); end
    checks += 9;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
