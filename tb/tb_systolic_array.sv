// tb_systolic_array: default 144 x 16 array (9 x 4 PEs, 288 slices).
// Loads weight set A, streams 30 random spike vectors (one per cycle), then
// switches to set B with the next vector (tile_first) and streams 30 more.
// Every psum is compared with sum_r spike[r] * w[r][o] computed here, and
// must appear exactly 10 cycles after its vector was accepted. Checks that
// the array accepts one vector per cycle, that it back-pressures a third
// weight set while set B is staged, and that a stall (en low) freezes it.
module tb_systolic_array;
  import firefly_pkg::*;
  localparam int P = 16, M = 144, N = 16, LAT = 10, NV = 60;
  logic clk = 0, rst_n = 0, en = 1;
  logic in_valid = 0, in_ready, w_valid = 0, w_ready, out_valid;
  logic [M-1:0] in_spikes = 0; side_t in_side, out_side;
  logic [M*N*8-1:0] w_data = 0;
  logic [N-1:0][15:0] out_psum;
  int checks = 0, failures = 0;

  systolic_array dut (.*);
  always #5 clk = ~clk;
  int cycle = 0;
  always @(negedge clk) cycle++;
  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [M*N*8-1:0] wset [3];
  logic [M-1:0] vec [NV];
  int acc_cycle [NV];
  int nout = 0;
  bit stalled = 0, wr, ir, wrdy;

  function automatic int dot(logic [M-1:0] s, logic [M*N*8-1:0] w, int o);
    int a = 0;
    for (int r = 0; r < M; r++) if (s[r]) a += $signed(w[(r*N+o)*8 +: 8]);
    return a;
  endfunction

  int stalls = 0, acc_stalls [NV];
  always @(negedge clk) if (!en) stalls++;
  always @(posedge clk) if (rst_n && out_valid) begin
    int v;
    v = int'(out_side.addr);
    checks++;
    if (cycle - acc_cycle[v] != LAT + stalls - acc_stalls[v]) begin failures++; $display("FAIL latency %0d for vector %0d", cycle - acc_cycle[v], v); end
    for (int o = 0; o < N; o++) begin
      checks++;
      if ($signed(out_psum[o]) !== 16'(dot(vec[v], wset[v >= NV/2], o))) begin
        failures++;
        if (failures < 8) $display("FAIL v %0d o %0d got %0d exp %0d", v, o, $signed(out_psum[o]), dot(vec[v], wset[v >= NV/2], o));
      end
    end
    nout++;
  end

  initial begin
    for (int k = 0; k < 3; k++) for (int i = 0; i < M*N*8/32; i++) wset[k][i*32 +: 32] = $urandom;
    for (int v = 0; v < NV; v++) vec[v] = {$urandom, $urandom, $urandom, $urandom, $urandom};
    in_side = '0;
    repeat (2) @(negedge clk); rst_n = 1; @(negedge clk);
    w_valid = 1; w_data = wset[0];
    @(negedge clk); w_valid = 0;
    for (int v = 0; v < NV; v++) begin
      in_valid = 1; in_spikes = vec[v];
      in_side = '0; in_side.addr = 12'(v); in_side.tile_first = (v == 0 || v == NV/2);
      if (v == 12) begin w_valid = 1; w_data = wset[1]; end
      if (v == 20) begin w_valid = 1; w_data = wset[2]; end
      if (v == 25 && !stalled) begin en = 0; stalled = 1; end
      #1 wr = w_valid && w_ready; ir = in_ready; wrdy = w_ready;
      @(posedge clk);
      if (v == 14) begin checks++; if (w_valid) begin failures++; $display("FAIL set B not staged"); end end
      if (v >= 20 && v < NV/2) begin checks++; if (wrdy) begin failures++; $display("FAIL third set accepted while B staged"); end end
      if (ir) begin acc_cycle[v] = cycle; acc_stalls[v] = stalls; end
      else begin
        if (en && v != 0 && v != NV/2 ) begin failures++; $display("FAIL vector %0d not accepted", v); end
        v--;
      end
      checks++;
      @(negedge clk);
      en = 1;
      if (wr) w_valid = 0;
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (nout != NV) begin failures++; $display("FAIL %0d outputs", nout); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
