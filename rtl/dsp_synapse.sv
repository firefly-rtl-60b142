// dsp_synapse: one DSP48E2 slice configured as a 2x4 synaptic crossbar.
//
// The slice runs its 48-bit ALU in FOUR12 SIMD mode (four independent 12-bit
// adders, carries ignored, ALUMODE = add). Four INT8 weights of one crossbar
// row, sign-extended to 12 bits, form the 48-bit bundle A:B (A = upper 30 bits,
// B = lower 18 bits); four weights of a second row form the bundle on C. The
// spikes of those two rows drive OPMODE: spike of the A:B row selects A:B or 0
// on the X multiplexer, spike of the C row selects C or 0 on the W multiplexer,
// Y is 0 and Z takes PCIN, the partial sum coming up the cascade from the
// slice below. P = W + X + Y + Z per lane, and PCOUT = P feeds the slice above.
// The pre-adder and multiplier are unused.
//
// Registers: A, B and C are registered once and only load when cew is high,
// so they hold the stationary weights. OPMODE is registered once. P is the
// output register. Latency: spikes on opmode appear in P two clock edges
// later (OPMODE reg, then P reg). ce freezes the whole slice (stall).
//
// This is a plain-logic model of the subset of DSP48E2 behaviour the crossbar
// uses (W in {0,C}, X in {0,A:B}, Y in {0,C}, Z in {0,PCIN}); the
// remaining multiplexer codes give 0. The mapping of rows to ports and the
// OPMODE bit layout {W[1:0], Z[2:0], Y[1:0], X[1:0]} follow the paper; the
// stall enable is this design's addition.
module dsp_synapse #(
  parameter int unsigned LANE_W = 12,
  parameter int unsigned LANES  = 4
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      ce,      // clock enable of the whole slice
  input  logic                      cew,     // load A/B/C (weight registers)
  input  logic [29:0]               a,
  input  logic [17:0]               b,
  input  logic [LANES*LANE_W-1:0]   c,
  input  logic [8:0]                opmode,
  input  logic [LANES*LANE_W-1:0]   pcin,
  output logic [LANES*LANE_W-1:0]   pcout
);
  localparam int unsigned PW = LANES * LANE_W;

  logic [29:0]   a_q;
  logic [17:0]   b_q;
  logic [PW-1:0] c_q;
  logic [8:0]    opmode_q;
  logic [PW-1:0] p_q;
  logic [PW-1:0] w_mux, x_mux, y_mux, z_mux, p_d;

  always_ff @(posedge clk) begin
    if (ce && cew) begin
      a_q <= a;
      b_q <= b;
      c_q <= c;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      opmode_q <= '0;
      p_q      <= '0;
    end else if (ce) begin
      opmode_q <= opmode;
      p_q      <= p_d;
    end
  end

  // Wide-bus multiplexers (only the codes the crossbar needs).
  always_comb begin
    w_mux = (opmode_q[8:7] == 2'b11)  ? c_q : '0;
    x_mux = (opmode_q[1:0] == 2'b11)  ? PW'({a_q, b_q}) : '0;
    y_mux = (opmode_q[3:2] == 2'b11)  ? c_q : '0;
    z_mux = (opmode_q[6:4] == 3'b001) ? pcin : '0;
  end

  // SIMD ALU: independent LANE_W-bit adders, no carry between lanes.
  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      p_d[l*LANE_W +: LANE_W] = w_mux[l*LANE_W +: LANE_W] + x_mux[l*LANE_W +: LANE_W]
                              + y_mux[l*LANE_W +: LANE_W] + z_mux[l*LANE_W +: LANE_W];
    end
  end

  assign pcout = p_q;
endmodule
