// pe_chain: one processing element, a cascade of CHAIN dsp_synapse slices that
// computes a (2*CHAIN) x 4 synaptic crossbar (16 x 4 with the paper's chain of 8).
//
// Slice k handles crossbar rows 2k (on A:B / X mux) and 2k+1 (on C / W mux);
// its PCIN is the PCOUT of slice k-1 (slice 0 gets 0), so the cascade path
// acts as the dendrite accumulating the four column sums. Eight slices of
// 12-bit lanes cannot overflow with INT8 weights (16 * 128 = 2048).
//
// Timing: the spikes of one vector enter all rows in the same cycle. The rows
// of slice k are delayed by k registers (plus the OPMODE register inside the
// slice) so each slice adds while its PCIN carries the same vector: the
// column sums for the vector accepted in cycle j leave PCOUT of the top slice
// in cycle j+9 (CHAIN+1). A weight load (w_load with the first vector of a
// tile) is skewed the same way, slice k loading at cycle j+k, so every vector
// sees one consistent weight set. The skew scheme is this design's choice.
//
// Weights: w_in[(row*4 + col)*8 +: 8], INT8. Output: psum[col], 12-bit signed.
module pe_chain #(
  parameter int unsigned CHAIN  = 8,
  parameter int unsigned LANE_W = 12
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              ce,
  input  logic [2*CHAIN-1:0]                spikes,
  input  logic [2*CHAIN*4*8-1:0]            w_in,
  input  logic                              w_load,
  output logic [3:0][LANE_W-1:0]            psum
);
  localparam int unsigned ROWS = 2 * CHAIN;
  localparam int unsigned PW   = 4 * LANE_W;

  // Delay lines: sd[k] holds the spikes delayed by k+1 cycles, ld[k] the load
  // strobe delayed by k+1 cycles.
  logic [ROWS-1:0] sd [CHAIN];
  logic            ld [CHAIN];
  logic [PW-1:0]   casc [CHAIN+1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(CHAIN); k++) begin
        sd[k] <= '0;
        ld[k] <= 1'b0;
      end
    end else if (ce) begin
      sd[0] <= spikes;
      ld[0] <= w_load;
      for (int k = 1; k < int'(CHAIN); k++) begin
        sd[k] <= sd[k-1];
        ld[k] <= ld[k-1];
      end
    end
  end

  // Sign-extend four INT8 weights of one row into a 48-bit bundle, column 0
  // in the most significant lane.
  function automatic logic [PW-1:0] bundle(input logic [ROWS*4*8-1:0] w, input int row);
    logic [PW-1:0] r;
    for (int col = 0; col < 4; col++) begin
      r[(3-col)*LANE_W +: LANE_W] = LANE_W'($signed(w[(row*4+col)*8 +: 8]));
    end
    return r;
  endfunction

  assign casc[0] = '0;

  for (genvar k = 0; k < int'(CHAIN); k++) begin : g_slice
    logic [PW-1:0] ab, cc;
    logic          s_x, s_w, load_k;
    logic [8:0]    opmode;
    assign ab     = bundle(w_in, 2*k);
    assign cc     = bundle(w_in, 2*k+1);
    if (k == 0) begin : g_first
      assign s_x    = spikes[0];
      assign s_w    = spikes[1];
      assign load_k = w_load;
    end else begin : g_rest
      assign s_x    = sd[k-1][2*k];
      assign s_w    = sd[k-1][2*k+1];
      assign load_k = ld[k-1];
    end
    assign opmode = {{2{s_w}}, 3'b001, 2'b00, {2{s_x}}};

    dsp_synapse #(.LANE_W(LANE_W), .LANES(4)) u_dsp (
      .clk   (clk),
      .rst_n (rst_n),
      .ce    (ce),
      .cew   (load_k),
      .a     (ab[PW-1:18]),
      .b     (ab[17:0]),
      .c     (cc),
      .opmode(opmode),
      .pcin  (casc[k]),
      .pcout (casc[k+1])
    );
  end

  always_comb begin
    for (int col = 0; col < 4; col++) psum[col] = casc[CHAIN][(3-col)*LANE_W +: LANE_W];
  end
endmodule
