// systolic_array: weight-stationary M x N synaptic crossbar built from PEs.
//
// M = 9*P crossbar rows (a flattened 3x3 x P-channel spike window) and N = P
// columns (output channels). The array is a grid of M/16 x N/4 pe_chain
// instances; every PE of grid row g gets spike rows 16g..16g+15 (the axon is
// shared along the row), every PE of grid column q computes outputs
// 4q..4q+3, and one adder_tree per grid column adds the PE results of that
// column. With P = 16 this is 9 x 4 PEs = 288 DSP slices.
//
// Weights: a whole weight set (M*N INT8, w_data[(r*N+o)*8 +: 8] from row r to
// output o) arrives on a valid/ready stream into a staging register. The
// array takes a new set only when the staging register is empty, i.e. it
// back-pressures the weight stream while the current set is in use. A spike
// vector whose sideband has tile_first set is accepted only when a staged set
// is present; it triggers the skewed copy of the staged set into the slices'
// A/B/C registers. The staging register is released CHAIN cycles later, when
// the top slices have loaded. The staging register and its lock are this
// design's reading of the weight registers drawn above the PE columns.
//
// Timing: one vector per cycle; out_psum for a vector accepted in cycle j is
// valid in cycle j+CHAIN+2 (10). out_side is the vector's sideband delayed
// alike. en stalls every register of the datapath.
module systolic_array
  import firefly_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  localparam int unsigned M = KWIN * P,
  localparam int unsigned N = P
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         en,
  // spike vectors
  input  logic                         in_valid,
  output logic                         in_ready,
  input  logic [M-1:0]                 in_spikes,
  input  side_t                        in_side,
  // weight sets
  input  logic                         w_valid,
  output logic                         w_ready,
  input  logic [M*N*WB-1:0]            w_data,
  // partial sums
  output logic                         out_valid,
  output logic [N-1:0][PSUM_W-1:0]     out_psum,
  output side_t                        out_side
);
  localparam int unsigned GR  = M / PE_ROWS;   // PE grid rows
  localparam int unsigned GC  = N / PE_COLS;   // PE grid columns
  localparam int unsigned LAT = CHAIN + 2;

  logic [M*N*WB-1:0] stage_w;
  logic              stage_full;
  logic [3:0]        lock_cnt;
  logic              accept, w_load;
  logic [M-1:0]      spk;

  assign w_ready  = !stage_full;
  assign in_ready = en && (!in_side.tile_first || (stage_full && lock_cnt == '0));
  assign accept   = in_valid && in_ready;
  assign w_load   = accept && in_side.tile_first;
  assign spk      = accept ? in_spikes : '0;

  always_ff @(posedge clk) begin
    if (w_valid && w_ready) stage_w <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stage_full <= 1'b0;
      lock_cnt   <= '0;
    end else begin
      if (w_valid && w_ready) stage_full <= 1'b1;
      if (w_load) begin
        lock_cnt <= 4'(CHAIN);
      end else if (en && lock_cnt != '0) begin
        lock_cnt <= lock_cnt - 1'b1;
        if (lock_cnt == 4'd1) stage_full <= 1'b0;
      end
    end
  end

  // PE grid
  logic [GC-1:0][GR-1:0][PE_COLS-1:0][LANE_W-1:0] pe_out;

  for (genvar g = 0; g < int'(GR); g++) begin : g_row
    for (genvar q = 0; q < int'(GC); q++) begin : g_col
      logic [PE_ROWS*PE_COLS*WB-1:0] w_pe;
      always_comb begin
        for (int r = 0; r < int'(PE_ROWS); r++)
          for (int c = 0; c < int'(PE_COLS); c++)
            w_pe[(r*PE_COLS+c)*WB +: WB] = stage_w[((g*PE_ROWS+r)*N + q*PE_COLS+c)*WB +: WB];
      end
      pe_chain #(.CHAIN(CHAIN), .LANE_W(LANE_W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .ce    (en),
        .spikes(spk[g*PE_ROWS +: PE_ROWS]),
        .w_in  (w_pe),
        .w_load(w_load),
        .psum  (pe_out[q][g])
      );
    end
  end

  for (genvar q = 0; q < int'(GC); q++) begin : g_tree
    logic [PE_COLS-1:0][PSUM_W-1:0] colsum;
    adder_tree #(.N_IN(GR), .LANES(PE_COLS), .IN_W(LANE_W), .OUT_W(PSUM_W)) u_tree (
      .clk     (clk),
      .rst_n   (rst_n),
      .ce      (en),
      .in_lanes(pe_out[q]),
      .sum     (colsum)
    );
    for (genvar c = 0; c < int'(PE_COLS); c++) begin : g_o
      assign out_psum[q*PE_COLS + c] = colsum[c];
    end
  end

  // valid / sideband delay line matching the datapath latency
  logic  vd [LAT];
  side_t sdl [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(LAT); i++) begin
        vd[i]  <= 1'b0;
        sdl[i] <= '0;
      end
    end else if (en) begin
      vd[0]  <= accept;
      sdl[0] <= in_side;
      for (int i = 1; i < int'(LAT); i++) begin
        vd[i]  <= vd[i-1];
        sdl[i] <= sdl[i-1];
      end
    end
  end
  assign out_valid = vd[LAT-1] && en;
  assign out_side  = sdl[LAT-1];
endmodule
