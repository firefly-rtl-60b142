// weight_delivery: four-level synaptic weight delivery hierarchy.
//
//   Lv1  stream_upsizer  xU1   weight rows  -> U1-row words
//   Lv2  partial_reuse_fifo    keeps the c_i weight sets of the current output
//                              group on chip and replays them once per timestep
//   Lv3  stream_upsizer  xU3   U1-row words -> one whole M x N weight set
//   Lv4  skid_buffer           decouples the array's back-pressure
//
// The input is the weight stream from DRAM, one crossbar row (N INT8 weights,
// EW bits) per transfer, rows in order r = 0..M-1 for each input tile. The
// output is one complete weight set per transfer. The reuse region of the
// FIFO is set to c_i*M/U1 entries (all weight sets of one output group) and
// replayed T times, so every weight crosses the DRAM interface once per layer
// instead of once per timestep, while the next group's weights can already
// stream in behind the region. Level 1 widens by 8 as in the paper's example;
// Level 3 widens by M/U1 = 18 so its word is exactly one weight set (this
// design's choice of sizes).
module weight_delivery #(
  parameter int unsigned EW        = 128,
  parameter int unsigned U1        = 8,
  parameter int unsigned U3        = 18,
  parameter int unsigned PRF_DEPTH = 1024,
  localparam int unsigned AW       = $clog2(PRF_DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic [7:0]            cfg_reuse_times,
  input  logic [AW:0]           cfg_reuse_len,
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic [EW-1:0]         in_data,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [U3*U1*EW-1:0]   out_data,
  output logic                  reuse_jump,
  output logic                  region_done
);
  logic                 l1_valid, l1_ready, l2_valid, l2_ready, l3_valid, l3_ready;
  logic [U1*EW-1:0]     l1_data, l2_data;
  logic [U3*U1*EW-1:0]  l3_data;

  stream_upsizer #(.N(U1), .EW(EW)) u_lv1 (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .in_valid(in_valid), .in_ready(in_ready), .in_data(in_data),
    .out_valid(l1_valid), .out_ready(l1_ready), .out_data(l1_data)
  );

  partial_reuse_fifo #(.DW(U1*EW), .DEPTH(PRF_DEPTH)) u_lv2 (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .cfg_reuse_times(cfg_reuse_times), .cfg_reuse_len(cfg_reuse_len),
    .in_valid(l1_valid), .in_ready(l1_ready), .in_data(l1_data),
    .out_valid(l2_valid), .out_ready(l2_ready), .out_data(l2_data),
    .reuse_jump(reuse_jump), .region_done(region_done)
  );

  stream_upsizer #(.N(U3), .EW(U1*EW)) u_lv3 (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .in_valid(l2_valid), .in_ready(l2_ready), .in_data(l2_data),
    .out_valid(l3_valid), .out_ready(l3_ready), .out_data(l3_data)
  );

  skid_buffer #(.DW(U3*U1*EW)) u_lv4 (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .in_valid(l3_valid), .in_ready(l3_ready), .in_data(l3_data),
    .out_valid(out_valid), .out_ready(out_ready), .out_data(out_data)
  );
endmodule
