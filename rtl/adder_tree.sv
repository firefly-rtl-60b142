// adder_tree: sums the SIMD lane results of the N_IN PEs stacked in one column
// of the systolic array. PE chains cannot be cascaded into each other without
// overflowing their 12-bit lanes, so each column of PEs ends in one adder tree
// that adds, per lane, N_IN signed LANE_W-bit values into an OUT_W-bit sum.
//
// The tree is one combinational sum followed by a single output register
// (this design's choice; the paper only names the adder trees). Latency: one
// cycle. ce stalls the register.
module adder_tree #(
  parameter int unsigned N_IN   = 9,
  parameter int unsigned LANES  = 4,
  parameter int unsigned IN_W   = 12,
  parameter int unsigned OUT_W  = 16
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               ce,
  input  logic [N_IN-1:0][LANES-1:0][IN_W-1:0] in_lanes,
  output logic [LANES-1:0][OUT_W-1:0]        sum
);
  logic [LANES-1:0][OUT_W-1:0] sum_d;

  always_comb begin
    for (int l = 0; l < int'(LANES); l++) begin
      sum_d[l] = '0;
      for (int i = 0; i < int'(N_IN); i++) begin
        sum_d[l] = sum_d[l] + OUT_W'($signed(in_lanes[i][l]));
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  sum <= '0;
    else if (ce) sum <= sum_d;
  end
endmodule
