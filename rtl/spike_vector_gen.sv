// spike_vector_gen: input spike datapath of the core.
//
// The input spike stream (P channels per transfer) goes either to the line
// buffer (SCNN mode: one 3x3 x P window per pixel) or to the MLP shift
// register (MLP mode: nine transfers joined per vector); the selected 9*P-bit
// vector is passed on to the systolic array. The unit also tags each vector
// with the loop position of the layer schedule: output group p_o (outer),
// timestep t, input tile p_i, pixel s (inner). A tile is one pass over the
// map (H*W vectors in SCNN mode, 1 vector in MLP mode). The tags tell the
// array when to switch weights (first vector of a tile) and the update
// engine which phase applies (last tile, last timestep, first tile of the
// group). The counters are this design's realisation of the schedule.
//
// clear restarts the counters at the beginning of a layer. Handshake is
// valid/ready throughout; the output is a combinational mux of the two paths.
module spike_vector_gen
  import firefly_pkg::*;
#(
  parameter int unsigned P = P_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  cfg_t                 cfg,
  input  logic                 clear,
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0]         in_data,
  input  logic                 in_last,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [KWIN*P-1:0]    out_vec,
  output side_t                out_side
);
  logic lb_in_valid, lb_in_ready, lb_out_valid, lb_out_ready, lb_out_last;
  logic [KWIN*P-1:0] lb_win;
  logic [MAP_AW-1:0] lb_addr;
  logic mr_in_valid, mr_in_ready, mr_out_valid, mr_out_ready;
  logic [KWIN*P-1:0] mr_vec;
  logic is_mlp;

  assign is_mlp = (cfg.mode == MODE_MLP);

  assign lb_in_valid = in_valid && !is_mlp;
  assign mr_in_valid = in_valid &&  is_mlp;
  assign in_ready    = is_mlp ? mr_in_ready : lb_in_ready;

  line_buffer #(.P(P)) u_lb (
    .clk(clk), .rst_n(rst_n), .cfg_h(cfg.h), .cfg_w(cfg.w), .clear(clear),
    .in_valid(lb_in_valid), .in_ready(lb_in_ready), .in_pix(in_data),
    .out_valid(lb_out_valid), .out_ready(lb_out_ready), .out_win(lb_win),
    .out_addr(lb_addr), .out_last(lb_out_last)
  );

  mlp_shift_reg #(.P(P), .K(KWIN)) u_mlp (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .in_valid(mr_in_valid), .in_ready(mr_in_ready), .in_data(in_data), .in_last(in_last),
    .out_valid(mr_out_valid), .out_ready(mr_out_ready), .out_data(mr_vec)
  );

  assign out_valid    = is_mlp ? mr_out_valid : lb_out_valid;
  assign out_vec      = is_mlp ? mr_vec : lb_win;
  assign lb_out_ready = out_ready && !is_mlp;
  assign mr_out_ready = out_ready &&  is_mlp;

  // schedule counters
  logic [DIM_W-1:0] pi, t, po;
  logic first_of_tile, end_of_tile;

  assign end_of_tile = is_mlp ? 1'b1 : lb_out_last;

  always_comb begin
    out_side             = '0;
    out_side.addr        = is_mlp ? '0 : lb_addr;
    out_side.tile_first  = first_of_tile;
    out_side.map_last    = end_of_tile;
    out_side.tile_last   = (pi == cfg.ci - 1'b1);
    out_side.step_last   = (t  == cfg.steps - 1'b1);
    out_side.group_first = (pi == '0) && (t == '0);
    out_side.layer_last  = (po == cfg.co - 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pi <= '0; t <= '0; po <= '0; first_of_tile <= 1'b1;
    end else if (clear) begin
      pi <= '0; t <= '0; po <= '0; first_of_tile <= 1'b1;
    end else if (out_valid && out_ready) begin
      first_of_tile <= end_of_tile;
      if (end_of_tile) begin
        if (pi == cfg.ci - 1'b1) begin
          pi <= '0;
          if (t == cfg.steps - 1'b1) begin
            t <= '0;
            po <= (po == cfg.co - 1'b1) ? '0 : po + 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end else begin
          pi <= pi + 1'b1;
        end
      end
    end
  end
endmodule
