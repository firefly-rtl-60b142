// firefly_top: FireFly spiking-neural-network core (programmable-logic part).
//
// Computes one spiking convolutional layer (3x3, stride 1, same padding) or
// one fully connected layer per run, with IF or LIF neurons, over T
// timesteps. Input and output channels are tiled P at a time. For every
// output group (outer loop) and timestep, the c_i input tiles stream through
// the weight-stationary systolic array; the update engine accumulates their
// partial sums in the unified buffer and, after the last tile, applies
// leak and threshold and emits the output spikes of that timestep.
//
//   s_*  input spikes  -> spike_vector_gen (line buffer | MLP shift register)
//   w_*  weight rows   -> weight_delivery (x8 upsizer, partial reuse FIFO,
//                         x18 upsizer, skid buffer)
//   both -> systolic_array (M/16 x N/4 PEs of 8 DSP slices + adder trees)
//        -> update_engine + psum_vmem_buffer
//        -> maxpool_unit (or bypass) -> output FIFO -> o_* output spikes
//
// Host protocol (the three streams come from/go to DMA engines): write cfg,
// pulse start, then send for each output group p_o, each timestep t and each
// input tile p_i the H*W input pixels of that tile (P bits each, raster
// order; in MLP mode nine P-bit transfers per tile), and send the weights as
// crossbar rows: for each output group, for each input tile, rows
// r = (kh*3+kw)*P + channel, each row N INT8 weights (output o at bits
// 8*o). Weights are sent once per layer; the partial reuse FIFO replays them
// for every timestep. Output spikes come out per timestep in raster order
// (pooled if cfg.pool_en), o_last on the very last one; done pulses then.
//
// Back-pressure on the output stream stalls the array and the update engine
// through one global enable derived from the output FIFO level (this
// design's choice). start also clears the schedule counters and the weight
// FIFO. Reuse region of the weight FIFO: c_i * M/8 entries, T passes.
module firefly_top
  import firefly_pkg::*;
#(
  parameter int unsigned P = P_DEF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  cfg_t             cfg,
  input  logic             start,
  output logic             busy,
  output logic             done,
  // weight stream
  input  logic             w_valid,
  output logic             w_ready,
  input  logic [P*WB-1:0]  w_data,
  // input spike stream
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [P-1:0]     s_data,
  input  logic             s_last,
  // output spike stream
  output logic             o_valid,
  input  logic             o_ready,
  output logic [P-1:0]     o_data,
  output logic             o_last
);
  localparam int unsigned M         = KWIN * P;
  localparam int unsigned N         = P;
  localparam int unsigned U1        = 8;
  localparam int unsigned U3        = M / U1;
  localparam int unsigned PRF_DEPTH = 1024;
  localparam int unsigned PAW       = $clog2(PRF_DEPTH);
  localparam int unsigned OF_DEPTH  = 32;

  cfg_t cfg_q;
  logic en, clear;

  // the configuration is captured on start; the datapath is cleared one
  // cycle later so that it sees the new configuration
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q <= '0;
      clear <= 1'b0;
    end else begin
      clear <= start;
      if (start) cfg_q <= cfg;
    end
  end

  // ---------------- input spike datapath ----------------
  logic              v_valid, v_ready;
  logic [M-1:0]      v_vec;
  side_t             v_side;

  spike_vector_gen #(.P(P)) u_svg (
    .clk(clk), .rst_n(rst_n), .cfg(cfg_q), .clear(clear),
    .in_valid(s_valid), .in_ready(s_ready), .in_data(s_data), .in_last(s_last),
    .out_valid(v_valid), .out_ready(v_ready), .out_vec(v_vec), .out_side(v_side)
  );

  // ---------------- weight delivery hierarchy ----------------
  logic              ws_valid, ws_ready;
  logic [M*N*WB-1:0] ws_data;
  logic              reuse_jump, region_done;
  logic [PAW:0]      reuse_len;

  assign reuse_len = (PAW+1)'(cfg_q.ci * U3);

  weight_delivery #(.EW(N*WB), .U1(U1), .U3(U3), .PRF_DEPTH(PRF_DEPTH)) u_wd (
    .clk(clk), .rst_n(rst_n), .clear(clear),
    .cfg_reuse_times(cfg_q.steps), .cfg_reuse_len(reuse_len),
    .in_valid(w_valid), .in_ready(w_ready), .in_data(w_data),
    .out_valid(ws_valid), .out_ready(ws_ready), .out_data(ws_data),
    .reuse_jump(reuse_jump), .region_done(region_done)
  );

  // ---------------- systolic array ----------------
  logic                     a_valid;
  logic [N-1:0][PSUM_W-1:0] a_psum;
  side_t                    a_side;

  systolic_array #(.P(P)) u_sa (
    .clk(clk), .rst_n(rst_n), .en(en),
    .in_valid(v_valid), .in_ready(v_ready), .in_spikes(v_vec), .in_side(v_side),
    .w_valid(ws_valid), .w_ready(ws_ready), .w_data(ws_data),
    .out_valid(a_valid), .out_psum(a_psum), .out_side(a_side)
  );

  // ---------------- Psum-Vmem update ----------------
  logic                 rd_en, wr_en;
  logic [MAP_AW-1:0]    rd_addr, wr_addr;
  logic [N*VW-1:0]      rd_data, wr_data;
  logic                 e_valid;
  logic [N-1:0]         e_spikes;
  side_t                e_side;
  phase_e               e_phase;

  update_engine #(.N(N)) u_ue (
    .clk(clk), .rst_n(rst_n), .en(en),
    .cfg_leak_en(cfg_q.leak_en), .cfg_leak_shift(cfg_q.leak_shift), .cfg_vth(cfg_q.vth),
    .in_valid(a_valid), .in_psum(a_psum), .in_side(a_side),
    .buf_rd_en(rd_en), .buf_rd_addr(rd_addr), .buf_rd_data(rd_data),
    .buf_wr_en(wr_en), .buf_wr_addr(wr_addr), .buf_wr_data(wr_data),
    .out_valid(e_valid), .out_spikes(e_spikes), .out_side(e_side), .phase(e_phase)
  );

  psum_vmem_buffer #(.N(N), .VW(VW), .DEPTH(MAP_DEPTH)) u_buf (
    .clk(clk),
    .rd_en(rd_en), .rd_addr(rd_addr), .rd_data(rd_data),
    .wr_en(wr_en), .wr_addr(wr_addr), .wr_data(wr_data)
  );

  // ---------------- pooling / bypass ----------------
  logic         p_valid, pooled;
  logic [N-1:0] p_spikes;
  side_t        p_side;

  maxpool_unit #(.N(N)) u_mp (
    .clk(clk), .rst_n(rst_n), .en(en),
    .cfg_en(cfg_q.pool_en && cfg_q.mode == MODE_CONV), .cfg_w(cfg_q.w),
    .in_valid(e_valid), .in_spikes(e_spikes), .in_side(e_side),
    .out_valid(p_valid), .out_spikes(p_spikes), .out_side(p_side), .pooled(pooled)
  );

  // ---------------- output queue and global stall ----------------
  logic              of_in_ready, p_last;
  logic [$clog2(OF_DEPTH):0] of_count;

  assign p_last = p_side.layer_last && p_side.step_last && p_side.map_last;

  sync_fifo #(.DW(N+1), .DEPTH(OF_DEPTH)) u_of (
    .clk(clk), .rst_n(rst_n),
    .in_valid(p_valid && en), .in_ready(of_in_ready), .in_data({p_last, p_spikes}),
    .out_valid(o_valid), .out_ready(o_ready), .out_data({o_last, o_data}),
    .count(of_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) en <= 1'b0;
    else        en <= (of_count < ($clog2(OF_DEPTH)+1)'(OF_DEPTH - 4));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start) busy <= 1'b1;
      else if (o_valid && o_ready && o_last && busy) begin
        busy <= 1'b0;
        done <= 1'b1;
      end
    end
  end

  // the global stall must leave room in the output queue
  always_ff @(posedge clk) begin
    if (rst_n && p_valid && en) assert (of_in_ready) else $error("output FIFO overflow");
  end
endmodule
