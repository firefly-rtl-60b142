// update_engine: Psum-Vmem update engine with the Acc / Thresh / Clear FSM.
//
// For each partial-sum vector from the systolic array (N output channels of
// one pixel) the engine reads that pixel's entry of the unified buffer, adds
// the new partial sums and writes the result back. What else happens depends
// on the phase of the pass over the map:
//   Acc     more input tiles follow in this timestep: write back the sum.
//   Thresh  last input tile, not the last timestep: the optional leak unit
//           subtracts v >>> leak_shift (LIF; skipped for IF), the threshold
//           unit fires where v >= vth, firing neurons are reset to 0, and
//           the membrane voltage is written back.
//   Clear   last input tile of the last timestep: as Thresh, but 0 is
//           written back so the buffer is clean for the next output group.
// The FSM leaves Acc for Thresh on the last tile and for Clear on the last
// tile of the last step, and returns to Acc when the pass finishes. Spikes
// leave only in the Thresh and Clear phases, one N-bit vector per pixel.
// On the first tile of the first timestep of a group the stored value is
// ignored (taken as 0); this lets the buffer start from arbitrary contents
// after power-up and is this design's choice.
//
// Pipeline (all stages stall on en = 0):
//   s0  read request to the buffer
//   s1  read data (forwarded from the two writes still in flight) + psum
//   s2  leak, threshold, write back, spike register
// A pixel may therefore be revisited in the very next cycle, as happens in
// MLP mode where the map is a single pixel. Output spikes appear three
// cycles after the psum.
module update_engine
  import firefly_pkg::*;
#(
  parameter int unsigned N = P_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  logic                      cfg_leak_en,
  input  logic [3:0]                cfg_leak_shift,
  input  logic signed [VW-1:0]      cfg_vth,
  // partial sums
  input  logic                      in_valid,
  input  logic [N-1:0][PSUM_W-1:0]  in_psum,
  input  side_t                     in_side,
  // unified buffer
  output logic                      buf_rd_en,
  output logic [MAP_AW-1:0]         buf_rd_addr,
  input  logic [N*VW-1:0]           buf_rd_data,
  output logic                      buf_wr_en,
  output logic [MAP_AW-1:0]         buf_wr_addr,
  output logic [N*VW-1:0]           buf_wr_data,
  // output spikes
  output logic                      out_valid,
  output logic [N-1:0]              out_spikes,
  output side_t                     out_side,
  output phase_e                    phase       // FSM state, for observation
);
  phase_e state, ph0;

  // FSM (Fig. 5A): phase of the pass that the current vector belongs to
  always_comb begin
    ph0 = state;
    if (in_side.addr == '0) begin
      if (in_side.tile_last && in_side.step_last) ph0 = PH_CLEAR;
      else if (in_side.tile_last)                 ph0 = PH_THRESH;
      else                                        ph0 = PH_ACC;
    end
  end
  assign phase = state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  state <= PH_ACC;
    else if (en && in_valid)     state <= in_side.map_last ? PH_ACC : ph0;   // Finish -> Acc
  end

  assign buf_rd_en   = en && in_valid;
  assign buf_rd_addr = in_side.addr;

  // stage 1
  logic                      v1;
  logic [N-1:0][PSUM_W-1:0]  ps1;
  side_t                     sd1;
  phase_e                    ph1;
  // stage 2
  logic                      v2;
  logic signed [VW-1:0]      acc2 [N];
  side_t                     sd2;
  phase_e                    ph2;
  // last write
  logic                      wq_v;
  logic [MAP_AW-1:0]         wq_addr;
  logic [N*VW-1:0]           wq_data;

  logic [N*VW-1:0]           upd2, stored1;
  logic [N-1:0]              fire2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; wq_v <= 1'b0; out_valid <= 1'b0;
      sd1 <= '0; sd2 <= '0; out_side <= '0; out_spikes <= '0;
      ph1 <= PH_ACC; ph2 <= PH_ACC; wq_addr <= '0;
    end else if (en) begin
      v1  <= in_valid;
      ps1 <= in_psum;
      sd1 <= in_side;
      ph1 <= ph0;
      v2  <= v1;
      sd2 <= sd1;
      ph2 <= ph1;
      for (int n = 0; n < int'(N); n++) begin
        acc2[n] <= (sd1.group_first ? '0 : $signed(stored1[n*VW +: VW]))
                 + VW'($signed(ps1[n]));
      end
      if (v2) begin
        wq_v    <= 1'b1;
        wq_addr <= sd2.addr;
        wq_data <= upd2;
      end
      out_valid  <= v2 && (ph2 != PH_ACC);
      out_spikes <= (ph2 != PH_ACC) ? fire2 : '0;
      out_side   <= sd2;
    end
  end

  // read data with forwarding of writes the buffer has not yet returned
  always_comb begin
    if (v2 && sd2.addr == sd1.addr)            stored1 = upd2;
    else if (wq_v && wq_addr == sd1.addr)      stored1 = wq_data;
    else                                       stored1 = buf_rd_data;
  end

  // leak and threshold units
  always_comb begin
    for (int n = 0; n < int'(N); n++) begin
      logic signed [VW-1:0] v;
      v = acc2[n];
      fire2[n] = 1'b0;
      if (ph2 != PH_ACC) begin
        if (cfg_leak_en) v = v - (v >>> cfg_leak_shift);
        fire2[n] = (v >= cfg_vth);
        if (fire2[n] || ph2 == PH_CLEAR) v = '0;
      end
      upd2[n*VW +: VW] = v;
    end
  end

  assign buf_wr_en   = en && v2;
  assign buf_wr_addr = sd2.addr;
  assign buf_wr_data = upd2;
endmodule
