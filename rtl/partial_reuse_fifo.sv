// partial_reuse_fifo: a synchronous FIFO whose head region is replayed.
//
// The buffer is one ring RAM with a push pointer and a pop pointer, as in an
// ordinary FIFO, plus two labels, Start and End, that bound the reuse region
// (End = Start + L - 1). The pop pointer reads Start..End and then jumps back
// to Start; each jump counts one reuse. When the region has been read T times
// in all, the counter resets, the region moves on (Start <- End + 1,
// End <- End + L) and the old entries become free. The push pointer may write
// anywhere except into the region still being reused: the FIFO is full when
// the push pointer would meet Start. The output is empty until the whole
// region Start..End has been written. T (cfg_reuse_times) and L
// (cfg_reuse_len) are the only control registers; new data of later regions
// can be pushed while the current region is replayed, so one RAM gives both
// reuse and latency hiding without double buffering.
//
// Reading of the paper's labels: End is inclusive and the next Start is the
// entry after End. T = 0 behaves as T = 1.
//
// Timing: registered RAM read; one element per cycle once the region is
// full. clear (at the start of a layer) empties the FIFO and loads End = L-1
// from the configuration. reuse_jump / region_done pulse when the pop
// pointer jumps back / the region is released.
module partial_reuse_fifo #(
  parameter int unsigned DW    = 1024,
  parameter int unsigned DEPTH = 1024,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clear,
  input  logic [7:0]      cfg_reuse_times,   // T
  input  logic [AW:0]     cfg_reuse_len,     // L, 1..DEPTH
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [DW-1:0]   in_data,
  output logic            out_valid,
  input  logic            out_ready,
  output logic [DW-1:0]   out_data,
  output logic            reuse_jump,
  output logic            region_done
);
  logic [DW-1:0] ram [DEPTH];
  logic [AW:0]   push_ptr, pop_ptr, start_ptr, end_ptr;
  logic [7:0]    reuse_cnt;
  logic [AW:0]   fill;
  logic          full, region_ready, rd, at_end, last_pass;

  assign fill         = push_ptr - start_ptr;
  assign full         = (fill == (AW+1)'(DEPTH));
  assign region_ready = (fill > (end_ptr - start_ptr));
  assign in_ready     = !full;
  assign rd           = region_ready && (!out_valid || out_ready);
  assign at_end       = (pop_ptr == end_ptr);
  assign last_pass    = (reuse_cnt + 8'd1 >= cfg_reuse_times);
  assign reuse_jump   = rd && at_end && !last_pass;
  assign region_done  = rd && at_end && last_pass;

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) ram[push_ptr[AW-1:0]] <= in_data;
    if (rd)                   out_data <= ram[pop_ptr[AW-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      push_ptr <= '0; pop_ptr <= '0; start_ptr <= '0; end_ptr <= '0;
      reuse_cnt <= '0; out_valid <= 1'b0;
    end else if (clear) begin
      push_ptr <= '0; pop_ptr <= '0; start_ptr <= '0;
      end_ptr  <= cfg_reuse_len - 1'b1;
      reuse_cnt <= '0; out_valid <= 1'b0;
    end else begin
      if (in_valid && in_ready) push_ptr <= push_ptr + 1'b1;
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (rd) begin
        out_valid <= 1'b1;
        if (!at_end) begin
          pop_ptr <= pop_ptr + 1'b1;
        end else if (!last_pass) begin
          pop_ptr   <= start_ptr;            // jump back, ReuseCnt++
          reuse_cnt <= reuse_cnt + 1'b1;
        end else begin
          reuse_cnt <= '0;                   // region released
          start_ptr <= end_ptr + 1'b1;
          pop_ptr   <= end_ptr + 1'b1;
          end_ptr   <= end_ptr + cfg_reuse_len;
        end
      end
    end
  end
endmodule
