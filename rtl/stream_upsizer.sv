// stream_upsizer: xN stream width upsizer (serial-to-parallel).
//
// Collects N consecutive EW-bit elements of the input stream and presents
// them as one N*EW-bit word, the first element in the lowest bits. Average
// throughput is unchanged while the instantaneous width grows N times; in
// the weight delivery hierarchy it widens the path before and after the
// partial reuse FIFO.
//
// Handshake: valid/ready on both sides. The word is held in the output
// register; collection of the next word may start in the cycle the current
// one is taken, so a continuous input stream is never stalled.
module stream_upsizer #(
  parameter int unsigned N  = 8,
  parameter int unsigned EW = 128
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [EW-1:0]     in_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [N*EW-1:0]   out_data
);
  localparam int unsigned CW = $clog2(N + 1);

  logic [CW-1:0]   cnt;
  logic [N*EW-1:0] acc;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; out_valid <= 1'b0;
    end else if (clear) begin
      cnt <= '0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == CW'(N - 1)) begin
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (cnt == CW'(N - 1)) begin
        out_data <= acc;
        out_data[(N-1)*EW +: EW] <= in_data;
      end else begin
        acc[cnt*EW +: EW] <= in_data;
      end
    end
  end
endmodule
