// mlp_shift_reg: serial-to-parallel spike adapter for fully connected layers.
//
// In MLP mode the line buffer is idle and this shift register joins K
// consecutive P-bit spike transfers into one K*P-bit vector, the same width
// as a 3x3 convolution window, so fully connected layers reuse the systolic
// array unchanged. The first transfer lands in the lowest P bits. A transfer
// with in_last set closes the vector early, the missing slots being zero
// (this padding rule is this design's choice).
//
// Handshake: valid/ready; the vector is held in the output register, and a
// new vector may start in the cycle the previous one is taken.
module mlp_shift_reg
  import firefly_pkg::*;
#(
  parameter int unsigned P = P_DEF,
  parameter int unsigned K = KWIN
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [P-1:0]     in_data,
  input  logic             in_last,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [K*P-1:0]   out_data
);
  logic [$clog2(K+1)-1:0] cnt;
  logic [K*P-1:0] acc;

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '0; acc <= '0; out_valid <= 1'b0; out_data <= '0;
    end else if (clear) begin
      cnt <= '0; out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        logic [K*P-1:0] nxt;
        nxt = (cnt == '0) ? '0 : acc;
        nxt[cnt*P +: P] = in_data;
        if (cnt == ($clog2(K+1))'(K-1) || in_last) begin
          out_data  <= nxt;
          out_valid <= 1'b1;
          cnt       <= '0;
        end else begin
          acc <= nxt;
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
