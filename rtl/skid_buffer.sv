// skid_buffer: two-entry pipeline buffer for a valid/ready stream.
//
// An output register plus one spare ("skid") register. in_ready is a
// registered signal that stays high until the spare register is occupied,
// so the upstream side never sees the combinational back-pressure of the
// downstream side and back-to-back transfers run at full rate. In the
// weight delivery hierarchy it is the last level: the systolic array holds
// its weights by withholding out_ready while up to two further weight sets
// wait here.
module skid_buffer #(
  parameter int unsigned DW = 64
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [DW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [DW-1:0]  out_data
);
  logic          skid_valid;
  logic [DW-1:0] skid_data;

  assign in_ready = !skid_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      skid_valid <= 1'b0;
    end else if (clear) begin
      out_valid  <= 1'b0;
      skid_valid <= 1'b0;
    end else if (!out_valid || out_ready) begin
      if (skid_valid) begin
        out_valid  <= 1'b1;
        skid_valid <= 1'b0;
      end else begin
        out_valid  <= in_valid;
      end
    end else if (in_valid && in_ready) begin
      skid_valid <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (!out_valid || out_ready) begin
      if (skid_valid)    out_data <= skid_data;
      else if (in_valid) out_data <= in_data;
    end else if (in_valid && in_ready) begin
      skid_data <= in_data;
    end
  end
endmodule
