// sync_fifo: small synchronous FIFO with an occupancy count.
//
// Used as the output spike queue in front of the output stream. Standard
// valid/ready on both sides; the output word is read combinationally from
// the array at the pop pointer (first-word fall-through).
module sync_fifo #(
  parameter int unsigned DW    = 17,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  output logic           in_ready,
  input  logic [DW-1:0]  in_data,
  output logic           out_valid,
  input  logic           out_ready,
  output logic [DW-1:0]  out_data,
  output logic [AW:0]    count
);
  logic [DW-1:0] mem [DEPTH];
  logic [AW:0]   wp, rp;
  logic          push, pop;

  assign count     = wp - rp;
  assign in_ready  = (count != (AW+1)'(DEPTH));
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  always_ff @(posedge clk) if (push) mem[wp[AW-1:0]] <= in_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0;
    end else begin
      if (push) wp <= wp + 1'b1;
      if (pop)  rp <= rp + 1'b1;
    end
  end
endmodule
