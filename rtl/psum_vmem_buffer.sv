// psum_vmem_buffer: Psum-Vmem unified buffer.
//
// One on-chip RAM entry per pixel of the output map, holding N values of VW
// bits: while the input-channel tiles of a timestep are being accumulated the
// entry is a partial sum, after the last tile it is the membrane voltage that
// carries over to the next timestep. Sharing one buffer for both halves the
// RAM a separate psum buffer and Vmem buffer would need.
//
// Simple dual-port RAM: one write port, one read port with a registered
// output (read-first: a read and a write of the same address in the same
// cycle return the old value). rd_data holds while rd_en is low.
module psum_vmem_buffer #(
  parameter int unsigned N     = 16,
  parameter int unsigned VW    = 24,
  parameter int unsigned DEPTH = 2304,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [N*VW-1:0]      rd_data,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [N*VW-1:0]      wr_data
);
  logic [N*VW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
    if (wr_en) mem[wr_addr] <= wr_data;
  end
endmodule
