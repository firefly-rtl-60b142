// maxpool_unit: optional on-the-fly 2x2, stride-2 max pooling of spike maps.
//
// Output spike vectors (N channels per pixel) arrive in raster order. For
// binary spikes the maximum of a 2x2 window is the OR of its four spikes. The
// unit ORs each horizontal pair, parks the pair results of an even row in a
// row FIFO of W/2 entries and ORs them with the pairs of the following odd
// row, emitting one pooled pixel per 2x2 window. With cfg_en = 0 the pixels
// take the bypass path unchanged. Map height and width must be even.
//
// Timing: output registered, one cycle after the input pixel that completes
// a window (or after every pixel in bypass). The sideband is carried along;
// its addr is renumbered to the pooled raster index. en stalls the unit.
module maxpool_unit
  import firefly_pkg::*;
#(
  parameter int unsigned N    = P_DEF,
  parameter int unsigned MAXW = MAX_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 en,
  input  logic                 cfg_en,
  input  logic [DIM_W-1:0]     cfg_w,
  input  logic                 in_valid,
  input  logic [N-1:0]         in_spikes,
  input  side_t                in_side,
  output logic                 out_valid,
  output logic [N-1:0]         out_spikes,
  output side_t                out_side,
  output logic                 pooled       // pulses for every pooled pixel
);
  localparam int unsigned HW = MAXW / 2;

  logic [N-1:0]      rowfifo [HW];
  logic [N-1:0]      hold;
  logic [DIM_W-1:0]  c;
  logic              rodd;
  logic [MAP_AW-1:0] oaddr;
  logic [N-1:0]      pair;

  assign pair = hold | in_spikes;

  always_ff @(posedge clk) begin
    if (en && in_valid && cfg_en) begin
      if (!c[0]) hold <= in_spikes;
      else if (!rodd) rowfifo[c[$clog2(HW):1]] <= pair;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c <= '0; rodd <= 1'b0; oaddr <= '0;
      out_valid <= 1'b0; out_spikes <= '0; out_side <= '0; pooled <= 1'b0;
    end else if (en) begin
      out_valid <= 1'b0;
      pooled    <= 1'b0;
      if (in_valid) begin
        if (!cfg_en) begin
          out_valid  <= 1'b1;               // bypass
          out_spikes <= in_spikes;
          out_side   <= in_side;
        end else begin
          if (c[0] && rodd) begin
            out_valid      <= 1'b1;
            pooled         <= 1'b1;
            out_spikes     <= rowfifo[c[$clog2(HW):1]] | pair;
            out_side       <= in_side;
            out_side.addr  <= oaddr;
            oaddr          <= in_side.map_last ? '0 : oaddr + 1'b1;
          end
          if (in_side.map_last) begin
            c <= '0; rodd <= 1'b0;
          end else if (c == cfg_w - 1'b1) begin
            c <= '0; rodd <= !rodd;
          end else begin
            c <= c + 1'b1;
          end
        end
      end
    end
  end
endmodule
