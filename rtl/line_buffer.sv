// line_buffer: 3x3 spike-window generator for stride-1, same-padded convolution.
//
// Input: a spike map streamed in raster order, one P-channel pixel (P bits)
// per transfer. Output: for every pixel of the map, its 3x3 neighbourhood of
// P-channel pixels flattened into a 9*P-bit vector, window position
// (kh, kw) at bits ((kh*3+kw)*P) +: P, kh = 0 the upper row. Pixels outside
// the map are zero (same padding).
//
// Structure: two row memories hold the two previous rows (indexed by column,
// so the map width is a run-time value up to MAX_W) and a 3x3 register
// window shifts one column per input pixel. The window centred on pixel
// (r-1, c-1) is complete when pixel (r, c) arrives; border columns and rows
// are masked to zero. After the last pixel of a map the unit feeds itself
// W+1 zero pixels to flush the last row, then is ready for the next map, so
// a map of H x W pixels takes H*W + W + 1 cycles. Needs H, W >= 2.
//
// Handshake: valid/ready on both sides, output registered. out_addr is the
// raster index of the window centre, out_last marks the last window of a map.
// The row memories and flushing are this design's implementation of the
// line buffer the paper names.
module line_buffer
  import firefly_pkg::*;
#(
  parameter int unsigned P     = P_DEF,
  parameter int unsigned MAXW  = MAX_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [DIM_W-1:0]     cfg_h,
  input  logic [DIM_W-1:0]     cfg_w,
  input  logic                 clear,     // restart at pixel (0,0)
  input  logic                 in_valid,
  output logic                 in_ready,
  input  logic [P-1:0]         in_pix,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic [KWIN*P-1:0]    out_win,
  output logic [MAP_AW-1:0]    out_addr,
  output logic                 out_last
);
  localparam int unsigned CW = $clog2(MAXW);

  logic [P-1:0] lb0 [MAXW];          // row r-1
  logic [P-1:0] lb1 [MAXW];          // row r-2
  logic [P-1:0] win [3][3];          // [kh][kw]
  logic [DIM_W:0]   r;               // input row, runs to H+1 while flushing
  logic [DIM_W-1:0] c;
  logic [MAP_AW-1:0] oaddr;
  logic virt, adv, emit, last_pos;
  logic [DIM_W:0]   cr;              // centre row
  logic [DIM_W-1:0] cc;              // centre column
  logic [P-1:0] ncol [3];
  logic [P-1:0] nwin [3][3];
  logic [KWIN*P-1:0] masked;

  assign virt     = (r >= {1'b0, cfg_h});
  assign last_pos = (r == {1'b0, cfg_h} + 1'b1) && (c == '0);
  assign adv      = (!out_valid || out_ready) && (virt || in_valid);
  assign in_ready = (!out_valid || out_ready) && !virt;

  always_comb begin
    ncol[0] = lb1[c[CW-1:0]];
    ncol[1] = lb0[c[CW-1:0]];
    ncol[2] = virt ? '0 : in_pix;
    for (int kh = 0; kh < 3; kh++) begin
      nwin[kh][0] = win[kh][1];
      nwin[kh][1] = win[kh][2];
      nwin[kh][2] = ncol[kh];
    end
    // centre of the window completed by this position
    if (c == '0) begin
      cr   = r - (DIM_W+1)'(2);
      cc   = cfg_w - 1'b1;
      emit = (r >= 2);
    end else begin
      cr   = r - 1'b1;
      cc   = c - 1'b1;
      emit = (r >= 1) && (r <= {1'b0, cfg_h});
    end
    for (int kh = 0; kh < 3; kh++) begin
      for (int kw = 0; kw < 3; kw++) begin
        logic pad;
        pad = (kh == 0 && cr == '0) || (kh == 2 && cr == {1'b0, cfg_h} - 1'b1) ||
              (kw == 0 && cc == '0) || (kw == 2 && cc == cfg_w - 1'b1);
        masked[(kh*3+kw)*P +: P] = pad ? '0 : nwin[kh][kw];
      end
    end
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      lb1[c[CW-1:0]] <= lb0[c[CW-1:0]];
      lb0[c[CW-1:0]] <= ncol[2];
      for (int kh = 0; kh < 3; kh++)
        for (int kw = 0; kw < 3; kw++)
          win[kh][kw] <= nwin[kh][kw];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r <= '0; c <= '0; oaddr <= '0;
      out_valid <= 1'b0; out_win <= '0; out_addr <= '0; out_last <= 1'b0;
    end else if (clear) begin
      r <= '0; c <= '0; oaddr <= '0;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (adv) begin
        if (emit) begin
          out_valid <= 1'b1;
          out_win   <= masked;
          out_addr  <= oaddr;
          out_last  <= (cr == {1'b0, cfg_h} - 1'b1) && (cc == cfg_w - 1'b1);
          oaddr     <= oaddr + 1'b1;
        end
        if (last_pos) begin
          r <= '0; c <= '0; oaddr <= '0;
        end else if (c == cfg_w - 1'b1) begin
          c <= '0; r <= r + 1'b1;
        end else begin
          c <= c + 1'b1;
        end
      end
    end
  end
endmodule
