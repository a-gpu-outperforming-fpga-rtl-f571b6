// image_channel: double-buffered input image memory.
//
// The input image (H x W pixels, C colour channels of AW-bit signed values)
// is written pixel by pixel into bank `phase` while the first layer reads the
// previous image from bank `~phase`.  Because the first layer processes the
// whole 3x3xC window at once, the read port returns three rows, rd_row-1,
// rd_row and rd_row+1; a row outside the image reads as zero, which is the
// zero padding of the convolution.
//
// Pixel packing: channel c at bits [c*AW +: AW] of a pixel; pixel x of a row
// at [x*C*AW +: C*AW]; row r of rd_data (r = 0,1,2 for rd_row-1+r) at
// [r*W*C*AW +: W*C*AW].  Writes take one clock; reads are combinational.
module image_channel #(
  parameter int H  = 32,
  parameter int W  = 32,
  parameter int C  = 3,
  parameter int AW = 6,
  parameter int RW = $clog2(H),
  parameter int XW = $clog2(W)
) (
  input  logic               clk,
  input  logic               phase,
  input  logic               wr_en,
  input  logic [RW-1:0]      wr_row,
  input  logic [XW-1:0]      wr_col,
  input  logic [C*AW-1:0]    wr_pix,
  input  logic [RW-1:0]      rd_row,
  output logic [3*W*C*AW-1:0] rd_data
);
  localparam int PW = C * AW;
  logic [W*PW-1:0] bank0 [H];
  logic [W*PW-1:0] bank1 [H];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      if (phase) bank1[wr_row][int'(wr_col)*PW +: PW] <= wr_pix;
      else       bank0[wr_row][int'(wr_col)*PW +: PW] <= wr_pix;
    end
  end

  always_comb begin
    for (int r = 0; r < 3; r++) begin
      int row;
      row = int'(rd_row) + r - 1;
      if (row < 0 || row >= H) rd_data[r*W*PW +: W*PW] = '0;
      else if (phase)          rd_data[r*W*PW +: W*PW] = bank0[row];
      else                     rd_data[r*W*PW +: W*PW] = bank1[row];
    end
  end
endmodule
