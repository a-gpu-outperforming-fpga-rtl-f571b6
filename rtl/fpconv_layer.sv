// fpconv_layer: the first convolution layer (CONV-1), fixed point.
//
// Input is the H x W x 3 image in 6-bit signed pixels; the filters are 3x3x3
// with 2-bit signed weights, stride 1, zero padding of one pixel.  The whole
// 27-term window is unfolded into one fixed-point PE (UF = 27) and P = W PEs
// compute one full output row of one output channel per cycle, sharing the
// weight word.  The NB kernel thresholds the sums into output bits.  A phase
// therefore takes DEP*H cycles plus the pipeline depth.
//
// Step (n, y): the image channel returns rows y-1..y+1 (zero outside), the
// weight memory word n and the threshold word n.  PE p gets the window term
// k = fh*9 + fw*3 + c from pixel (y+fh-1, p+fw-1), colour c; weight term k
// sits at bits [2k +: 2] of word n.
//
// Pipeline: S0 issue, S1 rows and memory outputs, S2 PE sums, then the NB
// kernel registers the bits written to the next memory channel (row y,
// channel n).  `start` begins a phase, `done` stays high from the end of the
// last write until the next `start`.  The layer's structure follows the
// published design; the schedule within a phase is this design's choice.
module fpconv_layer
  import bcnn_pkg::*;
#(
  parameter int W   = 32,
  parameter int H   = 32,
  parameter int DEP = 128,
  parameter int P   = W,
  parameter int UF  = 9 * IMG_C,
  parameter int RW  = $clog2(H),
  parameter int NW  = $clog2(DEP)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  output logic                  done,
  input  logic                  ld_we,
  input  logic                  ld_te,
  input  logic [LD_BANK_W-1:0]  ld_bank,
  input  logic [LD_ADDR_W-1:0]  ld_addr,
  input  logic [LDW-1:0]        ld_data,
  output logic [RW-1:0]         img_rd_row,
  input  logic [3*W*IMG_C*AW-1:0] img_rd_data,
  output logic                  out_wr_en,
  output logic [RW-1:0]         out_wr_row,
  output logic [NW-1:0]         out_wr_ch,
  output logic [W-1:0]          out_wr_bits
);
  localparam int PW  = IMG_C * AW;
  localparam int LAT = 4;

  logic          busy;
  logic [NW-1:0] n0;
  logic [RW-1:0] y0;
  logic [3:0]    drain;

  assign img_rd_row = y0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n0 <= '0; y0 <= '0; drain <= '0;
    end else if (start) begin
      busy <= 1'b1; done <= 1'b0; n0 <= '0; y0 <= '0; drain <= 4'(LAT);
    end else if (busy) begin
      if (int'(y0) != H - 1) y0 <= y0 + 1'b1;
      else begin
        y0 <= '0;
        if (int'(n0) != DEP - 1) n0 <= n0 + 1'b1;
        else busy <= 1'b0;
      end
    end else if (!done) begin
      if (drain != 0) drain <= drain - 4'd1;
      else done <= 1'b1;
    end
  end

  logic [UF*WW-1:0] wword;
  logic [YW-1:0]    tword;

  bank_mem #(.WIDTH(UF*WW), .DEPTH(DEP)) u_wmem (
    .clk, .ld_en(ld_we), .ld_bank, .ld_addr(ld_addr[NW-1:0]), .ld_data,
    .rd_addr(n0), .rd_data(wword));

  bank_mem #(.WIDTH(YW), .DEPTH(DEP)) u_tmem (
    .clk, .ld_en(ld_te), .ld_bank, .ld_addr(ld_addr[NW-1:0]), .ld_data,
    .rd_addr(n0), .rd_data(tword));

  // S1
  logic                  v1;
  logic [RW-1:0]         y1;
  logic [NW-1:0]         n1;
  logic [3*W*PW-1:0]     rows1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= busy && !start;
  end
  always_ff @(posedge clk) begin
    y1 <= y0; n1 <= n0; rows1 <= img_rd_data;
  end

  // window of every PE
  logic [P*UF*AW-1:0] win;
  always_comb begin
    for (int p = 0; p < P; p++)
      for (int fh = 0; fh < 3; fh++)
        for (int fw = 0; fw < 3; fw++)
          for (int c = 0; c < IMG_C; c++) begin
            int col;
            int k;
            col = p + fw - 1;
            k   = fh * 9 + fw * 3 + c;
            if (col < 0 || col >= W) win[(p*UF + k)*AW +: AW] = '0;
            else win[(p*UF + k)*AW +: AW] = rows1[fh*W*PW + col*PW + c*AW +: AW];
          end
  end

  // S2: PE array
  logic [P-1:0]    pe_v;
  logic [P*YW-1:0] pe_y;
  for (genvar p = 0; p < P; p++) begin : g_pe
    fp_pe #(.UF(UF), .AW(AW), .WW(WW), .YW(YW)) u_pe (
      .clk, .in_valid(v1), .a(win[p*UF*AW +: UF*AW]), .w(wword),
      .out_valid(pe_v[p]), .y(pe_y[p*YW +: YW]));
  end

  logic [RW-1:0] y2;
  logic [NW-1:0] n2;
  logic [YW-1:0] t2;
  always_ff @(posedge clk) begin
    y2 <= y1; n2 <= n1; t2 <= tword;
  end

  nb_kernel #(.N(P), .YW(YW)) u_nb (
    .clk, .in_valid(pe_v[0]), .y(pe_y), .c($signed(t2)),
    .out_valid(out_wr_en), .bits(out_wr_bits));

  always_ff @(posedge clk) begin
    out_wr_row <= y2;
    out_wr_ch  <= n2;
  end
endmodule
