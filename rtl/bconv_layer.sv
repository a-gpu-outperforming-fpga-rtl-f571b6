// bconv_layer: one binary convolution layer (CONV-2 .. CONV-6).
//
// The layer computes DEP output channels of an H x W map from a D-channel
// binary input map, with 3x3 filters, stride 1 and one pixel of padding,
// optionally followed by 2x2 max-pooling, then the NormBinarize threshold.
//
// Work is organised as the published per-layer optimisation suggests: a
// filter is unfolded along its width and depth (UF = 3*D XNORs per PE), and
// P = W PEs work on all pixels of one output row at once, sharing the weight
// word.  One step handles (output channel n, output row y, filter row fh):
// it reads input row y+fh-1 from the memory channel and weight word
// n*3+fh from the weight memory; PE p sees pixels p-1..p+1 of that row.  The
// P accumulators add the three filter rows, so a full output row of channel
// n is ready every 3 cycles and a phase takes DEP*H*3 cycles plus the
// pipeline depth.  Pooling layers keep the even row in the row buffer of the
// MP kernel and pool when the odd row arrives.
//
// Padding: the binary encoding has no zero, so pixels outside the map read
// as bit 0 (the value -1).  The thresholds absorb this constant effect only
// approximately at the border; this is this design's choice.
//
// Pipeline: S0 issue (row read, weight and threshold read addresses),
// S1 row register and memory outputs, S2 PE counts, S3 accumulated sums,
// [S4 pooled sums], then the NB kernel registers the output bits, which are
// written to the next memory channel (bank `phase`, channel n, row y or y/2).
// `start` begins a phase; `done` rises when the last write has been issued
// and stays high until the next `start`.
//
// Weights: word n*3+fh, bit fw*D+d multiplies input pixel x+fw-1, channel d.
// Thresholds: word n, a signed YW-bit value in the low bits of the word.
module bconv_layer
  import bcnn_pkg::*;
#(
  parameter int W    = 32,
  parameter int H    = 32,
  parameter int D    = 128,
  parameter int DEP  = 128,
  parameter bit POOL = 1'b1,
  parameter int P    = W,
  parameter int UF   = 3 * D,
  parameter int OW   = POOL ? W / 2 : W,
  parameter int OH   = POOL ? H / 2 : H,
  parameter int RW   = (H > 1) ? $clog2(H) : 1,
  parameter int ORW  = (OH > 1) ? $clog2(OH) : 1,
  parameter int NW   = (DEP > 1) ? $clog2(DEP) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  // weight / threshold load port
  input  logic                 ld_we,
  input  logic                 ld_te,
  input  logic [LD_BANK_W-1:0] ld_bank,
  input  logic [LD_ADDR_W-1:0] ld_addr,
  input  logic [LDW-1:0]       ld_data,
  // input memory channel, read side
  output logic [RW-1:0]        in_rd_row,
  input  logic [W*D-1:0]       in_rd_data,
  // output memory channel, write side
  output logic                 out_wr_en,
  output logic [ORW-1:0]       out_wr_row,
  output logic [NW-1:0]        out_wr_ch,
  output logic [OW-1:0]        out_wr_bits
);
  localparam int CW   = $clog2(UF + 1);
  localparam int WD   = DEP * 3;
  localparam int WAW  = $clog2(WD);
  localparam int TAW  = NW;
  localparam int LAT  = POOL ? 6 : 5;

  // ---------------- S0: loop counters ----------------
  logic          busy;
  logic [NW-1:0] n0;
  logic [RW-1:0] y0;
  logic [1:0]    fh0;
  logic [3:0]    drain;
  int            row_i;
  logic          row_ok0;

  always_comb begin
    row_i     = int'(y0) + int'(fh0) - 1;
    row_ok0   = (row_i >= 0) && (row_i < H);
    in_rd_row = row_ok0 ? RW'(row_i) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n0 <= '0; y0 <= '0; fh0 <= '0; drain <= '0;
    end else if (start) begin
      busy <= 1'b1; done <= 1'b0; n0 <= '0; y0 <= '0; fh0 <= '0;
      drain <= 4'(LAT);
    end else if (busy) begin
      if (fh0 != 2'd2) fh0 <= fh0 + 2'd1;
      else begin
        fh0 <= '0;
        if (int'(y0) != H - 1) y0 <= y0 + 1'b1;
        else begin
          y0 <= '0;
          if (int'(n0) != DEP - 1) n0 <= n0 + 1'b1;
          else busy <= 1'b0;
        end
      end
    end else if (!done) begin
      if (drain != 0) drain <= drain - 4'd1;
      else done <= 1'b1;
    end
  end

  // ---------------- weight and threshold memories ----------------
  logic [UF-1:0]  wword;
  logic [YW-1:0]  tword;

  bank_mem #(.WIDTH(UF), .DEPTH(WD)) u_wmem (
    .clk, .ld_en(ld_we), .ld_bank, .ld_addr(ld_addr[WAW-1:0]), .ld_data,
    .rd_addr(WAW'(int'(n0) * 3 + int'(fh0))), .rd_data(wword));

  bank_mem #(.WIDTH(YW), .DEPTH(DEP)) u_tmem (
    .clk, .ld_en(ld_te), .ld_bank, .ld_addr(ld_addr[TAW-1:0]), .ld_data,
    .rd_addr(n0), .rd_data(tword));

  // ---------------- S1: row register ----------------
  logic          v1;
  logic [1:0]    fh1;
  logic [RW-1:0] y1;
  logic [NW-1:0] n1;
  logic [W*D-1:0] row1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= busy && !start;
  end
  always_ff @(posedge clk) begin
    fh1  <= fh0;
    y1   <= y0;
    n1   <= n0;
    row1 <= row_ok0 ? in_rd_data : '0;
  end

  // padded row: one zero pixel on each side
  logic [(W+2)*D-1:0] prow;
  assign prow = {{D{1'b0}}, row1, {D{1'b0}}};

  // ---------------- S2: PE array ----------------
  logic [P-1:0]    pe_v;
  logic [P*CW-1:0] pe_cnt;
  for (genvar p = 0; p < P; p++) begin : g_pe
    xnor_pe #(.UF(UF)) u_pe (
      .clk, .in_valid(v1), .w(wword), .x(prow[p*D +: UF]),
      .out_valid(pe_v[p]), .count(pe_cnt[p*CW +: CW]));
  end

  logic          v2;
  logic [1:0]    fh2;
  logic [RW-1:0] y2;
  logic [NW-1:0] n2;
  logic [YW-1:0] t2;
  assign v2 = pe_v[0];
  always_ff @(posedge clk) begin
    fh2 <= fh1; y2 <= y1; n2 <= n1; t2 <= tword;
  end

  // ---------------- S3: accumulators ----------------
  logic [P-1:0]    acc_v;
  logic [P*YW-1:0] acc_y;
  for (genvar p = 0; p < P; p++) begin : g_acc
    accumulator #(.IW(CW), .YW(YW)) u_acc (
      .clk, .rst_n, .in_valid(v2), .first(fh2 == 2'd0), .last(fh2 == 2'd2),
      .din(pe_cnt[p*CW +: CW]), .out_valid(acc_v[p]), .y(acc_y[p*YW +: YW]));
  end

  logic          v3;
  logic [RW-1:0] y3;
  logic [NW-1:0] n3;
  logic [YW-1:0] t3;
  assign v3 = acc_v[0];
  always_ff @(posedge clk) begin
    y3 <= y2; n3 <= n2; t3 <= t2;
  end

  // ---------------- [S4: row buffer + max-pooling] then NB ----------------
  logic              nb_in_v;
  logic [OW*YW-1:0]  nb_in_y;
  logic [YW-1:0]     nb_t;
  logic [ORW-1:0]    nb_row;
  logic [NW-1:0]     nb_n;

  if (POOL) begin : g_pool
    logic          v4;
    logic [RW-1:0] y4;
    logic [NW-1:0] n4;
    logic [YW-1:0] t4;
    mp_kernel #(.P(P), .YW(YW)) u_mp (
      .clk, .rst_n, .in_valid(v3), .odd_row(y3[0]), .din(acc_y),
      .out_valid(v4), .dout(nb_in_y));
    always_ff @(posedge clk) begin
      y4 <= y3; n4 <= n3; t4 <= t3;
    end
    assign nb_in_v = v4;
    assign nb_t    = t4;
    assign nb_row  = ORW'(y4 >> 1);
    assign nb_n    = n4;
  end else begin : g_nopool
    assign nb_in_v = v3;
    assign nb_in_y = acc_y;
    assign nb_t    = t3;
    assign nb_row  = ORW'(y3);
    assign nb_n    = n3;
  end

  nb_kernel #(.N(OW), .YW(YW)) u_nb (
    .clk, .in_valid(nb_in_v), .y(nb_in_y), .c($signed(nb_t)),
    .out_valid(out_wr_en), .bits(out_wr_bits));

  always_ff @(posedge clk) begin
    out_wr_row <= nb_row;
    out_wr_ch  <= nb_n;
  end
endmodule
