// bcnn_top: streaming accelerator for a 9-layer binary CNN (CIFAR-10).
//
// Nine layers are laid out side by side, each with its own compute kernel,
// weights and thresholds in on-chip memory:
//   CONV-1  fixed-point 3x3 conv, 6-bit image x 2-bit weights, NB
//   CONV-2  binary 3x3 conv, max-pool, NB        CONV-3 binary conv, NB
//   CONV-4  binary 3x3 conv, max-pool, NB        CONV-5 binary conv, NB
//   CONV-6  binary 3x3 conv, max-pool, NB
//   FC-1, FC-2  binary fully connected, NB;  FC-3 binary fully connected, Norm
// Between two layers sits a double-buffered memory channel.  All layers run
// at the same time, each on a different image; when all have finished, the
// phase controller swaps every channel's banks.  At the default sizes the
// slowest layers need 12288 cycles per phase, so one image leaves per
// ~12.3k cycles, with a latency of ten phases from commit to scores.
//
// Sizes: IMG is the image edge (32), C1 the channel count of CONV-1/2
// (128; CONV-3/4 have 2*C1, CONV-5/6 4*C1), FCN the width of FC-1/FC-2
// (1024), NCLS the number of classes (10), FCR the number of rows the FC
// vectors are stored in (8).  The defaults give the published network.
//
// Host interface:
//   ld_*        weight / threshold loading, one 32-bit word per cycle, before
//               images are streamed (layer 0 = CONV-1 ... 8 = FC-3)
//   img_*       pixel writes into the free input bank while img_ready, then
//               one img_commit pulse per image
//   run         keep streaming (phases wait for the next image); drop it to
//               flush the images still in the pipeline
//   out_valid   one-cycle pulse, scores[k*16 +: 16] is the signed score of
//               class k for the oldest image not yet reported
//
// Lint notes: the valid tags of the pipeline are brought out of the
// controller for debugging only, so `vtag` has no load here.  The hidden FC
// layers leave their score ports open and the last one its bit ports, since
// each uses only one of the two outputs.  Each layer sees the whole load
// address but uses only as many bits as its own memories need.
module bcnn_top
  import bcnn_pkg::*;
#(
  parameter int IMG  = 32,
  parameter int C1   = 128,
  parameter int FCN  = 1024,
  parameter int NCLS = 10,
  parameter int FCR  = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  ld_req_t               ld,
  input  logic                  run,
  output logic                  img_ready,
  input  logic                  img_wr_en,
  input  logic [$clog2(IMG)-1:0] img_wr_row,
  input  logic [$clog2(IMG)-1:0] img_wr_col,
  input  logic [IMG_C*AW-1:0]   img_wr_pix,
  input  logic                  img_commit,
  output logic                  out_valid,
  output logic [NCLS*YW-1:0]    scores,
  output logic [31:0]           stall_cycles
);
  // ---------------- derived geometry ----------------
  localparam int S1 = IMG, S2 = IMG / 2, S3 = IMG / 4, S4 = IMG / 8;
  localparam int D1 = C1, D2 = 2 * C1, D3 = 4 * C1;
  localparam int FC1_R = S4, FC1_UF = S4 * D3;
  localparam int FCD = FCN / FCR;

  // ---------------- phase control ----------------
  logic [NLAYER-1:0] done;
  logic              start, phase, out_latch;
  logic [NLAYER-1:0] vtag;

  phase_ctrl #(.NL(NLAYER)) u_ctrl (
    .clk, .rst_n, .run, .img_commit, .img_ready, .done, .start, .phase,
    .vtag, .out_latch, .stall_cycles);

  // ---------------- load port decode ----------------
  logic [NLAYER-1:0] we, te;
  always_comb
    for (int l = 0; l < NLAYER; l++) begin
      we[l] = ld.en && !ld.thr && ld.layer == 4'(l);
      te[l] = ld.en &&  ld.thr && ld.layer == 4'(l);
    end

  // ---------------- input image channel ----------------
  logic [$clog2(S1)-1:0]     img_rd_row;
  logic [3*S1*IMG_C*AW-1:0]  img_rd_data;
  image_channel #(.H(S1), .W(S1), .C(IMG_C), .AW(AW)) u_ch0 (
    .clk, .phase, .wr_en(img_wr_en), .wr_row(img_wr_row), .wr_col(img_wr_col),
    .wr_pix(img_wr_pix), .rd_row(img_rd_row), .rd_data(img_rd_data));

  // ---------------- CONV-1 ----------------
  logic                   w1_en;
  logic [$clog2(S1)-1:0]  w1_row, r1_row;
  logic [$clog2(D1)-1:0]  w1_ch;
  logic [S1-1:0]          w1_bits;
  logic [S1*D1-1:0]       r1_data;

  fpconv_layer #(.W(S1), .H(S1), .DEP(D1)) u_l1 (
    .clk, .rst_n, .start, .done(done[0]), .ld_we(we[0]), .ld_te(te[0]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .img_rd_row, .img_rd_data,
    .out_wr_en(w1_en), .out_wr_row(w1_row), .out_wr_ch(w1_ch), .out_wr_bits(w1_bits));

  fmap_channel #(.H(S1), .W(S1), .D(D1)) u_ch1 (
    .clk, .phase, .wr_en(w1_en), .wr_row(w1_row), .wr_ch(w1_ch), .wr_bits(w1_bits),
    .rd_row(r1_row), .rd_data(r1_data));

  // ---------------- CONV-2 (pool) ----------------
  logic                          w2_en;
  logic [$clog2(S2)-1:0]         w2_row, r2_row;
  logic [$clog2(D1)-1:0]         w2_ch;
  logic [S2-1:0]                 w2_bits;
  logic [S2*D1-1:0]              r2_data;

  bconv_layer #(.W(S1), .H(S1), .D(D1), .DEP(D1), .POOL(1'b1)) u_l2 (
    .clk, .rst_n, .start, .done(done[1]), .ld_we(we[1]), .ld_te(te[1]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r1_row), .in_rd_data(r1_data),
    .out_wr_en(w2_en), .out_wr_row(w2_row), .out_wr_ch(w2_ch), .out_wr_bits(w2_bits));

  fmap_channel #(.H(S2), .W(S2), .D(D1)) u_ch2 (
    .clk, .phase, .wr_en(w2_en), .wr_row(w2_row), .wr_ch(w2_ch), .wr_bits(w2_bits),
    .rd_row(r2_row), .rd_data(r2_data));

  // ---------------- CONV-3 ----------------
  logic                          w3_en;
  logic [$clog2(S2)-1:0]         w3_row, r3_row;
  logic [$clog2(D2)-1:0]         w3_ch;
  logic [S2-1:0]                 w3_bits;
  logic [S2*D2-1:0]              r3_data;

  bconv_layer #(.W(S2), .H(S2), .D(D1), .DEP(D2), .POOL(1'b0)) u_l3 (
    .clk, .rst_n, .start, .done(done[2]), .ld_we(we[2]), .ld_te(te[2]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r2_row), .in_rd_data(r2_data),
    .out_wr_en(w3_en), .out_wr_row(w3_row), .out_wr_ch(w3_ch), .out_wr_bits(w3_bits));

  fmap_channel #(.H(S2), .W(S2), .D(D2)) u_ch3 (
    .clk, .phase, .wr_en(w3_en), .wr_row(w3_row), .wr_ch(w3_ch), .wr_bits(w3_bits),
    .rd_row(r3_row), .rd_data(r3_data));

  // ---------------- CONV-4 (pool) ----------------
  logic                          w4_en;
  logic [$clog2(S3)-1:0]         w4_row, r4_row;
  logic [$clog2(D2)-1:0]         w4_ch;
  logic [S3-1:0]                 w4_bits;
  logic [S3*D2-1:0]              r4_data;

  bconv_layer #(.W(S2), .H(S2), .D(D2), .DEP(D2), .POOL(1'b1)) u_l4 (
    .clk, .rst_n, .start, .done(done[3]), .ld_we(we[3]), .ld_te(te[3]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r3_row), .in_rd_data(r3_data),
    .out_wr_en(w4_en), .out_wr_row(w4_row), .out_wr_ch(w4_ch), .out_wr_bits(w4_bits));

  fmap_channel #(.H(S3), .W(S3), .D(D2)) u_ch4 (
    .clk, .phase, .wr_en(w4_en), .wr_row(w4_row), .wr_ch(w4_ch), .wr_bits(w4_bits),
    .rd_row(r4_row), .rd_data(r4_data));

  // ---------------- CONV-5 ----------------
  logic                          w5_en;
  logic [$clog2(S3)-1:0]         w5_row, r5_row;
  logic [$clog2(D3)-1:0]         w5_ch;
  logic [S3-1:0]                 w5_bits;
  logic [S3*D3-1:0]              r5_data;

  bconv_layer #(.W(S3), .H(S3), .D(D2), .DEP(D3), .POOL(1'b0)) u_l5 (
    .clk, .rst_n, .start, .done(done[4]), .ld_we(we[4]), .ld_te(te[4]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r4_row), .in_rd_data(r4_data),
    .out_wr_en(w5_en), .out_wr_row(w5_row), .out_wr_ch(w5_ch), .out_wr_bits(w5_bits));

  fmap_channel #(.H(S3), .W(S3), .D(D3)) u_ch5 (
    .clk, .phase, .wr_en(w5_en), .wr_row(w5_row), .wr_ch(w5_ch), .wr_bits(w5_bits),
    .rd_row(r5_row), .rd_data(r5_data));

  // ---------------- CONV-6 (pool) ----------------
  localparam int R6W = (S4 > 1) ? $clog2(S4) : 1;
  logic                          w6_en;
  logic [R6W-1:0]                w6_row, r6_row;
  logic [$clog2(D3)-1:0]         w6_ch;
  logic [S4-1:0]                 w6_bits;
  logic [S4*D3-1:0]              r6_data;

  bconv_layer #(.W(S3), .H(S3), .D(D3), .DEP(D3), .POOL(1'b1)) u_l6 (
    .clk, .rst_n, .start, .done(done[5]), .ld_we(we[5]), .ld_te(te[5]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r5_row), .in_rd_data(r5_data),
    .out_wr_en(w6_en), .out_wr_row(w6_row), .out_wr_ch(w6_ch), .out_wr_bits(w6_bits));

  fmap_channel #(.H(S4), .W(S4), .D(D3)) u_ch6 (
    .clk, .phase, .wr_en(w6_en), .wr_row(w6_row), .wr_ch(w6_ch), .wr_bits(w6_bits),
    .rd_row(r6_row), .rd_data(r6_data));

  // ---------------- FC-1 ----------------
  localparam int FRW = $clog2(FCR);
  localparam int FDW = $clog2(FCD);
  logic            w7_en, w8_en;
  logic [FRW-1:0]  w7_row, r7_row, w8_row, r8_row;
  logic [FDW-1:0]  w7_ch, w8_ch;
  logic [0:0]      w7_bits, w8_bits;
  logic [FCD-1:0]  r7_data, r8_data;

  bfc_layer #(.R(FC1_R), .UF(FC1_UF), .NOUT(FCN), .LAST(1'b0), .OUT_D(FCD)) u_l7 (
    .clk, .rst_n, .start, .done(done[6]), .ld_we(we[6]), .ld_te(te[6]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r6_row), .in_rd_data(r6_data),
    .out_wr_en(w7_en), .out_wr_row(w7_row), .out_wr_ch(w7_ch), .out_wr_bits(w7_bits),
    .sc_wr_en(), .sc_idx(), .sc_val());

  fmap_channel #(.H(FCR), .W(1), .D(FCD)) u_ch7 (
    .clk, .phase, .wr_en(w7_en), .wr_row(w7_row), .wr_ch(w7_ch), .wr_bits(w7_bits),
    .rd_row(r7_row), .rd_data(r7_data));

  // ---------------- FC-2 ----------------
  bfc_layer #(.R(FCR), .UF(FCD), .NOUT(FCN), .LAST(1'b0), .OUT_D(FCD)) u_l8 (
    .clk, .rst_n, .start, .done(done[7]), .ld_we(we[7]), .ld_te(te[7]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r7_row), .in_rd_data(r7_data),
    .out_wr_en(w8_en), .out_wr_row(w8_row), .out_wr_ch(w8_ch), .out_wr_bits(w8_bits),
    .sc_wr_en(), .sc_idx(), .sc_val());

  fmap_channel #(.H(FCR), .W(1), .D(FCD)) u_ch8 (
    .clk, .phase, .wr_en(w8_en), .wr_row(w8_row), .wr_ch(w8_ch), .wr_bits(w8_bits),
    .rd_row(r8_row), .rd_data(r8_data));

  // ---------------- FC-3 (output layer) ----------------
  localparam int CLW = (NCLS > 1) ? $clog2(NCLS) : 1;
  logic            sc_en;
  logic [CLW-1:0]  sc_idx;
  logic [YW-1:0]   sc_val;
  logic [NCLS*YW-1:0] sc_work;

  bfc_layer #(.R(FCR), .UF(FCD), .NOUT(NCLS), .LAST(1'b1), .OUT_D(NCLS)) u_l9 (
    .clk, .rst_n, .start, .done(done[8]), .ld_we(we[8]), .ld_te(te[8]),
    .ld_bank(ld.bank), .ld_addr(ld.addr), .ld_data(ld.data),
    .in_rd_row(r8_row), .in_rd_data(r8_data),
    .out_wr_en(), .out_wr_row(), .out_wr_ch(), .out_wr_bits(),
    .sc_wr_en(sc_en), .sc_idx, .sc_val);

  always_ff @(posedge clk) begin
    if (sc_en) sc_work[int'(sc_idx)*YW +: YW] <= sc_val;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      scores    <= '0;
    end else begin
      out_valid <= out_latch;
      if (out_latch) scores <= sc_work;
    end
  end
endmodule
