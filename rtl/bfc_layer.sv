// bfc_layer: one binary fully-connected layer (FC-1 .. FC-3).
//
// The input vector is held in the memory channel as R rows of UF bits; each
// output neuron n takes R steps, one input row per step: one XNOR PE of UF
// gates compares the row with weight word n*R + r, and an accumulator adds
// the R counts.  A phase therefore takes NOUT*R cycles plus the pipeline.
// Hidden layers threshold the sum with the NB comparator and write one bit,
// neuron n, into the next memory channel at row n / OUT_D, channel
// n % OUT_D.  The output layer (LAST = 1) instead applies Norm, z = y - c,
// and writes the signed score of class n on the score port.
//
// The kernel follows the published statement that the fully-connected
// kernels are built like the convolution kernel; the row width UF, P = 1 and
// the row layout of the input vector are this design's choices, sized so that
// no fully-connected layer takes longer than the slowest convolution layer.
//
// Pipeline: S0 issue, S1 row register and memory outputs, S2 PE count,
// S3 sum, then the NB bit or the score is registered.  `done` as in the
// convolution layers.
// Only one of the two output groups is driven for a given LAST: the bit
// write port of a hidden layer, or the score port of the output layer.  The
// other group is tied to zero and left open by the parent.
module bfc_layer
  import bcnn_pkg::*;
#(
  parameter int R     = 4,
  parameter int UF    = 2048,
  parameter int NOUT  = 1024,
  parameter bit LAST  = 1'b0,
  parameter int OUT_D = 128,
  parameter int OUT_H = (NOUT + OUT_D - 1) / OUT_D,
  parameter int RW    = (R > 1) ? $clog2(R) : 1,
  parameter int ORW   = (OUT_H > 1) ? $clog2(OUT_H) : 1,
  parameter int OCW   = (OUT_D > 1) ? $clog2(OUT_D) : 1,
  parameter int NW    = (NOUT > 1) ? $clog2(NOUT) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  output logic                 done,
  input  logic                 ld_we,
  input  logic                 ld_te,
  input  logic [LD_BANK_W-1:0] ld_bank,
  input  logic [LD_ADDR_W-1:0] ld_addr,
  input  logic [LDW-1:0]       ld_data,
  output logic [RW-1:0]        in_rd_row,
  input  logic [UF-1:0]        in_rd_data,
  // hidden layer: bit write to next memory channel
  output logic                 out_wr_en,
  output logic [ORW-1:0]       out_wr_row,
  output logic [OCW-1:0]       out_wr_ch,
  output logic [0:0]           out_wr_bits,
  // output layer: class scores
  output logic                 sc_wr_en,
  output logic [NW-1:0]        sc_idx,
  output logic [YW-1:0]        sc_val
);
  localparam int CW  = $clog2(UF + 1);
  localparam int WD  = NOUT * R;
  localparam int WAW = (WD > 1) ? $clog2(WD) : 1;
  localparam int LAT = 5;

  logic          busy;
  logic [NW-1:0] n0;
  logic [RW-1:0] r0;
  logic [3:0]    drain;

  assign in_rd_row = r0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; n0 <= '0; r0 <= '0; drain <= '0;
    end else if (start) begin
      busy <= 1'b1; done <= 1'b0; n0 <= '0; r0 <= '0; drain <= 4'(LAT);
    end else if (busy) begin
      if (int'(r0) != R - 1) r0 <= r0 + 1'b1;
      else begin
        r0 <= '0;
        if (int'(n0) != NOUT - 1) n0 <= n0 + 1'b1;
        else busy <= 1'b0;
      end
    end else if (!done) begin
      if (drain != 0) drain <= drain - 4'd1;
      else done <= 1'b1;
    end
  end

  logic [UF-1:0] wword;
  logic [YW-1:0] tword;

  bank_mem #(.WIDTH(UF), .DEPTH(WD)) u_wmem (
    .clk, .ld_en(ld_we), .ld_bank, .ld_addr(ld_addr[WAW-1:0]), .ld_data,
    .rd_addr(WAW'(int'(n0) * R + int'(r0))), .rd_data(wword));

  bank_mem #(.WIDTH(YW), .DEPTH(NOUT)) u_tmem (
    .clk, .ld_en(ld_te), .ld_bank, .ld_addr(ld_addr[NW-1:0]), .ld_data,
    .rd_addr(n0), .rd_data(tword));

  // S1
  logic          v1;
  logic [RW-1:0] r1;
  logic [NW-1:0] n1;
  logic [UF-1:0] row1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= busy && !start;
  end
  always_ff @(posedge clk) begin
    r1 <= r0; n1 <= n0; row1 <= in_rd_data;
  end

  // S2
  logic          v2;
  logic [CW-1:0] cnt2;
  logic [RW-1:0] r2;
  logic [NW-1:0] n2;
  logic [YW-1:0] t2;
  xnor_pe #(.UF(UF)) u_pe (
    .clk, .in_valid(v1), .w(wword), .x(row1), .out_valid(v2), .count(cnt2));
  always_ff @(posedge clk) begin
    r2 <= r1; n2 <= n1; t2 <= tword;
  end

  // S3
  logic                 v3;
  logic signed [YW-1:0] y3;
  logic [NW-1:0]        n3;
  logic [YW-1:0]        t3;
  accumulator #(.IW(CW), .YW(YW)) u_acc (
    .clk, .rst_n, .in_valid(v2), .first(r2 == '0), .last(int'(r2) == R - 1),
    .din(cnt2), .out_valid(v3), .y(y3));
  always_ff @(posedge clk) begin
    n3 <= n2; t3 <= t2;
  end

  if (LAST) begin : g_norm
    logic [YW-1:0] z3;
    norm_unit #(.N(1), .YW(YW)) u_norm (.y(y3), .c(t3), .z(z3));
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sc_wr_en <= 1'b0;
      else        sc_wr_en <= v3;
    end
    always_ff @(posedge clk) begin
      sc_idx <= n3;
      sc_val <= z3;
    end
    assign out_wr_en   = 1'b0;
    assign out_wr_row  = '0;
    assign out_wr_ch   = '0;
    assign out_wr_bits = '0;
  end else begin : g_nb
    nb_kernel #(.N(1), .YW(YW)) u_nb (
      .clk, .in_valid(v3), .y(y3), .c($signed(t3)),
      .out_valid(out_wr_en), .bits(out_wr_bits));
    always_ff @(posedge clk) begin
      out_wr_row <= ORW'(int'(n3) / OUT_D);
      out_wr_ch  <= OCW'(int'(n3) % OUT_D);
    end
    assign sc_wr_en = 1'b0;
    assign sc_idx   = '0;
    assign sc_val   = '0;
  end
endmodule
