// tb_bfc_layer: a hidden fully-connected layer (NB output bits) and an output
// layer (Norm scores) on the same random input vector and weights.  The
// reference counts agreeing bits over the R input rows.  Also checks the
// NOUT*R-cycle phase.
module tb_bfc_layer;
  import bcnn_pkg::*;
  localparam int R = 4, UF = 40, NOUT = 12, OUT_D = 4, OUT_H = NOUT / OUT_D;
  localparam int RW = $clog2(R), NW = $clog2(NOUT), NBK = (UF + 31) / 32;

  logic clk = 0, rst_n = 0, start = 0, done_h, done_o;
  logic ld_we = 0, ld_te = 0;
  logic [LD_BANK_W-1:0] ld_bank = '0;
  logic [LD_ADDR_W-1:0] ld_addr = '0;
  logic [LDW-1:0] ld_data = '0;
  logic [RW-1:0] rd_h, rd_o;
  logic [UF-1:0] rows [R];
  logic wen, sc_en;
  logic [$clog2(OUT_H)-1:0] wrow;
  logic [$clog2(OUT_D)-1:0] wch;
  logic [0:0] wbit;
  logic [NW-1:0] sc_idx;
  logic [YW-1:0] sc_val;
  logic [UF-1:0] wts [NOUT*R];
  int thr [NOUT];
  int got_bit [NOUT];
  int got_sc [NOUT];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bfc_layer #(.R(R), .UF(UF), .NOUT(NOUT), .LAST(1'b0), .OUT_D(OUT_D)) dut_h (
    .clk, .rst_n, .start, .done(done_h), .ld_we, .ld_te, .ld_bank, .ld_addr, .ld_data,
    .in_rd_row(rd_h), .in_rd_data(rows[rd_h]),
    .out_wr_en(wen), .out_wr_row(wrow), .out_wr_ch(wch), .out_wr_bits(wbit),
    .sc_wr_en(), .sc_idx(), .sc_val());
  bfc_layer #(.R(R), .UF(UF), .NOUT(NOUT), .LAST(1'b1), .OUT_D(OUT_D)) dut_o (
    .clk, .rst_n, .start, .done(done_o), .ld_we, .ld_te, .ld_bank, .ld_addr, .ld_data,
    .in_rd_row(rd_o), .in_rd_data(rows[rd_o]),
    .out_wr_en(), .out_wr_row(), .out_wr_ch(), .out_wr_bits(),
    .sc_wr_en(sc_en), .sc_idx, .sc_val);

  always_ff @(posedge clk) begin
    if (wen)   got_bit[int'(wrow)*OUT_D + int'(wch)] <= int'(wbit);
    if (sc_en) got_sc[sc_idx] <= int'($signed(sc_val));
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc;
    for (int r = 0; r < R; r++) for (int i = 0; i < UF; i++) rows[r][i] = 1'($urandom);
    for (int n = 0; n < NOUT; n++) begin got_bit[n] = -1; got_sc[n] = -99999; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < NOUT*R; a++) begin
      for (int i = 0; i < UF; i++) wts[a][i] = 1'($urandom);
      for (int b = 0; b < NBK; b++) begin
        ld_we = 1; ld_bank = LD_BANK_W'(b); ld_addr = LD_ADDR_W'(a); ld_data = LDW'(wts[a] >> (32*b));
        @(negedge clk);
      end
    end
    ld_we = 0;
    for (int n = 0; n < NOUT; n++) begin
      thr[n] = R*UF/2 + int'($urandom_range(8)) - 4;
      ld_te = 1; ld_bank = '0; ld_addr = LD_ADDR_W'(n); ld_data = LDW'(thr[n]);
      @(negedge clk);
    end
    ld_te = 0;
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!(done_h && done_o)) begin @(negedge clk); cyc++; end
    $display("phase cycles %0d for %0d steps", cyc, NOUT*R);
    checks++;
    if (cyc < NOUT*R || cyc > NOUT*R + 10) failures++;
    for (int n = 0; n < NOUT; n++) begin
      int s;
      s = 0;
      for (int r = 0; r < R; r++) for (int i = 0; i < UF; i++) s += int'(rows[r][i] == wts[n*R + r][i]);
      checks += 2;
      if (got_bit[n] != int'(s >= thr[n])) begin failures++; $display("n%0d bit %0d s=%0d thr=%0d", n, got_bit[n], s, thr[n]); end
      if (got_sc[n] != s - thr[n]) begin failures++; $display("n%0d score %0d exp %0d", n, got_sc[n], s - thr[n]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
