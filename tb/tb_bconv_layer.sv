// tb_bconv_layer: one pooling and one non-pooling binary convolution layer of
// the same shape run on the same random input map, weights and thresholds.
// The reference computes every output bit from the definition (3x3 window,
// padding read as bit 0, XNOR count, optional 2x2 max, threshold), bit by
// bit.  Also checks that a phase takes DEP*H*3 cycles plus a short drain.
module tb_bconv_layer;
  import bcnn_pkg::*;
  localparam int W = 8, H = 8, D = 4, DEP = 6, UF = 3 * D;
  localparam int RW = $clog2(H), NW = $clog2(DEP);
  localparam int NBK = (UF + 31) / 32;

  logic clk = 0, rst_n = 0, start = 0;
  logic done_p, done_n;
  logic ld_we = 0, ld_te = 0;
  logic [LD_BANK_W-1:0] ld_bank = '0;
  logic [LD_ADDR_W-1:0] ld_addr = '0;
  logic [LDW-1:0] ld_data = '0;
  logic [RW-1:0] rd_row_p, rd_row_n;
  logic [W*D-1:0] in_rows [H];
  logic wen_p, wen_n;
  logic [RW-2:0] wrow_p;
  logic [RW-1:0] wrow_n;
  logic [NW-1:0] wch_p, wch_n;
  logic [W/2-1:0] wbits_p;
  logic [W-1:0] wbits_n;
  logic [UF-1:0] wts [DEP*3];
  int thr [DEP];
  bit out_p [DEP][H/2][W/2];
  bit out_n [DEP][H][W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  bconv_layer #(.W(W), .H(H), .D(D), .DEP(DEP), .POOL(1'b1)) dut_p (
    .clk, .rst_n, .start, .done(done_p), .ld_we, .ld_te, .ld_bank, .ld_addr, .ld_data,
    .in_rd_row(rd_row_p), .in_rd_data(in_rows[rd_row_p]),
    .out_wr_en(wen_p), .out_wr_row(wrow_p), .out_wr_ch(wch_p), .out_wr_bits(wbits_p));
  bconv_layer #(.W(W), .H(H), .D(D), .DEP(DEP), .POOL(1'b0)) dut_n (
    .clk, .rst_n, .start, .done(done_n), .ld_we, .ld_te, .ld_bank, .ld_addr, .ld_data,
    .in_rd_row(rd_row_n), .in_rd_data(in_rows[rd_row_n]),
    .out_wr_en(wen_n), .out_wr_row(wrow_n), .out_wr_ch(wch_n), .out_wr_bits(wbits_n));

  always_ff @(posedge clk) begin
    if (wen_p) for (int x = 0; x < W/2; x++) out_p[wch_p][wrow_p][x] <= wbits_p[x];
    if (wen_n) for (int x = 0; x < W; x++)   out_n[wch_n][wrow_n][x] <= wbits_n[x];
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int conv_sum(int n, int y, int x);
    int s;
    s = 0;
    for (int fh = 0; fh < 3; fh++)
      for (int fw = 0; fw < 3; fw++)
        for (int d = 0; d < D; d++) begin
          bit a;
          int r, c;
          r = y + fh - 1; c = x + fw - 1;
          a = (r < 0 || r >= H || c < 0 || c >= W) ? 1'b0 : in_rows[r][c*D + d];
          if (a == wts[n*3 + fh][fw*D + d]) s++;
        end
    return s;
  endfunction

  initial begin
    int t0, cyc, ones;
    for (int r = 0; r < H; r++)
      for (int i = 0; i < W*D; i++) in_rows[r][i] = 1'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < DEP*3; a++) begin
      for (int i = 0; i < UF; i++) wts[a][i] = 1'($urandom);
      for (int b = 0; b < NBK; b++) begin
        ld_we = 1; ld_bank = LD_BANK_W'(b); ld_addr = LD_ADDR_W'(a);
        ld_data = LDW'(wts[a] >> (32*b));
        @(negedge clk);
      end
    end
    ld_we = 0;
    for (int n = 0; n < DEP; n++) begin
      thr[n] = 9*D/2 + int'($urandom_range(6)) - 3;
      ld_te = 1; ld_bank = '0; ld_addr = LD_ADDR_W'(n); ld_data = LDW'(thr[n]);
      @(negedge clk);
    end
    ld_te = 0;
    for (int rep = 0; rep < 2; rep++) begin
      start = 1; @(negedge clk); start = 0;
      t0 = 0;
      while (!(done_p && done_n)) begin @(negedge clk); t0++; end
      cyc = t0 + 1;
      checks++;
      if (cyc < DEP*H*3 || cyc > DEP*H*3 + 10) begin failures++; $display("phase took %0d cycles, expected %0d + drain", cyc, DEP*H*3); end
      if (rep == 0) $display("phase cycles %0d for %0d steps", cyc, DEP*H*3);
      ones = 0;
      for (int n = 0; n < DEP; n++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < W; x++) begin
            bit e;
            e = conv_sum(n, y, x) >= thr[n];
            ones += int'(e);
            checks++;
            if (out_n[n][y][x] != e) begin failures++; if (failures < 10) $display("nopool n%0d y%0d x%0d got %0b", n, y, x, out_n[n][y][x]); end
          end
      for (int n = 0; n < DEP; n++)
        for (int y = 0; y < H/2; y++)
          for (int x = 0; x < W/2; x++) begin
            int m;
            bit e;
            m = conv_sum(n, 2*y, 2*x);
            if (conv_sum(n, 2*y, 2*x+1) > m)   m = conv_sum(n, 2*y, 2*x+1);
            if (conv_sum(n, 2*y+1, 2*x) > m)   m = conv_sum(n, 2*y+1, 2*x);
            if (conv_sum(n, 2*y+1, 2*x+1) > m) m = conv_sum(n, 2*y+1, 2*x+1);
            e = m >= thr[n];
            checks++;
            if (out_p[n][y][x] != e) begin failures++; if (failures < 10) $display("pool n%0d y%0d x%0d got %0b", n, y, x, out_p[n][y][x]); end
          end
      checks++;
      if (ones == 0 || ones == DEP*H*W) begin failures++; $display("degenerate test data"); end
      // new input map for the second phase
      for (int r = 0; r < H; r++)
        for (int i = 0; i < W*D; i++) in_rows[r][i] = 1'($urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
