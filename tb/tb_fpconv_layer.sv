// tb_fpconv_layer: the first layer on a random 6-bit image with random 2-bit
// weights and thresholds, through a behavioural copy of the image channel's
// three-row read.  Each output bit is recomputed from the convolution
// definition with zero padding.  Also checks the DEP*H-cycle phase.
module tb_fpconv_layer;
  import bcnn_pkg::*;
  localparam int W = 8, H = 8, DEP = 6, UF = 27;
  localparam int RW = $clog2(H), NW = $clog2(DEP), PW = IMG_C * AW;
  localparam int NBK = (UF*WW + 31) / 32;

  logic clk = 0, rst_n = 0, start = 0, done;
  logic ld_we = 0, ld_te = 0;
  logic [LD_BANK_W-1:0] ld_bank = '0;
  logic [LD_ADDR_W-1:0] ld_addr = '0;
  logic [LDW-1:0] ld_data = '0;
  logic [RW-1:0] img_rd_row;
  logic [3*W*PW-1:0] img_rd_data;
  logic out_wr_en;
  logic [RW-1:0] out_wr_row;
  logic [NW-1:0] out_wr_ch;
  logic [W-1:0] out_wr_bits;
  int img [H][W][IMG_C];
  int wv [DEP][UF];
  int thr [DEP];
  bit outb [DEP][H][W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  fpconv_layer #(.W(W), .H(H), .DEP(DEP)) dut (.*);

  always_comb
    for (int k = 0; k < 3; k++)
      for (int x = 0; x < W; x++)
        for (int c = 0; c < IMG_C; c++) begin
          int r;
          r = int'(img_rd_row) + k - 1;
          img_rd_data[k*W*PW + x*PW + c*AW +: AW] = (r < 0 || r >= H) ? '0 : AW'(img[r][x][c]);
        end

  always_ff @(posedge clk)
    if (out_wr_en) for (int x = 0; x < W; x++) outb[out_wr_ch][out_wr_row][x] <= out_wr_bits[x];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int cyc, ones;
    logic [NBK*32-1:0] word;
    for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) for (int c = 0; c < IMG_C; c++)
      img[y][x][c] = int'($urandom_range(62)) - 31;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < DEP; n++) begin
      word = '0;
      for (int k = 0; k < UF; k++) begin
        wv[n][k] = int'($urandom_range(3)) - 2;
        word[2*k +: 2] = 2'(wv[n][k]);
      end
      for (int b = 0; b < NBK; b++) begin
        ld_we = 1; ld_bank = LD_BANK_W'(b); ld_addr = LD_ADDR_W'(n); ld_data = word[32*b +: 32];
        @(negedge clk);
      end
      ld_we = 0;
      thr[n] = int'($urandom_range(40)) - 20;
      ld_te = 1; ld_bank = '0; ld_data = LDW'(thr[n]);
      @(negedge clk);
      ld_te = 0;
    end
    start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    $display("phase cycles %0d for %0d steps", cyc, DEP*H);
    checks++;
    if (cyc < DEP*H || cyc > DEP*H + 10) failures++;
    ones = 0;
    for (int n = 0; n < DEP; n++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          int s;
          s = 0;
          for (int fh = 0; fh < 3; fh++)
            for (int fw = 0; fw < 3; fw++)
              for (int c = 0; c < IMG_C; c++) begin
                int r, q;
                r = y + fh - 1; q = x + fw - 1;
                if (r >= 0 && r < H && q >= 0 && q < W) s += img[r][q][c] * wv[n][fh*9 + fw*3 + c];
              end
          ones += int'(s >= thr[n]);
          checks++;
          if (outb[n][y][x] != (s >= thr[n])) begin failures++; if (failures < 10) $display("n%0d y%0d x%0d s=%0d thr=%0d", n, y, x, s, thr[n]); end
        end
    checks++;
    if (ones == 0 || ones == DEP*H*W) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
