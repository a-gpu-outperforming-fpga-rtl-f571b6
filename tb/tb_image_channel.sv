// tb_image_channel: writes a random image into bank 0, swaps, and checks that
// each three-row read returns rows r-1, r, r+1 with zero rows at the top and
// bottom edge; a second image written meanwhile into bank 1 must not show.
module tb_image_channel;
  localparam int H = 4, W = 4, C = 3, AW = 6, PW = C * AW, RW = $clog2(H), XW = $clog2(W);
  logic clk = 0, phase = 0, wr_en = 0;
  logic [RW-1:0] wr_row = '0, rd_row = '0;
  logic [XW-1:0] wr_col = '0;
  logic [PW-1:0] wr_pix = '0;
  logic [3*W*PW-1:0] rd_data;
  logic [PW-1:0] img [2][H][W];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  image_channel #(.H(H), .W(W), .C(C), .AW(AW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic write_img(input int b);
    for (int r = 0; r < H; r++)
      for (int x = 0; x < W; x++) begin
        img[b][r][x] = PW'($urandom);
        wr_en = 1; wr_row = RW'(r); wr_col = XW'(x); wr_pix = img[b][r][x];
        @(negedge clk);
      end
    wr_en = 0;
  endtask

  task automatic check_img(input int b);
    for (int r = 0; r < H; r++) begin
      rd_row = RW'(r); #1;
      for (int k = 0; k < 3; k++)
        for (int x = 0; x < W; x++) begin
          logic [PW-1:0] e;
          e = (r + k - 1 < 0 || r + k - 1 >= H) ? '0 : img[b][r+k-1][x];
          checks++;
          if (rd_data[k*W*PW + x*PW +: PW] != e) begin failures++; $display("b%0d r%0d k%0d x%0d", b, r, k, x); end
        end
    end
  endtask

  initial begin
    @(negedge clk);
    phase = 0; write_img(0);
    phase = 1; write_img(1);
    check_img(0);
    phase = 0; #1;
    check_img(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
