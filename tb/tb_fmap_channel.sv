// tb_fmap_channel: fills bank 0 channel by channel (phase 0), swaps, checks
// every row on the read side while new data goes into bank 1, swaps again and
// checks bank 1.  Reads must never see the bank being written.
module tb_fmap_channel;
  localparam int H = 4, W = 4, D = 8, RW = $clog2(H), DW = $clog2(D);
  logic clk = 0, phase = 0, wr_en = 0;
  logic [RW-1:0] wr_row = '0, rd_row = '0;
  logic [DW-1:0] wr_ch = '0;
  logic [W-1:0] wr_bits = '0;
  logic [W*D-1:0] rd_data;
  logic [W*D-1:0] ref_bank [2][H];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fmap_channel #(.H(H), .W(W), .D(D)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  task automatic fill(input int b);
    for (int r = 0; r < H; r++)
      for (int d = 0; d < D; d++) begin
        wr_en = 1; wr_row = RW'(r); wr_ch = DW'(d); wr_bits = W'($urandom);
        for (int x = 0; x < W; x++) ref_bank[b][r][x*D + d] = wr_bits[x];
        @(negedge clk);
      end
    wr_en = 0;
  endtask

  task automatic check_all(input int b);
    for (int r = 0; r < H; r++) begin
      rd_row = RW'(r); #1;
      checks++;
      if (rd_data != ref_bank[b][r]) begin failures++; $display("bank %0d row %0d got %h exp %h", b, r, rd_data, ref_bank[b][r]); end
    end
  endtask

  initial begin
    @(negedge clk);
    phase = 0; fill(0);
    phase = 1;
    // write bank 1 while reading bank 0 between writes
    for (int r = 0; r < H; r++)
      for (int d = 0; d < D; d++) begin
        wr_en = 1; wr_row = RW'(r); wr_ch = DW'(d); wr_bits = W'($urandom);
        for (int x = 0; x < W; x++) ref_bank[1][r][x*D + d] = wr_bits[x];
        rd_row = RW'((r + d) % H);
        @(negedge clk);
        checks++;
        if (rd_data != ref_bank[0][(r + d) % H]) begin failures++; $display("read disturbed by write"); end
      end
    wr_en = 0;
    check_all(0);
    phase = 0; #1;
    check_all(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
