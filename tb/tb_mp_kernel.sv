// tb_mp_kernel: pairs of random rows (signed values); the odd row must yield
// the 2x2 maxima of both rows one clock later, the even row no output.
module tb_mp_kernel;
  localparam int P = 8, YW = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, odd_row = 0, out_valid;
  logic [P*YW-1:0] din = '0;
  logic [P/2*YW-1:0] dout;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  mp_kernel #(.P(P), .YW(YW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int r0 [P], r1 [P];
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      for (int j = 0; j < P; j++) begin
        r0[j] = int'($urandom_range(4000)) - 2000;
        r1[j] = int'($urandom_range(4000)) - 2000;
        din[j*YW +: YW] = YW'(r0[j]);
      end
      in_valid = 1; odd_row = 0;
      @(negedge clk);
      checks++; if (out_valid) begin failures++; $display("output on even row"); end
      for (int j = 0; j < P; j++) din[j*YW +: YW] = YW'(r1[j]);
      odd_row = 1;
      @(negedge clk);
      checks++; if (!out_valid) begin failures++; $display("no output on odd row"); end
      for (int j = 0; j < P/2; j++) begin
        int m;
        m = r0[2*j];
        if (r0[2*j+1] > m) m = r0[2*j+1];
        if (r1[2*j]   > m) m = r1[2*j];
        if (r1[2*j+1] > m) m = r1[2*j+1];
        checks++;
        if (int'($signed(dout[j*YW +: YW])) != m) begin
          failures++; $display("t=%0d j=%0d got %0d exp %0d", t, j, $signed(dout[j*YW +: YW]), m);
        end
      end
      if (t % 4 == 0) begin in_valid = 0; @(negedge clk); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
