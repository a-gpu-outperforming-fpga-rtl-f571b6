// tb_fp_pe: random 6-bit pixels and 2-bit weights through the first-layer PE,
// compared with an integer dot product; extreme operands included.
module tb_fp_pe;
  localparam int UF = 27, AW = 6, WW = 2, YW = 16;
  logic clk = 0, in_valid = 0, out_valid;
  logic [UF*AW-1:0] a;
  logic [UF*WW-1:0] w;
  logic signed [YW-1:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  fp_pe #(.UF(UF), .AW(AW), .WW(WW), .YW(YW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    a = '0; w = '0;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int exp_y;
      exp_y = 0;
      for (int k = 0; k < UF; k++) begin
        int av, wv;
        av = (t == 0) ? -31 : (t == 1) ? 31 : int'($urandom_range(62)) - 31;
        wv = (t < 2) ? -2 : int'($urandom_range(3)) - 2;
        a[k*AW +: AW] = AW'(av);
        w[k*WW +: WW] = WW'(wv);
        exp_y += av * wv;
      end
      in_valid = 1'b1;
      @(negedge clk);
      checks++;
      if (!out_valid || int'(y) != exp_y) begin
        failures++; $display("t=%0d y=%0d exp=%0d", t, y, exp_y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
