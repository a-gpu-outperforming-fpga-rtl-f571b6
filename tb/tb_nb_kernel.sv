// tb_nb_kernel: random sums against random thresholds, including sums equal
// to the threshold (which must give 1) and one below it (0).
module tb_nb_kernel;
  localparam int N = 8, YW = 16;
  logic clk = 0, in_valid = 0, out_valid;
  logic [N*YW-1:0] y = '0;
  logic signed [YW-1:0] c = '0;
  logic [N-1:0] bits;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  nb_kernel #(.N(N), .YW(YW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int v [N];
    int cv;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      cv = int'($urandom_range(200)) - 100;
      c = YW'(cv);
      for (int i = 0; i < N; i++) begin
        v[i] = (i == 0) ? cv : (i == 1) ? cv - 1 : cv + int'($urandom_range(20)) - 10;
        y[i*YW +: YW] = YW'(v[i]);
      end
      in_valid = 1;
      @(negedge clk);
      checks++; if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (bits[i] != (v[i] >= cv)) begin failures++; $display("t=%0d i=%0d y=%0d c=%0d bit=%0b", t, i, v[i], cv, bits[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
