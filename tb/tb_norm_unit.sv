// tb_norm_unit: random counts and thresholds; the score must be y - c.
module tb_norm_unit;
  localparam int N = 4, YW = 16;
  logic [N*YW-1:0] y, c, z;
  int checks = 0, failures = 0;
  norm_unit #(.N(N), .YW(YW)) dut (.*);

  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int yv [N], cv [N];
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < N; i++) begin
        yv[i] = int'($urandom_range(4608));
        cv[i] = int'($urandom_range(6000)) - 1000;
        y[i*YW +: YW] = YW'(yv[i]);
        c[i*YW +: YW] = YW'(cv[i]);
      end
      #1;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (int'($signed(z[i*YW +: YW])) != yv[i] - cv[i]) begin
          failures++; $display("y=%0d c=%0d z=%0d", yv[i], cv[i], $signed(z[i*YW +: YW]));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
