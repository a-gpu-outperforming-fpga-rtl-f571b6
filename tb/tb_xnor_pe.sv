// tb_xnor_pe: random operand pairs through the binary PE; the expected count
// is the number of equal bit positions, counted bit by bit here.  Also checks
// the one-cycle latency of count and out_valid.
module tb_xnor_pe;
  localparam int UF = 40;
  localparam int CW = $clog2(UF + 1);
  logic clk = 0, in_valid = 0, out_valid;
  logic [UF-1:0] w, x;
  logic [CW-1:0] count;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  xnor_pe #(.UF(UF)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    w = '0; x = '0;
    @(negedge clk);
    for (int t = 0; t < 300; t++) begin
      int exp_cnt;
      w = {$urandom, $urandom}; x = {$urandom, $urandom};
      if (t == 0) x = w;            // all equal
      if (t == 1) x = ~w;           // all different
      in_valid = 1'b1;
      exp_cnt = 0;
      for (int i = 0; i < UF; i++) if (w[i] == x[i]) exp_cnt++;
      #1; checks++; if (out_valid !== (t != 0)) begin failures++; $display("valid early/late t=%0d", t); end
      @(negedge clk);
      checks++;
      if (!out_valid || int'(count) != exp_cnt) begin
        failures++; $display("t=%0d count=%0d exp=%0d", t, count, exp_cnt);
      end
    end
    in_valid = 0; @(negedge clk);
    checks++; if (out_valid) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
