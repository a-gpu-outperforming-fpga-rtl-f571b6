// tb_accumulator: groups of three terms (first, middle, last), back to back
// and with idle cycles in between; checks each sum and that out_valid pulses
// exactly once per group, one clock after the last term.
module tb_accumulator;
  localparam int IW = 11, YW = 16;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic [IW-1:0] din = '0;
  logic signed [YW-1:0] y;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  accumulator #(.IW(IW), .YW(YW)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 200; g++) begin
      int s;
      s = 0;
      for (int k = 0; k < 3; k++) begin
        int v;
        v = int'($urandom_range(1536));
        s += v;
        din = IW'(v); first = (k == 0); last = (k == 2); in_valid = 1;
        @(negedge clk);
        checks++;
        if (out_valid !== (k == 2)) begin failures++; $display("g=%0d k=%0d valid=%0b", g, k, out_valid); end
      end
      checks++;
      if (int'(y) != s) begin failures++; $display("g=%0d y=%0d exp=%0d", g, y, s); end
      if (g % 3 == 0) begin
        in_valid = 0; din = '1;
        @(negedge clk);
        checks++; if (out_valid) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
