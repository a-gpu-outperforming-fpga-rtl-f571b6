// tb_bank_mem: loads random words bank by bank over the 32-bit port, then
// reads every address in random order and compares the whole word, one clock
// after the address.
module tb_bank_mem;
  localparam int WIDTH = 70, DEPTH = 24, AWD = $clog2(DEPTH), NB = (WIDTH + 31) / 32;
  logic clk = 0, ld_en = 0;
  logic [6:0] ld_bank = '0;
  logic [AWD-1:0] ld_addr = '0, rd_addr = '0;
  logic [31:0] ld_data = '0;
  logic [WIDTH-1:0] rd_data;
  logic [NB*32-1:0] ref_mem [DEPTH];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bank_mem #(.WIDTH(WIDTH), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++)
      for (int b = 0; b < NB; b++) begin
        ref_mem[a][b*32 +: 32] = $urandom;
        ld_en = 1; ld_bank = 7'(b); ld_addr = AWD'(a); ld_data = ref_mem[a][b*32 +: 32];
        @(negedge clk);
      end
    // a write to a bank that does not exist must change nothing
    ld_bank = 7'(NB); ld_addr = '0; ld_data = ~ref_mem[0][31:0];
    @(negedge clk);
    ld_en = 0;
    for (int t = 0; t < 200; t++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      rd_addr = AWD'(a);
      @(negedge clk);
      checks++;
      if (rd_data != ref_mem[a][WIDTH-1:0]) begin
        failures++; $display("addr %0d got %h exp %h", a, rd_data, ref_mem[a][WIDTH-1:0]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
