// tb_bcnn_top: end-to-end test of the whole accelerator at reduced sizes
// (8x8 image, 4/8/16 convolution channels, 16-wide hidden FC layers, 10
// classes), streaming five images.  See bcnn_tb_body.svh for what is checked.
module tb_bcnn_top;
  localparam int IMG = 8, C1 = 4, FCN = 16, NCLS = 10, FCR = 2, NIMG = 5;
  `include "bcnn_tb_body.svh"

  initial begin
    repeat (400000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bcnn_top #(.IMG(IMG), .C1(C1), .FCN(FCN), .NCLS(NCLS), .FCR(FCR)) dut (.*);
endmodule
