// tb_bcnn_top_full: the accelerator at its default sizes (32x32 RGB image,
// 128/256/512-channel convolutions, 1024-wide hidden FC layers, 10 classes).
// Loads all weights and thresholds, streams two images and checks both score
// vectors against the reference model.  See bcnn_tb_body.svh.
module tb_bcnn_top_full;
  localparam int IMG = 32, C1 = 128, FCN = 1024, NCLS = 10, FCR = 8, NIMG = 2;
  `include "bcnn_tb_body.svh"

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bcnn_top dut (.*);
endmodule
