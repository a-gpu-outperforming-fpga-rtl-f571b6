// tb_phase_ctrl: three fake layers that finish a random number of cycles
// after each start.  Checks that a phase ends only when all are done, that
// the phase bit flips once per phase, that image tags move one layer per
// phase, that a late image stalls the swap, that dropping `run` flushes the
// pipeline with bubbles and that out_latch pulses once per image.
module tb_phase_ctrl;
  localparam int NL = 3;
  logic clk = 0, rst_n = 0, run = 0, img_commit = 0, img_ready;
  logic [NL-1:0] done;
  logic start, phase, out_latch;
  logic [NL-1:0] vtag;
  logic [31:0] stall_cycles;
  int cnt [NL];
  int lim [NL];
  int checks = 0, failures = 0;
  int nswap = 0, nout = 0, nbubble = 0;
  logic last_phase;
  always #5 clk = ~clk;
  phase_ctrl #(.NL(NL)) dut (.*);

  // fake layers
  always_ff @(posedge clk) begin
    for (int l = 0; l < NL; l++) begin
      if (start) begin cnt[l] <= 0; lim[l] <= int'($urandom_range(30)) + 5; done[l] <= 1'b0; end
      else if (!done[l]) begin
        if (cnt[l] == lim[l]) done[l] <= 1'b1; else cnt[l] <= cnt[l] + 1;
      end
    end
  end

  // monitor: a swap must only happen when all layers are done
  logic [NL-1:0] prev_vtag;
  always_ff @(posedge clk) begin
    last_phase <= phase;
    prev_vtag  <= vtag;
    if (rst_n && phase != last_phase) begin
      nswap++;
      checks++;
      if (nswap > 1 && !(&done)) begin failures++; $display("swap before all done"); end
      checks++;
      if (vtag[NL-1:1] != prev_vtag[NL-2:0]) begin failures++; $display("tags did not advance"); end
      if (vtag[0] == 1'b0) nbubble++;
    end
    if (rst_n && out_latch) nout++;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    done = '1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run = 1;
    for (int i = 0; i < 6; i++) begin
      while (!img_ready) @(negedge clk);
      repeat ((i == 3) ? 80 : 3) @(negedge clk);   // image 3 arrives late
      img_commit = 1; @(negedge clk); img_commit = 0;
    end
    run = 0;
    repeat (600) @(negedge clk);
    checks++; if (nout != 6) begin failures++; $display("out_latch pulses %0d, expected 6", nout); end
    checks++; if (stall_cycles == 0) begin failures++; $display("no stall seen"); end
    checks++; if (nbubble < NL - 1) begin failures++; $display("bubbles %0d", nbubble); end
    checks++; if (vtag != '0 || dut.state != dut.S_IDLE) begin failures++; $display("not idle after flush"); end
    checks++; if (nswap != 6 + NL) begin failures++; $display("swaps %0d, expected %0d", nswap, 6 + NL); end
    $display("swaps=%0d stalls=%0d bubbles=%0d outputs=%0d", nswap, stall_cycles, nbubble, nout);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
