// bcnn_tb_body.svh: shared body of the end-to-end testbenches of bcnn_top.
//
// The including module defines IMG, C1, FCN, NCLS, FCR (the top's sizes) and
// NIMG (images to stream), then instantiates bcnn_top as `dut` on the signals
// declared here.  The body loads random weights and thresholds through the
// load port, streams NIMG random images (the second one deliberately late, so
// that a phase has to wait for it), then drops `run` to flush the pipeline.
// A reference model recomputes all nine layers from their definitions and
// every reported score vector is compared with it, in order.  Counted
// mechanisms: bank swaps, stall cycles, bubble phases, max-pooling outputs of
// the three pooling layers, padded border pixels; each must occur.  The
// shortest phase is compared with the slowest layer's step count.

import bcnn_pkg::*;

localparam int S1 = IMG, S2 = IMG / 2, S3 = IMG / 4, S4 = IMG / 8;
localparam int D1 = C1, D2 = 2 * C1, D3 = 4 * C1;
localparam int FC1_R = S4, FC1_UF = S4 * D3, FCD = FCN / FCR;
logic clk = 0, rst_n = 0, run = 0;
ld_req_t ld;
logic img_ready, img_wr_en = 0, img_commit = 0, out_valid;
logic [$clog2(IMG)-1:0] img_wr_row = '0, img_wr_col = '0;
logic [IMG_C*AW-1:0] img_wr_pix = '0;
logic [NCLS*YW-1:0] scores;
logic [31:0] stall_cycles;

int checks = 0, failures = 0;
always #5 clk = ~clk;

// ---------------- layer geometry ----------------
function automatic int wwidth(int l);
  case (l)
    0: return 27 * WW;
    1: return 3 * D1;  2: return 3 * D1;
    3: return 3 * D2;  4: return 3 * D2;
    5: return 3 * D3;
    6: return FC1_UF;
    default: return FCD;
  endcase
endfunction
function automatic int wdepth(int l);
  case (l)
    0: return D1;
    1: return 3 * D1;  2: return 3 * D2;
    3: return 3 * D2;  4: return 3 * D3;
    5: return 3 * D3;
    6: return FCN * FC1_R;
    7: return FCN * FCR;
    default: return NCLS * FCR;
  endcase
endfunction
function automatic int tdepth(int l);
  case (l)
    0: return D1; 1: return D1; 2: return D2; 3: return D2;
    4: return D3; 5: return D3; 6: return FCN; 7: return FCN;
    default: return NCLS;
  endcase
endfunction
// number of bits summed for one output (binary layers)
function automatic int cnum(int l);
  case (l)
    1: return 9 * D1;  2: return 9 * D1;
    3: return 9 * D2;  4: return 9 * D2;
    5: return 9 * D3;
    6: return FC1_R * FC1_UF;
    default: return FCR * FCD;
  endcase
endfunction

// Weights are kept as flat bit arrays: bit i of word a of layer l is
// wbits[l][a*wwidth(l) + i].  Feature maps are flat too: pixel (y, x),
// channel d of a W-wide, D-deep map is bit (y*W + x)*D + d, which is also
// bit i of row r of a fully-connected input at r*UF + i.
bit   wbits [NLAYER][];
int   tmem  [NLAYER][];
int   img   [NIMG][IMG][IMG][IMG_C];
int   exp_sc [NIMG][NCLS];

function automatic bit wb(int l, int a, int i);
  return wbits[l][a * wwidth(l) + i];
endfunction

task automatic ref_conv1(input int im, ref bit fo[]);
  fo = new[S1 * S1 * D1];
  for (int n = 0; n < D1; n++)
    for (int y = 0; y < S1; y++)
      for (int x = 0; x < S1; x++) begin
        int s;
        s = 0;
        for (int fh = 0; fh < 3; fh++)
          for (int fw = 0; fw < 3; fw++)
            for (int c = 0; c < IMG_C; c++) begin
              int r, q, k, wv;
              r = y + fh - 1; q = x + fw - 1; k = fh * 9 + fw * 3 + c;
              wv = 2 * int'(wb(0, n, 2*k + 1)) * -1 + int'(wb(0, n, 2*k));
              if (r >= 0 && r < S1 && q >= 0 && q < S1) s += img[im][r][q][c] * wv;
            end
        fo[(y * S1 + x) * D1 + n] = (s >= tmem[0][n]);
      end
endtask

task automatic ref_bconv(input int l, input int W, input int D, input int DEP, input bit pool,
                         ref bit fi[], ref bit fo[]);
  int sum [][];
  int OW;
  OW = pool ? W / 2 : W;
  sum = new[W];
  foreach (sum[y]) sum[y] = new[W];
  fo = new[OW * OW * DEP];
  for (int n = 0; n < DEP; n++) begin
    for (int y = 0; y < W; y++)
      for (int x = 0; x < W; x++) begin
        int s;
        s = 0;
        for (int fh = 0; fh < 3; fh++)
          for (int fw = 0; fw < 3; fw++) begin
            int r, q, base, wbase;
            r = y + fh - 1; q = x + fw - 1;
            base = (r * W + q) * D;
            wbase = (n * 3 + fh) * wwidth(l) + fw * D;
            for (int d = 0; d < D; d++) begin
              bit a;
              a = (r < 0 || r >= W || q < 0 || q >= W) ? 1'b0 : fi[base + d];
              s += int'(a == wbits[l][wbase + d]);
            end
          end
        sum[y][x] = s;
      end
    for (int y = 0; y < OW; y++)
      for (int x = 0; x < OW; x++) begin
        int mx;
        if (pool) begin
          mx = sum[2*y][2*x];
          if (sum[2*y][2*x+1] > mx)   mx = sum[2*y][2*x+1];
          if (sum[2*y+1][2*x] > mx)   mx = sum[2*y+1][2*x];
          if (sum[2*y+1][2*x+1] > mx) mx = sum[2*y+1][2*x+1];
        end else mx = sum[y][x];
        fo[(y * OW + x) * DEP + n] = (mx >= tmem[l][n]);
      end
  end
endtask

task automatic ref_fc(input int l, input int R, input int UF, input int NOUT, input int im,
                      ref bit fi[], ref bit fo[]);
  fo = new[NOUT];
  for (int n = 0; n < NOUT; n++) begin
    int s;
    s = 0;
    for (int i = 0; i < R * UF; i++) s += int'(fi[i] == wbits[l][n * R * UF + i]);
    if (l == NLAYER - 1) exp_sc[im][n] = int'(YW'(s - tmem[l][n]));
    else fo[n] = (s >= tmem[l][n]);
  end
endtask

task automatic ref_image(input int im);
  bit f1[], f2[], f3[], f4[], f5[], f6[], f7[], f8[], f9[];
  ref_conv1(im, f1);
  ref_bconv(1, S1, D1, D1, 1'b1, f1, f2);
  ref_bconv(2, S2, D1, D2, 1'b0, f2, f3);
  ref_bconv(3, S2, D2, D2, 1'b1, f3, f4);
  ref_bconv(4, S3, D2, D3, 1'b0, f4, f5);
  ref_bconv(5, S3, D3, D3, 1'b1, f5, f6);
  ref_fc(6, FC1_R, FC1_UF, FCN, im, f6, f7);
  ref_fc(7, FCR, FCD, FCN, im, f7, f8);
  ref_fc(8, FCR, FCD, NCLS, im, f8, f9);
endtask

// ---------------- mechanism counters ----------------
int n_swap = 0, n_bubble = 0, n_pool = 0, n_out = 0, min_phase = 1 << 30, phase_len = 0;
logic last_phase = 1'b0;
always @(posedge clk) begin
  if (rst_n) begin
    last_phase <= dut.phase;
    if (dut.phase != last_phase) begin
      n_swap++;
      if (!dut.vtag[0] && |dut.vtag) n_bubble++;
    end
    if (dut.u_l2.g_pool.u_mp.out_valid || dut.u_l4.g_pool.u_mp.out_valid ||
        dut.u_l6.g_pool.u_mp.out_valid) n_pool++;
    if (dut.start) begin
      if (phase_len > 0 && dut.u_ctrl.stall_cycles == stall_cycles_at_start && phase_len < min_phase)
        min_phase = phase_len;
      phase_len = 1;
      stall_cycles_at_start = dut.u_ctrl.stall_cycles;
    end else if (phase_len > 0) phase_len++;
  end
end
logic [31:0] stall_cycles_at_start = '0;

// ---------------- checker ----------------
always @(posedge clk) begin
  if (rst_n && out_valid) begin
    if (n_out < NIMG) begin
      for (int k = 0; k < NCLS; k++) begin
        checks++;
        if (int'($signed(scores[k*YW +: YW])) != exp_sc[n_out][k]) begin
          failures++;
          if (failures < 10) $display("image %0d class %0d: score %0d, expected %0d",
                                      n_out, k, $signed(scores[k*YW +: YW]), exp_sc[n_out][k]);
        end
      end
    end else begin
      failures++; $display("unexpected extra output");
    end
    n_out++;
  end
end

// ---------------- stimulus ----------------
task automatic load_all();
  ld = '0;
  for (int l = 0; l < NLAYER; l++) begin
    int nb, ww;
    ww = wwidth(l);
    nb = (ww + 31) / 32;
    wbits[l] = new[wdepth(l) * ww];
    tmem[l]  = new[tdepth(l)];
    for (int a = 0; a < wdepth(l); a++)
      for (int b = 0; b < nb; b++) begin
        logic [31:0] chunk;
        chunk = $urandom;
        for (int i = 0; i < 32; i++) begin
          if (b * 32 + i < ww) wbits[l][a * ww + b * 32 + i] = chunk[i];
          else chunk[i] = 1'b0;
        end
        ld.en = 1'b1; ld.layer = 4'(l); ld.thr = 1'b0; ld.bank = LD_BANK_W'(b);
        ld.addr = LD_ADDR_W'(a); ld.data = chunk;
        @(negedge clk);
      end
    for (int a = 0; a < tdepth(l); a++) begin
      if (l == 0) tmem[l][a] = int'($urandom_range(40)) - 20;
      else        tmem[l][a] = cnum(l) / 2 + int'($urandom_range(6)) - 3;
      ld.en = 1'b1; ld.layer = 4'(l); ld.thr = 1'b1; ld.bank = '0;
      ld.addr = LD_ADDR_W'(a); ld.data = LDW'(tmem[l][a]);
      @(negedge clk);
    end
  end
  ld = '0;
endtask

task automatic send_image(input int im);
  for (int y = 0; y < IMG; y++)
    for (int x = 0; x < IMG; x++)
      for (int c = 0; c < IMG_C; c++) img[im][y][x][c] = int'($urandom_range(62)) - 31;
  while (!img_ready) @(negedge clk);
  for (int y = 0; y < IMG; y++)
    for (int x = 0; x < IMG; x++) begin
      img_wr_en = 1'b1; img_wr_row = $clog2(IMG)'(y); img_wr_col = $clog2(IMG)'(x);
      for (int c = 0; c < IMG_C; c++) img_wr_pix[c*AW +: AW] = AW'(img[im][y][x][c]);
      @(negedge clk);
    end
  img_wr_en = 1'b0;
  img_commit = 1'b1; @(negedge clk); img_commit = 1'b0;
endtask

function automatic int max_steps();
  int m;
  m = D1 * S1;
  if (D1 * S1 * 3 > m) m = D1 * S1 * 3;
  if (D2 * S2 * 3 > m) m = D2 * S2 * 3;
  if (D3 * S3 * 3 > m) m = D3 * S3 * 3;
  if (FCN * FC1_R > m) m = FCN * FC1_R;
  if (FCN * FCR > m)   m = FCN * FCR;
  return m;
endfunction

initial begin
  int t_load;
  ld = '0;
  repeat (3) @(negedge clk);
  rst_n = 1;
  t_load = 0;
  load_all();
  $display("weights and thresholds loaded");
  run = 1'b1;
  for (int i = 0; i < NIMG; i++) begin
    if (i == 1) repeat (max_steps() + 50) @(negedge clk);   // late image: forces a stall
    send_image(i);
  end
  run = 1'b0;
  for (int i = 0; i < NIMG; i++) ref_image(i);
  $display("reference model done");
  while (n_out < NIMG) @(negedge clk);
  repeat (20) @(negedge clk);
  checks++; if (n_out != NIMG) failures++;
  checks++; if (n_swap < NIMG + NLAYER) begin failures++; $display("swaps %0d", n_swap); end
  checks++; if (stall_cycles == 0) begin failures++; $display("no stall happened"); end
  checks++; if (n_bubble == 0) begin failures++; $display("no bubble phase happened"); end
  checks++; if (n_pool == 0) begin failures++; $display("no pooling happened"); end
  checks++;
  if (min_phase < max_steps() || min_phase > max_steps() + 12) begin
    failures++; $display("phase length %0d, slowest layer %0d steps", min_phase, max_steps());
  end
  $display("swaps=%0d stall_cycles=%0d bubbles=%0d pooled_rows=%0d outputs=%0d phase=%0d cycles (slowest layer %0d steps)",
           n_swap, stall_cycles, n_bubble, n_pool, n_out, min_phase, max_steps());
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
