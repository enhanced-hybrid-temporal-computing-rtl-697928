// tb_dct8 -- workload test: 8-point DCT followed by 8-point inverse DCT of a
// generated 8-bit image, computed with the two-tile engine in bipolar mode at
// default sizes. Every DCT or IDCT output is one 8-input dot product = one pass:
// inputs 0..3 on tile 0, 4..7 on tile 1, tile results added exactly.
//
// Number formats (this test's choices): a pixel p becomes the signed fraction
// (p-128)/128; DCT-II coefficients C[k][n] = a_k cos((2n+1) k pi / 16), a_0 =
// sqrt(1/8), a_k = 1/2, are quantised to round(128 C). A DCT output X_k =
// value_sum / 256 can reach about 2.9, so it is stored for the inverse pass as the
// 8-bit fraction round(128 X_k / 4) and the IDCT result is multiplied back by 4.
// Image rows are cut into 8-pixel segments (a 1-D transform).
//
// Checks: every tile count equals the bit-level reference; the reconstructed
// image reaches at least 20 dB PSNR against the original. It prints the engine's
// PSNR/RMSE next to those of an exact real-valued round trip with the same
// quantisation, and of the engine's forward DCT followed by an exact inverse.
module tb_dct8;
  import ehtc_pkg::*;
  import ehtc_ref_pkg::*;
  localparam int unsigned M = M_DEF, NBITS = NBITS_DEF, L = 1 << NBITS;
  localparam int unsigned CW = cnt_w(M, NBITS);
  localparam int W = 16, H = 16;
  localparam real PI = 3.14159265358979;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, bipolar, busy, done, gb1, tb1;
  logic [M-1:0][NBITS-1:0] xb0, yb0, xb1, yb1;
  logic [CW-1:0] ones0, ones1;
  logic signed [CW+1:0] value0, value1;
  logic signed [CW+2:0] value_sum;

  ehtc_top dut (.clk, .rst_n, .start, .bipolar, .chain(1'b0), .xb0, .yb0, .xb1, .yb1,
                .busy, .done, .ones0, .ones1, .value0, .value1, .value_sum, .gb1, .tb1);

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int cq [8][8];        // quantised coefficients, cq[k][n]
  int img [H][W];

  function automatic int clamp8(int v);
    return (v > 127) ? 127 : (v < -128) ? -128 : v;
  endfunction

  // One 8-input bipolar dot product a . b (8-bit signed codes) on the engine;
  // returns value_sum (NBITS fractional bits).
  task automatic dot8(input int a [8], input int b [8], output int res);
    int e0, e1;
    xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
    for (int i = 0; i < 4; i++) begin
      xb0[i] = NBITS'(a[i]);     yb0[i] = NBITS'(b[i]);
      xb1[i] = NBITS'(a[i + 4]); yb1[i] = NBITS'(b[i + 4]);
    end
    e0 = 0; e1 = 0;
    for (int i = 0; i < M; i++) begin
      e0 += ref_prod_ones(xb0[i], yb0[i], 1, NBITS);
      e1 += ref_prod_ones(xb1[i], yb1[i], 1, NBITS);
    end
    bipolar = 1;
    start = 1;
    @(posedge clk); #1;
    start = 0;
    while (!done) begin @(posedge clk); #1; end
    chk(ones0 == CW'(e0) && ones1 == CW'(e1), "tile counts match reference");
    chk(int'(value_sum) == 2 * (e0 + e1) - 2 * int'(M * L), "bipolar sum");
    res = int'(value_sum);
  endtask

  initial begin
    real se_hw, se_ref, se_fwd, psnr_hw, psnr_ref, psnr_fwd;
    int n;
    start = 0; bipolar = 1; xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
    for (int k = 0; k < 8; k++)
      for (int i = 0; i < 8; i++)
        cq[k][i] = int'(128.0 * ((k == 0) ? $sqrt(1.0 / 8.0) : 0.5) * $cos((2 * i + 1) * k * PI / 16.0));
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        img[r][c] = 128 + int'(90.0 * $sin(r * 0.35) * $cos(c * 0.25)) + int'($urandom % 16) - 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    se_hw = 0.0; se_ref = 0.0; se_fwd = 0.0; n = 0;
    for (int r = 0; r < H; r++) begin
      for (int s = 0; s < W; s += 8) begin
        int xs [8], xq [8], cr [8], res;
        real xr [8], xqr [8], xhw [8];
        for (int i = 0; i < 8; i++) begin xs[i] = img[r][s + i] - 128; end
        // forward DCT: one pass per coefficient
        for (int k = 0; k < 8; k++) begin
          for (int i = 0; i < 8; i++) cr[i] = cq[k][i];
          dot8(xs, cr, res);
          xhw[k] = real'(res) / 256.0;
          xq[k] = clamp8(int'(real'(res) / 256.0 * 128.0 / 4.0));
          xr[k] = 0.0;
          for (int i = 0; i < 8; i++) xr[k] += real'(cq[k][i]) * real'(xs[i]) / (128.0 * 128.0);
          xqr[k] = real'(clamp8(int'(xr[k] * 128.0 / 4.0)));
        end
        // inverse DCT: one pass per pixel
        for (int i = 0; i < 8; i++) begin
          real pix_hw, pix_ref, pix_fwd;
          for (int k = 0; k < 8; k++) cr[k] = cq[k][i];
          dot8(xq, cr, res);
          pix_hw = real'(res) / 256.0 * 4.0 * 128.0 + 128.0;
          pix_ref = 0.0;
          for (int k = 0; k < 8; k++) pix_ref += real'(cq[k][i]) / 128.0 * xqr[k] / 128.0;
          pix_ref = pix_ref * 4.0 * 128.0 + 128.0;
          // exact inverse (orthonormal DCT-II) of the engine's forward outputs
          pix_fwd = 0.0;
          for (int k = 0; k < 8; k++)
            pix_fwd += ((k == 0) ? $sqrt(1.0 / 8.0) : 0.5) * $cos((2 * i + 1) * k * PI / 16.0) * xhw[k];
          pix_fwd = pix_fwd * 128.0 + 128.0;
          se_fwd += (pix_fwd - real'(img[r][s + i])) ** 2;
          se_hw  += (pix_hw - real'(img[r][s + i])) ** 2;
          se_ref += (pix_ref - real'(img[r][s + i])) ** 2;
          n++;
        end
      end
    end
    psnr_hw  = 20.0 * $log10(255.0 / $sqrt(se_hw / n));
    psnr_ref = 20.0 * $log10(255.0 / $sqrt(se_ref / n));
    psnr_fwd = 20.0 * $log10(255.0 / $sqrt(se_fwd / n));
    $display("DCT8/IDCT8: %0d pixels, engine RMSE %f PSNR %f dB; exact arithmetic RMSE %f PSNR %f dB",
             n, $sqrt(se_hw / n), psnr_hw, $sqrt(se_ref / n), psnr_ref);
    $display("DCT8 on the engine, exact inverse: RMSE %f PSNR %f dB", $sqrt(se_fwd / n), psnr_fwd);
    chk(psnr_hw > 20.0, "reconstruction PSNR above 20 dB");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
