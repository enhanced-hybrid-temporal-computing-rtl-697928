// tb_fir6 -- workload test: 6-tap Gaussian-windowed FIR blur on a generated 8-bit
// image, computed with the two-tile engine in unipolar mode at default sizes.
//
// Each output pixel y[n] = sum_k h[k] * x[n-k] uses one 256-cycle pass: taps 0..3
// go to tile 0 and taps 4..5 (plus two zero operands) to tile 1; the two tile
// counts add up to the filtered pixel in 8-bit pixel units (unipolar MAC value
// times 256). Coefficients h[k] = round(256 * g[k] / sum g), g[k] =
// exp(-(k-2.5)^2 / 2) (sigma 1 sample; the window width is this test's choice).
// The image is 24 x 24 pixels, rows filtered horizontally with zero history at the
// row start. Checks: each tile count equals the bit-level reference, and the
// result is within 6 pixel levels (one per product) of the exact filter; it prints RMSE and PSNR of
// the engine against the exact (real-valued) filter of the quantised coefficients.
module tb_fir6;
  import ehtc_pkg::*;
  import ehtc_ref_pkg::*;
  localparam int unsigned M = M_DEF, NBITS = NBITS_DEF, L = 1 << NBITS;
  localparam int unsigned CW = cnt_w(M, NBITS);
  localparam int W = 24, H = 24, TAPS = 6;
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

  int h [TAPS];
  int img [H][W];

  initial begin
    real g [TAPS];
    real gs, se, exact, rmse, psnr;
    int e0, e1, n;
    start = 0; bipolar = 0; xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
    gs = 0.0;
    for (int k = 0; k < TAPS; k++) begin g[k] = $exp(-((k - 2.5) ** 2) / 2.0); gs += g[k]; end
    for (int k = 0; k < TAPS; k++) h[k] = int'(256.0 * g[k] / gs);
    for (int r = 0; r < H; r++)
      for (int c = 0; c < W; c++)
        img[r][c] = (((r / 6 + c / 6) % 2) ? 200 : 40) + int'($urandom % 40);  // checkerboard + noise
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    se = 0.0; n = 0;
    for (int r = 0; r < H; r++) begin
      for (int c = 0; c < W; c++) begin
        int xv [TAPS];
        for (int k = 0; k < TAPS; k++) xv[k] = (c - k >= 0) ? img[r][c-k] : 0;
        xb0 = '0; yb0 = '0; xb1 = '0; yb1 = '0;
        for (int k = 0; k < 4; k++) begin xb0[k] = NBITS'(xv[k]); yb0[k] = NBITS'(h[k]); end
        for (int k = 4; k < TAPS; k++) begin xb1[k-4] = NBITS'(xv[k]); yb1[k-4] = NBITS'(h[k]); end
        e0 = 0; e1 = 0; exact = 0.0;
        for (int i = 0; i < M; i++) begin
          e0 += ref_prod_ones(xb0[i], yb0[i], 0, NBITS);
          e1 += ref_prod_ones(xb1[i], yb1[i], 0, NBITS);
        end
        for (int k = 0; k < TAPS; k++) exact += real'(xv[k]) * real'(h[k]) / 256.0;
        start = 1;
        @(posedge clk); #1;
        start = 0;
        while (!done) begin @(posedge clk); #1; end
        chk(ones0 == CW'(e0) && ones1 == CW'(e1), "tile counts match reference");
        chk(int'(value_sum) == e0 + e1, "sum of tiles");
        se += (real'(value_sum) - exact) ** 2;
        chk((real'(value_sum) - exact) ** 2 <= 36.0, $sformatf("pixel %0d,%0d got %0d exact %f", r, c, value_sum, exact));
        n++;
      end
    end
    rmse = $sqrt(se / n);
    psnr = 20.0 * $log10(255.0 / (rmse > 1e-9 ? rmse : 1e-9));
    $display("FIR6: %0d pixels, coefficients %0d %0d %0d %0d %0d %0d, RMSE %f levels, PSNR %f dB vs exact filter",
             n, h[0], h[1], h[2], h[3], h[4], h[5], rmse, psnr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
