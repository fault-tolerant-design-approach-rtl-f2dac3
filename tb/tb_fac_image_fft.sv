// tb_fac_image_fft: image-processing workload for the FAC adder.
//
// An 8-bit grayscale test image of SIZE x SIZE pixels is generated (smooth
// gradients, a disc, stripes and pseudo-random texture), transformed with a
// 2-D radix-2 integer FFT and rebuilt with the inverse FFT. Every addition and
// subtraction of both transforms goes through the 32-bit FAC adder (the
// instance under test); multiplications are exact. The same transforms are
// also run with exact integer addition, which stands for a TMR (fully
// accurate) adder.
//
// Fixed-point scaling (this testbench's choice): pixels are scaled by 2^21,
// twiddle factors are Q14, each product is rounded to an integer before it is
// added, and every forward stage halves its outputs (a rounding shift, not a
// datapath addition) so that no value leaves the signed 32-bit range; the
// inverse is unscaled. Subtraction x - y is x + (-y). Any addition whose exact
// result does not fit in 32 signed bits is counted as a failure. The PSNR
// reached depends strongly on PIX_SHIFT: fewer fraction bits make the
// approximate low bits matter more (about 38 dB at PIX_SHIFT = 16, though the
// exact path then loses a few pixels to rounding at this image size).
//
// Checks: the exact path must rebuild the image without a single pixel error
// (PSNR infinite), and the FAC path must reach PSNR > 30 dB, the quality level
// the FAC method is judged acceptable at for images. One addition is applied
// every 2 ns.
`timescale 1ns/1ps
module tb_fac_image_fft;

  localparam int SIZE  = 512;              // image is SIZE x SIZE
  localparam int LOG2S = $clog2(SIZE);
  localparam int PIX_SHIFT = 21;           // pixel scaling
  localparam int TW_FRAC   = 14;           // twiddle fraction bits
  // 6 additions per butterfly, 2 ns each, two 2-D transforms, plus margin
  localparam longint WATCHDOG_NS =
      longint'(6) * (SIZE / 2) * LOG2S * (2 * SIZE) * 2 * 2 + 1000;

  logic [31:0] a, b;
  logic [22:0] v1;
  logic [9:0]  v2;
  logic [32:0] sum;

  fac_adder dut (.a_i(a), .b_i(b), .v1_o(v1), .v2_o(v2), .sum_o(sum));

  int checks = 0;
  int failures = 0;
  longint n_adds = 0;
  longint n_overflow = 0;

  byte unsigned img  [SIZE][SIZE];
  int           re   [SIZE][SIZE];
  int           im   [SIZE][SIZE];
  int           xr   [SIZE];
  int           xi   [SIZE];
  int           twr  [SIZE/2];
  int           twi  [SIZE/2];

  // One 32-bit addition, through the FAC adder or exact.
  task automatic add32(input int x, input int y, input bit fac, output int r);
    longint exact;
    exact = longint'(x) + longint'(y);
    if (exact > longint'(32'sh7fff_ffff) || exact < -longint'(64'h8000_0000)) n_overflow++;
    if (fac) begin
      a = x;
      b = y;
      #1;
      r = int'(sum[31:0]);
      #1;
      n_adds++;
    end else begin
      r = int'(exact);
    end
  endtask

  // Q14 product, exact, then rounded.
  function automatic int qmul(int x, int w);
    return int'((longint'(x) * longint'(w) + (longint'(1) <<< (TW_FRAC - 1))) >>> TW_FRAC);
  endfunction

  function automatic int bitrev(int v);
    int r = 0;
    for (int i = 0; i < LOG2S; i++) r |= ((v >> i) & 1) << (LOG2S - 1 - i);
    return r;
  endfunction

  // In-place radix-2 decimation-in-time FFT of xr/xi.
  task automatic fft1d(input bit inverse, input bit fac);
    int tr [SIZE];
    int ti [SIZE];
    for (int i = 0; i < SIZE; i++) begin
      tr[bitrev(i)] = xr[i];
      ti[bitrev(i)] = xi[i];
    end
    for (int i = 0; i < SIZE; i++) begin
      xr[i] = tr[i];
      xi[i] = ti[i];
    end
    for (int s = 1; s <= LOG2S; s++) begin
      int half = 1 << (s - 1);
      int step = SIZE >> s;
      for (int base = 0; base < SIZE; base += 2 * half) begin
        for (int j = 0; j < half; j++) begin
          int wr, wi, pr, pi, yr0, yi0, yr1, yi1;
          wr = twr[j * step];
          wi = inverse ? -twi[j * step] : twi[j * step];
          // t = w * x[odd]
          add32(qmul(xr[base+j+half], wr), -qmul(xi[base+j+half], wi), fac, pr);
          add32(qmul(xr[base+j+half], wi),  qmul(xi[base+j+half], wr), fac, pi);
          add32(xr[base+j],  pr, fac, yr0);
          add32(xi[base+j],  pi, fac, yi0);
          add32(xr[base+j], -pr, fac, yr1);
          add32(xi[base+j], -pi, fac, yi1);
          if (!inverse) begin
            // halve with rounding (exact shift, not an addition of the datapath)
            yr0 = (yr0 + 1) >>> 1; yi0 = (yi0 + 1) >>> 1;
            yr1 = (yr1 + 1) >>> 1; yi1 = (yi1 + 1) >>> 1;
          end
          xr[base+j] = yr0;       xi[base+j] = yi0;
          xr[base+j+half] = yr1;  xi[base+j+half] = yi1;
        end
      end
    end
  endtask

  task automatic fft2d(input bit inverse, input bit fac);
    for (int r = 0; r < SIZE; r++) begin
      for (int c = 0; c < SIZE; c++) begin xr[c] = re[r][c]; xi[c] = im[r][c]; end
      fft1d(inverse, fac);
      for (int c = 0; c < SIZE; c++) begin re[r][c] = xr[c]; im[r][c] = xi[c]; end
    end
    for (int c = 0; c < SIZE; c++) begin
      for (int r = 0; r < SIZE; r++) begin xr[r] = re[r][c]; xi[r] = im[r][c]; end
      fft1d(inverse, fac);
      for (int r = 0; r < SIZE; r++) begin re[r][c] = xr[r]; im[r][c] = xi[r]; end
    end
  endtask

  // Forward + inverse transform; returns the squared error sum and the
  // number of wrong pixels of the rebuilt image.
  task automatic round_trip(input bit fac, output real sq_err, output int bad_pixels);
    int  pix;
    for (int r = 0; r < SIZE; r++)
      for (int c = 0; c < SIZE; c++) begin
        re[r][c] = int'(img[r][c]) <<< PIX_SHIFT;
        im[r][c] = 0;
      end
    fft2d(1'b0, fac);
    fft2d(1'b1, fac);
    sq_err = 0.0;
    bad_pixels = 0;
    for (int r = 0; r < SIZE; r++)
      for (int c = 0; c < SIZE; c++) begin
        pix = (re[r][c] + (1 <<< (PIX_SHIFT - 1))) >>> PIX_SHIFT;  // round
        if (pix < 0) pix = 0;
        if (pix > 255) pix = 255;
        if (pix != int'(img[r][c])) bad_pixels++;
        sq_err += real'((pix - int'(img[r][c])) * (pix - int'(img[r][c])));
      end
  endtask

  initial begin : watchdog
    #(WATCHDOG_NS * 1ns);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real sq_exact, sq_fac, mse, psnr;
    int  bad_exact, bad_fac;
    real pi_r;
    a = '0;
    b = '0;
    pi_r = 3.14159265358979323846;
    for (int k = 0; k < SIZE / 2; k++) begin
      twr[k] = int'($rtoi($cos(2.0 * pi_r * k / SIZE) * (1 << TW_FRAC) + ($cos(2.0 * pi_r * k / SIZE) >= 0 ? 0.5 : -0.5)));
      twi[k] = -int'($rtoi($sin(2.0 * pi_r * k / SIZE) * (1 << TW_FRAC) + ($sin(2.0 * pi_r * k / SIZE) >= 0 ? 0.5 : -0.5)));
    end
    for (int r = 0; r < SIZE; r++)
      for (int c = 0; c < SIZE; c++) begin
        int v, dr, dc;
        dr = r - SIZE / 3;
        dc = c - SIZE / 2;
        v = 40 + (150 * r) / SIZE + (40 * c) / SIZE;
        if (dr * dr + dc * dc < (SIZE / 5) * (SIZE / 5)) v = 230 - (60 * c) / SIZE;
        if (r > 3 * SIZE / 4 && ((c / 2) % 2 == 0)) v = 20;
        v += int'($urandom_range(15));
        img[r][c] = byte'(v > 255 ? 255 : v);
      end

    round_trip(1'b0, sq_exact, bad_exact);
    checks++;
    if (bad_exact != 0) begin
      failures++;
      $display("FAIL exact-adder round trip has %0d wrong pixels", bad_exact);
    end

    round_trip(1'b1, sq_fac, bad_fac);
    mse = sq_fac / real'(SIZE * SIZE);
    psnr = (mse == 0.0) ? 999.0 : 10.0 * $log10(255.0 * 255.0 / mse);
    $display("image %0dx%0d: FAC additions %0d, wrong pixels %0d, MSE %f, PSNR %f dB",
             SIZE, SIZE, n_adds, bad_fac, mse, psnr);
    checks++;
    if (psnr <= 30.0) begin
      failures++;
      $display("FAIL PSNR %f dB not above 30 dB", psnr);
    end
    checks++;
    if (n_overflow != 0) begin
      failures++;
      $display("FAIL %0d additions left the signed 32-bit range", n_overflow);
    end
    checks++;
    if (bad_fac == 0) begin  // the approximation must have had some effect
      failures++;
      $display("FAIL approximate adder never changed a pixel");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
