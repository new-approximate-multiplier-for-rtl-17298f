// Filter testbed: output SNR of the Broken-Booth FIR filter.
//
// Rebuilds the evaluation set-up of the filter in simulation. The filter input
// is x[n] = d1[n] + d2[n] + d3[n] + eta[n]:
//   d1  desired signal, band 0 .. 0.25*pi (pass band)
//   d2  interferer, band 0.35*pi .. 0.60*pi (transition band)
//   d3  interferer, band 0.70*pi .. 0.95*pi (stop band)
//   eta white Gaussian noise, variance 1e-3 of the d1 power (-30 dB)
// Each d_i is a sum of NTONE cosines evenly spread over its band with random
// phases; d2 and d3 get 1.111 times the d1 power, which makes the input SNR
// 10*log10(var(d1)/var(d1-x)) come out near -3.47 dB.
// The filter is a 30-tap Hamming-windowed-sinc low pass (cut-off 0.3*pi), a
// stand-in for the Parks-McClellan design, whose coefficients are not
// published. Coefficients and samples are rounded to WL-bit fractions; the
// input is scaled to just below full scale.
// Output SNR = 10*log10(var(d1) / mean((d1 - y)^2)), d1 taken at the filter's
// group delay of 14.5 samples, after the first 64 outputs.
// Instances: WL/VBL = 16/0, 16/13 (the chosen operating point), 14/0, and
// 16/16, 16/19, 16/22 to show the trend with growing VBL. Checks:
//   * every output of the accurate WL = 16 filter equals the exact integer sum
//   * the input SNR is near -3.47 dB and the filter gains over 20 dB
//   * WL = 16 accurate is within 0.3 dB of double precision
//   * VBL = 13 costs at most 1 dB against the accurate WL = 16 filter
//   * SNR does not rise as VBL grows, and VBL = 22 is clearly worse
// Watchdog after 20000 cycles.
module tb_fir_snr;
  import bbm_pkg::*;

  localparam int TAPS  = 30;
  localparam int NS    = 4096;
  localparam int SKIP  = 64;
  localparam int NTONE = 24;
  localparam int NC    = 6;
  localparam int CWL [NC] = '{16, 16, 14, 16, 16, 16};
  localparam int CVBL[NC] = '{0, 13, 0, 16, 19, 22};
  localparam real PI = 3.14159265358979323846;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid;
  always #5 clk = ~clk;

  // One filter per case; inputs and outputs of each stored as integers.
  longint xq    [NC];
  longint cq    [NC][TAPS];
  longint yq    [NC];
  logic   ovld  [NC];

  for (genvar c = 0; c < NC; c++) begin : g_case
    localparam int W  = CWL[c];
    localparam int OW = 2 * W + $clog2(TAPS);
    logic signed [W-1:0]  x_in;
    logic signed [W-1:0]  coef [TAPS];
    logic signed [OW-1:0] y_out;
    always_comb begin
      x_in = W'(xq[c]);
      for (int k = 0; k < TAPS; k++) coef[k] = W'(cq[c][k]);
      yq[c] = longint'(y_out);
    end
    bbm_fir_filter #(.TAPS(TAPS), .WL(W), .VBL(CVBL[c]), .BBM_TYPE(BBM_TYPE0)) u_fir (
      .clk, .rst_n, .in_valid, .x_in, .coef, .out_valid(ovld[c]), .y_out
    );
  end

  int checks = 0, failures = 0;

  task automatic expect_true(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end else begin
      $display("ok   %s", msg);
    end
  endtask

  real h [TAPS];
  real w1 [NTONE], w2 [NTONE], w3 [NTONE], f1 [NTONE], f2 [NTONE], f3 [NTONE];
  real x [NS];
  real a1, a23, sigma;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom_range(32'hFFFF_FFFE, 0)) + 1.0) / 4294967296.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(2.0 * PI * u2);
  endfunction

  function automatic real tones(input real n, input real w [NTONE], input real f [NTONE], input real a);
    real s = 0.0;
    for (int m = 0; m < NTONE; m++) s += $cos(w[m] * n + f[m]);
    return a * s;
  endfunction

  function automatic real db(input real v);
    return 10.0 * $log10(v);
  endfunction

  initial begin
    real t, nn, y;
    real hsum, xmax, scale, d1, e2in, p1, snr_in, snr_dbl, e2dbl, yd;
    real e2 [NC];
    real snr [NC];
    longint exact;
    int bad_exact;

    // Hamming-windowed sinc, cut-off 0.3*pi, normalised to unit DC gain.
    hsum = 0.0;
    for (int k = 0; k < TAPS; k++) begin
      t = real'(k) - real'(TAPS - 1) / 2.0;
      h[k] = 0.3 * ((t == 0.0) ? 1.0 : $sin(0.3 * PI * t) / (0.3 * PI * t))
             * (0.54 - 0.46 * $cos(2.0 * PI * real'(k) / real'(TAPS - 1)));
      hsum += h[k];
    end
    for (int k = 0; k < TAPS; k++) h[k] = h[k] / hsum;

    // Tone frequencies and random phases; d1 has unit power.
    for (int m = 0; m < NTONE; m++) begin
      w1[m] = PI * (0.01 + 0.24 * real'(m) / real'(NTONE - 1));
      w2[m] = PI * (0.35 + 0.25 * real'(m) / real'(NTONE - 1));
      w3[m] = PI * (0.70 + 0.25 * real'(m) / real'(NTONE - 1));
      f1[m] = 2.0 * PI * real'($urandom) / 4294967296.0;
      f2[m] = 2.0 * PI * real'($urandom) / 4294967296.0;
      f3[m] = 2.0 * PI * real'($urandom) / 4294967296.0;
    end
    a1    = $sqrt(2.0 / real'(NTONE));
    a23   = a1 * $sqrt(1.111);
    sigma = $sqrt(1.0e-3);

    xmax = 0.0;
    p1 = 0.0;
    e2in = 0.0;
    for (int n = 0; n < NS; n++) begin
      nn = real'(n);
      d1 = tones(nn, w1, f1, a1);
      x[n] = d1 + tones(nn, w2, f2, a23) + tones(nn, w3, f3, a23) + sigma * gauss();
      if (x[n] > xmax) xmax = x[n];
      if (-x[n] > xmax) xmax = -x[n];
      p1 += d1 * d1;
      e2in += (d1 - x[n]) * (d1 - x[n]);
    end
    snr_in = db(p1 / e2in);
    scale = 0.999 / xmax;

    for (int c = 0; c < NC; c++) begin
      for (int k = 0; k < TAPS; k++) cq[c][k] = longint'(h[k] * real'(longint'(1) << (CWL[c] - 1)));
      xq[c] = 0;
      e2[c] = 0.0;
    end

    rst_n = 1'b0;
    in_valid = 1'b0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;

    p1 = 0.0;
    e2dbl = 0.0;
    bad_exact = 0;
    for (int n = 0; n < NS; n++) begin
      @(negedge clk);
      in_valid = 1'b1;
      for (int c = 0; c < NC; c++) xq[c] = longint'(x[n] * scale * real'(longint'(1) << (CWL[c] - 1)));
      @(posedge clk);
      #1;
      if (n >= SKIP) begin
        // Double-precision filter output and the exact integer sum of case 0.
        yd = 0.0;
        exact = 0;
        for (int k = 0; k < TAPS; k++) begin
          yd += h[k] * x[n - k];
          exact += cq[0][k] * longint'(x[n - k] * scale * real'(longint'(1) << 15));
        end
        if (yq[0] != exact || !ovld[0]) bad_exact++;
        d1 = tones(real'(n) - real'(TAPS - 1) / 2.0, w1, f1, a1);
        p1 += d1 * d1;
        e2dbl += (d1 - yd) * (d1 - yd);
        for (int c = 0; c < NC; c++) begin
          y = real'(yq[c]) / (scale * real'(longint'(1) << (2 * (CWL[c] - 1))));
          e2[c] += (d1 - y) * (d1 - y);
        end
      end
    end
    in_valid = 1'b0;
    #1;

    snr_dbl = db(p1 / e2dbl);
    for (int c = 0; c < NC; c++) snr[c] = db(p1 / e2[c]);
    $display("input SNR %.2f dB, output SNR double precision %.2f dB", snr_in, snr_dbl);
    for (int c = 0; c < NC; c++)
      $display("WL=%0d VBL=%0d output SNR %.2f dB", CWL[c], CVBL[c], snr[c]);

    expect_true(bad_exact == 0, $sformatf("accurate WL=16 outputs equal the exact sum (%0d wrong)", bad_exact));
    expect_true(snr_in > -3.8 && snr_in < -3.1, "input SNR near -3.47 dB");
    expect_true(snr_dbl - snr_in > 20.0, "filter gains over 20 dB of SNR");
    expect_true(snr[0] > snr_dbl - 0.3 && snr[0] < snr_dbl + 0.3, "WL=16 accurate within 0.3 dB of double precision");
    expect_true(snr[1] > snr[0] - 1.0 && snr[1] < snr[0] + 0.05, "VBL=13 within 1 dB below accurate WL=16");
    expect_true(snr[2] < snr[0] + 0.05, "WL=14 no better than WL=16");
    expect_true(snr[3] < snr[1] + 0.05 && snr[4] < snr[3] + 0.05 && snr[5] < snr[4] + 0.05,
                "output SNR does not rise with VBL");
    expect_true(snr[5] < snr[0] - 1.0, "VBL=22 at least 1 dB worse than accurate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
