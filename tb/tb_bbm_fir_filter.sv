// End-to-end testbench of bbm_fir_filter at its default parameters
// (30 taps, WL = 16, VBL = 13, Type0).
//
// Loads random coefficients, resets, and streams 3000 random samples with
// random idle cycles (in_valid low) in between. A software delay line and the
// integer reference multiplier predict every output; each output is checked,
// together with its timing: out_valid must rise on exactly the edge that
// accepts a sample and stay low otherwise. Mechanisms that must occur at least
// once, counted and reported:
//   idle    cycles with in_valid low (the delay line must hold)
//   approx  outputs that differ from the exact FIR sum (breaking at work)
//   full    outputs computed with the whole delay line filled with samples
// A second reset in the middle of the stream must clear the delay line.
// Watchdog after 50000 cycles.
module tb_bbm_fir_filter;
  import bbm_pkg::*;
  import bbm_ref_pkg::*;

  localparam int TAPS = 30;
  localparam int WL   = 16;
  localparam int VBL  = 13;
  localparam int OW   = 2 * WL + $clog2(TAPS);
  localparam int NSAMP = 3000;

  logic                 clk = 1'b0;
  logic                 rst_n;
  logic                 in_valid;
  logic signed [WL-1:0] x_in;
  logic signed [WL-1:0] coef [TAPS];
  logic                 out_valid;
  logic signed [OW-1:0] y_out;

  bbm_fir_filter dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_idle = 0, n_approx = 0, n_full = 0, n_resets = 0;
  longint hist [TAPS];
  int filled = 0;

  task automatic fail(input string msg);
    failures++;
    if (failures <= 10) $display("FAIL %s", msg);
  endtask

  task automatic clear_hist();
    for (int k = 0; k < TAPS; k++) hist[k] = 0;
    filled = 0;
  endtask

  initial begin
    longint yexp, yexact;
    for (int k = 0; k < TAPS; k++) coef[k] = WL'($urandom);
    coef[0] = -16'sd32768;  // extreme corner values
    coef[1] = 16'sd32767;
    clear_hist();
    rst_n = 1'b0;
    in_valid = 1'b0;
    x_in = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int i = 0; i < NSAMP; i++) begin
      // Reset in the middle of the stream.
      if (i == NSAMP / 2) begin
        #1 rst_n = 1'b0;
        #1;
        checks++;
        if (out_valid !== 1'b0 || y_out !== '0) fail("reset did not clear the output");
        @(posedge clk);
        #1 rst_n = 1'b1;
        clear_hist();
        n_resets++;
      end
      // Random idle cycles.
      while ($urandom_range(3, 0) == 0) begin
        @(negedge clk);
        in_valid = 1'b0;
        x_in = WL'($urandom);
        @(posedge clk);
        #1;
        n_idle++;
        checks++;
        if (out_valid !== 1'b0) fail("out_valid high after an idle cycle");
      end
      @(negedge clk);
      in_valid = 1'b1;
      x_in = (i % 97 == 5) ? -16'sd32768 : WL'($urandom);
      for (int k = TAPS - 1; k > 0; k--) hist[k] = hist[k-1];
      hist[0] = x_in;
      if (filled < TAPS) filled++;
      yexp = 0;
      yexact = 0;
      for (int k = 0; k < TAPS; k++) begin
        yexp   += ref_mult(hist[k], coef[k], WL, VBL, 0);
        yexact += hist[k] * longint'(coef[k]);
      end
      @(posedge clk);
      #1;
      checks++;
      if (out_valid !== 1'b1) fail($sformatf("sample %0d: out_valid not set one edge after the sample", i));
      checks++;
      if (longint'(y_out) != yexp)
        fail($sformatf("sample %0d: y=%0d expected %0d", i, y_out, yexp));
      if (yexp != yexact) n_approx++;
      if (filled == TAPS) n_full++;
      @(negedge clk);
      in_valid = 1'b0;
    end
    @(posedge clk);
    #1;
    checks++;
    if (out_valid !== 1'b0) fail("out_valid high with no sample");
    $display("mechanisms: idle=%0d approx=%0d full=%0d resets=%0d", n_idle, n_approx, n_full, n_resets);
    checks += 4;
    if (n_idle == 0)   fail("no idle cycle happened");
    if (n_approx == 0) fail("breaking never changed an output");
    if (n_full == 0)   fail("delay line never filled");
    if (n_resets == 0) fail("no reset during the stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
