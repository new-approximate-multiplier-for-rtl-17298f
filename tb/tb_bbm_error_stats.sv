// Error statistics of the Broken-Booth multiplier, Type0, WL = 12.
//
// Applies all 2^24 operand pairs to four WL = 12 Type0 multipliers with
// VBL = 3, 6, 9 and 12, and accumulates for each the error
// (approximate minus exact product): its mean, mean square (MSE), the fraction
// of non-zero errors and the most negative error. These are compared with the
// published error table for this configuration, to the three significant digits
// it prints (mean, MSE, minimum) and four decimals (probability):
//   VBL  mean      MSE       P(error != 0)  min error
//    3   -3.50     2.22e1    0.6875         -1.10e1
//    6   -6.15e1   5.05e3    0.9375         -1.71e2
//    9   -7.89e2   7.52e5    0.9893         -2.22e3
//   12   -8.53e3   8.33e7    0.9983         -2.32e4
// The smallest MSE quoted for the multiplier, 0.25, is checked on all 256
// operand pairs of a WL = 4, VBL = 1 multiplier (only bit 0 of row 0 is
// broken, so the error is -1 with probability 1/4).
// The error histogram published for WL = 10, VBL = 9 spans -4e-3 .. 0 of 2^19
// on its axis, peaking near -1.5e-3: all 2^20 operand pairs are applied and the
// mean and minimum error, scaled to 2^19, are checked against that range.
// Watchdog after 2^25 time units.
module tb_bbm_error_stats;
  import bbm_pkg::*;

  localparam int WL = 12;
  localparam int NV = 4;
  localparam int VBLS [NV] = '{3, 6, 9, 12};
  localparam real EXP_MEAN [NV] = '{-3.50, -61.5, -789.0, -8530.0};
  localparam real EXP_MSE  [NV] = '{22.2, 5050.0, 752000.0, 83300000.0};
  localparam real EXP_PROB [NV] = '{0.6875, 0.9375, 0.9893, 0.9983};
  localparam real EXP_MIN  [NV] = '{-11.0, -171.0, -2220.0, -23200.0};

  logic signed [WL-1:0]   x, y;
  logic signed [2*WL-1:0] p [NV];
  logic signed [9:0]      x10, y10;
  logic signed [19:0]     p10;
  logic signed [3:0]      x4, y4;
  logic signed [7:0]      p4;
  int checks = 0, failures = 0;

  broken_booth_mult #(.WL(10), .VBL(9), .BBM_TYPE(BBM_TYPE0)) u_wl10 (.x(x10), .y(y10), .p(p10));
  broken_booth_mult #(.WL(4), .VBL(1), .BBM_TYPE(BBM_TYPE0)) u_wl4 (.x(x4), .y(y4), .p(p4));

  for (genvar v = 0; v < NV; v++) begin : g_dut
    broken_booth_mult #(.WL(WL), .VBL(VBLS[v]), .BBM_TYPE(BBM_TYPE0)) u_dut (.x, .y, .p(p[v]));
  end

  // True when got rounds to exp at the given relative tolerance.
  task automatic check_close(input string what, input int v, input real got,
                             input real exp, input real tol);
    real rel;
    checks++;
    rel = (got - exp) / exp;
    if (rel < 0.0) rel = -rel;
    if (rel > tol) begin
      failures++;
      $display("FAIL VBL=%0d %s = %g, table gives %g", VBLS[v], what, got, exp);
    end else begin
      $display("ok   VBL=%0d %s = %g (table %g)", VBLS[v], what, got, exp);
    end
  endtask

  initial begin
    longint sum [NV], nz [NV], emin [NV];
    real    sq  [NV];
    longint e;
    real    n, sq4, mean10, min10;
    longint sum10, emin10;
    for (int v = 0; v < NV; v++) begin
      sum[v] = 0; nz[v] = 0; emin[v] = 0; sq[v] = 0.0;
    end
    for (int a = 0; a < (1 << WL); a++) begin
      for (int b = 0; b < (1 << WL); b++) begin
        x = WL'(a);
        y = WL'(b);
        #1;
        for (int v = 0; v < NV; v++) begin
          e = longint'(p[v]) - longint'(x) * longint'(y);
          sum[v] += e;
          sq[v]  += real'(e) * real'(e);
          if (e != 0) nz[v]++;
          if (e < emin[v]) emin[v] = e;
        end
      end
    end
    #1;
    n = real'(longint'(1) << (2 * WL));
    sq4 = 0.0;
    for (int a = -8; a < 8; a++) begin
      for (int b = -8; b < 8; b++) begin
        x4 = 4'(a);
        y4 = 4'(b);
        #1;
        e = longint'(p4) - longint'(a * b);
        sq4 += real'(e) * real'(e);
      end
    end
    #1;
    checks++;
    if (sq4 / 256.0 != 0.25) begin
      failures++;
      $display("FAIL WL=4 VBL=1 MSE = %g, expected 0.25", sq4 / 256.0);
    end else begin
      $display("ok   WL=4 VBL=1 MSE = 0.25");
    end
    sum10 = 0;
    emin10 = 0;
    for (int a = 0; a < 1024; a++) begin
      for (int b = 0; b < 1024; b++) begin
        x10 = 10'(a);
        y10 = 10'(b);
        #1;
        e = longint'(p10) - longint'(x10) * longint'(y10);
        sum10 += e;
        if (e < emin10) emin10 = e;
      end
    end
    #1;
    mean10 = real'(sum10) / 1048576.0 / 524288.0;
    min10  = real'(emin10) / 524288.0;
    checks++;
    if (mean10 < -2.0e-3 || mean10 > -1.0e-3) begin
      failures++;
      $display("FAIL WL=10 VBL=9 mean error / 2^19 = %g, outside -2e-3 .. -1e-3", mean10);
    end else begin
      $display("ok   WL=10 VBL=9 mean error / 2^19 = %g", mean10);
    end
    checks++;
    if (min10 < -4.5e-3 || min10 > -3.5e-3) begin
      failures++;
      $display("FAIL WL=10 VBL=9 minimum error / 2^19 = %g, outside -4.5e-3 .. -3.5e-3", min10);
    end else begin
      $display("ok   WL=10 VBL=9 minimum error / 2^19 = %g", min10);
    end
    for (int v = 0; v < NV; v++) begin
      check_close("error mean", v, real'(sum[v]) / n, EXP_MEAN[v], 0.006);
      check_close("MSE", v, sq[v] / n, EXP_MSE[v], 0.006);
      check_close("error probability", v, real'(nz[v]) / n, EXP_PROB[v], 0.0001);
      check_close("minimum error", v, real'(emin[v]), EXP_MIN[v], 0.006);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #(64'd1 << 25);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
