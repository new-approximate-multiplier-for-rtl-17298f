// Direct-form FIR low-pass filter built from Broken-Booth multipliers.
//
// Each accepted input sample x[n] produces one output
//     y[n] = sum_{k=0}^{TAPS-1} c[k] * x[n-k],
// where every product is formed by a Broken-Booth multiplier (WL x WL, breaking
// level VBL, Type0 or Type1) and the TAPS products are added exactly. All TAPS
// multipliers work in parallel, so the filter takes one sample per clock.
//
// Interface
//   clk, rst_n      rising-edge clock, active-low asynchronous reset
//   in_valid, x_in  a signed WL-bit sample is accepted on a rising edge with
//                   in_valid high; with in_valid low the delay line holds
//   coef[k]         signed WL-bit coefficient of tap k; the filter reads it
//                   every cycle, so it must be held stable while filtering
//   out_valid,y_out y[n] (signed, 2*WL+clog2(TAPS) bits, full precision, the
//                   binary point at the sum of the input and coefficient
//                   fraction bits) is registered on the same edge that accepts
//                   x[n]; out_valid is high for that one cycle.
// Latency: one clock edge from sample to output; throughput one sample/clock.
//
// Following the paper: 30 taps, WL = 16, and Broken-Booth Type0 multipliers with
// VBL = 13 (the paper's chosen operating point); VBL = 0 gives the accurate
// filter it compares against. This design's own choices: the direct form, the
// one-cycle timing, the valid handshake, the reset, coefficients supplied on
// ports (the paper prints no coefficient values), the coefficient as the
// Booth-recoded operand, and a full-precision, unrounded output.
module bbm_fir_filter
  import bbm_pkg::*;
#(
  parameter int unsigned TAPS     = 30,
  parameter int unsigned WL       = 16,
  parameter int unsigned VBL      = 13,
  parameter bbm_type_e   BBM_TYPE = BBM_TYPE0,
  localparam int unsigned OW      = 2 * WL + $clog2(TAPS)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  logic signed [WL-1:0] x_in,
  input  logic signed [WL-1:0] coef [TAPS],
  output logic                 out_valid,
  output logic signed [OW-1:0] y_out
);

  if (TAPS < 2) begin : g_bad_taps
    $error("bbm_fir_filter: TAPS must be at least 2");
  end

  // Delay line: dly[k] holds x[n-1-k] while x[n] is on x_in.
  logic signed [WL-1:0]   dly  [TAPS-1];
  logic signed [WL-1:0]   tap  [TAPS];
  logic signed [2*WL-1:0] prod [TAPS];
  logic signed [OW-1:0]   acc [TAPS+1];  // acc[k]: sum of products 0..k-1

  always_comb begin
    tap[0] = x_in;
    for (int k = 1; k < TAPS; k++) begin
      tap[k] = dly[k-1];
    end
  end

  for (genvar k = 0; k < TAPS; k++) begin : g_mult
    broken_booth_mult #(
      .WL      (WL),
      .VBL     (VBL),
      .BBM_TYPE(BBM_TYPE)
    ) u_mult (
      .x(tap[k]),
      .y(coef[k]),
      .p(prod[k])
    );
  end

  assign acc[0] = '0;
  for (genvar k = 0; k < TAPS; k++) begin : g_acc
    assign acc[k+1] = acc[k] + OW'(prod[k]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < TAPS - 1; k++) begin
        dly[k] <= '0;
      end
      out_valid <= 1'b0;
      y_out     <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        dly[0] <= x_in;
        for (int k = 1; k < TAPS - 1; k++) begin
          dly[k] <= dly[k-1];
        end
        y_out <= acc[TAPS];
      end
    end
  end

endmodule
