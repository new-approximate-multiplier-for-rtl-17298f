// Self-checking testbench of broken_booth_mult.
//
// 1. Default configuration (WL = 16, VBL = 13, Type0) and its Type1 and
//    accurate (VBL = 0) versions: 20000 random and corner operand pairs against
//    the integer reference model, and the accurate one against x*y.
// 2. WL = 8, VBL = 7, both types: all 65536 operand pairs against the model.
// 3. The other published comparison points, Type0: WL/VBL = 4/3 (all pairs),
//    12/11 and 16/15 (on the random pairs of step 1).
// Also checks that neither type overestimates (error <= 0): breaking only
// removes non-negative bit weights, and a dropped increment only lowers a row. Watchdog after 10^6 time units.
module tb_broken_booth_mult;
  import bbm_pkg::*;
  import bbm_ref_pkg::*;

  localparam int WL = 16;

  logic signed [WL-1:0]   x, y;
  logic signed [2*WL-1:0] p_t0, p_t1, p_ex;
  logic signed [7:0]      xs, ys;
  logic signed [15:0]     ps_t0, ps_t1;
  logic signed [11:0]     x12, y12;
  logic signed [23:0]     p12;
  logic signed [2*WL-1:0] p15;
  logic signed [3:0]      x4, y4;
  logic signed [7:0]      p4;
  int checks = 0, failures = 0;

  broken_booth_mult #(.WL(12), .VBL(11), .BBM_TYPE(BBM_TYPE0)) dut_12 (.x(x12), .y(y12), .p(p12));
  broken_booth_mult #(.WL(WL), .VBL(15), .BBM_TYPE(BBM_TYPE0)) dut_15 (.x, .y, .p(p15));
  broken_booth_mult #(.WL(4),  .VBL(3),  .BBM_TYPE(BBM_TYPE0)) dut_4  (.x(x4), .y(y4), .p(p4));

  broken_booth_mult dut_default (.x, .y, .p(p_t0));
  broken_booth_mult #(.WL(WL), .VBL(13), .BBM_TYPE(BBM_TYPE1)) dut_t1 (.x, .y, .p(p_t1));
  broken_booth_mult #(.WL(WL), .VBL(0),  .BBM_TYPE(BBM_TYPE0)) dut_ex (.x, .y, .p(p_ex));
  broken_booth_mult #(.WL(8),  .VBL(7),  .BBM_TYPE(BBM_TYPE0)) dut_s0 (.x(xs), .y(ys), .p(ps_t0));
  broken_booth_mult #(.WL(8),  .VBL(7),  .BBM_TYPE(BBM_TYPE1)) dut_s1 (.x(xs), .y(ys), .p(ps_t1));

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10) $display("FAIL %s got=%0d expected=%0d", what, got, exp);
    end
  endtask

  initial begin
    logic signed [WL-1:0] corner [5];
    corner = '{16'sd0, 16'sd1, -16'sd1, 16'sd32767, -16'sd32768};
    xs = '0;
    ys = '0;
    x4 = '0;
    y4 = '0;
    for (int i = 0; i < 20000; i++) begin
      if (i < 25) begin
        x = corner[i % 5];
        y = corner[i / 5];
      end else begin
        x = WL'($urandom);
        y = WL'($urandom);
      end
      x12 = x[11:0];
      y12 = y[15:4];
      #1;
      check($sformatf("wl12 vbl11 %0d*%0d", x12, y12), longint'(p12), ref_mult(x12, y12, 12, 11, 0));
      check($sformatf("wl16 vbl15 %0d*%0d", x, y), longint'(p15), ref_mult(x, y, WL, 15, 0));
      check($sformatf("type0 %0d*%0d", x, y), longint'(p_t0), ref_mult(x, y, WL, 13, 0));
      check($sformatf("type1 %0d*%0d", x, y), longint'(p_t1), ref_mult(x, y, WL, 13, 1));
      check($sformatf("exact %0d*%0d", x, y), longint'(p_ex), longint'(x) * longint'(y));
      checks++;
      if (longint'(p_t0) > longint'(x) * longint'(y)) begin
        failures++;
        $display("FAIL type0 overestimates %0d*%0d", x, y);
      end
      checks++;
      if (longint'(p_t1) > longint'(x) * longint'(y)) begin
        failures++;
        $display("FAIL type1 overestimates %0d*%0d", x, y);
      end
    end
    for (int a = -128; a < 128; a++) begin
      for (int b = -128; b < 128; b++) begin
        xs = 8'(a);
        ys = 8'(b);
        #1;
        check($sformatf("wl8 type0 %0d*%0d", a, b), longint'(ps_t0), ref_mult(a, b, 8, 7, 0));
        check($sformatf("wl8 type1 %0d*%0d", a, b), longint'(ps_t1), ref_mult(a, b, 8, 7, 1));
      end
    end
    for (int a = -8; a < 8; a++) begin
      for (int b = -8; b < 8; b++) begin
        x4 = 4'(a);
        y4 = 4'(b);
        #1;
        check($sformatf("wl4 vbl3 %0d*%0d", a, b), longint'(p4), ref_mult(a, b, 4, 3, 0));
      end
    end
    #1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
