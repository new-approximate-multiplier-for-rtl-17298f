// Self-checking testbench of booth_pp_gen.
//
// Instantiates rows 0 and 3 of a WL = 12 multiplier for both breaking types at
// VBL = 7 (the case of the paper's dot diagram) and an unbroken row. All 8
// recoder inputs are applied with random and corner multiplicands; each row is
// compared with d*x*4^j broken by integer floor arithmetic. Watchdog after
// 100000 time units.
module tb_booth_pp_gen;
  import bbm_pkg::*;
  import bbm_ref_pkg::*;

  localparam int WL = 12;
  localparam int PW = 2 * WL;

  logic signed [WL-1:0] x;
  logic        [2:0]    yb;
  logic signed [PW-1:0] pp_r0_t0, pp_r3_t0, pp_r0_t1, pp_r3_t1, pp_r3_exact;
  int checks = 0, failures = 0;

  booth_pp_gen #(.WL(WL), .VBL(7), .ROW(0), .BBM_TYPE(BBM_TYPE0)) u_r0_t0 (.x, .ybits(yb), .pp(pp_r0_t0));
  booth_pp_gen #(.WL(WL), .VBL(7), .ROW(3), .BBM_TYPE(BBM_TYPE0)) u_r3_t0 (.x, .ybits(yb), .pp(pp_r3_t0));
  booth_pp_gen #(.WL(WL), .VBL(7), .ROW(0), .BBM_TYPE(BBM_TYPE1)) u_r0_t1 (.x, .ybits(yb), .pp(pp_r0_t1));
  booth_pp_gen #(.WL(WL), .VBL(7), .ROW(3), .BBM_TYPE(BBM_TYPE1)) u_r3_t1 (.x, .ybits(yb), .pp(pp_r3_t1));
  booth_pp_gen #(.WL(WL), .VBL(0), .ROW(3), .BBM_TYPE(BBM_TYPE0)) u_r3_ex (.x, .ybits(yb), .pp(pp_r3_exact));

  function automatic longint digit(input logic [2:0] b);
    return -2 * longint'(b[2]) + longint'(b[1]) + longint'(b[0]);
  endfunction

  // Expected row value; row j sees the three bits directly.
  function automatic longint expect_row(input longint xv, input logic [2:0] b,
                                        input int j, input int vbl, input bit t1);
    longint d = digit(b);
    longint w = longint'(1) <<< (2 * j);
    longint r;
    if (!t1 || d >= 0) return floor_break(d * xv * w, vbl);
    r = floor_break((d * xv - 1) * w, vbl);
    if (2 * j >= vbl) r += w;
    return r;
  endfunction

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures <= 10)
        $display("FAIL %s x=%0d ybits=%b got=%0d expected=%0d", what, x, yb, got, exp);
    end
  endtask

  initial begin
    logic signed [WL-1:0] xs [6];
    xs = '{12'sd0, 12'sd1, -12'sd1, 12'sd2047, -12'sd2048, 12'sd1234};
    for (int i = 0; i < 600; i++) begin
      x = (i < 6) ? xs[i] : WL'($urandom);
      for (int b = 0; b < 8; b++) begin
        yb = 3'(b);
        #1;
        check("row0 type0", pp_r0_t0, expect_row(x, yb, 0, 7, 0));
        check("row3 type0", pp_r3_t0, expect_row(x, yb, 3, 7, 0));
        check("row0 type1", pp_r0_t1, expect_row(x, yb, 0, 7, 1));
        check("row3 type1", pp_r3_t1, expect_row(x, yb, 3, 7, 1));
        check("row3 exact", pp_r3_exact, digit(yb) * longint'(x) * 64);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
