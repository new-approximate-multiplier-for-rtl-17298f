// Broken-Booth multiplier: signed WL x WL approximate radix-4 Booth multiplier.
//
// The multiplier operand y is recoded into WL/2 radix-4 digits; each digit
// selects one partial-product row (booth_pp_gen) of the multiplicand x. In
// every row the bits right of the Vertical Breaking Level (columns 0..VBL-1 of
// the 2*WL bit product) are replaced by zero, following either the Type0 or the
// Type1 rule (see bbm_pkg). The broken rows are then added at full precision.
// VBL = 0 gives the exact signed product, which is how the accurate reference
// multiplier is obtained from the same description.
//
// Interface: x, y signed WL-bit operands; p signed 2*WL-bit (approximate)
// product. Purely combinational.
//
// Radix-4 recoding, the breaking rules and the parameters WL, VBL and the type
// follow the paper; the defaults (WL = 16, VBL = 13, Type0) are the operating
// point the paper picks for its FIR filter. As in the paper, the row summation
// is written as a plain sum and its adder structure is left to synthesis. WL
// must be even (Booth recoding pairs the multiplier bits).
module broken_booth_mult
  import bbm_pkg::*;
#(
  parameter int unsigned WL       = 16,
  parameter int unsigned VBL      = 13,
  parameter bbm_type_e   BBM_TYPE = BBM_TYPE0
) (
  input  logic signed [WL-1:0]   x,
  input  logic signed [WL-1:0]   y,
  output logic signed [2*WL-1:0] p
);

  localparam int unsigned ROWS = WL / 2;

  if ((WL % 2) != 0 || WL < 4) begin : g_bad_wl
    $error("broken_booth_mult: WL must be even and at least 4");
  end
  if (VBL > 2 * WL) begin : g_bad_vbl
    $error("broken_booth_mult: VBL must not exceed 2*WL");
  end

  // y with the implicit y[-1] = 0 appended at the bottom.
  logic [WL:0]              y_ext;
  logic signed [2*WL-1:0]   pp [ROWS];
  logic signed [2*WL-1:0]   psum [ROWS+1];  // psum[j]: sum of rows 0..j-1

  assign y_ext = {y, 1'b0};

  for (genvar j = 0; j < ROWS; j++) begin : g_row
    booth_pp_gen #(
      .WL      (WL),
      .VBL     (VBL),
      .ROW     (j),
      .BBM_TYPE(BBM_TYPE)
    ) u_pp (
      .x    (x),
      .ybits(y_ext[2*j+2 -: 3]),
      .pp   (pp[j])
    );
  end

  assign psum[0] = '0;
  for (genvar j = 0; j < ROWS; j++) begin : g_sum
    assign psum[j+1] = psum[j] + pp[j];
  end
  assign p = psum[ROWS];

endmodule
