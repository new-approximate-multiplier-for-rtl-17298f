// One partial-product row of the Broken-Booth multiplier.
//
// Row ROW (j) recodes the multiplier bits {y[2j+1], y[2j], y[2j-1]} into a
// radix-4 digit d in {-2..+2} and forms d*x, a WL+1 bit signed value, placed at
// column 2j of the 2*WL bit product. Columns 0 .. VBL-1 are then broken
// (forced to zero):
//   Type0: the row is formed in full two's complement (invert, then +1) and
//          only then broken, i.e. pp = floor(d*x*4^j / 2^VBL) * 2^VBL.
//   Type1: a negative row is only inverted; the inverted row is broken, and its
//          +1 (the S bit, weight 4^j) is added only when column 2j >= VBL.
// With VBL = 0 both types give the exact row d*x*4^j. The columns below VBL of
// pp are constant zero, so synthesis builds no logic for them: that removed
// logic is the saving the breaking is for.
//
// Interface: x (signed multiplicand), ybits (the three multiplier bits of this
// row), pp (signed, 2*WL bits, already shifted and sign-extended). Purely
// combinational, no clock.
//
// The breaking rules and the S-bit placement (column 2j, shown for WL = 12,
// VBL = 7 in the paper's dot diagram) follow the paper. Producing the row as a
// full-width sign-extended number, instead of a sign-extension-encoded row, is
// this design's choice: the paper leaves the summation to the synthesis tool.
module booth_pp_gen
  import bbm_pkg::*;
#(
  parameter int unsigned WL       = 16,
  parameter int unsigned VBL      = 13,
  parameter int unsigned ROW      = 0,
  parameter bbm_type_e   BBM_TYPE = BBM_TYPE0
) (
  input  logic signed [WL-1:0]   x,
  input  logic        [2:0]      ybits,
  output logic signed [2*WL-1:0] pp
);

  localparam int unsigned PW = 2 * WL;

  if (ROW >= WL / 2) begin : g_bad_row
    $error("booth_pp_gen: ROW must be below WL/2");
  end

  // Columns that survive the break.
  localparam logic [PW-1:0] KEEP = {PW{1'b1}} << VBL;
  // The +1 of a negative row sits at column 2*ROW.
  localparam logic [PW-1:0] S_POS = PW'(1) << (2 * ROW);

  booth_sel_t        sel;
  logic [WL:0]       mag;      // |d| * x, WL+1 bits, two's complement
  logic [WL:0]       inv;      // ones' complement of mag when d < 0
  logic [PW-1:0]     row;      // inv, sign-extended and shifted to column 2j
  logic [PW-1:0]     s_bit;    // increment that completes the two's complement

  always_comb begin
    sel   = booth_encode(ybits);
    mag   = sel.two ? {x, 1'b0} : (sel.one ? {x[WL-1], x} : '0);
    inv   = sel.neg ? ~mag : mag;
    row   = {{(PW - WL - 1){inv[WL]}}, inv} << (2 * ROW);
    s_bit = sel.neg ? S_POS : '0;
    if (BBM_TYPE == BBM_TYPE0) begin
      pp = signed'((row + s_bit) & KEEP);
    end else begin
      pp = signed'((row & KEEP) + (s_bit & KEEP));
    end
  end

endmodule
