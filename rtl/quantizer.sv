// quantizer: the Q() block that turns a continuous value into the index of a
// quantization level, i.e. of a row in an item memory.
//
// The value arrives as a signed fixed-point number with FRAC fractional bits.
// The level follows the rule q = round(QSCALE * v) (QSCALE = 100 gives the
// round(100 y)/100 quantization used for output feedback). The index is
// q + OFFSET, saturated to [0, LEVELS-1], so that with OFFSET = 50 and
// LEVELS = 101 the range -0.5 .. +0.5 maps onto indices 0 .. 100. Rounding is
// to the nearest integer with ties toward +infinity (a design choice).
//
// Purely combinational: idx follows v in the same cycle.
module quantizer #(
  parameter int unsigned IW     = intesn_pkg::AW_DEF,      // input width
  parameter int unsigned FRAC   = intesn_pkg::FRAC_DEF,    // input fractional bits
  parameter int unsigned QSCALE = intesn_pkg::QSCALE_DEF,  // levels per unit
  parameter int unsigned LEVELS = intesn_pkg::M_DEF,       // number of levels
  parameter int unsigned OFFSET = (intesn_pkg::M_DEF - 1) / 2,
  localparam int unsigned QB    = (LEVELS > 1) ? $clog2(LEVELS) : 1
) (
  input  logic signed [IW-1:0] v,
  output logic        [QB-1:0] idx,
  output logic                 sat   // value was outside the level range
);

  localparam int unsigned PW = IW + 9;  // headroom for QSCALE up to 256
  localparam int unsigned QMAX = LEVELS - 1;

  logic signed [PW-1:0] prod;
  logic signed [PW-1:0] q;
  logic signed [PW-1:0] shifted;

  always_comb begin
    prod = PW'(v) * $signed(PW'(QSCALE));
    if (FRAC > 0) q = (prod + (PW'(1) <<< (FRAC - 1))) >>> FRAC;
    else          q = prod;
    shifted = q + $signed(PW'(OFFSET));
    sat = 1'b0;
    if (shifted < 0) begin
      idx = '0;
      sat = 1'b1;
    end else if (shifted > $signed(PW'(QMAX))) begin
      idx = QB'(QMAX);
      sat = 1'b1;
    end else begin
      idx = QB'(shifted);
    end
  end

endmodule
