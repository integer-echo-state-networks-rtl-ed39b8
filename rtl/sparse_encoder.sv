// sparse_encoder: maps an analog value onto a ternary hypervector by
// varying its density.
//
// Multiplying a bipolar vector by an analog value would leave the integer
// domain. Instead, a fraction of the elements of the bipolar item vector is
// set to zero, and that fraction is set by the value: a value near 0 keeps
// almost no elements, a value near 1 keeps almost all; the kept elements
// keep their +1/-1 sign. Which elements are kept is pseudo-random but fixed
// for a given key (the pixel or item index), so the same item at the same
// value always yields the same vector and different items zero different
// positions.
//
// The choice is made per element: element j of item `key` is kept when an
// integer hash of (key, j), reduced to its top PW bits, is below `density`,
// which counts in units of 2^-PW (0 = all zero, 2^PW = all kept). The hash
// is this design's own (a multiplicative mix); the paper only asks for a
// random choice whose proportion follows the value.
//
// Combinational: nz follows key and density in the same cycle. The signs are
// the item vector itself and are not repeated at the output.
module sparse_encoder #(
  parameter int unsigned N  = intesn_pkg::N_DEF,
  parameter int unsigned PW = 8,   // density resolution in bits
  parameter int unsigned KW = 16   // key width
) (
  input  logic [KW-1:0] key,
  input  logic [PW:0]   density,   // 0 .. 2^PW
  output logic [N-1:0]  nz         // 1 = element kept (+-1), 0 = element zero
);

  logic [31:0] kmix;

  always_comb begin
    kmix = 32'(key) * 32'h9E37_79B1;
    for (int j = 0; j < N; j++) begin
      logic [31:0] h;
      h = kmix ^ (32'(j) * 32'h85EB_CA6B);
      h = h ^ (h >> 15);
      h = h * 32'h2C1B_3C6D;
      h = h ^ (h >> 12);
      nz[j] = ({1'b0, h[31 -: PW]} < density);
    end
  end

endmodule
