// bundler: superposes (bundles) a set of ternary hypervectors into one
// integer hypervector, the representation of a whole input pattern such as
// an image whose pixels are each mapped by sparse_encoder.
//
// Lane i holds a signed BW-bit sum. In a cycle with add high, every lane
// adds +1 (nz[i] = 1, v[i] = 1), -1 (nz[i] = 1, v[i] = 0) or 0 (nz[i] = 0).
// Sums saturate at +-(2^(BW-1) - 1); the sticky flag sat records that any
// lane did (the bundle then lost information). clr (synchronous; wins over
// add) empties the bundle; reset does the same. The sum is a registered
// output, one cycle after the last add. Saturation and widths are this
// design's own choices: the paper only says the bundle stays integer.
module bundler #(
  parameter int unsigned N  = intesn_pkg::N_DEF,
  parameter int unsigned BW = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,
  input  logic            add,
  input  logic [N-1:0]    v,     // signs, 1 = +1
  input  logic [N-1:0]    nz,    // 1 = element present
  output logic [N*BW-1:0] sum,   // lane i at [i*BW +: BW], signed
  output logic            sat
);

  localparam logic signed [BW-1:0] MAXV = BW'((1 << (BW - 1)) - 1);
  localparam logic signed [BW-1:0] MINV = -MAXV;

  logic signed [BW-1:0] acc [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
      sat <= 1'b0;
    end else if (clr) begin
      for (int i = 0; i < N; i++) acc[i] <= '0;
      sat <= 1'b0;
    end else if (add) begin
      for (int i = 0; i < N; i++) begin
        if (nz[i]) begin
          if (v[i]) begin
            if (acc[i] == MAXV) sat <= 1'b1;
            else                acc[i] <= acc[i] + 1'b1;
          end else begin
            if (acc[i] == MINV) sat <= 1'b1;
            else                acc[i] <= acc[i] - 1'b1;
          end
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) sum[i*BW +: BW] = acc[i];
  end

endmodule
