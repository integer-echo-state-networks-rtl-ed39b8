// wta: winner-take-all output activation g() for the readout.
//
// For token outputs (one-hot coded classes) the network's answer is the
// output with the largest readout value. This block compares the L signed
// AW-bit values and returns the index of the largest one; on a tie the lowest
// index wins (a design choice). It is combinational: win follows y in the
// same cycle, along with the winning value.
module wta #(
  parameter int unsigned L  = intesn_pkg::L_DEF,
  parameter int unsigned AW = intesn_pkg::AW_DEF,
  localparam int unsigned LB = (L > 1) ? $clog2(L) : 1
) (
  input  logic [L*AW-1:0]      y,
  output logic [LB-1:0]        win,
  output logic signed [AW-1:0] win_val
);

  always_comb begin
    win     = '0;
    win_val = $signed(y[0 +: AW]);
    for (int l = 1; l < L; l++) begin
      if ($signed(y[l*AW +: AW]) > win_val) begin
        win     = LB'(l);
        win_val = $signed(y[l*AW +: AW]);
      end
    end
  end

endmodule
