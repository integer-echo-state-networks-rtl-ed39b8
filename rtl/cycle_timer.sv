// cycle_timer: the hardware timer used to count the clock cycles an
// operation takes.
//
// A free-running W-bit counter that advances in every cycle where run is
// high and is zeroed by a synchronous clr (clr wins over run). The count is
// readable at any time. Wrap-around at 2^W is flagged by the sticky ovf bit,
// which clr also resets.
module cycle_timer #(
  parameter int unsigned W = 64
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,
  input  logic         run,
  output logic [W-1:0] count,
  output logic         ovf
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      ovf   <= 1'b0;
    end else if (clr) begin
      count <= '0;
      ovf   <= 1'b0;
    end else if (run) begin
      count <= count + 1'b1;
      if (&count) ovf <= 1'b1;
    end
  end

endmodule
