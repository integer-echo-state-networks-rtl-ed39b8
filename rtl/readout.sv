// readout: the trained linear readout y(n) = W_out x(n) of the intESN.
//
// W_out (L outputs x N neurons, signed WW-bit fixed point with the binary
// point chosen by the host) lives in a RAM of N words; word j holds the L
// weights of neuron j, output l at [l*WW +: WW]. The host fills it through the
// write port after training; training itself is done off-chip.
//
// A computation starts with a one-cycle start pulse. The unit then walks the
// neurons one per cycle: it reads weight word j and neuron x_j, and all L
// multiply-accumulate lanes add w[l][j] * x_j into their accumulator in the
// following cycle. done pulses N+2 cycles after the start cycle, after which y holds
// the L sums (AW-bit, same binary point as the weights) until the next start.
// x must not change while busy is high. Only neuron values enter the readout;
// the input u(n) is not concatenated to the state, as in all the tasks the
// network was evaluated on.
module readout #(
  parameter int unsigned N     = intesn_pkg::N_DEF,
  parameter int unsigned KAPPA = intesn_pkg::KAPPA_DEF,
  parameter int unsigned L     = intesn_pkg::L_DEF,
  parameter int unsigned WW    = intesn_pkg::WW_DEF,
  parameter int unsigned AW    = intesn_pkg::AW_DEF,
  localparam int unsigned XW   = intesn_pkg::neuron_width(KAPPA),
  localparam int unsigned NB   = $clog2(N)
) (
  input  logic            clk,
  input  logic            rst_n,
  // weight load port
  input  logic            we,
  input  logic [NB-1:0]   waddr,
  input  logic [L*WW-1:0] wdata,
  // computation
  input  logic            start,
  input  logic [N*XW-1:0] x,
  output logic            busy,
  output logic            done,
  output logic [L*AW-1:0] y      // output l at [l*AW +: AW], signed
);

  logic [L*WW-1:0] wmem [N];

  logic [NB-1:0]        j;        // neuron being read
  logic                 issuing;  // a read is issued this cycle
  logic                 pvld;     // wq/xq hold a product operand pair
  logic                 plast;    // ... and it is the last one
  logic [L*WW-1:0]      wq;
  logic signed [XW-1:0] xq;
  logic signed [AW-1:0] acc [L];

  assign busy = issuing | pvld;

  always_ff @(posedge clk) begin
    if (we) wmem[waddr] <= wdata;
  end

  // read stage: weight word and neuron value of neuron j
  always_ff @(posedge clk) begin
    if (issuing) begin
      wq <= wmem[j];
      xq <= x[j*XW +: XW];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      j       <= '0;
      issuing <= 1'b0;
      pvld    <= 1'b0;
      plast   <= 1'b0;
      done    <= 1'b0;
    end else begin
      done  <= pvld & plast;
      pvld  <= issuing;
      plast <= issuing && (32'(j) == N - 1);
      if (start && !busy) begin
        issuing <= 1'b1;
        j       <= '0;
      end else if (issuing) begin
        if (32'(j) == N - 1) issuing <= 1'b0;
        else                 j <= j + 1'b1;
      end
    end
  end

  // multiply-accumulate stage, L lanes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < L; l++) acc[l] <= '0;
    end else if (start && !busy) begin
      for (int l = 0; l < L; l++) acc[l] <= '0;
    end else if (pvld) begin
      for (int l = 0; l < L; l++)
        acc[l] <= acc[l] + AW'($signed(wq[l*WW +: WW]) * xq);
    end
  end

  always_comb begin
    for (int l = 0; l < L; l++) y[l*AW +: AW] = acc[l];
  end

  // weights must not be rewritten while a computation reads them
  a_no_write_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !we);

endmodule
