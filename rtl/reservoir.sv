// reservoir: the N-neuron integer reservoir of the intESN and its update
//
//   x(n) = f_kappa( Sh(x(n-1), 1) + u_hd(n) + y_hd(n-1) )
//
// Sh(x,1) is a cyclic shift by one position that stands in for the random
// recurrent matrix. The shift direction follows the permutation matrix W
// printed in the architecture figure, whose row i has its single 1 in column
// i+1 (and the last row in column 1): the new value of neuron i is the old
// value of neuron i+1, and the last neuron takes the old value of neuron 0.
// u_hd and y_hd are bipolar hypervectors (bit 1 = +1, bit 0 = -1); u_hd is
// added when in_en is set, y_hd when fb_en is set (output feedback, used by
// the signal-generation tasks). With vec_en set, the input term is instead
// the signed integer vector u_int (lane i at [i*UW +: UW]): the bundle of
// ternary pixel vectors built by the analog mapping of an image. f_kappa
// clips each sum to [-KAPPA, +KAPPA], so each neuron fits in XW bits.
//
// All N neurons update in parallel in the cycle where upd is high. clr
// (synchronous) and rst_n (asynchronous, active low) zero the state. The
// state is exported flat, neuron i in x[i*XW +: XW]. sat_cnt reports how many
// neurons were clipped in the last update, to make the nonlinearity visible.
module reservoir #(
  parameter int unsigned N     = intesn_pkg::N_DEF,
  parameter int unsigned KAPPA = intesn_pkg::KAPPA_DEF,
  parameter int unsigned UW    = intesn_pkg::BW_DEF,
  localparam int unsigned XW   = intesn_pkg::neuron_width(KAPPA),
  localparam int unsigned CB   = $clog2(N + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            clr,     // zero the reservoir
  input  logic            upd,     // perform one update step
  input  logic [N-1:0]    u_hd,    // input hypervector
  input  logic            in_en,   // add u_hd (off when the task has no input, K = 0)
  input  logic [N*UW-1:0] u_int,   // integer input vector (bundled pattern)
  input  logic            vec_en,  // add u_int instead of u_hd
  input  logic [N-1:0]    y_hd,    // fed-back output hypervector
  input  logic            fb_en,   // add y_hd
  output logic [N*XW-1:0] x,       // reservoir state, neuron i at [i*XW +: XW]
  output logic [CB-1:0]   sat_cnt  // neurons clipped by the last update
);

  // sum of the shifted state, the input term and a +-1 feedback term
  localparam int SW = ((XW > UW) ? XW : UW) + 2;
  localparam logic signed [SW-1:0] KP = SW'(KAPPA);
  localparam logic signed [SW-1:0] KN = -SW'(KAPPA);

  logic signed [XW-1:0] state [N];
  logic signed [XW-1:0] nxt   [N];
  logic                 clip  [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [SW-1:0] s;
      s = SW'(state[(i + 1) % N]);
      if (vec_en)     s = s + SW'($signed(u_int[i*UW +: UW]));
      else if (in_en) s = s + (u_hd[i] ? SW'(1) : -SW'(1));
      if (fb_en)      s = s + (y_hd[i] ? SW'(1) : -SW'(1));
      clip[i] = 1'b0;
      if (s >= KP) begin
        nxt[i] = XW'(KP);
        clip[i] = (s > KP);
      end else if (s <= KN) begin
        nxt[i] = XW'(KN);
        clip[i] = (s < KN);
      end else begin
        nxt[i] = XW'(s);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) state[i] <= '0;
      sat_cnt <= '0;
    end else if (clr) begin
      for (int i = 0; i < N; i++) state[i] <= '0;
      sat_cnt <= '0;
    end else if (upd) begin
      logic [CB-1:0] c;
      c = '0;
      for (int i = 0; i < N; i++) begin
        state[i] <= nxt[i];
        c = c + CB'(clip[i]);
      end
      sat_cnt <= c;
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) x[i*XW +: XW] = state[i];
  end

endmodule
