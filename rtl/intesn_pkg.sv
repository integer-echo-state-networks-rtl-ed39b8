// intesn_pkg: sizes, types and helper functions shared by the integer Echo
// State Network (intESN) datapath.
//
// The network keeps a reservoir of N small signed integers. Every time step
// the reservoir is cyclically shifted by one position, a bipolar (+1/-1)
// hypervector for the current input symbol (and, optionally, one for the
// quantized previous output) is added element by element, and each sum is
// clipped to the range [-KAPPA, +KAPPA]. A trained linear readout turns the
// reservoir into the network outputs.
//
// Defaults follow the sequence-recall configuration that was built in
// hardware: N = 300 neurons, KAPPA = 3, D = 27 input tokens, L = 27 outputs.
// Output feedback quantization uses round(100*y)/100 over y in [-0.5, 0.5],
// i.e. 101 levels. Weight and data word widths are this design's own choices.
package intesn_pkg;

  // ---- network sizes ------------------------------------------------------
  localparam int unsigned N_DEF      = 300;  // reservoir neurons
  localparam int unsigned KAPPA_DEF  = 3;    // clipping threshold
  localparam int unsigned D_DEF      = 27;   // input alphabet (item memory depth)
  localparam int unsigned L_DEF      = 27;   // readout outputs
  localparam int unsigned M_DEF      = 101;  // output quantization levels
  localparam int unsigned QSCALE_DEF = 100;  // quantization steps per unit

  // ---- fixed-point formats (design choice) -----------------------------
  localparam int unsigned WW_DEF   = 16;  // readout weight width (signed)
  localparam int unsigned FRAC_DEF = 12;  // fractional bits of weights / data
  localparam int unsigned AW_DEF   = 32;  // readout accumulator width
  localparam int unsigned IW_DEF   = 16;  // input sample width (signed, FRAC_DEF)
  localparam int unsigned PW_DEF   = 8;   // density resolution of analog mapping
  localparam int unsigned BW_DEF   = 8;   // bundle lane width (signed)

  // Bits needed to hold a neuron value in [-kappa, +kappa] in two's
  // complement: the smallest w with 2^(w-1)-1 >= kappa.
  function automatic int unsigned neuron_width(input int unsigned kappa);
    int unsigned w;
    w = 1;
    while (((1 << (w - 1)) - 1) < kappa) w++;
    return w;
  endfunction

  // Source of the value placed in a bank of the item memory load port.
  typedef enum logic [1:0] {
    LD_IN_ITEM  = 2'd0,  // input item memory  (bipolar vector per token)
    LD_OUT_ITEM = 2'd1,  // output item memory (bipolar vector per level)
    LD_WOUT     = 2'd2   // readout weights    (one neuron column per word)
  } load_sel_e;

  // Controller states, one reservoir step per pass from S_IDLE to S_OUT.
  typedef enum logic [2:0] {
    S_IDLE   = 3'd0,  // wait for a sample; on accept the item memories read
    S_UPDATE = 3'd1,  // reservoir shift + add + clip, readout started
    S_READ   = 3'd2,  // readout accumulates over the N neurons
    S_OUT    = 3'd3,  // present the result; on accept capture feedback level
    S_ACC    = 3'd4   // pattern mode: the pixel's ternary vector joins the bundle
  } ctrl_state_e;

endpackage
