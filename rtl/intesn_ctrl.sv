// intesn_ctrl: sequencing of one intESN time step.
//
// One step per accepted input sample:
//   S_IDLE   in_ready = 1. On in_valid the sample is taken and both item
//            memories are read (im_re): the input token's hypervector and
//            the hypervector of the previous output's quantization level.
//   S_UPDATE the hypervectors are valid; the reservoir is updated (res_upd)
//            and the readout is started on the new state (ro_start).
//   S_READ   wait for the readout to finish (ro_done).
//   S_OUT    out_valid = 1 until out_ready; on that handshake the
//            quantized output is captured as next step's feedback level
//            (fb_cap) and the controller returns to S_IDLE.
// Pattern mode (bundle = 1): each accepted sample is one pixel of an image.
//   S_IDLE   as above; the sample's last flag is kept.
//   S_ACC    the pixel's ternary vector is added to the bundle (b_add); the
//            controller returns to S_IDLE for the next pixel, or, after the
//            last pixel, goes on to S_UPDATE, where the bundle is fed to the
//            reservoir and emptied (b_clr) for the next image.
// One output per image, so an image of P pixels takes 2P + N + 3 cycles.
// A step therefore takes N + 5 cycles from one accepted sample to the next
// when neither side stalls (the readout needs N + 2 of them). Both stream
// sides use a valid/ready handshake (a design choice: the accelerator was fed
// by a DMA engine, whose protocol is not described). The handshake rules
// are checked by assertions.
module intesn_ctrl
  import intesn_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        bundle,    // pattern mode (static while busy)
  input  logic        in_valid,
  output logic        in_ready,
  input  logic        in_last,   // last pixel of a pattern

  output logic        out_valid,
  input  logic        out_ready,
  output logic        im_re,
  output logic        res_upd,
  output logic        ro_start,
  input  logic        ro_done,
  output logic        fb_cap,
  output logic        b_add,
  output logic        b_clr,
  output logic        busy,
  output ctrl_state_e state
);

  ctrl_state_e nstate;
  logic        last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                    last_q <= 1'b0;
    else if (in_valid && in_ready) last_q <= in_last;
  end

  always_comb begin
    nstate   = state;
    in_ready = 1'b0;
    out_valid = 1'b0;
    im_re    = 1'b0;
    res_upd  = 1'b0;
    ro_start = 1'b0;
    fb_cap   = 1'b0;
    b_add    = 1'b0;
    b_clr    = 1'b0;
    unique case (state)
      S_IDLE: begin
        in_ready = 1'b1;
        if (in_valid) begin
          im_re  = 1'b1;
          nstate = bundle ? S_ACC : S_UPDATE;
        end
      end
      S_ACC: begin
        b_add  = 1'b1;
        nstate = last_q ? S_UPDATE : S_IDLE;
      end
      S_UPDATE: begin
        res_upd  = 1'b1;
        b_clr    = bundle;
        ro_start = 1'b1;
        nstate   = S_READ;
      end
      S_READ: begin
        if (ro_done) nstate = S_OUT;
      end
      S_OUT: begin
        out_valid = 1'b1;
        if (out_ready) begin
          fb_cap = 1'b1;
          nstate = S_IDLE;
        end
      end
      default: nstate = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state <= S_IDLE;
    else        state <= nstate;
  end

  assign busy = (state != S_IDLE);

  // output stays valid until it is taken
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid);
  // the readout never reports completion outside S_READ
  a_done_in_read: assert property (@(posedge clk) disable iff (!rst_n)
    ro_done |-> state == S_READ);

endmodule
