// intesn_top: integer Echo State Network accelerator.
//
// Datapath of one time step n, driven by intesn_ctrl:
//   input sample -> [Q] -> input item memory  -> u_hd(n) --+
//   level of y(n-1)      -> output item memory -> y_hd(n-1) -+-> reservoir
//   reservoir x(n) = clip_kappa(Sh(x(n-1),1) + u_hd(n) + y_hd(n-1))
//   readout   y(n) = W_out x(n)  -> winner-take-all token, and
//             y_0(n) -> [Q] -> feedback level for step n+1
// The blocks, the update rule, the cyclic shift, the clipping, the item
// memories, the two quantizers Q and the trained readout follow the paper's
// architecture; the word widths, the sequencing, the load port and the
// stream handshakes are this design's own.
//
// Modes (static configuration, change only while idle):
//   cfg_in_en    add the input hypervector (off for pure generator tasks)
//   cfg_in_quant in_u is a signed fixed-point value (FRAC fractional bits)
//                quantized to an input item index; otherwise in_u holds the
//                token index directly
//   cfg_fb_en    add the hypervector of the previous output's level
//   cfg_teacher  teacher forcing: the feedback level is taken from the
//                ground-truth in_teacher sent with the sample instead of the
//                network's own prediction (training phase of a generator)
//   cfg_bundle   pattern (image) mode: each sample is one pixel; in_u holds
//                its item index and in_density its value in [0, 1] (units of
//                2^-PW). The pixel's item vector is made ternary by the
//                sparse encoder (kept fraction = value) and added to the
//                bundler; on the sample flagged in_last the bundle, an
//                integer vector, is fed to the reservoir in place of u_hd,
//                and one output follows per pattern.
//
// Loading (while idle): ld_we with ld_sel = 0 writes input item ld_addr,
// ld_sel = 1 output item ld_addr (both N bits of ld_data), ld_sel = 2 the
// readout weights of neuron ld_addr (L*WW bits of ld_data).
// res_clr zeroes the reservoir and resets the feedback level to the level
// of y = 0. The cycle timer counts cycles while tm_run is high.
//
// Timing: one step takes N + 5 cycles without stalls (see intesn_ctrl); a
// pattern of P pixels takes 2P + N + 3.
module intesn_top
  import intesn_pkg::*;
#(
  parameter int unsigned N      = N_DEF,
  parameter int unsigned KAPPA  = KAPPA_DEF,
  parameter int unsigned D      = D_DEF,
  parameter int unsigned L      = L_DEF,
  parameter int unsigned M      = M_DEF,
  parameter int unsigned QSCALE = QSCALE_DEF,
  parameter int unsigned WW     = WW_DEF,
  parameter int unsigned AW     = AW_DEF,
  parameter int unsigned IW     = IW_DEF,
  parameter int unsigned FRAC   = FRAC_DEF,
  parameter int unsigned PW     = PW_DEF,
  parameter int unsigned BW     = BW_DEF,
  localparam int unsigned XW    = neuron_width(KAPPA),
  localparam int unsigned DB    = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned LB    = (L > 1) ? $clog2(L) : 1,
  localparam int unsigned QB    = (M > 1) ? $clog2(M) : 1,
  localparam int unsigned NB    = $clog2(N),
  localparam int unsigned CB    = $clog2(N + 1),
  localparam int unsigned LDW   = (N > L * WW) ? N : L * WW
) (
  input  logic            clk,
  input  logic            rst_n,
  // configuration
  input  logic            cfg_in_en,
  input  logic            cfg_in_quant,
  input  logic            cfg_fb_en,
  input  logic            cfg_teacher,
  input  logic            cfg_bundle,
  input  logic            res_clr,
  // table load port
  input  logic            ld_we,
  input  logic [1:0]      ld_sel,
  input  logic [15:0]     ld_addr,
  input  logic [LDW-1:0]  ld_data,
  // input stream
  input  logic            in_valid,
  output logic            in_ready,
  input  logic [IW-1:0]   in_u,
  input  logic [IW-1:0]   in_teacher,
  input  logic [PW:0]     in_density,
  input  logic            in_last,
  // output stream
  output logic            out_valid,
  input  logic            out_ready,
  output logic [LB-1:0]   out_token,
  output logic [L*AW-1:0] out_y,
  output logic [QB-1:0]   out_level,
  output logic            out_qsat,
  output logic [CB-1:0]   out_clip_cnt,
  output logic            busy,
  output logic            out_bsat,
  // cycle timer
  input  logic            tm_clr,
  input  logic            tm_run,
  output logic [63:0]     tm_count,
  output logic            tm_ovf
);

  ctrl_state_e state;
  logic im_re, res_upd, ro_start, ro_done, ro_busy, fb_cap, b_add, b_clr;

  intesn_ctrl u_ctrl (
    .clk, .rst_n,
    .in_valid, .in_ready,
    .out_valid, .out_ready,
    .im_re, .res_upd, .ro_start, .ro_done, .fb_cap,
    .busy, .state,
    .bundle(cfg_bundle), .in_last, .b_add, .b_clr
  );

  // ---- input path: Q(u) and input item memory ------------------------
  logic [DB-1:0] q_in;
  logic          q_in_sat;
  logic [DB-1:0] in_idx;
  logic [N-1:0]  u_hd;

  quantizer #(.IW(IW), .FRAC(FRAC), .QSCALE(QSCALE), .LEVELS(D),
              .OFFSET((D - 1) / 2)) u_qin (
    .v(in_u), .idx(q_in), .sat(q_in_sat)
  );

  assign in_idx = cfg_in_quant ? q_in : in_u[DB-1:0];

  item_memory #(.N(N), .DEPTH(D)) u_im_in (
    .clk,
    .we(ld_we && ld_sel == 2'(LD_IN_ITEM)), .waddr(ld_addr[DB-1:0]),
    .wdata(ld_data[N-1:0]),
    .re(im_re), .raddr(in_idx), .rdata(u_hd)
  );

  // ---- analog mapping: ternary pixel vectors and their bundle --------
  logic [DB-1:0]   key_q;
  logic [PW:0]     dens_q;
  logic [N-1:0]    nz;
  logic [N*BW-1:0] u_int;
  logic            b_sat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      key_q  <= '0;
      dens_q <= '0;
    end else if (in_valid && in_ready) begin
      key_q  <= in_idx;
      dens_q <= in_density;
    end
  end

  sparse_encoder #(.N(N), .PW(PW), .KW(DB)) u_sparse (
    .key(key_q), .density(dens_q), .nz
  );

  bundler #(.N(N), .BW(BW)) u_bundle (
    .clk, .rst_n, .clr(res_clr || b_clr), .add(b_add),
    .v(u_hd), .nz, .sum(u_int), .sat(b_sat)
  );

  // a lane of this output's pattern bundle saturated; held with the output
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       out_bsat <= 1'b0;
    else if (res_clr) out_bsat <= 1'b0;
    else if (res_upd) out_bsat <= b_sat;
  end

  // ---- feedback path: Q(y) and output item memory -------------------
  logic [QB-1:0] fb_level, q_y, q_t;
  logic          q_y_sat, q_t_sat;
  logic [N-1:0]  y_hd;
  logic [IW-1:0] teacher_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                   teacher_q <= '0;
    else if (in_valid && in_ready) teacher_q <= in_teacher;
  end

  quantizer #(.IW(IW), .FRAC(FRAC), .QSCALE(QSCALE), .LEVELS(M),
              .OFFSET((M - 1) / 2)) u_qteach (
    .v(teacher_q), .idx(q_t), .sat(q_t_sat)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       fb_level <= QB'((M - 1) / 2);
    else if (res_clr) fb_level <= QB'((M - 1) / 2);
    else if (fb_cap)  fb_level <= cfg_teacher ? q_t : q_y;
  end

  item_memory #(.N(N), .DEPTH(M)) u_im_out (
    .clk,
    .we(ld_we && ld_sel == 2'(LD_OUT_ITEM)), .waddr(ld_addr[QB-1:0]),
    .wdata(ld_data[N-1:0]),
    .re(im_re), .raddr(fb_level), .rdata(y_hd)
  );

  // ---- reservoir -------------------------------------------------------
  logic [N*XW-1:0] x;

  reservoir #(.N(N), .KAPPA(KAPPA), .UW(BW)) u_res (
    .clk, .rst_n, .clr(res_clr), .upd(res_upd),
    .u_hd, .in_en(cfg_in_en), .u_int, .vec_en(cfg_bundle), .y_hd, .fb_en(cfg_fb_en),
    .x, .sat_cnt(out_clip_cnt)
  );

  // ---- readout, output activation and output quantizer --------------
  readout #(.N(N), .KAPPA(KAPPA), .L(L), .WW(WW), .AW(AW)) u_ro (
    .clk, .rst_n,
    .we(ld_we && ld_sel == 2'(LD_WOUT)), .waddr(ld_addr[NB-1:0]),
    .wdata(ld_data[L*WW-1:0]),
    .start(ro_start), .x, .busy(ro_busy), .done(ro_done), .y(out_y)
  );

  logic signed [AW-1:0] win_val;

  wta #(.L(L), .AW(AW)) u_wta (
    .y(out_y), .win(out_token), .win_val(win_val)
  );

  quantizer #(.IW(AW), .FRAC(FRAC), .QSCALE(QSCALE), .LEVELS(M),
              .OFFSET((M - 1) / 2)) u_qout (
    .v(out_y[AW-1:0]), .idx(q_y), .sat(q_y_sat)
  );

  assign out_level = q_y;
  assign out_qsat  = q_y_sat;

  // ---- hardware cycle timer -------------------------------------------
  cycle_timer #(.W(64)) u_timer (
    .clk, .rst_n, .clr(tm_clr), .run(tm_run), .count(tm_count), .ovf(tm_ovf)
  );

  // tables are only rewritten while no step is in flight
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    ld_we |-> !busy);

endmodule
