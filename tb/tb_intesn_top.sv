// tb_intesn_top: end-to-end test of the intESN accelerator at its default
// size (N = 300, kappa = 3, 27 tokens, 27 outputs, 101 feedback levels).
//
// A host model loads the tables, streams samples in and takes results out
// with random gaps and back-pressure. Every result (all 27 readout sums, the
// winning token, the quantized level) is compared with a reference model of
// the network kept here, written directly from the update equation
//   x(n) = clip_kappa(Sh(x(n-1),1) + u_hd(n) + y_hd(n-1)),  y(n) = W_out x(n).
// Phases:
//   1. sequence recall (token input, no feedback): random bipolar token
//      vectors; for delays d = 0, 2, 5 the readout is loaded with the token
//      vectors shifted by d (the item-memory decoding readout), and the
//      recall accuracy of the token seen d steps earlier is reported;
//   2. quantized continuous input (input Q block);
//   3. signal generation: no input, output feedback through Q(y) and the
//      output item memory, first teacher-forced with 0.5 sin(n/4) and then
//      free-running on the network's own prediction;
//   4. pattern (image) mode: patterns of 27 pixels with random values, each
//      pixel mapped to a ternary vector whose kept fraction is its value and
//      bundled; the readout is loaded with the pixels' item vectors, so that
//      output l estimates the value of pixel l, and the correlation between
//      stored and read-out values is reported. A pattern of 150 repeats of
//      one full-valued pixel drives the bundle into saturation.
// The number of cycles of an unstalled step is measured with the cycle timer.
// Each mechanism (clipping, quantizer saturation, output stall, input gap,
// teacher forcing, free-running feedback, quantized input, reservoir clear,
// multi-pixel pattern, bundle saturation)
// is counted and must occur at least once.
module tb_intesn_top;
  import intesn_pkg::*;
  localparam int N = 300, KAPPA = 3, D = 27, L = 27, M = 101, WW = 16, AW = 32;
  localparam int XW = 3, LDW = (N > L * WW) ? N : L * WW;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_in_en = 1, cfg_in_quant = 0, cfg_fb_en = 0, cfg_teacher = 0, res_clr = 0;
  logic cfg_bundle = 0, in_last = 0, out_bsat;
  logic [8:0] in_density = 0;
  logic ld_we = 0;
  logic [1:0] ld_sel = 0;
  logic [15:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = 0;
  logic in_valid = 0, in_ready;
  logic [15:0] in_u = 0, in_teacher = 0;
  logic out_valid, out_ready = 0;
  logic [4:0] out_token;
  logic [L*AW-1:0] out_y;
  logic [6:0] out_level;
  logic out_qsat;
  logic [8:0] out_clip_cnt;
  logic busy;
  logic tm_clr = 0, tm_run = 0;
  logic [63:0] tm_count;
  logic tm_ovf;

  intesn_top dut (.*);

  // ---------------- reference model ---------------------------------------
  logic [N-1:0] im_in  [D];
  logic [N-1:0] im_out [M];
  int wout [L][N];
  int xm [N];
  int fb_level;
  longint ym [L];
  int tok_m, lvl_m, clip_m;
  bit qsat_m;
  int bm [N];
  bit bsat_m, obsat_m;

  // element j of item k kept at density d (units of 1/256): hash rule
  function automatic bit keep(input int unsigned k, input int unsigned j, input int unsigned d);
    bit [31:0] h;
    h = (32'(k) * 32'h9E37_79B1) ^ (32'(j) * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return (h[31:24] < d);
  endfunction

  // add one pixel's ternary vector to the model bundle
  function automatic void model_add(input int k, input int d);
    for (int j = 0; j < N; j++) if (keep(k, j, d)) begin
      int e;
      e = bm[j] + (im_in[k][j] ? 1 : -1);
      if (e > 127 || e < -127) bsat_m = 1;
      else bm[j] = e;
    end
  endfunction

  function automatic void qref(input real v, input int scale, input int levels,
                               output int idx, output bit sat);
    int q;
    q = int'($floor(v * scale + 0.5)) + (levels - 1) / 2;
    sat = 0;
    if (q < 0) begin q = 0; sat = 1; end
    if (q > levels - 1) begin q = levels - 1; sat = 1; end
    idx = q;
  endfunction

  function automatic logic [N-1:0] rnd_vec();
    logic [N-1:0] r;
    for (int k = 0; k < N; k += 32) r[k +: 32] = $urandom;
    return r;
  endfunction

  // one network step of the model
  function automatic void model_step(input int in_idx, input bit in_en, input bit fb_en);
    int t [N];
    clip_m = 0;
    for (int i = 0; i < N; i++) begin
      int s;
      s = xm[(i + 1) % N];
      if (cfg_bundle) s += bm[i];
      else if (in_en) s += im_in[in_idx][i] ? 1 : -1;
      if (fb_en) s += im_out[fb_level][i] ? 1 : -1;
      if (s > KAPPA) begin s = KAPPA; clip_m++; end
      if (s < -KAPPA) begin s = -KAPPA; clip_m++; end
      t[i] = s;
    end
    xm = t;
    obsat_m = bsat_m;
    if (cfg_bundle) begin
      foreach (bm[i]) bm[i] = 0;
      bsat_m = 0;
    end
    tok_m = 0;
    for (int l = 0; l < L; l++) begin
      ym[l] = 0;
      for (int j = 0; j < N; j++) ym[l] += longint'(wout[l][j]) * xm[j];
      if (ym[l] > ym[tok_m]) tok_m = l;
    end
    qref(real'(ym[0]) / 4096.0, 100, M, lvl_m, qsat_m);
  endfunction

  // ---------------- host side ----------------------------------------------
  task automatic load(input int sel, input int addr, input logic [LDW-1:0] data);
    @(negedge clk);
    ld_we = 1; ld_sel = 2'(sel); ld_addr = 16'(addr); ld_data = data;
    @(negedge clk);
    ld_we = 0;
  endtask

  task automatic load_wout();
    for (int j = 0; j < N; j++) begin
      logic [LDW-1:0] d;
      d = '0;
      for (int l = 0; l < L; l++) d[l*WW +: WW] = 16'(wout[l][j]);
      load(2, j, d);
    end
  endtask

  task automatic clear_reservoir();
    @(negedge clk);
    res_clr = 1;
    @(negedge clk);
    res_clr = 0;
    foreach (xm[i]) xm[i] = 0;
    foreach (bm[i]) bm[i] = 0;
    bsat_m = 0;
    fb_level = (M - 1) / 2;
    n_clear++;
  endtask

  int n_clip = 0, n_qsat = 0, n_out_stall = 0, n_in_gap = 0, n_teacher = 0,
      n_free = 0, n_quant_in = 0, n_clear = 0, n_steps = 0, n_pattern = 0, n_bsat = 0;

  // pattern mode: one pixel that is not the last of its pattern (no output)
  task automatic send_pixel(input int k, input int d);
    @(negedge clk);
    in_valid = 1; in_u = 16'(k); in_density = 9'(d); in_last = 0;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    model_add(k, d);
  endtask
  bit stalls_on = 1;

  // one step: send a sample, wait for the result, compare with the model
  task automatic step(input int u_val, input int teacher_val, output int got_tok);
    int in_idx;
    bit s;
    if (stalls_on && $urandom_range(0, 3) == 0) begin
      n_in_gap++;
      repeat ($urandom_range(1, 3)) @(negedge clk);
    end
    @(negedge clk);
    in_valid = 1; in_u = 16'(u_val); in_teacher = 16'(teacher_val); in_last = cfg_bundle;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    if (cfg_in_quant) begin
      qref(real'($signed(16'(u_val))) / 4096.0, 100, D, in_idx, s);
      n_quant_in++;
    end else begin
      in_idx = u_val;
    end
    if (cfg_bundle) begin
      model_add(in_idx, int'(in_density));
      n_pattern++;
    end
    model_step(in_idx, cfg_in_en, cfg_fb_en);
    while (!out_valid) @(negedge clk);
    if (stalls_on && $urandom_range(0, 3) == 0) begin
      n_out_stall++;
      repeat ($urandom_range(1, 4)) begin
        @(negedge clk);
        checks++;
        if (!out_valid) begin failures++; $display("FAIL out_valid dropped"); end
      end
    end
    for (int l = 0; l < L; l++) begin
      checks++;
      if ($signed(out_y[l*AW +: AW]) != int'(ym[l])) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d y[%0d] = %0d exp %0d", n_steps, l, $signed(out_y[l*AW +: AW]), ym[l]);
      end
    end
    checks += 4;
    if (int'(out_token) != tok_m) begin failures++; if (failures < 10) $display("FAIL step %0d token %0d exp %0d", n_steps, out_token, tok_m); end
    if (int'(out_level) != lvl_m) begin failures++; if (failures < 10) $display("FAIL step %0d level %0d exp %0d", n_steps, out_level, lvl_m); end
    if (out_qsat != qsat_m) begin failures++; $display("FAIL step %0d qsat", n_steps); end
    checks++;
    if (out_bsat != obsat_m) begin failures++; $display("FAIL step %0d bundle saturation flag", n_steps); end
    if (obsat_m) n_bsat++;
    if (int'(out_clip_cnt) != clip_m) begin failures++; if (failures < 10) $display("FAIL step %0d clip %0d exp %0d", n_steps, out_clip_cnt, clip_m); end
    if (clip_m > 0) n_clip++;
    if (qsat_m) n_qsat++;
    got_tok = out_token;
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
    // feedback level for the next step
    if (cfg_teacher) begin
      qref(real'($signed(16'(teacher_val))) / 4096.0, 100, M, fb_level, s);
      n_teacher++;
    end else begin
      fb_level = lvl_m;
      if (cfg_fb_en) n_free++;
    end
    n_steps++;
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int tokens [$];
  int delays [3] = '{0, 2, 5};

  initial begin
    int got;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (xm[i]) xm[i] = 0;
    fb_level = (M - 1) / 2;

    // tables: random token vectors; feedback level vectors preserve linear
    // similarity (level k flips the first k*N/(2*(M-1)) positions of a random
    // order of the elements of a random base vector)
    for (int a = 0; a < D; a++) begin im_in[a] = rnd_vec(); load(0, a, LDW'(im_in[a])); end
    begin
      int order [N];
      logic [N-1:0] base;
      base = rnd_vec();
      foreach (order[i]) order[i] = i;
      order.shuffle();
      for (int k = 0; k < M; k++) begin
        im_out[k] = base;
        for (int f = 0; f < k * N / (2 * (M - 1)); f++) im_out[k][order[f]] = ~base[order[f]];
        load(1, k, LDW'(im_out[k]));
      end
    end

    // ---- cycles of one unstalled step, from the cycle timer ----------------
    for (int l = 0; l < L; l++) for (int j = 0; j < N; j++) wout[l][j] = 0;
    load_wout();
    clear_reservoir();
    @(negedge clk);
    tm_clr = 1; @(negedge clk); tm_clr = 0;
    in_valid = 1; in_u = 0; tm_run = 1;
    @(negedge clk);
    in_valid = 0;
    out_ready = 1;
    while (!(out_valid && out_ready)) @(negedge clk);
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    tm_run = 0; out_ready = 0;
    model_step(0, 1, 0);
    fb_level = lvl_m;
    checks++;
    if (tm_count != 64'(N + 5)) begin failures++; $display("FAIL step takes %0d cycles, expected %0d", tm_count, N + 5); end
    $display("cycles per step (accept to next accept): %0d", tm_count);

    // ---- phase 1: sequence recall ------------------------------------------
    cfg_in_en = 1; cfg_in_quant = 0; cfg_fb_en = 0; cfg_teacher = 0;
    foreach (delays[k]) begin
      int d, correct, total;
      d = delays[k];
      for (int l = 0; l < L; l++)
        for (int j = 0; j < N; j++) wout[l][j] = im_in[l][(j + d) % N] ? 16 : -16;
      load_wout();
      clear_reservoir();
      tokens.delete();
      correct = 0; total = 0;
      for (int t = 0; t < 120; t++) begin
        int tk;
        tk = $urandom_range(0, D - 1);
        tokens.push_back(tk);
        step(tk, 0, got);
        if (t >= 20) begin
          total++;
          if (got == tokens[t - d]) correct++;
        end
      end
      $display("sequence recall N=%0d kappa=%0d delay %0d: %0d/%0d correct", N, KAPPA, d, correct, total);
      if (d == 0) begin
        checks++;
        if (correct * 10 < total * 9) begin failures++; $display("FAIL recall at delay 0 below 90%%"); end
      end
    end

    // ---- phase 2: quantized continuous input -------------------------------
    cfg_in_quant = 1;
    for (int l = 0; l < L; l++) for (int j = 0; j < N; j++) wout[l][j] = int'($urandom_range(0, 80)) - 40;
    load_wout();
    for (int t = 0; t < 40; t++) step(int'($urandom_range(0, 1400)) - 700, 0, got);

    // ---- phase 3: signal generation with output feedback -------------------
    cfg_in_quant = 0; cfg_in_en = 0; cfg_fb_en = 1; cfg_teacher = 1;
    clear_reservoir();
    for (int l = 0; l < L; l++) for (int j = 0; j < N; j++) wout[l][j] = int'($urandom_range(0, 120)) - 60;
    load_wout();
    for (int t = 0; t < 60; t++)
      step(0, int'($floor(0.5 * $sin(t / 4.0) * 4096.0 + 0.5)), got);
    cfg_teacher = 0;
    for (int t = 0; t < 60; t++) step(0, 0, got);

    // ---- phase 4: pattern mode, ternary pixel vectors bundled -----------------
    cfg_fb_en = 0; cfg_in_en = 1; cfg_bundle = 1;
    clear_reservoir();
    for (int l = 0; l < L; l++)
      for (int j = 0; j < N; j++) wout[l][j] = im_in[l][j] ? 16 : -16;
    load_wout();
    begin
      real sx, sy, sxx, syy, sxy, r;
      int np;
      sx = 0; sy = 0; sxx = 0; syy = 0; sxy = 0; np = 0;
      for (int t = 0; t < 12; t++) begin
        int dv [D];
        foreach (dv[k]) dv[k] = $urandom_range(0, 256);
        for (int k = 0; k < D - 1; k++) send_pixel(k, dv[k]);
        in_density = 9'(dv[D - 1]);
        step(D - 1, 0, got);
        if (t >= 2) for (int l = 0; l < L; l++) begin
          real a, b;
          a = real'(dv[l]) / 256.0; b = real'($signed(out_y[l*AW +: AW]));
          sx += a; sy += b; sxx += a * a; syy += b * b; sxy += a * b; np++;
        end
      end
      r = (np * sxy - sx * sy) / $sqrt((np * sxx - sx * sx) * (np * syy - sy * sy));
      $display("pattern mode: correlation of pixel value and its readout %0.3f", r);
      checks++;
      if (r < 0.5) begin failures++; $display("FAIL pixel values not recovered"); end
    end
    clear_reservoir();
    for (int k = 0; k < 149; k++) send_pixel(3, 256);
    in_density = 9'd256;
    step(3, 0, got);
    cfg_bundle = 0;

    // ---- mechanism coverage -----------------------------------------------
    $display("steps %0d: clipping %0d, quantizer saturation %0d, output stalls %0d, input gaps %0d,",
             n_steps, n_clip, n_qsat, n_out_stall, n_in_gap);
    $display("  teacher-forced %0d, free-running feedback %0d, quantized inputs %0d, clears %0d",
             n_teacher, n_free, n_quant_in, n_clear);
    $display("  patterns %0d, bundle saturation %0d", n_pattern, n_bsat);
    checks += 10;
    if (n_pattern == 0)   begin failures++; $display("FAIL no pattern"); end
    if (n_bsat == 0)      begin failures++; $display("FAIL bundle never saturated"); end
    if (n_clip == 0)      begin failures++; $display("FAIL clipping never happened"); end
    if (n_qsat == 0)      begin failures++; $display("FAIL quantizer saturation never happened"); end
    if (n_out_stall == 0) begin failures++; $display("FAIL no output stall"); end
    if (n_in_gap == 0)    begin failures++; $display("FAIL no input gap"); end
    if (n_teacher == 0)   begin failures++; $display("FAIL no teacher forcing"); end
    if (n_free == 0)      begin failures++; $display("FAIL no free-running feedback"); end
    if (n_quant_in == 0)  begin failures++; $display("FAIL no quantized input"); end
    if (n_clear == 0)     begin failures++; $display("FAIL no reservoir clear"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
