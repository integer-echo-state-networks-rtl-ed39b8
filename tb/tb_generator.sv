// tb_generator: the two signal-generation workloads on the accelerator built
// with the reservoir size of those experiments (N = 1000, kappa = 3, one
// output, no input, feedback quantized as round(100 y)/100):
//   1. y(n) = 0.5 sin(n/4);
//   2. the Mackey-Glass series dx/dt = 0.2 x(t-17) / (1 + x(t-17)^10) - 0.1 x(t),
//      integrated with Euler steps of 0.1, sampled once per time unit and
//      squashed as tanh(x - 1), which places it roughly in [-0.5, 0.3].
// Both run through the same procedure below.
//
// Feedback level vectors: a random base vector; level k has the first
// k*N/200 positions of a random order inverted, so similarity falls
// linearly across the 101 levels.
// Training (host software, done here): 3000 teacher-forced steps of a
// reference model, the first 1000 discarded; the readout is fitted by ridge
// regression (Cholesky solve) and rounded to 16-bit weights with 12
// fractional bits. A small ridge term is used because, with a purely periodic
// teacher signal, the Gram matrix of the collected states is singular.
// Run (hardware): the reservoir is cleared, driven for 200 teacher-forced
// steps, then left free-running on its own quantized prediction for 100
// steps (300 for Mackey-Glass). Every hardware output is checked against the
// reference model, and the prediction error against the true signal is
// printed; the checks ask for a mean absolute error below 0.1 over the first
// 25 free-running steps (sine) and over the first 50 (Mackey-Glass).
module tb_generator;
  import intesn_pkg::*;
  localparam int N = 1000, KAPPA = 3, L = 1, M = 101, WW = 16, AW = 32;
  localparam int LDW = N;
  localparam int TRAIN = 3000, SKIP = 1000, TF = 200, MAXFREE = 300;
  localparam int LEN = TRAIN + TF + MAXFREE;
  localparam real LAMBDA = 1.0e-2;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_in_en = 0, cfg_in_quant = 0, cfg_fb_en = 1, cfg_teacher = 1, res_clr = 0;
  logic ld_we = 0;
  logic [1:0] ld_sel = 0;
  logic [15:0] ld_addr = 0;
  logic [LDW-1:0] ld_data = 0;
  logic in_valid = 0, in_ready;
  logic [15:0] in_u = 0, in_teacher = 0;
  logic out_valid, out_ready = 0;
  logic [0:0] out_token;
  logic [AW-1:0] out_y;
  logic [6:0] out_level;
  logic out_qsat;
  logic [9:0] out_clip_cnt;
  logic busy;
  logic tm_clr = 0, tm_run = 0;
  logic [63:0] tm_count;
  logic tm_ovf;

  logic cfg_bundle = 0, in_last = 0, out_bsat;
  logic [8:0] in_density = '0;
  intesn_top #(.N(N), .KAPPA(KAPPA), .L(L)) dut (.*);

  logic [N-1:0] im_out [M];
  int xm [N];
  real G [N][N];
  real b [N];
  int wq [N];

  real sig [LEN];   // the signal of the workload being run

  function automatic real truth(input int n);
    return sig[n];
  endfunction

  task automatic make_sine();
    for (int n = 0; n < LEN; n++) sig[n] = 0.5 * $sin(real'(n) / 4.0);
  endtask

  localparam int SUB = 10, DL = 170;   // Mackey-Glass: dt = 0.1, delay 17

  task automatic make_mackey_glass();
    real hist [DL + 1];
    real x;
    int p;
    foreach (hist[i]) hist[i] = 1.2;
    x = 1.2;
    p = 0;
    // 1000 time units of transient, then one sample per time unit
    for (int n = -1000; n < LEN; n++) begin
      for (int k = 0; k < SUB; k++) begin
        real xd;
        xd = hist[p];
        hist[p] = x;
        p = (p + 1) % (DL + 1);
        x = x + 0.1 * (0.2 * xd / (1.0 + xd ** 10) - 0.1 * x);
      end
      if (n >= 0) sig[n] = (($exp(2.0 * (x - 1.0)) - 1.0) / ($exp(2.0 * (x - 1.0)) + 1.0));
    end
  endtask

  function automatic int fix(input real v);
    return int'($floor(v * 4096.0 + 0.5));
  endfunction

  function automatic int level(input real v);
    int q;
    q = int'($floor(v * 100.0 + 0.5)) + 50;
    return (q < 0) ? 0 : ((q > 100) ? 100 : q);
  endfunction

  function automatic void model_step(input int fb);
    int t [N];
    for (int i = 0; i < N; i++) begin
      int s;
      s = xm[(i + 1) % N] + (im_out[fb][i] ? 1 : -1);
      t[i] = (s > KAPPA) ? KAPPA : ((s < -KAPPA) ? -KAPPA : s);
    end
    xm = t;
  endfunction

  function automatic longint model_y();
    longint s;
    s = 0;
    for (int j = 0; j < N; j++) s += longint'(wq[j]) * xm[j];
    return s;
  endfunction

  initial begin
    repeat (10000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hw_step(input int teacher, output int y);
    @(negedge clk);
    in_valid = 1; in_teacher = 16'(teacher);
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 0;
    while (!out_valid) @(negedge clk);
    y = $signed(out_y);
    out_ready = 1;
    @(negedge clk);
    out_ready = 0;
  endtask

  task automatic run(input string name, input int FREE, input int NMAE);
    int fb, sat, y;
    real err, mae25;
    mae25 = 0.0;
    $display("---- %s ----", name);

    // ---- feedback level vectors --------------------------------------------
    begin
      int order [N];
      logic [N-1:0] base;
      for (int k = 0; k < N; k += 32) base[k +: 32] = $urandom;
      foreach (order[i]) order[i] = i;
      order.shuffle();
      for (int k = 0; k < M; k++) begin
        im_out[k] = base;
        for (int f = 0; f < k * N / (2 * (M - 1)); f++) im_out[k][order[f]] = ~base[order[f]];
        @(negedge clk);
        ld_we = 1; ld_sel = 2'(LD_OUT_ITEM); ld_addr = 16'(k); ld_data = im_out[k];
      end
      @(negedge clk); ld_we = 0;
    end

    // ---- teacher-forced training on the reference model ---------------------
    foreach (xm[i]) xm[i] = 0;
    for (int i = 0; i < N; i++) begin b[i] = 0.0; for (int j = 0; j < N; j++) G[i][j] = 0.0; end
    fb = 50;
    for (int n = 0; n < TRAIN; n++) begin
      model_step(fb);
      if (n >= SKIP) begin
        real yt;
        yt = truth(n);
        for (int i = 0; i < N; i++) begin
          if (xm[i] == 0) continue;
          for (int j = i; j < N; j++) G[i][j] += real'(xm[i] * xm[j]);
          b[i] += real'(xm[i]) * yt;
        end
      end
      fb = level(real'(fix(truth(n))) / 4096.0);
    end
    for (int i = 0; i < N; i++) begin
      G[i][i] += LAMBDA;
      for (int j = 0; j < i; j++) G[i][j] = G[j][i];
    end
    for (int j = 0; j < N; j++) begin
      real s;
      s = G[j][j];
      for (int k = 0; k < j; k++) s -= G[j][k] * G[j][k];
      if (s <= 0.0) begin failures++; $display("FAIL not positive definite at %0d", j); s = 1e-9; end
      G[j][j] = $sqrt(s);
      for (int i = j + 1; i < N; i++) begin
        real r;
        r = G[i][j];
        for (int k = 0; k < j; k++) r -= G[i][k] * G[j][k];
        G[i][j] = r / G[j][j];
      end
    end
    for (int i = 0; i < N; i++) begin
      real r;
      r = b[i];
      for (int k = 0; k < i; k++) r -= G[i][k] * b[k];
      b[i] = r / G[i][i];
    end
    for (int i = N - 1; i >= 0; i--) begin
      real r;
      r = b[i];
      for (int k = i + 1; k < N; k++) r -= G[k][i] * b[k];
      b[i] = r / G[i][i];
    end
    sat = 0;
    for (int j = 0; j < N; j++) begin
      int q;
      q = fix(b[j]);
      if (q > 32767) begin q = 32767; sat++; end
      if (q < -32768) begin q = -32768; sat++; end
      wq[j] = q;
      @(negedge clk);
      ld_we = 1; ld_sel = 2'(LD_WOUT); ld_addr = 16'(j); ld_data = LDW'(16'(q));
    end
    @(negedge clk); ld_we = 0;
    $display("readout trained, %0d of %0d weights saturated", sat, N);

    // ---- hardware run: teacher forcing, then free-running -------------------
    @(negedge clk); res_clr = 1; @(negedge clk); res_clr = 0;
    foreach (xm[i]) xm[i] = 0;
    fb = 50;
    cfg_teacher = 1;
    for (int n = 0; n < TF + FREE; n++) begin
      longint ym;
      if (n == TF) cfg_teacher = 0;
      hw_step(fix(truth(n)), y);
      model_step(fb);
      ym = model_y();
      checks++;
      if (longint'(y) != ym) begin
        failures++;
        if (failures < 10) $display("FAIL step %0d y %0d model %0d", n, y, ym);
      end
      fb = cfg_teacher ? level(real'(fix(truth(n))) / 4096.0) : level(real'(ym) / 4096.0);
      if (n >= TF) begin
        err = real'(y) / 4096.0 - truth(n);
        if (err < 0) err = -err;
        if (n < TF + NMAE) mae25 += err / real'(NMAE);
        if ((n - TF) % 25 == 0 || n - TF < 3)
          $display("free-running step %3d: y %7.4f  truth %7.4f", n - TF, real'(y) / 4096.0, truth(n));
      end
    end
    $display("%s: mean absolute error over the first %0d free-running steps: %6.4f", name, NMAE, mae25);
    checks++;
    if (!(mae25 < 0.1)) begin failures++; $display("FAIL %s generation error too large", name); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    make_sine();
    run("sine 0.5 sin(n/4)", 100, 25);
    make_mackey_glass();
    run("Mackey-Glass", 300, 50);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
