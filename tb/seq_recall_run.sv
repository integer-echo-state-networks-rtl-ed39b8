// seq_recall_run: one run of the sequence-recall workload on an accelerator
// with N neurons (kappa = 3, 27 tokens, 27 one-hot outputs). Used by
// tb_seq_recall for the three reservoir sizes built in hardware.
//
// Training (host software, done here in the testbench): 2000 random tokens
// are run through a reference model of the reservoir; the states of the last
// 1500 steps are collected and, for every delay d = 0..15, a readout is fitted
// by least squares (ridge regression with lambda = 0, solved by Cholesky
// factorisation of the Gram matrix) to the one-hot code of the token seen d
// steps earlier. Weights are rounded to 16-bit fixed point with 12
// fractional bits.
// Recall (hardware): for each delay the readout is loaded, the reservoir is
// cleared, and 420 fresh random tokens are streamed in; after 20 warm-up
// steps the winner-take-all output of every step is compared with the token
// presented d steps before. Every hardware token is also checked against the
// reference model fed the same weights. Accuracy per delay is printed; the
// checks ask for at least 90 % at delay 0, at least 95 % at delays
// 1..(N-100)/50, and for accuracy that does not rise by more than 5 points
// from one delay to the next. Starts when go rises; raises finished.
module seq_recall_run
  import intesn_pkg::*;
#(
  parameter int N = 300
) (
  input  logic clk,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output real  acc8
);
  localparam int KAPPA = 3, D = 27, L = 27, M = 101, WW = 16, AW = 32;
  localparam int LDW = (N > L * WW) ? N : L * WW;
  localparam int TRAIN = 2000, SKIP = 500, TEST = 420, WARM = 20, NDEL = 16;

  logic rst_n = 0;
  initial begin finished = 0; checks = 0; failures = 0; acc8 = 0.0; end

  logic cfg_in_en = 1, cfg_in_quant = 0, cfg_fb_en = 0, cfg_teacher = 0, res_clr = 0;
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
  logic [$clog2(N+1)-1:0] out_clip_cnt;
  logic busy;
  logic tm_clr = 0, tm_run = 0;
  logic [63:0] tm_count;
  logic tm_ovf;

  logic cfg_bundle = 0, in_last = 0, out_bsat;
  logic [8:0] in_density = '0;
  intesn_top #(.N(N)) dut (.*);

  logic [N-1:0] im_in [D];
  int xm [N];
  real G [N][N];          // Gram matrix X'X, then its Cholesky factor
  real B [NDEL][N][L];    // X'Y for every delay, then the weights
  int wq [L][N];

  function automatic void model_step(input int tok);
    int t [N];
    for (int i = 0; i < N; i++) begin
      int s;
      s = xm[(i + 1) % N] + (im_in[tok][i] ? 1 : -1);
      t[i] = (s > KAPPA) ? KAPPA : ((s < -KAPPA) ? -KAPPA : s);
    end
    xm = t;
  endfunction

  function automatic int model_token();
    longint best, s;
    int bi;
    bi = 0; best = 0;
    for (int l = 0; l < L; l++) begin
      s = 0;
      for (int j = 0; j < N; j++) s += longint'(wq[l][j]) * xm[j];
      if (l == 0 || s > best) begin best = s; bi = l; end
    end
    return bi;
  endfunction

  initial begin
    int seq [TRAIN];
    real acc [NDEL];
    wait (go);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- token vectors -----------------------------------------------------
    for (int a = 0; a < D; a++) begin
      for (int k = 0; k < N; k += 32) im_in[a][k +: 32] = $urandom;
      @(negedge clk);
      ld_we = 1; ld_sel = 2'(LD_IN_ITEM); ld_addr = 16'(a); ld_data = LDW'(im_in[a]);
    end
    @(negedge clk); ld_we = 0;

    // ---- training on the reference model ------------------------------------
    foreach (xm[i]) xm[i] = 0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) G[i][j] = 0.0;
    for (int d = 0; d < NDEL; d++) for (int i = 0; i < N; i++) for (int l = 0; l < L; l++) B[d][i][l] = 0.0;
    for (int t = 0; t < TRAIN; t++) begin
      seq[t] = $urandom_range(0, D - 1);
      model_step(seq[t]);
      if (t >= SKIP) begin
        for (int i = 0; i < N; i++) begin
          if (xm[i] == 0) continue;
          for (int j = i; j < N; j++) G[i][j] += real'(xm[i] * xm[j]);
          for (int d = 0; d < NDEL; d++) B[d][i][seq[t - d]] += real'(xm[i]);
        end
      end
    end
    for (int i = 0; i < N; i++) for (int j = 0; j < i; j++) G[i][j] = G[j][i];
    // Cholesky: G = R R', R lower triangular, stored in G
    for (int j = 0; j < N; j++) begin
      real s;
      s = G[j][j];
      for (int k = 0; k < j; k++) s -= G[j][k] * G[j][k];
      if (s <= 0.0) begin
        failures++;
        $display("FAIL Gram matrix not positive definite at %0d", j);
        s = 1e-9;
      end
      G[j][j] = $sqrt(s);
      for (int i = j + 1; i < N; i++) begin
        real r;
        r = G[i][j];
        for (int k = 0; k < j; k++) r -= G[i][k] * G[j][k];
        G[i][j] = r / G[j][j];
      end
    end
    // solve R R' w = b for every delay and output (forward, then backward)
    for (int d = 0; d < NDEL; d++) for (int l = 0; l < L; l++) begin
      for (int i = 0; i < N; i++) begin
        real r;
        r = B[d][i][l];
        for (int k = 0; k < i; k++) r -= G[i][k] * B[d][k][l];
        B[d][i][l] = r / G[i][i];
      end
      for (int i = N - 1; i >= 0; i--) begin
        real r;
        r = B[d][i][l];
        for (int k = i + 1; k < N; k++) r -= G[k][i] * B[d][k][l];
        B[d][i][l] = r / G[i][i];
      end
    end

    // ---- recall on the accelerator, one readout per delay ------------------
    for (int d = 0; d < NDEL; d++) begin
      int correct, total, sat;
      int tst [TEST];
      sat = 0;
      for (int j = 0; j < N; j++) begin
        logic [LDW-1:0] w;
        w = '0;
        for (int l = 0; l < L; l++) begin
          int q;
          q = int'($floor(B[d][j][l] * 4096.0 + 0.5));
          if (q > 32767) begin q = 32767; sat++; end
          if (q < -32768) begin q = -32768; sat++; end
          wq[l][j] = q;
          w[l*WW +: WW] = 16'(q);
        end
        @(negedge clk);
        ld_we = 1; ld_sel = 2'(LD_WOUT); ld_addr = 16'(j); ld_data = w;
      end
      @(negedge clk);
      ld_we = 0; res_clr = 1;
      @(negedge clk);
      res_clr = 0;
      foreach (xm[i]) xm[i] = 0;
      correct = 0; total = 0;
      for (int t = 0; t < TEST; t++) begin
        int mt;
        tst[t] = $urandom_range(0, D - 1);
        @(negedge clk);
        in_valid = 1; in_u = 16'(tst[t]);
        while (!in_ready) @(negedge clk);
        @(negedge clk);
        in_valid = 0;
        model_step(tst[t]);
        mt = model_token();
        while (!out_valid) @(negedge clk);
        checks++;
        if (int'(out_token) != mt) begin
          failures++;
          if (failures < 10) $display("FAIL delay %0d step %0d token %0d model %0d", d, t, out_token, mt);
        end
        if (t >= WARM) begin
          total++;
          if (int'(out_token) == tst[t - d]) correct++;
        end
        out_ready = 1;
        @(negedge clk);
        out_ready = 0;
      end
      acc[d] = real'(correct) / real'(total);
      $display("N=%0d delay %2d: accuracy %5.3f (%0d/%0d), saturated weights %0d", N, d, acc[d], correct, total, sat);
      if (d == 0 || d <= (N - 100) / 50) begin
        checks++;
        if (acc[d] < ((d == 0) ? 0.9 : 0.95)) begin failures++; $display("FAIL N=%0d accuracy at delay %0d too low", N, d); end
      end
      if (d > 0) begin
        checks++;
        if (acc[d] > acc[d - 1] + 0.05) begin failures++; $display("FAIL accuracy rises at delay %0d", d); end
      end
    end
    acc8 = acc[8];
    finished = 1;
  end
endmodule
