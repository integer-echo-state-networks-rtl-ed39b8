// tb_reservoir: drives random bipolar input and feedback hypervectors into
// the reservoir (N = 300, kappa = 3, and a second instance with N = 11,
// kappa = 7) and compares every neuron after every update with a software
// model of x(n) = clip(Sh(x(n-1),1) + u + y). The model builds the shift as
// the permutation matrix W with W[i][(i+1) mod N] = 1 and multiplies it out.
// Also checks the clipped-neuron count, hold when upd is low, and clear.
// Instance A also gets random signed integer input vectors (vec_en), the
// path a bundled image takes, in a random third of its updates.
module tb_reservoir;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // ---------------- instance A: defaults -----------------------------------
  localparam int NA = 300, KA = 3, XA = 3;
  logic clrA = 0, updA = 0, inA = 1, fbA = 0;
  logic [NA-1:0] uA, yA;
  logic [NA*XA-1:0] xA;
  logic [8:0] satA;
  logic [NA*8-1:0] viA = '0;
  logic veA = 0;
  reservoir dutA (.clk, .rst_n, .clr(clrA), .upd(updA), .u_hd(uA), .in_en(inA),
                  .u_int(viA), .vec_en(veA),
                  .y_hd(yA), .fb_en(fbA), .x(xA), .sat_cnt(satA));

  // ---------------- instance B: N = 11, kappa = 7 --------------------------
  localparam int NB = 11, KB = 7, XB = 4;
  logic clrB = 0, updB = 0, inB = 1, fbB = 1;
  logic [NB-1:0] uB, yB;
  logic [NB*XB-1:0] xB;
  logic [3:0] satB;
  reservoir #(.N(NB), .KAPPA(KB)) dutB (.clk, .rst_n, .clr(clrB), .upd(updB), .u_hd(uB),
                  .in_en(inB), .u_int('0), .vec_en(1'b0), .y_hd(yB), .fb_en(fbB), .x(xB), .sat_cnt(satB));

  int mA [NA];
  int mB [NB];

  // x_new = clip(W x + u + y) with W the printed permutation matrix
  function automatic void model_step(ref int m [], input int n, input int kappa,
                                     input logic [NA-1:0] u, input bit ue,
                                     input logic [NA-1:0] y, input bit fe,
                                     input int iv [], input bit ve,
                                     output int nsat);
    int t [];
    t = new[n];
    nsat = 0;
    for (int i = 0; i < n; i++) begin
      int acc;
      acc = 0;
      for (int k = 0; k < n; k++) acc += ((k == (i + 1) % n) ? 1 : 0) * m[k];
      if (ve) acc += iv[i];
      else if (ue) acc += u[i] ? 1 : -1;
      if (fe) acc += y[i] ? 1 : -1;
      if (acc > kappa) begin acc = kappa; nsat++; end
      if (acc < -kappa) begin acc = -kappa; nsat++; end
      t[i] = acc;
    end
    for (int i = 0; i < n; i++) m[i] = t[i];
  endfunction

  function automatic logic [NA-1:0] rnd_vec();
    logic [NA-1:0] r;
    for (int k = 0; k < NA; k += 32) r[k +: 32] = $urandom;
    return r;
  endfunction

  task automatic compare_all(input int expsatA, input int expsatB);
    for (int i = 0; i < NA; i++) begin
      checks++;
      if ($signed(xA[i*XA +: XA]) != mA[i]) begin
        failures++;
        if (failures < 10) $display("FAIL A neuron %0d = %0d exp %0d", i, $signed(xA[i*XA +: XA]), mA[i]);
      end
    end
    for (int i = 0; i < NB; i++) begin
      checks++;
      if ($signed(xB[i*XB +: XB]) != mB[i]) begin
        failures++;
        if (failures < 10) $display("FAIL B neuron %0d = %0d exp %0d", i, $signed(xB[i*XB +: XB]), mB[i]);
      end
    end
    checks += 2;
    if (int'(satA) != expsatA) begin failures++; $display("FAIL satA %0d exp %0d", satA, expsatA); end
    if (int'(satB) != expsatB) begin failures++; $display("FAIL satB %0d exp %0d", satB, expsatB); end
  endtask

  int clipped_total = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sA, sB, lastA, lastB;
    int mA_d [], mB_d [], ivA [], ivB [];
    uA = '0; yA = '0; uB = '0; yB = '0;
    mA_d = new[NA]; mB_d = new[NB]; ivA = new[NA]; ivB = new[NB];
    foreach (mA_d[i]) mA_d[i] = 0;
    foreach (mB_d[i]) mB_d[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all(0, 0);
    lastA = 0; lastB = 0;
    for (int t = 0; t < 400; t++) begin
      logic [NA-1:0] u2, y2;
      bit do_upd;
      u2 = rnd_vec(); y2 = rnd_vec();
      // bias some phases so the state runs into the clipping bounds
      if ((t / 40) % 3 == 1) begin u2 = '1; y2 = '1; end
      if ((t / 40) % 3 == 2) begin u2 = u2 & rnd_vec(); y2 = '0; end
      do_upd = ($urandom_range(0, 4) != 0);
      uA = u2; yA = y2; inA = ($urandom_range(0, 5) != 0); fbA = $urandom_range(0, 1);
      uB = u2[NB-1:0]; yB = y2[NB-1:0]; inB = 1; fbB = $urandom_range(0, 1);
      veA = ($urandom_range(0, 2) == 0);
      for (int i = 0; i < NA; i++) begin
        ivA[i] = $urandom_range(0, 7) == 0 ? int'($urandom_range(0, 254)) - 127
                                           : int'($urandom_range(0, 12)) - 6;
        viA[i*8 +: 8] = 8'(ivA[i]);
      end
      updA = do_upd; updB = do_upd;
      clrA = (t == 200); clrB = (t == 200);
      @(posedge clk);
      #1;
      if (t == 200) begin
        foreach (mA_d[i]) mA_d[i] = 0;
        foreach (mB_d[i]) mB_d[i] = 0;
        lastA = 0; lastB = 0;
      end else if (do_upd) begin
        model_step(mA_d, NA, KA, u2, inA, y2, fbA, ivA, veA, sA);
        model_step(mB_d, NB, KB, {{(NA-NB){1'b0}}, u2[NB-1:0]}, 1'b1,
                   {{(NA-NB){1'b0}}, y2[NB-1:0]}, fbB, ivB, 1'b0, sB);
        lastA = sA; lastB = sB;
        clipped_total += sA;
      end
      foreach (mA_d[i]) mA[i] = mA_d[i];
      foreach (mB_d[i]) mB[i] = mB_d[i];
      @(negedge clk);
      compare_all(lastA, lastB);
    end
    checks++;
    if (clipped_total == 0) begin failures++; $display("FAIL clipping never exercised"); end
    $display("clipped neuron-updates: %0d", clipped_total);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
