// tb_bundler: adds random ternary vectors into a small bundler (N = 40,
// 4-bit lanes so that saturation at +-7 is reached) and into one at the
// default size (N = 300, 8-bit lanes), and compares every lane after every
// cycle with a saturating integer model. Checks hold when add is low, the
// sticky saturation flag, clear, and that the sum appears one cycle after
// the add.
module tb_bundler;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  localparam int NS = 40, BS = 4, ND = 300, BD = 8;
  logic clr = 0, add = 0;
  logic [ND-1:0] v, nz;
  logic [NS*BS-1:0] sumS;
  logic [ND*BD-1:0] sumD;
  logic satS, satD;

  bundler #(.N(NS), .BW(BS)) dutS (.clk, .rst_n, .clr, .add, .v(v[NS-1:0]),
                                   .nz(nz[NS-1:0]), .sum(sumS), .sat(satS));
  bundler dutD (.clk, .rst_n, .clr, .add, .v, .nz, .sum(sumD), .sat(satD));

  int mS [NS], mD [ND];
  bit msatS, msatD;
  int sat_events = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (mS[i]) mS[i] = 0;
    foreach (mD[i]) mD[i] = 0;
    msatS = 0; msatD = 0;
    v = '0; nz = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int k = 0; k < ND; k += 30) begin
        v[k +: 30] = 30'($urandom);
        nz[k +: 30] = 30'($urandom) | 30'($urandom);
      end
      // long runs of one sign drive the small lanes into saturation
      if ((t / 100) % 2 == 1) v = '1;
      add = ($urandom_range(0, 4) != 0);
      clr = ($urandom_range(0, 299) == 0);
      @(posedge clk);
      if (clr) begin
        foreach (mS[i]) mS[i] = 0;
        foreach (mD[i]) mD[i] = 0;
        msatS = 0; msatD = 0;
      end else if (add) begin
        for (int i = 0; i < ND; i++) if (nz[i]) begin
          int d;
          d = v[i] ? 1 : -1;
          if (i < NS) begin
            if (mS[i] + d > 7 || mS[i] + d < -7) begin msatS = 1; sat_events++; end
            else mS[i] += d;
          end
          if (mD[i] + d > 127 || mD[i] + d < -127) msatD = 1;
          else mD[i] += d;
        end
      end
      #1;
      for (int i = 0; i < NS; i++)
        chk($signed(sumS[i*BS +: BS]) == mS[i], $sformatf("small lane %0d", i));
      for (int i = 0; i < ND; i++)
        chk($signed(sumD[i*BD +: BD]) == mD[i], $sformatf("default lane %0d", i));
      chk(satS == msatS, "small sat flag");
      chk(satD == msatD, "default sat flag");
    end
    chk(sat_events > 0, "saturation exercised");
    $display("saturating adds: %0d", sat_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
