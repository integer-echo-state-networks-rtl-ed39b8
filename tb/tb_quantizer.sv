// tb_quantizer: checks the level index against round(QSCALE*v)+OFFSET
// computed in floating point, with saturation at both ends. Covers the
// default feedback quantizer (QSCALE 100, 101 levels) and a second instance
// with the classification scale (QSCALE 200) and 27 levels.
module tb_quantizer;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [31:0] v;
  logic [6:0] idx;
  logic sat;
  quantizer dut (.v(v), .idx(idx), .sat(sat));

  logic signed [15:0] v2;
  logic [4:0] idx2;
  logic sat2;
  quantizer #(.IW(16), .FRAC(12), .QSCALE(200), .LEVELS(27), .OFFSET(13)) dut2 (
    .v(v2), .idx(idx2), .sat(sat2));

  function automatic void ref_q(input real val, input int scale, input int levels,
                                input int off, output int ri, output bit rs);
    int q;
    q = int'($floor(val * scale + 0.5)) + off;
    rs = 0;
    if (q < 0) begin q = 0; rs = 1; end
    if (q > levels - 1) begin q = levels - 1; rs = 1; end
    ri = q;
  endfunction

  task automatic check1(input int val);
    int ri; bit rs;
    v = val;
    #1;
    ref_q(real'(val) / 4096.0, 100, 101, 50, ri, rs);
    checks++;
    if (idx != ri[6:0] || sat != rs) begin
      failures++;
      $display("FAIL q100 v=%0d idx=%0d sat=%0b exp %0d %0b", val, idx, sat, ri, rs);
    end
  endtask

  task automatic check2(input int val);
    int ri; bit rs;
    v2 = 16'(val);
    #1;
    ref_q(real'(val) / 4096.0, 200, 27, 13, ri, rs);
    checks++;
    if (idx2 != ri[4:0] || sat2 != rs) begin
      failures++;
      $display("FAIL q200 v=%0d idx=%0d sat=%0b exp %0d %0b", val, idx2, sat2, ri, rs);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // exact level centres, half-way points and the range ends
    check1(0);
    check1(2048);      // 0.5 -> level 100
    check1(-2048);     // -0.5 -> level 0
    check1(4096);      // 1.0 saturates high
    check1(-4096);     // saturates low
    check1(20);        // 0.00488 -> 100*v = 0.488 -> 0 -> 50
    check1(21);        // 0.513 -> 1 -> 51
    check1(-20);
    check1(-21);
    for (int i = 0; i < 3000; i++) check1(int'($urandom_range(0, 8192)) - 4096);
    for (int i = 0; i < 300; i++) check1(int'($urandom) >>> 4);
    for (int i = 0; i < 3000; i++) check2(int'($urandom_range(0, 2000)) - 1000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
