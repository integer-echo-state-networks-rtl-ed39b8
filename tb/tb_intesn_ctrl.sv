// tb_intesn_ctrl: runs the step controller against a stand-in readout that
// finishes a random number of cycles after its start pulse, with random
// input and output stalls. Checks the order and count of control pulses in
// every step (one item-memory read at the accepted sample, one reservoir
// update and readout start in the next cycle, output valid only after done,
// feedback capture exactly at the output handshake) and the step count.
// A second phase runs pattern mode: pixels with a random last flag, one
// bundle add one cycle after each accepted pixel, and one update, bundle
// clear and output per pattern only.
module tb_intesn_ctrl;
  import intesn_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_ready = 0, ro_done = 0, bundle = 0, in_last = 0;
  logic in_ready, out_valid, im_re, res_upd, ro_start, fb_cap, busy, b_add, b_clr;
  int pixels = 0, patterns = 0;
  bit expect_add = 0, add_last = 0;
  ctrl_state_e state;
  int steps_in = 0, steps_out = 0, ro_delay = -1, stalls_out = 0;
  bit expect_upd = 0, waiting_done = 0, done_seen = 0;

  always #5 clk = ~clk;

  intesn_ctrl dut (.clk, .rst_n, .in_valid, .in_ready, .out_valid, .out_ready,
                   .im_re, .res_upd, .ro_start, .ro_done, .fb_cap, .busy, .state,
                   .bundle, .in_last, .b_add, .b_clr);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stand-in readout: done some cycles after start
  always @(posedge clk) begin
    ro_done <= 1'b0;
    if (ro_start) ro_delay <= $urandom_range(1, 8);
    else if (ro_delay > 0) ro_delay <= ro_delay - 1;
    if (ro_delay == 1) ro_done <= 1'b1;
  end

  // protocol monitor, sampled before each rising edge
  always @(negedge clk) if (rst_n) begin
    chk(im_re == (in_valid && in_ready), "im_re only at input handshake");
    chk(res_upd == expect_upd, "update one cycle after accept / last add");
    chk(b_add == expect_add, "bundle add one cycle after accepted pixel");
    chk(b_clr == (res_upd && bundle), "bundle cleared at pattern update");
    chk(ro_start == res_upd, "readout start with update");
    chk(fb_cap == (out_valid && out_ready), "feedback capture at output handshake");
    chk(!(out_valid && waiting_done), "output before readout done");
    chk(!(in_ready && busy), "ready while busy");
  end

  always @(posedge clk) if (rst_n) begin
    expect_upd <= bundle ? (b_add && add_last) : (in_valid && in_ready);
    expect_add <= bundle && in_valid && in_ready;
    if (in_valid && in_ready) add_last <= in_last;
    if (bundle && in_valid && in_ready) begin
      pixels++;
      if (in_last) patterns++;
    end
    if (ro_start) waiting_done <= 1'b1;
    if (ro_done) waiting_done <= 1'b0;
    if (in_valid && in_ready) steps_in++;
    if (out_valid && out_ready) steps_out++;
    if (out_valid && !out_ready) stalls_out++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    in_valid = 0; out_ready = 1;
    repeat (20) @(negedge clk);
    chk(steps_in == steps_out, $sformatf("steps in %0d out %0d", steps_in, steps_out));
    // pattern mode
    steps_out = 0;
    bundle = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      in_valid  = ($urandom_range(0, 2) != 0);
      in_last   = ($urandom_range(0, 3) == 0);
      out_ready = ($urandom_range(0, 2) != 0);
    end
    in_valid = 0; out_ready = 1;
    repeat (20) @(negedge clk);
    chk(patterns == steps_out, $sformatf("patterns %0d outputs %0d", patterns, steps_out));
    chk(patterns > 20 && pixels > patterns, "enough multi-pixel patterns");
    $display("pattern mode: %0d pixels, %0d patterns", pixels, patterns);
    chk(steps_in > 100, "enough steps");
    chk(stalls_out > 0, "output stall exercised");
    chk(state == S_IDLE && !busy, "idle at end");
    $display("steps %0d, output stalls %0d", steps_in, stalls_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
