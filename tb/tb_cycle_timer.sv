// tb_cycle_timer: counts gated runs of the timer against a software count,
// checks clear priority and, on a narrow 4-bit instance, wrap and the sticky
// overflow flag.
module tb_cycle_timer;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0, clr = 0, run = 0;
  logic [63:0] count;
  logic ovf;
  logic run4 = 0, clr4 = 0;
  logic [3:0] count4;
  logic ovf4;
  longint expct = 0;
  int e4 = 0;

  always #5 clk = ~clk;

  cycle_timer dut (.clk, .rst_n, .clr, .run, .count, .ovf);
  cycle_timer #(.W(4)) dut4 (.clk, .rst_n, .clr(clr4), .run(run4), .count(count4), .ovf(ovf4));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(count == 0 && !ovf, "reset value");
    for (int i = 0; i < 2000; i++) begin
      run = ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (run) expct++;
      @(negedge clk);
      chk(count == 64'(expct), $sformatf("count %0d exp %0d", count, expct));
    end
    clr = 1; run = 1;
    @(posedge clk); @(negedge clk);
    clr = 0; run = 0;
    chk(count == 0, "clear wins over run");
    // 4-bit instance: 17 counts wrap once and set ovf
    run4 = 1;
    for (int i = 1; i <= 17; i++) begin
      @(posedge clk); @(negedge clk);
      chk(count4 == 4'(i), $sformatf("count4 %0d exp %0d", count4, i % 16));
      chk(ovf4 == (i >= 16), $sformatf("ovf4 at %0d", i));
    end
    run4 = 0; clr4 = 1;
    @(posedge clk); @(negedge clk);
    clr4 = 0;
    chk(count4 == 0 && !ovf4, "clear4");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
