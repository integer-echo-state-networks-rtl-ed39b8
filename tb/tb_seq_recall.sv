// tb_seq_recall: the sequence-recall workload for the three reservoir sizes
// that were built in hardware, N = 100, 200 and 300 (kappa = 3, 27 tokens,
// delays 0..15), one after the other; N = 300 is the accelerator's default.
// Each run trains its readouts in software on a reference model and then
// recalls on the hardware (see seq_recall_run). Besides the per-run checks,
// the accuracy at delay 8 must grow with the reservoir size.
module tb_seq_recall;
  logic clk = 0;
  always #5 clk = ~clk;

  logic go100 = 0, go200 = 0, go300 = 0;
  logic fin100, fin200, fin300;
  int c100, c200, c300, f100, f200, f300;
  real a100, a200, a300;
  int checks, failures;

  seq_recall_run #(.N(100)) r100 (.clk, .go(go100), .finished(fin100), .checks(c100), .failures(f100), .acc8(a100));
  seq_recall_run #(.N(200)) r200 (.clk, .go(go200), .finished(fin200), .checks(c200), .failures(f200), .acc8(a200));
  seq_recall_run #(.N(300)) r300 (.clk, .go(go300), .finished(fin300), .checks(c300), .failures(f300), .acc8(a300));

  initial begin
    repeat (40000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c100 + c200 + c300, f100 + f200 + f300 + 1);
    $finish;
  end

  initial begin
    go100 = 1; wait (fin100);
    go200 = 1; wait (fin200);
    go300 = 1; wait (fin300);
    checks = c100 + c200 + c300 + 1;
    failures = f100 + f200 + f300;
    $display("accuracy at delay 8: N=100 %5.3f, N=200 %5.3f, N=300 %5.3f", a100, a200, a300);
    if (!(a100 < a200 && a200 < a300)) begin
      failures++;
      $display("FAIL accuracy does not grow with N");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
