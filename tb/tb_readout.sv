// tb_readout: loads a random 27 x 300 weight matrix, runs the readout on
// random reservoir states (values in [-3, 3], including all-extreme states)
// and compares the 27 outputs with integer dot products computed here. Also
// checks the latency (done exactly N+2 cycles after the start cycle), that busy covers
// the computation, and that outputs hold after done. Some weight rows are
// rewritten between runs.
module tb_readout;
  localparam int N = 300, L = 27, WW = 16, AW = 32, XW = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic we = 0, start = 0;
  logic [8:0] waddr = 0;
  logic [L*WW-1:0] wdata = 0;
  logic [N*XW-1:0] x = 0;
  logic busy, done;
  logic [L*AW-1:0] y;
  int w [L][N];
  int xv [N];

  always #5 clk = ~clk;

  readout dut (.clk, .rst_n, .we, .waddr, .wdata, .start, .x, .busy, .done, .y);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_row(input int j);
    @(negedge clk);
    we = 1; waddr = 9'(j);
    for (int l = 0; l < L; l++) begin
      w[l][j] = int'($urandom_range(0, 65535)) - 32768;
      wdata[l*WW +: WW] = 16'(w[l][j]);
    end
    @(negedge clk);
    we = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < N; j++) load_row(j);
    for (int run = 0; run < 12; run++) begin
      int cyc;
      for (int j = 0; j < N; j++) begin
        case (run % 3)
          0: xv[j] = int'($urandom_range(0, 6)) - 3;
          1: xv[j] = ($urandom_range(0, 1) != 0) ? 3 : -3;
          default: xv[j] = (j % 7) - 3;
        endcase
        x[j*XW +: XW] = 3'(xv[j]);
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        checks++;
        if (!busy) begin failures++; $display("FAIL busy low during run at %0d", cyc); end
        @(negedge clk);
        cyc++;
        if (cyc > 2 * N) break;
      end
      checks++;
      if (cyc != N + 2) begin failures++; $display("FAIL latency %0d exp %0d", cyc, N + 2); end
      repeat (2) @(negedge clk);   // outputs must hold after done
      for (int l = 0; l < L; l++) begin
        longint s;
        s = 0;
        for (int j = 0; j < N; j++) s += longint'(w[l][j]) * xv[j];
        checks++;
        if ($signed(y[l*AW +: AW]) != int'(s)) begin
          failures++;
          if (failures < 10) $display("FAIL run %0d out %0d = %0d exp %0d", run, l, $signed(y[l*AW +: AW]), s);
        end
      end
      checks++;
      if (busy) begin failures++; $display("FAIL busy after done"); end
      // rewrite a few weight rows before the next run
      for (int k = 0; k < 5; k++) load_row($urandom_range(0, N - 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
