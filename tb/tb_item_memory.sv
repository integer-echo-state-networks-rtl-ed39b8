// tb_item_memory: fills a 27 x 300 memory with random rows, reads them back
// in random order with one cycle of latency, checks that rdata holds while
// re is low and that a later write to one row leaves the others unchanged.
module tb_item_memory;
  localparam int N = 300, DEPTH = 27;
  int checks = 0, failures = 0;
  logic clk = 0, we = 0, re = 0;
  logic [4:0] waddr = 0, raddr = 0;
  logic [N-1:0] wdata = 0, rdata;
  logic [N-1:0] model [DEPTH];

  always #5 clk = ~clk;

  item_memory dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  function automatic logic [N-1:0] rnd_vec();
    logic [N-1:0] r;
    for (int k = 0; k < N; k += 32) r[k +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      model[a] = rnd_vec();
      @(negedge clk);
      we = 1; waddr = 5'(a); wdata = model[a];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 500; t++) begin
      int a;
      a = $urandom_range(0, DEPTH - 1);
      @(negedge clk);
      re = 1; raddr = 5'(a);
      @(negedge clk);
      re = 0; raddr = 5'($urandom_range(0, DEPTH - 1));
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL read %0d", a); end
      @(negedge clk);
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL hold %0d", a); end
      if (t % 50 == 0) begin
        int w;
        w = $urandom_range(0, DEPTH - 1);
        model[w] = rnd_vec();
        we = 1; waddr = 5'(w); wdata = model[w];
        @(negedge clk); we = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
