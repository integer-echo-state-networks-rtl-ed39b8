// tb_sparse_encoder: checks the density-controlled ternary mapping at the
// default size (N = 300, 8-bit density). For random keys and densities it
// recomputes the per-element hash rule in the testbench and compares every
// mask bit, and it checks the properties the mapping must have regardless of
// the hash: density 0 keeps nothing, density 2^PW keeps everything, the kept
// fraction tracks the density (within a binomial tolerance), masks grow
// monotonically with the density for a fixed key, and two different keys
// select nearly independent positions.
module tb_sparse_encoder;
  localparam int N = 300, PW = 8, KW = 16;
  int checks = 0, failures = 0;
  logic [KW-1:0] key;
  logic [PW:0]   density;
  logic [N-1:0]  nz;

  sparse_encoder #(.N(N), .PW(PW), .KW(KW)) dut (.key, .density, .nz);

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  function automatic bit ref_bit(input int unsigned k, input int unsigned j,
                                 input int unsigned d);
    bit [31:0] h;
    h = (32'(k) * 32'h9E37_79B1) ^ (32'(j) * 32'h85EB_CA6B);
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return (h[31:24] < d);
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] prev, other;
    for (int t = 0; t < 200; t++) begin
      int cnt;
      key = KW'($urandom);
      density = (PW + 1)'($urandom_range(0, 256));
      #1;
      cnt = 0;
      for (int j = 0; j < N; j++) begin
        chk(nz[j] == ref_bit(key, j, density), $sformatf("key %0d elem %0d", key, j));
        cnt += nz[j];
      end
      // binomial: mean N*p, sd <= sqrt(N)/2 ~ 8.7; allow 5 sd
      chk((cnt - N * int'(density) / 256) <= 44 && (N * int'(density) / 256 - cnt) <= 44,
          $sformatf("kept %0d of %0d at density %0d", cnt, N, density));
    end
    // ends of the range and monotonicity
    for (int t = 0; t < 20; t++) begin
      key = KW'($urandom);
      density = 0; #1;
      chk(nz == '0, "density 0 keeps nothing");
      prev = nz;
      for (int d = 1; d <= 256; d++) begin
        density = (PW + 1)'(d); #1;
        chk((prev & ~nz) == '0, "mask grows with density");
        prev = nz;
      end
      chk(nz == '1, "full density keeps everything");
    end
    // different keys at p = 1/2: overlap of the kept sets near N/4
    for (int t = 0; t < 20; t++) begin
      int ov;
      density = 128;
      key = KW'(2 * t); #1; other = nz;
      key = KW'(2 * t + 1); #1;
      ov = $countones(nz & other);
      chk(ov > 40 && ov < 110, $sformatf("overlap of two keys %0d", ov));
      chk(nz != other, "keys give different masks");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
