// tb_wta: random readout vectors, including forced ties and all-negative
// vectors, compared against a software arg-max (lowest index wins ties).
module tb_wta;
  localparam int L = 27, AW = 32;
  int checks = 0, failures = 0;
  logic [L*AW-1:0] y;
  logic [4:0] win;
  logic signed [AW-1:0] win_val;
  int vals [L];

  wta dut (.y(y), .win(win), .win_val(win_val));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int best, bi;
      for (int l = 0; l < L; l++) begin
        case (t % 4)
          0: vals[l] = int'($urandom);
          1: vals[l] = int'($urandom_range(0, 6)) - 3;      // many ties
          2: vals[l] = -int'($urandom_range(1, 100000));    // all negative
          default: vals[l] = int'($urandom_range(0, 2000)) - 1000;
        endcase
        y[l*AW +: AW] = vals[l];
      end
      bi = 0; best = vals[0];
      for (int l = 1; l < L; l++) if (vals[l] > best) begin best = vals[l]; bi = l; end
      #1;
      checks++;
      if (int'(win) != bi || win_val != best) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d win=%0d exp %0d", t, win, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
