// tb_sigmoid_plan: sweeps the input over the whole <16,6> range and checks
// the output against the piecewise-linear reference bit for bit, and
// against the true logistic function within 0.02.
module tb_sigmoid_plan;
  import gnn_pkg::*;
  import gnn_ref_pkg::*;
  fx_t x, y;
  int checks = 0, failures = 0;
  real maxerr = 0.0;

  sigmoid_plan dut (.x, .y);

  task automatic check(bit c, string what);
    checks++;
    if (!c) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    for (int v = -32768; v <= 32767; v += 7) begin
      real e;
      x = fx_t'(v);
      #1;
      check(int'(y) == sigmoid_ref(v), $sformatf("x=%0d y=%0d exp %0d", v, y, sigmoid_ref(v)));
      e = real'(int'(y)) / 1024.0 - sigmoid_true(v);
      if (e < 0) e = -e;
      if (e > maxerr) maxerr = e;
    end
    x = FX_MIN; #1; check(int'(y) == 0, "sigmoid(min) = 0");
    x = FX_MAX; #1; check(int'(y) == 1024, "sigmoid(max) = 1");
    x = '0;     #1; check(int'(y) == 512, "sigmoid(0) = 0.5");
    $display("max error against the true sigmoid: %f", maxerr);
    check(maxerr < 0.02, "error below 0.02");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
