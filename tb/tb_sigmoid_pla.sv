// tb_sigmoid_pla: checks the PLA sigmoid against the PLAN formula computed in
// real arithmetic, on segment boundaries and random inputs in [-8, 8], and
// checks that the approximation stays within 0.02 of the true sigmoid.
module tb_sigmoid_pla;
  import fp_ref_pkg::*;
  logic [31:0] x, y;
  int checks = 0, failures = 0;

  sigmoid_pla dut (.x, .y);

  task automatic check(input real xr);
    real yr, ex;
    x = r2f(xr);
    #1;
    yr = f2r(y);
    ex = sigmoid_plan(f2r(x));
    checks++;
    if (!close(yr, ex, 1e-6)) begin
      failures++;
      $display("FAIL x=%f y=%f expected %f", f2r(x), yr, ex);
    end
    checks++;
    if (absr(yr - 1.0 / (1.0 + $exp(-f2r(x)))) > 0.02) begin
      failures++;
      $display("FAIL approx error x=%f y=%f", f2r(x), yr);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pts[] = '{0.0, 0.5, -0.5, 0.999, 1.0, -1.0, 2.0, 2.374, 2.375, -2.375, 3.0, 4.99, 5.0, -5.0, 7.5, -7.5, 20.0, -100.0, 1e-9};
    foreach (pts[i]) check(pts[i]);
    for (int i = 0; i < 2000; i++) check((real'($urandom % 32'd16000) - 8000.0) / 1000.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
