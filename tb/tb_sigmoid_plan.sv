// tb_sigmoid_plan: checks the piecewise-linear sigmoid against the PLAN
// segments computed in real arithmetic (within 1 LSB) and against the exact
// logistic function (within 0.02), over the whole Q4.12 input range.
module tb_sigmoid_plan;
  import hyb_pkg::*;

  fx_t z, p;
  int checks = 0, failures = 0;

  sigmoid_plan dut (.z(z), .p(p));

  function automatic real plan(input real x);
    real a, f;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        f = 1.0;
    else if (a >= 2.375) f = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   f = 0.125 * a + 0.625;
    else                 f = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - f : f;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real x, pr, ref_plan, ref_exact;
    for (int v = -32768; v < 32768; v += 37) begin
      z = fx_t'(v);
      #1;
      x = real'(v) / 4096.0;
      pr = real'(p) / 4096.0;
      ref_plan  = plan(x);
      ref_exact = 1.0 / (1.0 + $exp(-x));
      checks++;
      if ((pr - ref_plan) > 1.5 / 4096.0 || (ref_plan - pr) > 1.5 / 4096.0) begin
        failures++;
        if (failures < 10) $display("plan mismatch z=%f p=%f ref=%f", x, pr, ref_plan);
      end
      checks++;
      if ((pr - ref_exact) > 0.02 || (ref_exact - pr) > 0.02) begin
        failures++;
        if (failures < 10) $display("sigmoid error z=%f p=%f exact=%f", x, pr, ref_exact);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
