// tb_bce_grad: checks the loss gradient p - b and the hard decisions for
// random probabilities and pilot bits; the expected gradient is the derivative
// of the binary cross-entropy of a sigmoid output, computed here in real numbers.
module tb_bce_grad;
  import hyb_pkg::*;

  fx_t   p [M_BITS];
  bits_t b;
  fx_t   grad [M_BITS];
  bits_t est;
  int checks = 0, failures = 0;

  bce_grad dut (.p(p), .b(b), .grad(grad), .est_bits(est));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real pr, expg;
    for (int t = 0; t < 2000; t++) begin
      for (int k = 0; k < M_BITS; k++) p[k] = fx_t'($urandom_range(0, 4096));
      b = bits_t'($urandom);
      #1;
      for (int k = 0; k < M_BITS; k++) begin
        pr = real'(p[k]) / 4096.0;
        // d/dz of -(b log s(z) + (1-b) log(1-s(z))) = s(z) - b
        expg = pr - (b[k] ? 1.0 : 0.0);
        checks++;
        if (real'(grad[k]) / 4096.0 != expg) begin
          failures++;
          if (failures < 10) $display("grad k=%0d p=%f b=%0d got=%0d", k, pr, b[k], grad[k]);
        end
        checks++;
        if (est[k] != (pr >= 0.5)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
