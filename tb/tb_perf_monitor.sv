// tb_perf_monitor: feeds pilots with a controlled number of wrong bits per
// window and checks the window length, the error count and that a retraining
// request is raised exactly when the count reaches the threshold.
module tb_perf_monitor;
  import hyb_pkg::*;

  localparam int unsigned WIN = 64;
  logic clk = 0, rst_n = 0;
  logic enable, clear, valid, window_done, retrain_req;
  bits_t rx_bits, ref_bits;
  logic [15:0] threshold, last_errors;
  int checks = 0, failures = 0;
  int n_req = 0;

  always #5 clk = ~clk;

  perf_monitor #(.WINDOW(WIN)) dut (.clk, .rst_n, .enable, .clear, .valid, .rx_bits, .ref_bits,
                                    .threshold, .window_done, .retrain_req, .last_errors);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int errs, e, pos;
    bits_t flip;
    enable = 1; clear = 0; valid = 0; rx_bits = 0; ref_bits = 0; threshold = 16'd20;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 40; w++) begin
      errs = 0;
      threshold = 16'($urandom_range(5, 40));
      for (int s = 0; s < WIN; s++) begin
        @(negedge clk);
        valid = ($urandom_range(0, 3) != 0);
        while (!valid) begin
          @(negedge clk);
          checks++;
          if (window_done) failures++;
          valid = ($urandom_range(0, 3) != 0);
        end
        ref_bits = bits_t'($urandom);
        flip = 0;
        if ($urandom_range(0, 99) < w) flip = bits_t'($urandom);
        rx_bits = ref_bits ^ flip;
        e = $countones(flip);
        errs += e;
        @(posedge clk); #1;
        valid = 0;
        if (s == WIN - 1) begin
          checks++;
          if (!window_done || last_errors != 16'(errs)) begin
            failures++;
            $display("window %0d: done=%0d errors=%0d expected %0d", w, window_done, last_errors, errs);
          end
          checks++;
          if (retrain_req != (errs >= int'(threshold))) begin
            failures++;
            $display("window %0d: req=%0d errors=%0d thr=%0d", w, retrain_req, errs, threshold);
          end
          if (retrain_req) n_req++;
        end else begin
          checks++;
          if (window_done) failures++;
        end
      end
    end
    // clear restarts the window
    for (int s = 0; s < WIN / 2; s++) begin
      @(negedge clk); valid = 1; ref_bits = 0; rx_bits = 4'hf;
    end
    @(negedge clk); valid = 0; clear = 1;
    @(negedge clk); clear = 0;
    pos = 0;
    for (int s = 0; s < WIN; s++) begin
      @(negedge clk); valid = 1; ref_bits = 0; rx_bits = 4'h1;
      @(posedge clk); #1;
      if (window_done) pos = s + 1;
    end
    @(negedge clk); valid = 0;
    checks++;
    if (pos != WIN || last_errors != 16'(WIN)) failures++;
    checks++;
    if (n_req == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
