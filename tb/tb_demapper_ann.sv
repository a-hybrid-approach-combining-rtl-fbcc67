// tb_demapper_ann: checks the trainable demapper ANN against an integer model
// of the 2-16-16-16-4 network written here (forward pass, PLAN sigmoid, BCE
// gradient, backward pass with SGD). Random weights are loaded through the
// host port; inference results (probabilities, labels) and, after training
// steps, every weight and bias read back through the host port must match
// the model bit for bit. Cycle counts: 59 cycles for inference, 121 for a
// training step. A burst of back-to-back inferences must come out in order,
// match the model and leave at the pipelined rate, and a training start must
// be held off while inferences are in flight. Finally the network is trained
// from random weights on noiseless 16-QAM pilots and must then label most
// constellation points right.
module tb_demapper_ann;
  import hyb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, train, ready, busy, done, w_we;
  cplx_t x;
  bits_t bits, label;
  logic [3:0] lr_shift;
  fx_t prob [N_OUT];
  logic [1:0] w_layer, r_layer;
  logic [4:0] w_row, w_col, r_row, r_col;
  fx_t w_data, r_data;
  int checks = 0, failures = 0;

  localparam int NL = 4;
  localparam int LIN [NL]  = '{2, 16, 16, 16};
  localparam int LOUT [NL] = '{16, 16, 16, 4};
  longint mW [NL][16][16];
  longint mB [NL][16];
  longint act [NL+1][16];   // act[0] = input, act[l+1] = output of layer l
  longint pre [NL][16];

  always #5 clk = ~clk;

  demapper_ann dut (.clk, .rst_n, .start, .train, .x, .bits, .lr_shift, .ready, .busy, .done, .prob, .label,
                    .w_we, .w_layer, .w_row, .w_col, .w_data, .r_layer, .r_row, .r_col, .r_data);

  function automatic longint sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  function automatic longint plan(input longint zv);
    longint a, f;
    a = (zv < 0) ? -zv : zv;
    if (a >= 20480)     f = 4096;
    else if (a >= 9728) f = (a >> 5) + 3456;
    else if (a >= 4096) f = (a >> 3) + 2560;
    else                f = (a >> 2) + 2048;
    return (zv < 0) ? 4096 - f : f;
  endfunction

  task automatic model_forward(input longint xi, input longint xq);
    longint acc;
    act[0][0] = xi; act[0][1] = xq;
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < LOUT[l]; j++) begin
        acc = mB[l][j] * 4096;
        for (int i = 0; i < LIN[l]; i++) acc += mW[l][j][i] * act[l][i];
        pre[l][j] = sat(acc >>> 12);
        act[l+1][j] = (l < NL - 1 && pre[l][j] < 0) ? 0 : pre[l][j];
      end
  endtask

  task automatic model_backward(input bits_t b, input int lr);
    longint d [16];
    longint dn [16];
    longint s;
    for (int k = 0; k < 4; k++) d[k] = plan(pre[3][k]) - (b[k] ? 4096 : 0);
    for (int l = NL - 1; l >= 0; l--) begin
      if (l < NL - 1)
        for (int j = 0; j < LOUT[l]; j++) if (pre[l][j] <= 0) d[j] = 0;
      for (int i = 0; i < LIN[l]; i++) begin
        s = 0;
        for (int j = 0; j < LOUT[l]; j++) s += mW[l][j][i] * d[j];
        dn[i] = sat(s >>> 12);
      end
      for (int j = 0; j < LOUT[l]; j++) begin
        mB[l][j] = sat(mB[l][j] - (d[j] >>> lr));
        for (int i = 0; i < LIN[l]; i++)
          mW[l][j][i] = sat(mW[l][j][i] - ((d[j] * act[l][i]) >>> (12 + lr)));
      end
      for (int i = 0; i < LIN[l]; i++) d[i] = dn[i];
    end
  endtask

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_random(input int amp);
    for (int l = 0; l < NL; l++)
      for (int j = 0; j < LOUT[l]; j++)
        for (int i = 0; i <= LIN[l]; i++) begin
          @(negedge clk);
          w_we = 1; w_layer = 2'(l); w_row = 5'(j); w_col = 5'(i);
          w_data = fx_t'(int'($urandom_range(0, 2 * amp)) - amp);
          if (i == LIN[l]) mB[l][j] = longint'(w_data); else mW[l][j][i] = longint'(w_data);
        end
    @(negedge clk); w_we = 0;
  endtask

  task automatic run_op(input cplx_t xv, input bits_t bv, input logic tr, output int cycles);
    @(negedge clk);
    start = 1; train = tr; x = xv; bits = bv;
    @(negedge clk);
    start = 0; x = '0; bits = '0;
    cycles = 1;
    while (!done && cycles < 2000) begin @(negedge clk); cycles++; end
  endtask

  // Back-to-back inference: start is held high and a new x offered whenever
  // ready is seen; results are compared in order and their spacing measured.
  localparam int GAP = 18;  // 16 / SIMD + 2 cycles between results
  task automatic burst(input int n);
    cplx_t xs [$];
    int got, gap, last, t;
    bit ok;
    for (int k = 0; k < n; k++)
      xs.push_back('{i: fx_t'($urandom_range(0, 12000) - 6000), q: fx_t'($urandom_range(0, 12000) - 6000)});
    got = 0; last = -1; t = 0;
    fork
      begin
        for (int k = 0; k < n; ) begin
          @(negedge clk);
          start = 0; train = 1; #1;
          if (k > 0 && k < n - 1) begin
            checks++;
            if (ready) begin failures++; $display("training start offered while inferences in flight"); end
          end
          start = 1; train = 0; x = xs[k]; #1;
          if (ready) k++;
        end
        @(negedge clk); start = 0; x = '0;
      end
      begin
        while (got < n) begin
          @(negedge clk); t++;
          if (done) begin
            model_forward(longint'(xs[got].i), longint'(xs[got].q));
            ok = 1;
            for (int k = 0; k < 4; k++) if (longint'(prob[k]) != plan(pre[3][k])) ok = 0;
            checks++;
            if (!ok) begin failures++; if (failures < 10) $display("burst result %0d wrong", got); end
            if (last >= 0) begin
              gap = t - last;
              checks++;
              if (gap != GAP) begin failures++; if (failures < 10) $display("burst gap %0d", gap); end
            end
            last = t;
            got++;
          end
        end
      end
    join
  endtask

  function automatic fx_t qam(input logic [1:0] g);
    case (g)
      2'b00: return -fx_t'(3886); 2'b01: return -fx_t'(1295);
      2'b11: return fx_t'(1295);  default: return fx_t'(3886);
    endcase
  endfunction

  initial begin
    int cyc, correct;
    cplx_t xv;
    bits_t bv, lab_exp;
    start = 0; train = 0; x = '0; bits = '0; lr_shift = 4'd3; w_we = 0;
    w_layer = 0; w_row = 0; w_col = 0; w_data = 0; r_layer = 0; r_row = 0; r_col = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_random(2500);
    // inference checks
    for (int t = 0; t < 40; t++) begin
      xv = '{i: fx_t'($urandom_range(0, 12000) - 6000), q: fx_t'($urandom_range(0, 12000) - 6000)};
      run_op(xv, '0, 1'b0, cyc);
      checks++;
      if (cyc != 59) begin failures++; $display("inference cycles %0d", cyc); end
      model_forward(longint'(xv.i), longint'(xv.q));
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (longint'(prob[k]) != plan(pre[3][k])) begin
          failures++;
          if (failures < 10) $display("prob k=%0d got %0d exp %0d", k, prob[k], plan(pre[3][k]));
        end
        lab_exp[k] = (plan(pre[3][k]) >= 2048);
      end
      checks++;
      if (label != lab_exp) failures++;
    end
    burst(50);
    // training steps, compare every parameter
    for (int t = 0; t < 12; t++) begin
      xv = '{i: fx_t'($urandom_range(0, 12000) - 6000), q: fx_t'($urandom_range(0, 12000) - 6000)};
      bv = bits_t'($urandom);
      lr_shift = 4'($urandom_range(0, 5));
      run_op(xv, bv, 1'b1, cyc);
      checks++;
      if (cyc != 121) begin failures++; $display("training cycles %0d", cyc); end
      model_forward(longint'(xv.i), longint'(xv.q));
      model_backward(bv, int'(lr_shift));
      for (int l = 0; l < NL; l++)
        for (int j = 0; j < LOUT[l]; j++)
          for (int i = 0; i <= LIN[l]; i++) begin
            r_layer = 2'(l); r_row = 5'(j); r_col = 5'(i);
            #1;
            checks++;
            if (longint'(r_data) != ((i == LIN[l]) ? mB[l][j] : mW[l][j][i])) begin
              failures++;
              if (failures < 10) $display("step %0d param %0d,%0d,%0d got %0d exp %0d", t, l, j, i,
                                          r_data, (i == LIN[l]) ? mB[l][j] : mW[l][j][i]);
            end
          end
    end
    // learning: noiseless 16-QAM pilots from random initial weights
    load_random(1500);
    lr_shift = 4'd4;
    for (int t = 0; t < 6000; t++) begin
      bv = bits_t'($urandom);
      run_op('{i: qam(bv[1:0]), q: qam(bv[3:2])}, bv, 1'b1, cyc);
    end
    correct = 0;
    for (int n = 0; n < 16; n++) begin
      run_op('{i: qam(2'(n)), q: qam(2'(n >> 2))}, '0, 1'b0, cyc);
      if (label == bits_t'(n)) correct++;
    end
    $display("learned labels correct: %0d / 16", correct);
    checks++;
    if (correct < 14) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
