// tb_fc_layer: loads random weights and biases through the host port, then
// runs forward and backward (training) passes with random inputs, gradients
// and learning rates. A fixed-point model of the layer (integer arithmetic,
// written here independently) gives the expected outputs, input gradients and
// updated parameters, which are read back through the host port. The layer is
// built with 4 inputs per cycle (SIMD = 4); the cycle counts must be
// N_IN/SIMD + 1 for the forward and N_IN/SIMD for the backward pass. The
// single-input configuration is covered by the demapper ANN's testbench.
module tb_fc_layer;
  import hyb_pkg::*;

  localparam int NI = 16, NO = 16, SIMD = 4;
  logic clk = 0, rst_n = 0;
  logic fwd_start, bwd_start, busy, done, w_we;
  fx_t x [NI], dx [NI];
  fx_t y [NO], z [NO], dy [NO];
  logic [3:0] lr_shift;
  logic [4:0] w_row, w_col, r_row, r_col;
  fx_t w_data, r_data;
  int checks = 0, failures = 0;

  longint mW [NO][NI];
  longint mB [NO];
  longint mz [NO];

  always #5 clk = ~clk;

  fc_layer #(.N_I(NI), .N_O(NO), .RELU(1'b1), .SIMD(SIMD)) dut (
    .clk, .rst_n, .fwd_start, .x, .y, .z, .bwd_start, .dy, .lr_shift, .dx, .busy, .done,
    .w_we, .w_row, .w_col, .w_data, .r_row, .r_col, .r_data);

  function automatic longint sat(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  // arithmetic shift right (floor division by 2^s)
  function automatic longint asr(input longint v, input int s);
    return v >>> s;
  endfunction

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_done(output int cycles);
    cycles = 0;
    do begin
      @(posedge clk); #1;
      cycles++;
    end while (!done && cycles < 1000);
  endtask

  initial begin
    int cyc;
    longint acc, zz, yy, s;
    longint xs [NI];
    longint dys [NO], dzs [NO];
    fwd_start = 0; bwd_start = 0; w_we = 0; lr_shift = 0;
    w_row = 0; w_col = 0; w_data = 0; r_row = 0; r_col = 0;
    for (int i = 0; i < NI; i++) x[i] = 0;
    for (int j = 0; j < NO; j++) dy[j] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 30; round++) begin
      // load random parameters
      if (round % 10 == 0) begin
        for (int j = 0; j < NO; j++)
          for (int i = 0; i <= NI; i++) begin
            @(negedge clk);
            w_we = 1; w_row = 5'(j); w_col = 5'(i);
            w_data = fx_t'($urandom_range(0, 4000) - 2000);
            if (i == NI) mB[j] = longint'(w_data); else mW[j][i] = longint'(w_data);
          end
        @(negedge clk); w_we = 0;
      end
      // forward
      for (int i = 0; i < NI; i++) begin
        x[i] = fx_t'($urandom_range(0, 16000) - 8000);
        xs[i] = longint'(x[i]);
      end
      @(negedge clk); fwd_start = 1;
      @(negedge clk); fwd_start = 0;
      for (int i = 0; i < NI; i++) x[i] = 0;   // layer must have latched x
      wait_done(cyc);
      checks++;
      if (cyc != NI / SIMD + 1) begin failures++; $display("forward cycles %0d", cyc); end
      for (int j = 0; j < NO; j++) begin
        acc = mB[j] * 4096;
        for (int i = 0; i < NI; i++) acc += mW[j][i] * xs[i];
        zz = sat(asr(acc, 12));
        yy = (zz < 0) ? 0 : zz;
        mz[j] = zz;
        checks++;
        if (longint'(z[j]) != zz || longint'(y[j]) != yy) begin
          failures++;
          if (failures < 10) $display("fwd j=%0d z=%0d exp %0d y=%0d exp %0d", j, z[j], zz, y[j], yy);
        end
      end
      // backward
      lr_shift = 4'($urandom_range(0, 6));
      for (int j = 0; j < NO; j++) begin
        dy[j] = fx_t'($urandom_range(0, 8000) - 4000);
        dys[j] = longint'(dy[j]);
        dzs[j] = (mz[j] > 0) ? dys[j] : 0;
      end
      @(negedge clk); bwd_start = 1;
      @(negedge clk); bwd_start = 0;
      wait_done(cyc);
      checks++;
      if (cyc != NI / SIMD) begin failures++; $display("backward cycles %0d", cyc); end
      for (int i = 0; i < NI; i++) begin
        s = 0;
        for (int j = 0; j < NO; j++) s += mW[j][i] * dzs[j];
        checks++;
        if (longint'(dx[i]) != sat(asr(s, 12))) begin
          failures++;
          if (failures < 10) $display("dx i=%0d got %0d exp %0d", i, dx[i], sat(asr(s, 12)));
        end
      end
      for (int j = 0; j < NO; j++) begin
        mB[j] = sat(mB[j] - asr(dzs[j], int'(lr_shift)));
        for (int i = 0; i < NI; i++)
          mW[j][i] = sat(mW[j][i] - asr(dzs[j] * xs[i], 12 + int'(lr_shift)));
      end
      // read back all parameters
      for (int j = 0; j < NO; j++)
        for (int i = 0; i <= NI; i++) begin
          r_row = 5'(j); r_col = 5'(i);
          #1;
          checks++;
          if (longint'(r_data) != ((i == NI) ? mB[j] : mW[j][i])) begin
            failures++;
            if (failures < 10) $display("param %0d,%0d got %0d", j, i, r_data);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
