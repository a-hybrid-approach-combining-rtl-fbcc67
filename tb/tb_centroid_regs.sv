// tb_centroid_regs: writes random centroids in random order and checks that
// every entry reads back the last value written to it, one cycle after the
// write, and that entries not written keep their value.
module tb_centroid_regs;
  import hyb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic we;
  bits_t widx;
  cplx_t wdata;
  cplx_t cents [N_SYM];
  cplx_t model [N_SYM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  centroid_regs dut (.clk, .rst_n, .we, .widx, .wdata, .centroids(cents));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; widx = 0; wdata = '0;
    for (int n = 0; n < N_SYM; n++) model[n] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int n = 0; n < N_SYM; n++) begin
      checks++;
      if (cents[n] != '0) failures++;
    end
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      we    = ($urandom_range(0, 3) != 0);
      widx  = bits_t'($urandom);
      wdata = '{i: fx_t'($urandom), q: fx_t'($urandom)};
      if (we) model[widx] = wdata;
      @(negedge clk);
      we = 0;
      for (int n = 0; n < N_SYM; n++) begin
        checks++;
        if (cents[n] != model[n]) begin
          failures++;
          if (failures < 10) $display("entry %0d mismatch", n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
