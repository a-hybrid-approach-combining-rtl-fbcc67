// tb_mapper_lut: loads a normalised 16-QAM constellation (Gray mapped per
// axis) into the mapper table and checks every mapped symbol and its
// one-cycle latency over a random bit stream.
module tb_mapper_lut;
  import hyb_pkg::*;

  logic clk = 0, rst_n = 0;
  logic we, in_valid, out_valid;
  bits_t widx, in_bits;
  cplx_t wdata, out_sym;
  cplx_t cons [N_SYM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  mapper_lut dut (.clk, .rst_n, .we, .widx, .wdata, .in_valid, .in_bits, .out_valid, .out_sym);

  function automatic fx_t level(input logic [1:0] g);
    // Gray levels -3,-1,+1,+3 scaled by 1/sqrt(10)
    real l;
    case (g)
      2'b00: l = -3.0; 2'b01: l = -1.0; 2'b11: l = 1.0; default: l = 3.0;
    endcase
    return fx_t'($rtoi(l / $sqrt(10.0) * 4096.0));
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bits_t sent_bits;
    we = 0; in_valid = 0; widx = 0; wdata = '0; in_bits = 0;
    for (int n = 0; n < N_SYM; n++) cons[n] = '{i: level(n[1:0]), q: level(n[3:2])};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < N_SYM; n++) begin
      @(negedge clk); we = 1; widx = bits_t'(n); wdata = cons[n];
    end
    @(negedge clk); we = 0;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = 1; in_bits = bits_t'($urandom); sent_bits = in_bits;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || out_sym != cons[sent_bits]) begin
        failures++;
        if (failures < 10) $display("bits %0d: valid=%0d got %0d,%0d", sent_bits, out_valid, out_sym.i, out_sym.q);
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
