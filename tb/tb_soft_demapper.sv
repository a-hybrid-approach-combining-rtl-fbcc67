// tb_soft_demapper: streams random symbols (random valid pattern, up to one per
// cycle) through the soft demapper with a random centroid table and scale,
// and checks each LLR against the max-log formula evaluated in real
// arithmetic (within one output LSB, or saturation), the hard decisions, the
// tag, and that every result appears exactly 4 cycles after its symbol.
module tb_soft_demapper;
  import hyb_pkg::*;

  localparam int LAT = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, out_valid;
  cplx_t in_sym;
  logic [4:0] in_tag, out_tag;
  cplx_t cents [N_SYM];
  logic [15:0] scale;
  llr_t llr [M_BITS];
  bits_t hard;
  int checks = 0, failures = 0;
  int cyc = 0;

  typedef struct { int t_in; cplx_t s; logic [4:0] tag; } item_t;
  item_t q[$];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  soft_demapper #(.TAG_W(5)) dut (.clk, .rst_n, .in_valid, .in_sym, .in_tag, .centroids(cents),
                                  .inv_2sigma2(scale), .out_valid, .llr, .hard_bits(hard), .out_tag);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fx_t rnd_coord(input real r);
    return fx_t'($rtoi((($urandom_range(0, 20000) / 10000.0) - 1.0) * r * 4096.0));
  endfunction

  // Output checker.
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      item_t it;
      real d, m0, m1, ref_llr, got;
      if (q.size() == 0) begin
        failures++;
        $display("unexpected output");
      end else begin
        it = q.pop_front();
        checks++;
        if (cyc - it.t_in != LAT) begin
          failures++;
          $display("latency %0d", cyc - it.t_in);
        end
        checks++;
        if (out_tag != it.tag) failures++;
        for (int k = 0; k < M_BITS; k++) begin
          m0 = 1.0e30; m1 = 1.0e30;
          for (int n = 0; n < N_SYM; n++) begin
            d = (real'(it.s.i - cents[n].i) / 4096.0) ** 2 + (real'(it.s.q - cents[n].q) / 4096.0) ** 2;
            if (n[k]) begin if (d < m1) m1 = d; end
            else      begin if (d < m0) m0 = d; end
          end
          ref_llr = (real'(scale) / 256.0) * (m0 - m1);
          got = real'(llr[k]) / 256.0;
          checks++;
          if (ref_llr * 256.0 >= 32767.0) begin
            if (llr[k] != 16'sh7fff) begin failures++; $display("no positive saturation %f", ref_llr); end
          end else if (ref_llr * 256.0 < -32767.0) begin
            if (llr[k] != -16'sh8000) begin failures++; $display("no negative saturation %f", ref_llr); end
          end else if (got - ref_llr > 1.0e-9 || ref_llr - got > 1.0 / 256.0 + 1.0e-9) begin
            failures++;
            if (failures < 10) $display("llr k=%0d got %f ref %f", k, got, ref_llr);
          end
          checks++;
          if (hard[k] != (m0 > m1)) failures++;
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_sym = '0; in_tag = 0; scale = 16'd256;
    for (int n = 0; n < N_SYM; n++) cents[n] = '{i: rnd_coord(1.2), q: rnd_coord(1.2)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 4; b++) begin
      // new table and scale per block; drain the pipeline first
      @(negedge clk); in_valid = 0;
      repeat (LAT + 1) @(negedge clk);
      for (int n = 0; n < N_SYM; n++) cents[n] = '{i: rnd_coord(1.2), q: rnd_coord(1.2)};
      scale = (b == 3) ? 16'd12000 : 16'($urandom_range(64, 2048));
      for (int t = 0; t < 1500; t++) begin
        @(negedge clk);
        in_valid = (t < 200) ? 1'b1 : ($urandom_range(0, 2) != 0);
        in_sym = '{i: rnd_coord(2.0), q: rnd_coord(2.0)};
        in_tag = 5'($urandom);
        if (in_valid) q.push_back('{t_in: cyc, s: in_sym, tag: in_tag});
      end
    end
    @(negedge clk); in_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
