// mapper_lut: transmitter mapper with a fixed, learned constellation.
//
// After end-to-end training the transmitter ANN is frozen and reduces to a
// lookup table: the 4 input bits select one of 16 complex constellation
// points. The table is written by the host (we/widx/wdata) with the points
// learned in software. in_valid/in_bits are mapped to out_valid/out_sym one
// cycle later (registered output, this design's choice). Reset clears the
// table to 0.
module mapper_lut
  import hyb_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,
  input  bits_t widx,
  input  cplx_t wdata,
  input  logic  in_valid,
  input  bits_t in_bits,
  output logic  out_valid,
  output cplx_t out_sym
);

  cplx_t table_q [N_SYM];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_SYM; n++) table_q[n] <= '0;
      out_valid <= 1'b0;
      out_sym   <= '0;
    end else begin
      if (we) table_q[widx] <= wdata;
      out_valid <= in_valid;
      if (in_valid) out_sym <= table_q[in_bits];
    end
  end

endmodule
