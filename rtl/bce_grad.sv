// bce_grad: loss-function block of the demapper retraining.
//
// The demapper ANN is trained with the binary cross-entropy loss between its
// output probabilities p_k = sigmoid(z_k) and the known pilot bits b_k. The
// gradient of that loss with respect to the output-layer pre-activation z_k
// has the closed form p_k - b_k, which this block computes for the 4 bits
// (Q4.12, range [-1, 1]). est_bits gives the hard decisions p_k >= 0.5, the
// estimated bits that are compared with the pilot bits. Combinational.
module bce_grad
  import hyb_pkg::*;
(
  input  fx_t   p [M_BITS],
  input  bits_t b,
  output fx_t   grad [M_BITS],
  output bits_t est_bits
);

  always_comb begin
    for (int k = 0; k < M_BITS; k++) begin
      grad[k]     = p[k] - (b[k] ? FX_ONE : fx_t'(0));
      est_bits[k] = (p[k] >= FX_HALF);
    end
  end

endmodule
