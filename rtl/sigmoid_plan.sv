// sigmoid_plan: sigmoid activation of the demapper ANN's output layer.
//
// Combinational piecewise-linear approximation (PLAN) in Q4.12:
//   |z| >= 5          : 1
//   2.375 <= |z| < 5  : |z|/32 + 0.84375
//   1 <= |z| < 2.375  : |z|/8  + 0.625
//   |z| < 1           : |z|/4  + 0.5
// and sigma(z) = 1 - sigma(|z|) for negative z. Only shifts and adds are
// needed. The sigmoid itself follows the design; the PLAN approximation is this
// implementation's choice. The output lies in [0, 1] (0..4096).
module sigmoid_plan
  import hyb_pkg::*;
(
  input  fx_t z,
  output fx_t p
);

  logic [FX_W:0] az;   // |z|, one bit wider so that |-8.0| fits
  logic [FX_W:0] f;

  always_comb begin
    az = z[FX_W-1] ? (FX_W+1)'(-$signed({z[FX_W-1], z})) : {1'b0, z};
    if (az >= 17'd20480)      f = 17'd4096;
    else if (az >= 17'd9728)  f = (az >> 5) + 17'd3456;
    else if (az >= 17'd4096)  f = (az >> 3) + 17'd2560;
    else                      f = (az >> 2) + 17'd2048;
    p = z[FX_W-1] ? fx_t'(17'd4096 - f) : fx_t'(f);
  end

endmodule
