// soft_demapper: sub-optimal (max-log) soft demapper working on learned centroids.
//
// For a received symbol s_r and each bit k of the 4-bit label the LLR is
//   llr_k = 1/(2 sigma^2) * ( min_{i: i[k]=0} |s_r - c_i|^2  -  min_{i: i[k]=1} |s_r - c_i|^2 )
// which is the simplified soft demapping rule of the design: exponentials and
// logarithms of the exact LLR are replaced by the two minimum squared distances.
// A positive LLR means the bit is more likely 1; hard_bits[k] = (llr difference > 0).
// Centroid i belongs to the symbol whose bit pattern is i.
//
// Pipeline (one symbol accepted every cycle, result 4 cycles later):
//   stage 1  differences s_r - c_i for all 16 centroids
//   stage 2  squared distances (Q8.24, full precision)
//   stage 3  per bit, the minimum over the 8 centroids with the bit at 0 and at 1,
//            and their difference
//   stage 4  multiplication by inv_2sigma2 (unsigned Q8.8), saturated to a signed
//            Q8.8 LLR
// The formula follows the design; the 4-stage split, the number formats and the
// sign convention are choices of this implementation. A 4-cycle latency with one
// symbol per cycle matches the reported 53 ns / 75 Msymbol/s at a 75 MHz clock.
// in_tag travels alongside the symbol (for example a pilot flag and its bits).
module soft_demapper
  import hyb_pkg::*;
#(
  parameter int unsigned TAG_W = 5
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  cplx_t              in_sym,
  input  logic [TAG_W-1:0]   in_tag,
  input  cplx_t              centroids [N_SYM],
  input  logic [15:0]        inv_2sigma2,
  output logic               out_valid,
  output llr_t               llr [M_BITS],
  output bits_t              hard_bits,
  output logic [TAG_W-1:0]   out_tag
);

  localparam int unsigned D_W    = FX_W + 1;        // difference width
  localparam int unsigned DIST_W = 2 * D_W;         // squared distance width
  localparam int unsigned DIFF_W = DIST_W + 1;      // signed difference of two distances

  typedef logic signed [D_W-1:0]  diff_t;
  typedef logic [DIST_W-1:0]      dist_t;
  typedef logic signed [DIFF_W-1:0] ddiff_t;

  // stage 1
  logic               v1;
  logic [TAG_W-1:0]   t1;
  diff_t              di1 [N_SYM];
  diff_t              dq1 [N_SYM];
  // stage 2
  logic               v2;
  logic [TAG_W-1:0]   t2;
  dist_t              dist2 [N_SYM];
  // stage 3
  logic               v3;
  logic [TAG_W-1:0]   t3;
  ddiff_t             md3 [M_BITS];
  // stage 4 (outputs)

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; v3 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; v3 <= v2; out_valid <= v3;
    end
  end

  // Stage 1: differences.
  always_ff @(posedge clk) begin
    t1 <= in_tag;
    for (int n = 0; n < N_SYM; n++) begin
      di1[n] <= diff_t'(in_sym.i) - diff_t'(centroids[n].i);
      dq1[n] <= diff_t'(in_sym.q) - diff_t'(centroids[n].q);
    end
  end

  // Stage 2: squared Euclidean distances.
  always_ff @(posedge clk) begin
    t2 <= t1;
    for (int n = 0; n < N_SYM; n++) begin
      dist2[n] <= dist_t'(di1[n] * di1[n]) + dist_t'(dq1[n] * dq1[n]);
    end
  end

  // Stage 3: per-bit minima and their difference.
  dist_t min0 [M_BITS];
  dist_t min1 [M_BITS];
  always_comb begin
    for (int k = 0; k < M_BITS; k++) begin
      min0[k] = '1;
      min1[k] = '1;
      for (int n = 0; n < N_SYM; n++) begin
        if (n[k] == 1'b0) begin
          if (dist2[n] < min0[k]) min0[k] = dist2[n];
        end else begin
          if (dist2[n] < min1[k]) min1[k] = dist2[n];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    t3 <= t2;
    for (int k = 0; k < M_BITS; k++) begin
      md3[k] <= ddiff_t'({1'b0, min0[k]}) - ddiff_t'({1'b0, min1[k]});
    end
  end

  // Stage 4: scaling by 1/(2 sigma^2). Distances are Q.24, scale Q.8, LLR Q.8:
  // shift right by 24.
  localparam int unsigned PROD_W = DIFF_W + 17;
  logic signed [PROD_W-1:0] prod [M_BITS];
  logic signed [PROD_W-1:0] shifted [M_BITS];
  always_comb begin
    for (int k = 0; k < M_BITS; k++) begin
      prod[k]    = PROD_W'(md3[k]) * $signed({1'b0, inv_2sigma2});
      shifted[k] = prod[k] >>> (2 * FX_FRAC);
    end
  end

  always_ff @(posedge clk) begin
    out_tag <= t3;
    for (int k = 0; k < M_BITS; k++) begin
      if (shifted[k] > PROD_W'(32767))       llr[k] <= llr_t'(16'sh7fff);
      else if (shifted[k] < -PROD_W'(32768)) llr[k] <= llr_t'(-16'sh8000);
      else                                   llr[k] <= llr_t'(shifted[k]);
      hard_bits[k] <= (md3[k] > 0);
    end
  end

endmodule
