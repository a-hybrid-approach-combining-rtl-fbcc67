// centroid_regs: table of the 16 centroids used by the soft demapper.
//
// One synchronous write port (from the centroid extractor or the host) and a
// parallel read of all entries, so that the soft demapper can compare a
// received symbol with every centroid in the same cycle. A write becomes
// visible on the read outputs the cycle after we is sampled. Entries reset to
// 0 (the host is expected to load a starting set, e.g. the transmitter
// constellation, before the first extraction); the storage form and reset
// value are this design's choices.
module centroid_regs
  import hyb_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  we,
  input  logic [$clog2(N_SYM)-1:0] widx,
  input  cplx_t wdata,
  output cplx_t centroids [N_SYM]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N_SYM; n++) centroids[n] <= '0;
    end else if (we) begin
      centroids[widx] <= wdata;
    end
  end

endmodule
