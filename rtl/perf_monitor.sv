// perf_monitor: pilot bit-error counter that decides when to retrain.
//
// Pilot symbols carry bits known to the receiver. For every demapped pilot
// (valid) the monitor adds the number of bits in which the hard decisions
// rx_bits differ from ref_bits. After WINDOW pilots it stores the count in
// last_errors, pulses window_done and, if the count reached threshold
// (errors >= threshold), pulses retrain_req in the same cycle. The count then
// restarts. clear (or enable low) restarts the window. Triggering retraining
// from a pilot BER threshold follows the design; window length, threshold
// encoding and the ">=" reading of "reaches" are this implementation's choices.
module perf_monitor
  import hyb_pkg::*;
#(
  parameter int unsigned WINDOW = 1024
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic        clear,
  input  logic        valid,
  input  bits_t       rx_bits,
  input  bits_t       ref_bits,
  input  logic [15:0] threshold,
  output logic        window_done,
  output logic        retrain_req,
  output logic [15:0] last_errors
);

  localparam int unsigned CNT_W = $clog2(WINDOW + 1);

  logic [CNT_W-1:0] n_pilots;
  logic [15:0]      errors;
  logic [2:0]       bit_err;
  logic [15:0]      errors_next;

  always_comb begin
    bit_err = '0;
    for (int k = 0; k < M_BITS; k++) bit_err += 3'(rx_bits[k] ^ ref_bits[k]);
    // saturate so that a long window cannot wrap
    errors_next = (errors > 16'hfffb) ? 16'hffff : errors + 16'(bit_err);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_pilots    <= '0;
      errors      <= '0;
      last_errors <= '0;
      window_done <= 1'b0;
      retrain_req <= 1'b0;
    end else begin
      window_done <= 1'b0;
      retrain_req <= 1'b0;
      if (clear || !enable) begin
        n_pilots <= '0;
        errors   <= '0;
      end else if (valid) begin
        if (n_pilots == CNT_W'(WINDOW - 1)) begin
          n_pilots    <= '0;
          errors      <= '0;
          last_errors <= errors_next;
          window_done <= 1'b1;
          retrain_req <= (errors_next >= threshold);
        end else begin
          n_pilots <= n_pilots + 1'b1;
          errors   <= errors_next;
        end
      end
    end
  end

endmodule
