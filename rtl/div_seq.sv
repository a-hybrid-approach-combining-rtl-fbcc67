// div_seq: unsigned sequential restoring divider.
//
// start (sampled while idle) latches dividend and divisor; one quotient bit is
// produced per cycle, most significant first, and done pulses DVD_W cycles
// after the start cycle with quotient = floor(dividend / divisor) and the
// remainder. A zero divisor gives an all-ones quotient. Used by the centroid
// extractor to divide coordinate sums by sample counts.
module div_seq #(
  parameter int unsigned DVD_W = 32,
  parameter int unsigned DVS_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [DVD_W-1:0] dividend,
  input  logic [DVS_W-1:0] divisor,
  output logic             busy,
  output logic             done,
  output logic [DVD_W-1:0] quotient,
  output logic [DVS_W-1:0] remainder
);

  localparam int unsigned CNT_W = $clog2(DVD_W + 1);

  logic [DVS_W-1:0] dvs;
  logic [DVS_W:0]   rem;
  logic [CNT_W-1:0] cnt;
  logic [DVS_W:0]   rem_sh;
  logic             ge;

  always_comb begin
    rem_sh = {rem[DVS_W-1:0], quotient[DVD_W-1]};
    ge     = (rem_sh >= {1'b0, dvs});
  end

  assign remainder = rem[DVS_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      dvs      <= '0;
      rem      <= '0;
      cnt      <= '0;
      quotient <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          dvs      <= divisor;
          rem      <= '0;
          quotient <= dividend;
          cnt      <= CNT_W'(DVD_W);
          busy     <= 1'b1;
        end
      end else begin
        rem      <= ge ? rem_sh - {1'b0, dvs} : rem_sh;
        quotient <= {quotient[DVD_W-2:0], ge};
        cnt      <= cnt - 1'b1;
        if (cnt == CNT_W'(1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
