// centroid_extractor: turns the trained demapper ANN into 16 centroids.
//
// The ANN's input plane is sampled on a GRID x GRID lattice covering
// [-RANGE, RANGE) in I and Q, at the centre of each lattice cell:
//   coord(g) = -RANGE + STEP*g + STEP/2,  STEP = 2*RANGE/GRID  (Q4.12).
// For each sample the extractor asks the ANN for a forward pass and adds the
// sample to the decision region of the returned label: sum of I, sum of Q and
// a count per label. I runs fastest, then Q. Requests are a valid/ready
// handshake (ann_start/ann_x taken when ann_ready is high) and answers come
// back in request order as ann_done/ann_label, so several samples can be in
// the ANN's pipeline at once: one lattice counter issues, a second one walks
// the answers. After the sweep, each label that owned at
// least one sample gets the mean of its samples, sum/count (sequential divider,
// truncation toward zero), written out through c_we/c_idx/c_data; hit_mask
// records those labels. Labels without samples are not written, so the table
// keeps their previous centroid. done pulses after the last write.
// Timing: GRID^2 forward passes at the ANN's throughput (plus its latency
// once), followed by at most 16 x 2 divisions of 33 cycles.
// Sampling the input space to get the decision regions follows the design. The
// design computes each centroid from the vertices of its Voronoi cell; this
// implementation uses the mean of the sampled cell area instead, and the grid
// size and range are its own choices.
module centroid_extractor
  import hyb_pkg::*;
#(
  parameter int unsigned GRID  = 64,
  parameter int unsigned RANGE = 5120   // 1.25 in Q4.12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  output logic        busy,
  output logic        done,
  // ANN forward requests
  output logic        ann_start,
  output cplx_t       ann_x,
  input  logic        ann_ready,
  input  logic        ann_done,
  input  bits_t       ann_label,
  // centroid writes
  output logic        c_we,
  output bits_t       c_idx,
  output cplx_t       c_data,
  output logic [N_SYM-1:0] hit_mask
);

  localparam int unsigned G_W   = (GRID > 1) ? $clog2(GRID) : 1;
  localparam int unsigned CNT_W = $clog2(GRID * GRID + 1);
  localparam int          STEP  = (2 * RANGE) / GRID;
  localparam int unsigned SUM_W = 32;

  typedef logic signed [SUM_W-1:0] sum_t;

  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_SWEEP, S_DIV_SEL, S_DIV_I, S_DIV_Q, S_WRITE} state_e;
  state_e state;

  logic [G_W-1:0]   gi, gq;      // next lattice point to issue
  logic [G_W-1:0]   ri, rq;      // lattice point of the next answer
  logic             all_issued;
  sum_t             sum_i [N_SYM];
  sum_t             sum_q [N_SYM];
  logic [CNT_W-1:0] cnt   [N_SYM];
  bits_t            lab;
  fx_t              mean_i;

  // Lattice points of the next request and of the next answer.
  function automatic fx_t coord(input logic [G_W-1:0] g);
    return fx_t'(-int'(RANGE) + STEP * int'(g) + STEP / 2);
  endfunction

  fx_t rx_i, rx_q;
  assign ann_start = (state == S_SWEEP) && !all_issued;
  assign ann_x     = '{i: coord(gi), q: coord(gq)};
  assign rx_i      = coord(ri);
  assign rx_q      = coord(rq);

  // Divider: magnitude of the selected sum by the count.
  logic             div_start, div_busy, div_done;
  logic [SUM_W-1:0] div_dvd, div_quo;
  logic [CNT_W-1:0] div_rem;
  sum_t             div_sum;
  logic             div_launch;

  assign div_sum = (state == S_DIV_Q) ? sum_q[lab] : sum_i[lab];
  assign div_dvd = div_sum[SUM_W-1] ? SUM_W'(-div_sum) : SUM_W'(div_sum);
  assign div_start = div_launch;

  div_seq #(.DVD_W(SUM_W), .DVS_W(CNT_W)) u_div (
    .clk, .rst_n, .start(div_start), .dividend(div_dvd), .divisor(cnt[lab]),
    .busy(div_busy), .done(div_done), .quotient(div_quo), .remainder(div_rem));

  fx_t div_res;
  assign div_res = div_sum[SUM_W-1] ? -fx_t'(div_quo) : fx_t'(div_quo);

  logic unused;
  assign unused = ^div_rem ^ div_busy ^ ^div_quo[SUM_W-1:FX_W];

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      gi         <= '0;
      gq         <= '0;
      ri         <= '0;
      rq         <= '0;
      all_issued <= 1'b0;
      lab        <= '0;
      done       <= 1'b0;
      c_we       <= 1'b0;
      c_idx      <= '0;
      c_data     <= '0;
      hit_mask   <= '0;
      mean_i     <= '0;
      div_launch <= 1'b0;
      for (int n = 0; n < N_SYM; n++) begin
        sum_i[n] <= '0; sum_q[n] <= '0; cnt[n] <= '0;
      end
    end else begin
      done       <= 1'b0;
      c_we       <= 1'b0;
      div_launch <= 1'b0;
      unique case (state)
        S_IDLE: if (start) state <= S_CLEAR;
        S_CLEAR: begin
          for (int n = 0; n < N_SYM; n++) begin
            sum_i[n] <= '0; sum_q[n] <= '0; cnt[n] <= '0;
          end
          gi         <= '0;
          gq         <= '0;
          ri         <= '0;
          rq         <= '0;
          all_issued <= 1'b0;
          hit_mask   <= '0;
          state      <= S_SWEEP;
        end
        S_SWEEP: begin
          if (ann_start && ann_ready) begin
            gi <= gi + 1'b1;
            if (32'(gi) == GRID - 1) begin
              gi <= '0;
              gq <= gq + 1'b1;
              if (32'(gq) == GRID - 1) all_issued <= 1'b1;
            end
          end
          if (ann_done) begin
            sum_i[ann_label] <= sum_i[ann_label] + sum_t'(rx_i);
            sum_q[ann_label] <= sum_q[ann_label] + sum_t'(rx_q);
            cnt[ann_label]   <= cnt[ann_label] + 1'b1;
            ri <= ri + 1'b1;
            if (32'(ri) == GRID - 1) begin
              ri <= '0;
              rq <= rq + 1'b1;
              if (32'(rq) == GRID - 1) begin
                lab   <= '0;
                state <= S_DIV_SEL;
              end
            end
          end
        end
        S_DIV_SEL: begin
          if (cnt[lab] != '0) begin
            div_launch <= 1'b1;
            state      <= S_DIV_I;
          end else if (lab == bits_t'(N_SYM - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            lab <= lab + 1'b1;
          end
        end
        S_DIV_I: if (div_done) begin
          mean_i     <= div_res;
          div_launch <= 1'b1;
          state      <= S_DIV_Q;
        end
        S_DIV_Q: if (div_done) begin
          c_we           <= 1'b1;
          c_idx          <= lab;
          c_data         <= '{i: mean_i, q: div_res};
          hit_mask[lab]  <= 1'b1;
          state          <= S_WRITE;
        end
        S_WRITE: begin
          if (lab == bits_t'(N_SYM - 1)) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            lab   <= lab + 1'b1;
            state <= S_DIV_SEL;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
