// fc_layer: one trainable fully connected layer of the demapper ANN.
//
// Holds its weight matrix W[N_OUT][N_IN] and bias B[N_OUT] (Q4.12) and runs
// three operations:
//   forward   z = W x + B, y = ReLU(z) (or y = z when RELU = 0).
//             All N_O neurons work in parallel on SIMD input elements per
//             cycle: fwd_start is sampled, N_I/SIMD multiply-accumulate cycles
//             follow, one cycle rounds and saturates; done pulses N_I/SIMD+1
//             cycles after the start cycle. x is kept for the backward pass.
//   backward  given dy = dL/dy, the local gradient dz = dy masked by the ReLU
//             derivative (z > 0) is formed in the start cycle, which also updates
//             the bias B -= dz * 2^-lr_shift. Then, SIMD input elements i per
//             cycle, dx[i] = sum_j W[j][i] dz[j] (with the weights before the
//             update) and W[j][i] -= dz[j] x[i] 2^-lr_shift. done pulses N_I/SIMD
//             cycles after the start cycle. This is plain SGD on one sample.
//   host port w_we writes W[w_row][w_col] (or B[w_row] when w_col = N_IN) while
//             the layer is idle; r_row/r_col read the same map combinationally.
// A separate module per layer with forward and backward path, and an
// adjustable degree of parallelism, follow the design; the form of that
// parallelism (all N_O neurons x SIMD inputs per cycle, SIMD dividing N_I), the
// Q4.12 format with truncating shifts and saturation, and the optimiser are
// this implementation's choices. fwd_start and bwd_start are ignored while busy.
module fc_layer
  import hyb_pkg::*;
#(
  parameter int unsigned N_I  = 16,
  parameter int unsigned N_O  = 16,
  parameter bit          RELU = 1'b1,
  parameter int unsigned SIMD = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  // forward
  input  logic       fwd_start,
  input  fx_t        x [N_I],
  output fx_t        y [N_O],
  output fx_t        z [N_O],
  // backward
  input  logic       bwd_start,
  input  fx_t        dy [N_O],
  input  logic [3:0] lr_shift,
  output fx_t        dx [N_I],
  // status
  output logic       busy,
  output logic       done,
  // host access
  input  logic       w_we,
  input  logic [4:0] w_row,
  input  logic [4:0] w_col,
  input  fx_t        w_data,
  input  logic [4:0] r_row,
  input  logic [4:0] r_col,
  output fx_t        r_data
);

  localparam int unsigned STEPS = N_I / SIMD;
  localparam int unsigned CNT_W = (STEPS > 1) ? $clog2(STEPS) : 1;
  localparam int unsigned COL_W = (N_I > 1) ? $clog2(N_I) : 1;
  localparam int unsigned ACC_W = 48;
  typedef logic signed [ACC_W-1:0] acc_t;

  typedef enum logic [1:0] {S_IDLE, S_FWD, S_FWD_FIN, S_BWD} state_e;
  state_e state;

  fx_t W [N_O][N_I];
  fx_t B [N_O];
  fx_t a_in [N_I];
  fx_t dz [N_O];
  acc_t acc [N_O];
  logic [CNT_W-1:0] cnt;

  assign busy = (state != S_IDLE);

  // ReLU derivative mask applied to the incoming gradient.
  fx_t dz_c [N_O];
  always_comb begin
    for (int j = 0; j < N_O; j++)
      dz_c[j] = (RELU && (z[j] <= 0)) ? fx_t'(0) : dy[j];
  end

  // Column index of lane s in the current step.
  function automatic int col(input logic [CNT_W-1:0] c, input int s);
    return int'(c) * int'(SIMD) + s;
  endfunction

  // Forward products of the current step, summed over the SIMD lanes.
  acc_t fwd_sum [N_O];
  // Backward products for the SIMD input columns of the current step.
  acc_t col_sum [SIMD];
  always_comb begin
    for (int j = 0; j < N_O; j++) begin
      fwd_sum[j] = '0;
      for (int s = 0; s < SIMD; s++)
        fwd_sum[j] += acc_t'(W[j][col(cnt, s)] * a_in[col(cnt, s)]);
    end
    for (int s = 0; s < SIMD; s++) begin
      col_sum[s] = '0;
      for (int j = 0; j < N_O; j++)
        col_sum[s] += acc_t'(W[j][col(cnt, s)] * dz[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
      for (int j = 0; j < N_O; j++) begin
        B[j] <= '0; y[j] <= '0; z[j] <= '0; dz[j] <= '0; acc[j] <= '0;
        for (int i = 0; i < N_I; i++) W[j][i] <= '0;
      end
      for (int i = 0; i < N_I; i++) begin
        a_in[i] <= '0; dx[i] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (fwd_start) begin
            for (int i = 0; i < N_I; i++) a_in[i] <= x[i];
            for (int j = 0; j < N_O; j++) acc[j] <= acc_t'(B[j]) <<< FX_FRAC;
            cnt   <= '0;
            state <= S_FWD;
          end else if (bwd_start) begin
            for (int j = 0; j < N_O; j++) begin
              dz[j] <= dz_c[j];
              B[j]  <= sat_fx(acc_t'(B[j]) - (acc_t'(dz_c[j]) >>> lr_shift));
            end
            cnt   <= '0;
            state <= S_BWD;
          end else if (w_we) begin
            if (32'(w_col) == N_I) B[w_row[$clog2(N_O)-1:0]] <= w_data;
            else W[w_row[$clog2(N_O)-1:0]][w_col[COL_W-1:0]] <= w_data;
          end
        end
        S_FWD: begin
          for (int j = 0; j < N_O; j++)
            acc[j] <= acc[j] + fwd_sum[j];
          if (32'(cnt) == STEPS - 1) state <= S_FWD_FIN;
          else cnt <= cnt + 1'b1;
        end
        S_FWD_FIN: begin
          for (int j = 0; j < N_O; j++) begin
            z[j] <= sat_fx(acc[j] >>> FX_FRAC);
            y[j] <= (RELU && sat_fx(acc[j] >>> FX_FRAC) < 0) ? fx_t'(0)
                                                             : sat_fx(acc[j] >>> FX_FRAC);
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        S_BWD: begin
          for (int s = 0; s < SIMD; s++) begin
            dx[col(cnt, s)] <= sat_fx(col_sum[s] >>> FX_FRAC);
            for (int j = 0; j < N_O; j++)
              W[j][col(cnt, s)] <= sat_fx(acc_t'(W[j][col(cnt, s)])
                  - ((acc_t'(dz[j] * a_in[col(cnt, s)])) >>> (FX_FRAC + 32'(lr_shift))));
          end
          if (32'(cnt) == STEPS - 1) begin
            done  <= 1'b1;
            state <= S_IDLE;
          end else begin
            cnt <= cnt + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Host read port.
  always_comb begin
    if (32'(r_col) == N_I) r_data = B[r_row[$clog2(N_O)-1:0]];
    else                   r_data = W[r_row[$clog2(N_O)-1:0]][r_col[COL_W-1:0]];
  end

endmodule
