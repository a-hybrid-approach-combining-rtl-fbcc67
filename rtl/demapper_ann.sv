// demapper_ann: trainable demapper ANN (forward path, loss gradient, backward path).
//
// Network: 2 inputs (I, Q) -> 16 ReLU -> 16 ReLU -> 16 ReLU -> 4 -> sigmoid,
// giving the probability of each of the 4 bits of the received symbol. Each
// layer is its own fc_layer module with its own weights.
//
// Inference is pipelined over the layers: a layer starts the next sample as
// soon as it is free and the following layer has taken its previous result,
// so up to four samples are in flight and a new one is accepted about every
// 16/SIMD + 3 cycles. Results leave in order, one done pulse each.
// A training step runs alone (the pipeline is first drained, and ready stays
// low until the step ends), so it always sees the weights left by the
// previous step.
//
// Handshake: start is taken when start && ready; ready depends on train
// (a training step needs an empty pipeline). x and bits are sampled then.
// Latency of one operation, from the start cycle to its done pulse, with
// S = 16/SIMD and S1 = 2/min(SIMD, 2) (the first layer's input steps):
//   train = 0  forward pass only; prob and label (prob >= 0.5 per bit) are
//              valid while done pulses, (S1 + 2) + 3 x (S + 2) + 1 cycles
//              after the start cycle (59 for SIMD = 1). They change again when
//              the next result leaves, so take them at done.
//   train = 1  forward pass, BCE gradient p - bits (bce_grad), then backward
//              passes with SGD updates through layer 4, 3, 2 and 1; done
//              (S1 + 3) + 3 x (S + 3) + 1 + 3 x (S + 2) + (S1 + 2) cycles
//              after the start cycle (121 for SIMD = 1). prob and label are
//              those of the forward pass before the update.
// Inference throughput: one sample per S + 2 cycles (18 for SIMD = 1).
// SIMD is the degree of parallelism: inputs consumed per cycle by each layer
// (1, 2, 4, 8 or 16); all neurons of a layer always work in parallel.
// Host weight access: w_layer (0..3) selects the layer, w_row the neuron,
// w_col the input (w_col = number of inputs addresses the bias).
// The layer sizes, ReLU and sigmoid follow the design's case study, as does
// pipelining inference over separate per-layer units; reading the topology as
// three 16-neuron hidden layers plus a 4-neuron output layer, running training
// one sample at a time, the handshake and the learning rate 2^-lr_shift are
// this implementation's choices.
module demapper_ann
  import hyb_pkg::*;
#(
  parameter int unsigned SIMD = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic       train,
  input  cplx_t      x,
  input  bits_t      bits,
  input  logic [3:0] lr_shift,
  output logic       ready,
  output logic       busy,
  output logic       done,
  output fx_t        prob [N_OUT],
  output bits_t      label,
  // host weight access
  input  logic       w_we,
  input  logic [1:0] w_layer,
  input  logic [4:0] w_row,
  input  logic [4:0] w_col,
  input  fx_t        w_data,
  input  logic [1:0] r_layer,
  input  logic [4:0] r_row,
  input  logic [4:0] r_col,
  output fx_t        r_data
);

  localparam int unsigned SIMD1 = (SIMD < N_IN) ? SIMD : N_IN;

  typedef enum logic [3:0] {
    S_IDLE, S_F1, S_F2, S_F3, S_F4, S_B4, S_B3, S_B2, S_B1
  } state_e;
  state_e state;
  logic   kick;        // first cycle of a layer state: start that layer
  bits_t  bits_q;
  fx_t    x_vec [N_IN];
  fx_t    x_l1  [N_IN];  // first-layer input: live x for a pipelined start

  // layer signals
  fx_t y1 [N_HID], z1 [N_HID], y2 [N_HID], z2 [N_HID], y3 [N_HID], z3 [N_HID];
  fx_t y4 [N_OUT], z4 [N_OUT];
  fx_t dx1 [N_IN], dx2 [N_HID], dx3 [N_HID], dx4 [N_HID];
  fx_t grad [N_OUT];
  logic [3:0] l_done, l_busy;
  fx_t r_d [4];

  // -------------------------------------------------------------- inference pipeline
  // hv[l]: layer l holds a finished forward result that layer l+1 has not
  // taken yet (pv[l] keeps it after the done pulse). ps[l]: start layer l in
  // the pipeline this cycle.
  logic [2:0] pv, hv;
  logic [3:0] ps;
  logic       pipe_empty;
  logic       idle_fsm;

  assign idle_fsm   = (state == S_IDLE);
  assign hv         = pv | l_done[2:0];
  assign pipe_empty = (hv == '0) && (l_busy == '0) && !l_done[3];
  assign ready      = idle_fsm && (train ? pipe_empty : (!l_busy[0] && (!hv[0] || ps[1])));

  always_comb begin
    ps[3] = idle_fsm && hv[2] && !l_busy[3];
    ps[2] = idle_fsm && hv[1] && !l_busy[2] && (!hv[2] || ps[3]);
    ps[1] = idle_fsm && hv[0] && !l_busy[1] && (!hv[1] || ps[2]);
    ps[0] = start && ready && !train;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pv <= '0;
    else if (idle_fsm) pv <= hv & ~ps[3:1];
  end

  assign x_l1[0] = ps[0] ? x.i : x_vec[0];
  assign x_l1[1] = ps[0] ? x.q : x_vec[1];

  // Unused outputs of the last layer (its activation is the sigmoid below).
  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int j = 0; j < N_OUT; j++) unused ^= ^y4[j];
    for (int i = 0; i < N_IN; i++)  unused ^= ^dx1[i];
    unused ^= ^l_busy;
  end

  fc_layer #(.N_I(N_IN),  .N_O(N_HID), .RELU(1'b1), .SIMD(SIMD1)) u_l1 (
    .clk, .rst_n,
    .fwd_start((kick && state == S_F1) || ps[0]), .x(x_l1), .y(y1), .z(z1),
    .bwd_start(kick && state == S_B1), .dy(dx2), .lr_shift, .dx(dx1),
    .busy(l_busy[0]), .done(l_done[0]),
    .w_we(w_we && w_layer == 2'd0), .w_row, .w_col, .w_data,
    .r_row, .r_col, .r_data(r_d[0]));

  fc_layer #(.N_I(N_HID), .N_O(N_HID), .RELU(1'b1), .SIMD(SIMD)) u_l2 (
    .clk, .rst_n,
    .fwd_start((kick && state == S_F2) || ps[1]), .x(y1), .y(y2), .z(z2),
    .bwd_start(kick && state == S_B2), .dy(dx3), .lr_shift, .dx(dx2),
    .busy(l_busy[1]), .done(l_done[1]),
    .w_we(w_we && w_layer == 2'd1), .w_row, .w_col, .w_data,
    .r_row, .r_col, .r_data(r_d[1]));

  fc_layer #(.N_I(N_HID), .N_O(N_HID), .RELU(1'b1), .SIMD(SIMD)) u_l3 (
    .clk, .rst_n,
    .fwd_start((kick && state == S_F3) || ps[2]), .x(y2), .y(y3), .z(z3),
    .bwd_start(kick && state == S_B3), .dy(dx4), .lr_shift, .dx(dx3),
    .busy(l_busy[2]), .done(l_done[2]),
    .w_we(w_we && w_layer == 2'd2), .w_row, .w_col, .w_data,
    .r_row, .r_col, .r_data(r_d[2]));

  fc_layer #(.N_I(N_HID), .N_O(N_OUT), .RELU(1'b0), .SIMD(SIMD)) u_l4 (
    .clk, .rst_n,
    .fwd_start((kick && state == S_F4) || ps[3]), .x(y3), .y(y4), .z(z4),
    .bwd_start(kick && state == S_B4), .dy(grad), .lr_shift, .dx(dx4),
    .busy(l_busy[3]), .done(l_done[3]),
    .w_we(w_we && w_layer == 2'd3), .w_row, .w_col, .w_data,
    .r_row, .r_col, .r_data(r_d[3]));

  for (genvar k = 0; k < N_OUT; k++) begin : g_sig
    sigmoid_plan u_sig (.z(z4[k]), .p(prob[k]));
  end

  bce_grad u_loss (.p(prob), .b(bits_q), .grad(grad), .est_bits(label));

  assign r_data = r_d[r_layer];
  assign busy   = !idle_fsm || !pipe_empty;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      kick     <= 1'b0;
      bits_q   <= '0;
      done     <= 1'b0;
      for (int i = 0; i < N_IN; i++) x_vec[i] <= '0;
    end else begin
      kick <= 1'b0;
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (start && ready && train) begin
            x_vec[0] <= x.i;
            x_vec[1] <= x.q;
            bits_q   <= bits;
            state    <= S_F1;
            kick     <= 1'b1;
          end
          // a pipelined inference result leaves the last layer
          if (l_done[3]) done <= 1'b1;
        end
        S_F1: if (l_done[0]) begin state <= S_F2; kick <= 1'b1; end
        S_F2: if (l_done[1]) begin state <= S_F3; kick <= 1'b1; end
        S_F3: if (l_done[2]) begin state <= S_F4; kick <= 1'b1; end
        S_F4: if (l_done[3]) begin state <= S_B4; kick <= 1'b1; end
        S_B4: if (l_done[3]) begin state <= S_B3; kick <= 1'b1; end
        S_B3: if (l_done[2]) begin state <= S_B2; kick <= 1'b1; end
        S_B2: if (l_done[1]) begin state <= S_B1; kick <= 1'b1; end
        S_B1: if (l_done[0]) begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
