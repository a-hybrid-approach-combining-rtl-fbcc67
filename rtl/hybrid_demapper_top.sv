// hybrid_demapper_top: receiver combining a trainable demapper ANN with a
// conventional soft demapper on learned centroids.
//
// Received symbols (rx_*) are always demapped by the max-log soft demapper
// (soft_demapper) against the 16 centroids in centroid_regs; the LLRs come out
// 4 cycles later on llr_*, one symbol per cycle. Symbols flagged as pilots
// carry known bits. The receiver has three modes (mode output):
//   INFER    pilots are demapped and their bit errors counted by perf_monitor;
//            when a window's count reaches cfg_threshold (or force_retrain is
//            pulsed) the receiver enters TRAIN.
//   TRAIN    each pilot is also used for one SGD step of the demapper ANN
//            (demapper_ann, BCE loss on the pilot bits). While the ANN is busy
//            a new pilot is held off (rx_ready low for pilots only); data
//            symbols keep flowing. After cfg_train_len training steps the
//            receiver enters EXTRACT.
//   EXTRACT  centroid_extractor samples the ANN's input plane (several
//            samples in the ANN's layer pipeline at once), computes one
//            centroid per decision region and writes them into centroid_regs;
//            then the receiver returns to INFER with the new centroids.
// The transmit side holds the fixed learned constellation as a lookup table
// (mapper_lut): tx_bits are mapped to tx_sym one cycle later.
// SIMD sets the ANN's degree of parallelism (inputs per cycle in each layer).
// The host loads the initial ANN weights (w_*), the starting centroids (c_*)
// and the constellation (m_*), and sets 1/(2 sigma^2), the BER threshold, the
// learning rate and the number of training steps.
// The three steps (retrain on pilots, extract centroids, demap conventionally,
// retrain again on a performance drop) follow the design. Keeping ANN and soft
// demapper in the fabric at the same time (instead of reconfiguring the
// device between them), the mode handshakes and all counts are this
// implementation's choices.
module hybrid_demapper_top
  import hyb_pkg::*;
#(
  parameter int unsigned GRID   = 64,
  parameter int unsigned RANGE  = 5120,
  parameter int unsigned WINDOW = 1024,
  parameter int unsigned SIMD   = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic [15:0] cfg_inv_2sigma2,
  input  logic [15:0] cfg_threshold,
  input  logic [3:0]  cfg_lr_shift,
  input  logic [15:0] cfg_train_len,
  input  logic        force_retrain,
  // host: ANN weights
  input  logic        w_we,
  input  logic [1:0]  w_layer,
  input  logic [4:0]  w_row,
  input  logic [4:0]  w_col,
  input  fx_t         w_data,
  input  logic [1:0]  r_layer,
  input  logic [4:0]  r_row,
  input  logic [4:0]  r_col,
  output fx_t         r_data,
  // host: centroids and constellation
  input  logic        c_we,
  input  bits_t       c_idx,
  input  cplx_t       c_data,
  input  logic        m_we,
  input  bits_t       m_idx,
  input  cplx_t       m_data,
  // transmit mapper
  input  logic        tx_valid,
  input  bits_t       tx_bits,
  output logic        tx_out_valid,
  output cplx_t       tx_sym,
  // received symbols
  input  logic        rx_valid,
  input  cplx_t       rx_sym,
  input  logic        rx_is_pilot,
  input  bits_t       rx_pilot_bits,
  output logic        rx_ready,
  // soft outputs
  output logic        llr_valid,
  output llr_t        llr [M_BITS],
  output bits_t       hard_bits,
  output logic        llr_is_pilot,
  output bits_t       llr_pilot_bits,
  // status
  output mode_e       mode,
  output logic [15:0] retrain_count,
  output logic [15:0] last_errors,
  output logic        window_done,
  output cplx_t       centroids [N_SYM],
  output logic [N_SYM-1:0] hit_mask
);

  localparam int unsigned TAG_W = M_BITS + 1;

  // ---------------------------------------------------------------- control
  logic [15:0] train_cnt;
  logic        rx_fire;
  logic        train_fire;
  logic        mon_req;
  logic        mon_clear;
  logic        ext_start;
  logic        ext_busy, ext_done;

  logic        ann_ready, ann_busy, ann_done;
  fx_t         ann_prob [N_OUT];
  bits_t       ann_label;

  assign rx_ready   = !(rx_is_pilot && mode == MODE_TRAIN && !ann_ready);
  assign rx_fire    = rx_valid && rx_ready;
  assign train_fire = rx_fire && rx_is_pilot && mode == MODE_TRAIN
                      && (train_cnt < cfg_train_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode          <= MODE_INFER;
      train_cnt     <= '0;
      retrain_count <= '0;
      ext_start     <= 1'b0;
      mon_clear     <= 1'b1;
    end else begin
      ext_start <= 1'b0;
      mon_clear <= 1'b0;
      unique case (mode)
        MODE_INFER: if (mon_req || force_retrain) begin
          mode      <= MODE_TRAIN;
          train_cnt <= '0;
        end
        MODE_TRAIN: begin
          if (train_fire) train_cnt <= train_cnt + 1'b1;
          if (train_cnt >= cfg_train_len && !ann_busy) begin
            mode      <= MODE_EXTRACT;
            ext_start <= 1'b1;
          end
        end
        MODE_EXTRACT: if (ext_done) begin
          mode          <= MODE_INFER;
          retrain_count <= retrain_count + 1'b1;
          mon_clear     <= 1'b1;
        end
        default: mode <= MODE_INFER;
      endcase
    end
  end

  // ---------------------------------------------------------------- ANN
  logic  ext_ann_start;
  cplx_t ext_ann_x;
  logic  ann_start;
  logic  ann_train;
  cplx_t ann_x;

  always_comb begin
    if (mode == MODE_EXTRACT) begin
      ann_start = ext_ann_start;
      ann_train = 1'b0;
      ann_x     = ext_ann_x;
    end else begin
      ann_start = train_fire;
      ann_train = 1'b1;
      ann_x     = rx_sym;
    end
  end

  demapper_ann #(.SIMD(SIMD)) u_ann (
    .clk, .rst_n,
    .start(ann_start), .train(ann_train), .x(ann_x), .bits(rx_pilot_bits),
    .lr_shift(cfg_lr_shift), .ready(ann_ready), .busy(ann_busy), .done(ann_done),
    .prob(ann_prob), .label(ann_label),
    .w_we, .w_layer, .w_row, .w_col, .w_data,
    .r_layer, .r_row, .r_col, .r_data);

  logic unused;
  always_comb begin
    unused = 1'b0;
    for (int k = 0; k < N_OUT; k++) unused ^= ^ann_prob[k];
    unused ^= ext_busy;
  end

  // ---------------------------------------------------------------- extraction
  logic  ext_c_we;
  bits_t ext_c_idx;
  cplx_t ext_c_data;

  centroid_extractor #(.GRID(GRID), .RANGE(RANGE)) u_ext (
    .clk, .rst_n, .start(ext_start), .busy(ext_busy), .done(ext_done),
    .ann_start(ext_ann_start), .ann_x(ext_ann_x), .ann_ready,
    .ann_done(ann_done && mode == MODE_EXTRACT), .ann_label,
    .c_we(ext_c_we), .c_idx(ext_c_idx), .c_data(ext_c_data), .hit_mask);

  centroid_regs u_cent (
    .clk, .rst_n,
    .we(ext_c_we || c_we),
    .widx(ext_c_we ? ext_c_idx : c_idx),
    .wdata(ext_c_we ? ext_c_data : c_data),
    .centroids);

  // ---------------------------------------------------------------- soft demapping
  logic [TAG_W-1:0] out_tag;

  soft_demapper #(.TAG_W(TAG_W)) u_dem (
    .clk, .rst_n,
    .in_valid(rx_fire), .in_sym(rx_sym), .in_tag({rx_is_pilot, rx_pilot_bits}),
    .centroids, .inv_2sigma2(cfg_inv_2sigma2),
    .out_valid(llr_valid), .llr, .hard_bits, .out_tag);

  assign llr_is_pilot   = out_tag[TAG_W-1];
  assign llr_pilot_bits = out_tag[M_BITS-1:0];

  perf_monitor #(.WINDOW(WINDOW)) u_mon (
    .clk, .rst_n,
    .enable(mode == MODE_INFER), .clear(mon_clear),
    .valid(llr_valid && llr_is_pilot), .rx_bits(hard_bits), .ref_bits(llr_pilot_bits),
    .threshold(cfg_threshold), .window_done, .retrain_req(mon_req), .last_errors);

  // ---------------------------------------------------------------- transmit
  mapper_lut u_map (
    .clk, .rst_n, .we(m_we), .widx(m_idx), .wdata(m_data),
    .in_valid(tx_valid), .in_bits(tx_bits), .out_valid(tx_out_valid), .out_sym(tx_sym));

endmodule
