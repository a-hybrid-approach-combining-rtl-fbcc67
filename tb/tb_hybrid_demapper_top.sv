// tb_hybrid_demapper_top: end-to-end run of the hybrid receiver at its default
// sizes (64 x 64 extraction lattice, 1024-pilot monitor window).
//
// Transmitter: the design's own mapper table holds a Gray-mapped, unit-energy
// 16-QAM constellation. Channel (behavioural, in this testbench): phase
// rotation plus white Gaussian noise at Es/N0 = 16 dB. One symbol in two is a
// pilot with known bits.
//   phase 1  The ANN starts from random weights; force_retrain makes the
//            receiver train it on pilots of the unrotated channel and extract
//            centroids (stands in for the initial end-to-end training).
//   phase 2  Inference on the unrotated channel: the BER must be low and no
//            retraining may be requested.
//   phase 3  The channel turns by pi/4. The pilot monitor must see the BER
//            rise and start retraining by itself; after training and
//            extraction the BER must be low again.
// Throughout, every LLR is compared with the max-log formula evaluated in real
// arithmetic on the centroid table the symbol met, and the mechanisms (forced
// and monitor-triggered retraining, training steps, pilot stalls while the ANN
// is busy, demapping during training and extraction, centroid writes, monitor
// windows, mode changes) are counted; one that never happens is a failure.
module tb_hybrid_demapper_top;
  import hyb_pkg::*;

  localparam int TRAIN1 = 6000;
  localparam int TRAIN2 = 6000;
  localparam real SNR_DB = 16.0;

  logic clk = 0, rst_n = 0;
  logic [15:0] cfg_inv_2sigma2, cfg_threshold, cfg_train_len;
  logic [3:0]  cfg_lr_shift;
  logic        force_retrain;
  logic        w_we; logic [1:0] w_layer, r_layer; logic [4:0] w_row, w_col, r_row, r_col;
  fx_t         w_data, r_data;
  logic        c_we, m_we; bits_t c_idx, m_idx; cplx_t c_data, m_data;
  logic        tx_valid, tx_out_valid; bits_t tx_bits; cplx_t tx_sym;
  logic        rx_valid, rx_is_pilot, rx_ready; cplx_t rx_sym; bits_t rx_pilot_bits;
  logic        llr_valid, llr_is_pilot; llr_t llr [M_BITS]; bits_t hard_bits, llr_pilot_bits;
  mode_e       mode;
  logic [15:0] retrain_count, last_errors;
  logic        window_done;
  cplx_t       centroids [N_SYM];
  logic [N_SYM-1:0] hit_mask;

  int checks = 0, failures = 0;

  hybrid_demapper_top dut (
    .clk, .rst_n, .cfg_inv_2sigma2, .cfg_threshold, .cfg_lr_shift, .cfg_train_len, .force_retrain,
    .w_we, .w_layer, .w_row, .w_col, .w_data, .r_layer, .r_row, .r_col, .r_data,
    .c_we, .c_idx, .c_data, .m_we, .m_idx, .m_data,
    .tx_valid, .tx_bits, .tx_out_valid, .tx_sym,
    .rx_valid, .rx_sym, .rx_is_pilot, .rx_pilot_bits, .rx_ready,
    .llr_valid, .llr, .hard_bits, .llr_is_pilot, .llr_pilot_bits,
    .mode, .retrain_count, .last_errors, .window_done, .centroids, .hit_mask);

  always #5 clk = ~clk;

  // ------------------------------------------------------------ counters
  int n_forced = 0, n_auto = 0, n_train_steps = 0, n_stall = 0, n_extract_wr = 0;
  int n_dem_train = 0, n_dem_extract = 0, n_windows = 0, n_mode_changes = 0, n_tx = 0;
  mode_e mode_d = MODE_INFER;
  // BER bookkeeping on data symbols, per phase
  int phase = 0;
  longint bit_err [4], bit_cnt [4];

  typedef struct { cplx_t s; bits_t b; logic pilot; cplx_t tab [N_SYM]; } exp_t;
  exp_t q[$];

  // Sampled 2 time units after the falling edge, when the stimulus has settled.
  always @(negedge clk) if (rst_n) begin
    #2;
    if (mode != mode_d) n_mode_changes++;
    if (mode_d == MODE_INFER && mode == MODE_TRAIN && phase >= 2) n_auto++;
    mode_d = mode;
    if (rx_valid && !rx_ready) n_stall++;
    if (window_done) n_windows++;
    if (dut.u_ext.c_we) n_extract_wr++;
    if (dut.u_ann.start && dut.u_ann.train && !dut.u_ann.busy) n_train_steps++;
    if (rx_valid && rx_ready && !rx_is_pilot && mode == MODE_TRAIN) n_dem_train++;
    if (rx_valid && rx_ready && !rx_is_pilot && mode == MODE_EXTRACT) n_dem_extract++;
  end

  // ------------------------------------------------------------ output checker
  always @(negedge clk) if (rst_n && llr_valid) begin
    exp_t e;
    real d, m0, m1, ref_llr, got, sc;
    #2;
    if (q.size() == 0) begin
      failures++;
    end else begin
      e = q.pop_front();
      sc = real'(cfg_inv_2sigma2) / 256.0;
      checks++;
      if (llr_is_pilot != e.pilot || (e.pilot && llr_pilot_bits != e.b)) begin failures++; $display("tag mismatch"); end
      for (int k = 0; k < M_BITS; k++) begin
        m0 = 1.0e30; m1 = 1.0e30;
        for (int n = 0; n < N_SYM; n++) begin
          d = (real'(e.s.i - e.tab[n].i) / 4096.0) ** 2 + (real'(e.s.q - e.tab[n].q) / 4096.0) ** 2;
          if (n[k]) begin if (d < m1) m1 = d; end
          else      begin if (d < m0) m0 = d; end
        end
        ref_llr = sc * (m0 - m1);
        got = real'(llr[k]) / 256.0;
        checks++;
        if (ref_llr * 256.0 >= 32767.0) begin
          if (llr[k] != 16'sh7fff) begin failures++; $display("no positive saturation %f", ref_llr); end
        end else if (ref_llr * 256.0 < -32767.0) begin
          if (llr[k] != -16'sh8000) begin failures++; $display("no negative saturation %f", ref_llr); end
        end else if (got - ref_llr > 1.0e-9 || ref_llr - got > 1.0 / 256.0 + 1.0e-9) begin
          failures++;
          if (failures < 10) $display("llr mismatch k=%0d got %f ref %f", k, got, ref_llr);
        end
        if (hard_bits[k] != (m0 > m1)) begin failures++; $display("hard bit mismatch"); end
        if (!e.pilot && mode == MODE_INFER) begin
          bit_cnt[phase]++;
          if (hard_bits[k] != e.b[k]) bit_err[phase]++;
        end
      end
    end
  end

  // ------------------------------------------------------------ watchdog
  initial begin
    repeat (30000000) @(posedge clk);
    failures++;
    $display("watchdog expired in phase %0d", phase);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ stimulus
  real rot = 0.0;
  real sigma;

  function automatic fx_t qam(input logic [1:0] g);
    case (g)
      2'b00: return -fx_t'(3886); 2'b01: return -fx_t'(1295);
      2'b11: return fx_t'(1295);  default: return fx_t'(3886);
    endcase
  endfunction

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic fx_t to_fx(input real v);
    real c;
    c = v * 4096.0;
    if (c > 32767.0) c = 32767.0;
    if (c < -32768.0) c = -32768.0;
    return fx_t'($rtoi(c));
  endfunction

  // Send one symbol: map it with the design's mapper, pass it through the
  // channel, present it until accepted.
  task automatic send(input logic pilot);
    bits_t b;
    cplx_t s;
    real si, sq, ri, rq;
    exp_t e;
    b = bits_t'($urandom);
    @(negedge clk);
    tx_valid = 1; tx_bits = b;
    @(negedge clk);
    tx_valid = 0;
    checks++;
    if (!tx_out_valid || tx_sym != '{i: qam(b[1:0]), q: qam(b[3:2])}) begin failures++; $display("mapper output wrong"); end
    n_tx++;
    si = real'(tx_sym.i) / 4096.0; sq = real'(tx_sym.q) / 4096.0;
    ri = si * $cos(rot) - sq * $sin(rot) + sigma * gauss();
    rq = si * $sin(rot) + sq * $cos(rot) + sigma * gauss();
    s = '{i: to_fx(ri), q: to_fx(rq)};
    rx_valid = 1; rx_sym = s; rx_is_pilot = pilot; rx_pilot_bits = b;
    #1;
    while (!rx_ready) begin @(negedge clk); #1; end
    e.s = s; e.b = b; e.pilot = pilot;
    for (int n = 0; n < N_SYM; n++) e.tab[n] = centroids[n];
    q.push_back(e);
    @(negedge clk);
    rx_valid = 0;
  endtask

  initial begin
    int n, start_rc;
    real ber;
    sigma = $sqrt(1.0 / (2.0 * (10.0 ** (SNR_DB / 10.0))));
    for (int p = 0; p < 4; p++) begin bit_err[p] = 0; bit_cnt[p] = 0; end
    cfg_inv_2sigma2 = 16'($rtoi(256.0 / (2.0 * sigma * sigma)));
    cfg_threshold = 16'd200;
    cfg_lr_shift = 4'd4;
    cfg_train_len = 16'(TRAIN1);
    force_retrain = 0;
    w_we = 0; w_layer = 0; w_row = 0; w_col = 0; w_data = 0; r_layer = 0; r_row = 0; r_col = 0;
    c_we = 0; c_idx = 0; c_data = '0; m_we = 0; m_idx = 0; m_data = '0;
    tx_valid = 0; tx_bits = 0; rx_valid = 0; rx_sym = '0; rx_is_pilot = 0; rx_pilot_bits = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // constellation and starting centroids
    for (int k = 0; k < N_SYM; k++) begin
      @(negedge clk);
      m_we = 1; m_idx = bits_t'(k); m_data = '{i: qam(2'(k)), q: qam(2'(k >> 2))};
      c_we = 1; c_idx = bits_t'(k); c_data = '{i: qam(2'(k)), q: qam(2'(k >> 2))};
    end
    // random initial ANN weights
    for (int l = 0; l < 4; l++)
      for (int j = 0; j < ((l == 3) ? 4 : 16); j++)
        for (int i = 0; i <= ((l == 0) ? 2 : 16); i++) begin
          @(negedge clk);
          m_we = 0; c_we = 0;
          w_we = 1; w_layer = 2'(l); w_row = 5'(j); w_col = 5'(i);
          w_data = fx_t'(int'($urandom_range(0, 3000)) - 1500);
        end
    @(negedge clk); w_we = 0; m_we = 0; c_we = 0;

    // phase 1: forced training on the unrotated channel
    phase = 1;
    @(negedge clk); force_retrain = 1;
    @(negedge clk); force_retrain = 0;
    n_forced++;
    checks++;
    if (mode != MODE_TRAIN) failures++;
    while (mode != MODE_INFER) send(($urandom_range(0, 1) == 1));
    checks++;
    if (retrain_count != 16'd1) begin failures++; $display("retrain count %0d", retrain_count); end
    checks++;
    if (n_train_steps != TRAIN1) begin failures++; $display("training steps %0d", n_train_steps); end
    $display("phase 1 done: hit mask %h", hit_mask);

    // phase 2: inference, unrotated
    phase = 2;
    for (n = 0; n < 6000; n++) send(n % 2 == 1);
    ber = real'(bit_err[2]) / real'(bit_cnt[2]);
    $display("phase 2 BER %f (%0d bits), last window errors %0d", ber, bit_cnt[2], last_errors);
    checks++;
    if (ber > 0.02) begin failures++; $display("BER too high after initial training"); end
    checks++;
    if (mode != MODE_INFER || retrain_count != 16'd1) begin failures++; $display("retraining during phase 2"); end

    // phase 3: rotation by pi/4, retraining must start by itself
    cfg_train_len = 16'(TRAIN2);
    rot = 3.141592653589793 / 4.0;
    phase = 3;
    n = 0;
    while (mode == MODE_INFER && n < 6000) begin send(n % 2 == 1); n++; end
    ber = real'(bit_err[3]) / real'(bit_cnt[3]);
    $display("phase 3 BER before retraining %f, window errors %0d", ber, last_errors);
    checks++;
    if (mode != MODE_TRAIN) begin failures++; $display("monitor did not start retraining"); end
    checks++;
    if (ber < 0.05) begin failures++; $display("rotation did not raise the BER"); end
    while (mode != MODE_INFER) send(($urandom_range(0, 1) == 1));
    checks++;
    if (retrain_count != 16'd2) begin failures++; $display("retrain count %0d", retrain_count); end
    phase = 0;   // do not count the symbols still in flight
    repeat (6) @(negedge clk);
    bit_err[0] = 0; bit_cnt[0] = 0;
    for (n = 0; n < 6000; n++) begin
      send(n % 2 == 1);
      if (n == 10) phase = 0;
    end
    ber = real'(bit_err[0]) / real'(bit_cnt[0]);
    $display("phase 3 BER after retraining %f", ber);
    checks++;
    if (ber > 0.03) begin failures++; $display("BER too high after retraining"); end
    repeat (8) @(negedge clk);

    $display("mechanisms: forced=%0d auto=%0d train_steps=%0d stalls=%0d extract_writes=%0d",
             n_forced, n_auto, n_train_steps, n_stall, n_extract_wr);
    $display("            demap_in_train=%0d demap_in_extract=%0d windows=%0d mode_changes=%0d tx=%0d",
             n_dem_train, n_dem_extract, n_windows, n_mode_changes, n_tx);
    if (n_forced == 0)       begin failures++; $display("no forced retraining"); end
    if (n_auto == 0)         begin failures++; $display("no monitor-triggered retraining"); end
    if (n_train_steps != TRAIN1 + TRAIN2) begin failures++; $display("training steps %0d", n_train_steps); end
    if (n_stall == 0)        begin failures++; $display("no pilot stall"); end
    if (n_extract_wr == 0)   begin failures++; $display("no centroid write"); end
    if (n_dem_train == 0)    begin failures++; $display("no demapping during training"); end
    if (n_dem_extract == 0)  begin failures++; $display("no demapping during extraction"); end
    if (n_windows == 0)      begin failures++; $display("no monitor window"); end
    if (n_mode_changes < 6)  begin failures++; $display("mode changes %0d", n_mode_changes); end
    checks += 9;
    checks++;
    if (q.size() != 0) begin failures++; $display("%0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
