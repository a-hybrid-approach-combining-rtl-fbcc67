// tb_centroid_extractor: the ANN is replaced by a behavioural nearest-point
// classifier with a random ready, up to 4 requests in flight and a random
// answer latency (answers in request order), whose decision regions are the Voronoi
// cells of 16 rotated 16-QAM points, one of which is left unused so that its
// label owns no sample. The expected centroid of each region, the mean of the
// lattice points the classifier gives that label, is computed here from the
// lattice formula. Checks: the number and lattice order of the ANN
// requests (GRID^2), that more than one was in flight at some time, every
// centroid write, the hit mask, no write for the empty label, and done.
module tb_centroid_extractor;
  import hyb_pkg::*;

  localparam int G = 64, R = 5120;
  logic clk = 0, rst_n = 0;
  logic start, busy, done, ann_start, ann_ready, ann_done, c_we;
  cplx_t ann_x, c_data;
  bits_t ann_label, c_idx;
  logic [N_SYM-1:0] hit_mask;
  int checks = 0, failures = 0;
  int n_req = 0, n_wr = 0;
  real pi, pq;          // classifier points
  real ptsi [N_SYM], ptsq [N_SYM];
  logic wrote [N_SYM];

  always #5 clk = ~clk;

  centroid_extractor #(.GRID(G), .RANGE(R)) dut (
    .clk, .rst_n, .start, .busy, .done, .ann_start, .ann_x, .ann_ready, .ann_done, .ann_label,
    .c_we, .c_idx, .c_data, .hit_mask);

  function automatic bits_t classify(input real xi, input real xq);
    real best, d;
    bits_t b;
    best = 1.0e30; b = 0;
    for (int n = 0; n < N_SYM; n++) begin
      if (n == 5) continue;   // label 5 never chosen
      d = (xi - ptsi[n]) ** 2 + (xq - ptsq[n]) ** 2;
      if (d < best) begin best = d; b = bits_t'(n); end
    end
    return b;
  endfunction

  // Behavioural ANN, driven and sampled on the falling edge so there is no
  // race with the design's rising edge. A request is taken when ann_start
  // and ann_ready are both high; its answer leaves 2..20 cycles later, never
  // before the answer of an earlier request.
  bits_t q_lab [$];
  int    q_due [$];
  int    now = 0, last_due = 0, max_fly = 0;
  longint step_fx;
  initial begin
    ann_done = 0; ann_label = 0; ann_ready = 0;
    forever begin
      @(negedge clk);
      now++;
      ann_done = 0;
      if (q_due.size() > 0 && q_due[0] <= now) begin
        ann_label = q_lab.pop_front();
        void'(q_due.pop_front());
        ann_done = 1;
      end
      ann_ready = (q_due.size() < 4) && ($urandom_range(0, 3) != 0);
      if (ann_start && ann_ready) begin
        longint ei, eq;
        ei = -R + step_fx * (n_req % G) + step_fx / 2;
        eq = -R + step_fx * (n_req / G) + step_fx / 2;
        checks++;
        if (longint'(ann_x.i) != ei || longint'(ann_x.q) != eq) begin
          failures++;
          if (failures < 10) $display("request %0d at %0d,%0d", n_req, ann_x.i, ann_x.q);
        end
        n_req++;
        last_due = (now + $urandom_range(2, 20) > last_due + 1) ? now + $urandom_range(2, 20) : last_due + 1;
        q_due.push_back(last_due);
        q_lab.push_back(classify(real'(ann_x.i) / 4096.0, real'(ann_x.q) / 4096.0));
        if (q_due.size() > max_fly) max_fly = q_due.size();
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected centroids
  longint si [N_SYM], sq [N_SYM], cn [N_SYM];
  always @(negedge clk) if (c_we) begin
    longint ei, eq;
    n_wr++;
    wrote[c_idx] = 1;
    checks++;
    if (cn[c_idx] == 0) begin
      failures++;
      $display("write for empty label %0d", c_idx);
    end else begin
      // truncation toward zero, like the hardware
      ei = si[c_idx] / cn[c_idx];
      eq = sq[c_idx] / cn[c_idx];
      if (longint'(c_data.i) != ei || longint'(c_data.q) != eq) begin
        failures++;
        $display("label %0d got %0d,%0d expected %0d,%0d", c_idx, c_data.i, c_data.q, ei, eq);
      end
    end
  end

  initial begin
    real a, step;
    longint xi, xq;
    bits_t b;
    start = 0;
    a = 0.6;   // rotation (radians)
    for (int n = 0; n < N_SYM; n++) begin
      real li, lq;
      li = (real'(n % 4) * 2.0 - 3.0) / $sqrt(10.0);
      lq = (real'(n / 4) * 2.0 - 3.0) / $sqrt(10.0);
      ptsi[n] = li * $cos(a) - lq * $sin(a);
      ptsq[n] = li * $sin(a) + lq * $cos(a);
      si[n] = 0; sq[n] = 0; cn[n] = 0; wrote[n] = 0;
    end
    step = 2.0 * R / G;
    step_fx = longint'(step);
    for (int gq = 0; gq < G; gq++)
      for (int gi = 0; gi < G; gi++) begin
        xi = -R + longint'(step) * gi + longint'(step) / 2;
        xq = -R + longint'(step) * gq + longint'(step) / 2;
        b = classify(real'(xi) / 4096.0, real'(xq) / 4096.0);
        si[b] += xi; sq[b] += xq; cn[b]++;
      end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    checks++;
    if (n_req != G * G) begin failures++; $display("requests %0d", n_req); end
    checks++;
    if (max_fly < 2) begin failures++; $display("never more than one request in flight"); end
    checks++;
    if (n_wr != 15) begin failures++; $display("writes %0d", n_wr); end
    for (int n = 0; n < N_SYM; n++) begin
      checks++;
      if (hit_mask[n] != (cn[n] != 0) || wrote[n] != (cn[n] != 0)) failures++;
    end
    @(negedge clk);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
