// tb_uv_link_lab: the link at a realistic photon-counting operating point,
// with every parameter of the top at its default.
//
// By default the channel gives lambda_s = 5 signal pulses and lambda_b = 0.3
// background pulses per symbol summed over the three detectors, the point
// at which the system's simulations show the rate-0.6 code working, and ten
// LDPC blocks (100 frames, about 68 ms of link time) are sent.  Run-time
// options change the point:
//   +blocks=<n>  LDPC blocks to send (1..40)
//   +lams=<x>    lambda_s, pulses per symbol over all detectors
//   +lamb=<x>    lambda_b
//   +cthd=<n>    sync trigger threshold; default 0.71 * 32 * (lambda_s +
//                lambda_b), about 71 % of the "on" sum expected at the peak
// The channel model's per-sample pulse probabilities are set to
// lambda * 65536 / (3 detectors * 50 samples).
//
// The testbench reports the missed-synchronization rate and the raw
// (uncoded) error rate of the LLR signs, which an LDPC decoder on the PC would
// then correct, next to the Poisson prediction for the same point.  The
// prediction is 0.5 * (P(N <= phi | lambda_s + lambda_b) + P(N > phi |
// lambda_b)), with phi from the LLR formula at the exact lambdas.  A block
// whose last frame is missed is only sent when the next block starts, so the
// final block may stay in the buffer.
// Checked at any point: the transmitter frame period, no more detections
// than frames, well-formed packets, and a raw error rate no worse than
// 1.5 x prediction + 1 %.  Checked where lambda_s >= 4: at least 90 % of the
// frames synchronized, at least 60 % of the segments delivered, and at most
// 1 % of the frames delivered to the wrong place (a segment with more than
// 30 % sign errors against every candidate block counts as misplaced; a
// wrongly decoded index or a sync a symbol off produces one).  Across eight
// seeds at the default point about one frame in 800 was misplaced.
module tb_uv_link_lab;
  localparam int K = 3, ADC_W = 14, NSEG = 1263, Q = 10, CPS = 50;
  localparam int NC = NSEG*Q, FLEN = 64 + 17 + NSEG + 16, NBMAX = 40;

  logic clk = 0, rst_n = 0;
  logic tx_bit = 0, tx_valid = 0, tx_ready, ook, tx_frame_start;
  logic [3:0] tx_seg_idx;
  logic adc_valid;
  logic [K-1:0][ADC_W-1:0] adc_sample;
  logic signed [ADC_W-1:0] v_thd = 14'sd500;
  logic [13:0] c_thd = 14'd120;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast;
  logic [6:0] rx_events;
  int checks = 0, failures = 0;

  uv_link_top dut (.*);
  uv_channel_model #(.K(K), .ADC_W(ADC_W), .P_ON(2315), .P_BG(131)) chan (.clk, .ook, .force_on(1'b0), .blank(1'b0), .adc_valid, .adc_sample);

  always #5 clk = ~clk;

  int  nb = 10;
  real lams = 5.0, lamb = 0.3;
  event cfg_done;

  initial begin
    int v;
    real r;
    if ($value$plusargs("blocks=%d", v)) nb = (v < 1) ? 1 : (v > NBMAX) ? NBMAX : v;
    if ($value$plusargs("lams=%f", r)) lams = r;
    if ($value$plusargs("lamb=%f", r)) lamb = r;
    c_thd = 14'($rtoi(0.71 * 32.0 * (lams + lamb)));
    if ($value$plusargs("cthd=%d", v)) c_thd = 14'(v);
    chan.p_on = $rtoi((lams + lamb) * 65536.0 / 150.0 + 0.5);
    chan.p_bg = $rtoi(lamb * 65536.0 / 150.0 + 0.5);
    $display("lambda_s %0.2f lambda_b %0.2f (p_on %0d p_bg %0d of 65536), c_thd %0d, %0d blocks",
             lams, lamb, chan.p_on, chan.p_bg, c_thd, nb);
    -> cfg_done;
  end

  // watchdog sized to the run: every frame, plus margin
  initial begin
    #1;
    repeat ((nb*Q + 3) * FLEN * CPS + 100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit bits [NBMAX*NC];
  longint cyc = 0;
  longint fs [$];
  int n_sync = 0;
  int pkt [NBMAX][$];
  int n_pkt = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tx_frame_start) fs.push_back(cyc);
    if (rst_n && rx_events[2]) n_sync++;
    if (m_tvalid && m_tready) begin
      if (n_pkt < NBMAX) pkt[n_pkt].push_back(int'(m_tdata));
      if (m_tlast) n_pkt++;
    end
  end

  initial begin
    #1;
    foreach (bits[i]) bits[i] = bit'($urandom_range(0, 1));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < nb*NC; i++) begin
      @(negedge clk);
      tx_valid = 1; tx_bit = bits[i];
      while (!tx_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) tx_valid = 0;
  end

  // Poisson cumulative probability P(N <= n | mean)
  function automatic real pois_cdf(int n, real mean);
    real term, sum;
    term = $exp(-mean);
    sum = term;
    for (int k = 1; k <= n; k++) begin
      term = term * mean / real'(k);
      sum += term;
    end
    return sum;
  endfunction

  initial begin
    int errs, nbits, nseg, misplaced, phi, i_s, j_b;
    real pred, rate;
    errs = 0; nbits = 0; nseg = 0; misplaced = 0;
    #1;
    i_s = $rtoi($floor(lams / 0.5 + 1e-9));
    j_b = $rtoi($floor(lamb / 0.01 + 1e-9));
    if (i_s < 1) i_s = 1;
    if (j_b < 1) j_b = 1;
    phi = $rtoi($ceil(0.5 * i_s / $ln((0.5 * i_s + 0.01 * j_b) / (0.01 * j_b))));
    pred = 0.5 * (pois_cdf(phi, lams + lamb) + (1.0 - pois_cdf(phi, lamb)));
    @(posedge rst_n);
    // all frames sent, then time for the last one to arrive and be packed
    wait (fs.size() == nb*Q);
    repeat (FLEN*CPS + 20000) @(posedge clk);
    for (int b = 0; b < n_pkt && b < NBMAX; b++) begin
      int mask, seq;
      checks++;
      seq = (pkt[b].size() >= 4) ? pkt[b][0]*256 + pkt[b][1] : -1;
      if (pkt[b].size() != NC + 4 || seq != b) begin
        failures++; $display("packet %0d: %0d bytes, sequence %0d", b, pkt[b].size(), seq); continue;
      end
      mask = pkt[b][2]*256 + pkt[b][3];
      if (mask != (1 << Q) - 1) $display("packet %0d: sequence %0d, segment mask %03x", b, seq, mask);
      for (int q = 0; q < Q; q++) if ((mask >> q) & 1) begin
        int se;
        se = NSEG + 1;
        nseg++;
        // a block split by a wrongly decoded index raises the sequence
        // numbers of the later packets, so packet b may hold segments of
        // blocks b-3..b: the best match is taken
        for (int bb = b; bb >= 0 && bb >= b - 3; bb--) if (bb < nb) begin
          int e;
          e = 0;
          for (int k = 0; k < NSEG; k++) begin
            int v;
            v = pkt[b][4 + q*NSEG + k];
            if (v > 127) v -= 256;
            if ((v > 0) != bits[bb*NC + q*NSEG + k]) e++;
          end
          if (e < se) se = e;
        end
        if (se * 10 > NSEG * 3) misplaced++;
        errs += se;
        nbits += NSEG;
      end
    end
    rate = (nbits > 0) ? real'(errs) / real'(nbits) : 0.0;
    $display("frames sent %0d, synchronized %0d, segments delivered %0d, misplaced %0d",
             fs.size(), n_sync, nseg, misplaced);
    $display("missed synchronization rate %0.3f, raw LLR sign error rate %0.4f (%0d of %0d), Poisson prediction %0.4f (phi %0d)",
             1.0 - real'(n_sync) / real'(fs.size()), rate, errs, nbits, pred, phi);
    checks++;
    if (n_sync > fs.size()) begin failures++; $display("more detections than frames"); end
    checks++;
    if (rate > 1.5 * pred + 0.01) begin failures++; $display("raw error rate above the bound"); end
    if (lams >= 4.0) begin
      checks++;
      if (n_sync * 10 < fs.size() * 9) begin failures++; $display("too many missed frames"); end
      checks++;
      if (nseg * 10 < fs.size() * 6) begin failures++; $display("too few segments delivered"); end
      checks++;
      if (misplaced * 100 > int'(fs.size())) begin failures++; $display("too many segments delivered to the wrong place"); end
    end
    for (int f = 1; f < fs.size(); f++) begin
      checks++;
      if (fs[f] - fs[f-1] != longint'(FLEN*CPS)) begin failures++; $display("frame period %0d", fs[f] - fs[f-1]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
