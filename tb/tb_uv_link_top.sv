// tb_uv_link_top: end-to-end run of transmitter, channel model and receiver
// with short frames (NSEG=40 data symbols, Q=3 segments per block; sync,
// indication, chip and sample sizes at their defaults).  Twelve frames are
// sent; the channel model adds a 37-sample delay, Poisson-like pulses
// (about 21 pulses per "on" symbol over the three detectors, 0.4 per "off")
// and three disturbances:
//   frame 1:  indication field overwritten with the codeword of index 3
//             -> invalid, dropped
//   frame 5:  no light at all -> missed synchronization, and block 1 is closed
//             by the next block's first frame
//   frames 7-11: output stalled -> block 3 closes while block 2 is pending
//             and is discarded (overflow)
// Checked: the packets (sequence number, segment mask, LLR signs against the
// transmitted bits, zeros for missing segments), the transmitter frame
// period, the number of detections, and that every mechanism (trigger, peak
// move, detection, frame end, block close, erasure, invalid index, overflow,
// output back-pressure) happened at least once.
module tb_uv_link_top;
  localparam int K = 3, ADC_W = 14, L = 64, LP = 17, NSEG = 40, Q = 3, G = 16, CPS = 50;
  localparam int NFRAMES = 12, NC = NSEG*Q;
  localparam int FLEN = L + LP + NSEG + G;

  logic clk = 0, rst_n = 0;
  logic tx_bit = 0, tx_valid = 0, tx_ready, ook, tx_frame_start;
  logic [1:0] tx_seg_idx;
  logic adc_valid;
  logic [K-1:0][ADC_W-1:0] adc_sample;
  logic signed [ADC_W-1:0] v_thd = 14'sd500;
  logic [13:0] c_thd = 14'd350;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast;
  logic [6:0] rx_events;
  logic force_on = 0, blank = 0;
  int checks = 0, failures = 0;

  uv_link_top #(.NSEG(NSEG), .Q(Q)) dut (.*);
  uv_channel_model #(.K(K), .ADC_W(ADC_W)) chan (.clk, .ook, .force_on, .blank, .adc_valid, .adc_sample);

  always #5 clk = ~clk;

  initial begin
    #30000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit bits [NFRAMES*NSEG];
  longint cyc = 0;
  longint fs [$];
  int ev [7] = '{default: 0};
  int n_stall = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tx_frame_start) fs.push_back(cyc);
    if (rst_n) for (int e = 0; e < 7; e++) if (rx_events[e]) ev[e]++;
    if (m_tvalid && !m_tready) n_stall++;
  end

  // packet capture
  int pkt [$][$];
  int cur [$];
  always @(posedge clk) if (m_tvalid && m_tready) begin
    cur.push_back(int'(m_tdata));
    if (m_tlast) begin pkt.push_back(cur); cur = {}; end
  end

  // coded bits into the transmitter
  initial begin
    foreach (bits[i]) bits[i] = bit'($urandom_range(0, 1));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NFRAMES*NSEG; i++) begin
      @(negedge clk);
      tx_valid = 1; tx_bit = bits[i];
      while (!tx_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) tx_valid = 0;
  end

  // channel disturbances and output stall, timed from the frame starts
  initial begin
    @(posedge rst_n);
    for (int f = 0; f < NFRAMES; f++) begin
      @(posedge clk iff tx_frame_start);
      if (f == 7) @(negedge clk) m_tready = 0;
      if (f == 5) blank = 1;
      if (f == 6) blank = 0;
      if (f == 1) fork begin
        repeat (L*CPS) @(posedge clk);
        // codeword of index 3: symbol p = parity(3 & (p mod 4)); light
        // forced on for its ones and removed for its zeros
        for (int p = 0; p < LP; p++) begin
          force_on = ^(3 & (p % 4));
          blank    = !force_on;
          repeat (CPS) @(posedge clk);
        end
        force_on = 0; blank = 0;
      end join_none
    end
    repeat (FLEN*CPS + 2000) @(posedge clk);
    @(negedge clk) m_tready = 1;
    repeat (3000) @(posedge clk);
    finish_checks();
  end

  task automatic check_packet(int p, int seq, int mask, int blk);
    int errs = 0, zeros_bad = 0;
    checks++;
    if (pkt.size() <= p) begin failures++; $display("packet %0d missing", p); return; end
    if (pkt[p].size() != NC + 4 || pkt[p][0]*256 + pkt[p][1] != seq || pkt[p][2]*256 + pkt[p][3] != mask) begin
      failures++;
      $display("packet %0d: %0d bytes seq %0d mask %0h, expected seq %0d mask %0h", p, pkt[p].size(),
               pkt[p][0]*256 + pkt[p][1], pkt[p][2]*256 + pkt[p][3], seq, mask);
      return;
    end
    for (int q = 0; q < Q; q++)
      for (int k = 0; k < NSEG; k++) begin
        int v;
        v = pkt[p][4 + q*NSEG + k];
        if (v > 127) v -= 256;
        if ((mask >> q) & 1) begin
          if ((v > 0) != bits[(blk*Q + q)*NSEG + k]) errs++;
        end else if (v != 0) zeros_bad++;
      end
    $display("packet %0d: seq %0d mask %0h, %0d sign errors in %0d LLRs", p, seq, mask, errs, NC);
    checks++;
    if (errs * 100 > NC || zeros_bad != 0) begin failures++; $display("  too many errors or non-zero erasures (%0d)", zeros_bad); end
  endtask

  task automatic finish_checks();
    string names [9] = '{"trigger", "peak move", "detection", "frame end", "block close",
                         "overflow", "invalid index", "erasure", "back-pressure"};
    int counts [9];
    check_packet(0, 0, 3'b101, 0);
    check_packet(1, 1, 3'b011, 1);
    check_packet(2, 2, 3'b111, 2);
    checks++;
    if (pkt.size() != 3) begin failures++; $display("%0d packets, expected 3", pkt.size()); end
    // transmitter frame period
    for (int f = 1; f < fs.size(); f++) begin
      checks++;
      if (fs[f] - fs[f-1] != longint'(FLEN*CPS)) begin failures++; $display("frame period %0d", fs[f] - fs[f-1]); end
    end
    checks++;
    if (ev[2] != NFRAMES - 1) begin failures++; $display("%0d detections, expected %0d", ev[2], NFRAMES-1); end
    for (int e = 0; e < 7; e++) counts[e] = ev[e];
    counts[7] = (pkt.size() > 1 && pkt[0].size() > 3 && pkt[0][3] != 7) ? 1 : 0;
    counts[8] = n_stall;
    for (int e = 0; e < 9; e++) begin
      $display("mechanism %-14s happened %0d times", names[e], counts[e]);
      checks++;
      if (counts[e] == 0) begin failures++; $display("  mechanism never exercised"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
endmodule
