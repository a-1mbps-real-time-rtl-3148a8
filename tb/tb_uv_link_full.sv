// tb_uv_link_full: one complete LDPC block through the link with every
// parameter of the top at its default: ten frames of 64 sync, 17 indication
// and 1263 coded symbols plus 16 guard symbols, 2 Mbit/s (50 clocks per
// symbol), M = 10 chips per symbol, K = 3 detectors, an n_c = 12630 entry LLR
// buffer.  The channel model gives about 21 pulses per "on" symbol and 0.4
// per "off" symbol over the three detectors, with a 37-sample delay.
// Checked: one packet of 4 + 12630 bytes with sequence number 0 and all ten
// segments present, LLR signs against the transmitted bits (at most 1 %
// wrong), the frame period of 1360 symbols, and ten detections.
module tb_uv_link_full;
  localparam int K = 3, ADC_W = 14, NSEG = 1263, Q = 10, CPS = 50;
  localparam int NC = NSEG*Q, FLEN = 64 + 17 + NSEG + 16;

  logic clk = 0, rst_n = 0;
  logic tx_bit = 0, tx_valid = 0, tx_ready, ook, tx_frame_start;
  logic [3:0] tx_seg_idx;
  logic adc_valid;
  logic [K-1:0][ADC_W-1:0] adc_sample;
  logic signed [ADC_W-1:0] v_thd = 14'sd500;
  logic [13:0] c_thd = 14'd350;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast;
  logic [6:0] rx_events;
  int checks = 0, failures = 0;

  uv_link_top dut (.*);
  uv_channel_model #(.K(K), .ADC_W(ADC_W)) chan (.clk, .ook, .force_on(1'b0), .blank(1'b0), .adc_valid, .adc_sample);

  always #5 clk = ~clk;

  initial begin
    #20000000; failures++;
    $display("watchdog expired: %0d frames sent, %0d detections, %0d packets", fs.size(), n_sync, n_pkt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  bit bits [NC];
  longint cyc = 0;
  longint fs [$];
  int n_sync = 0;
  int pkt [$];
  int n_pkt = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && tx_frame_start) fs.push_back(cyc);
    if (rst_n && rx_events[2]) n_sync++;
    if (m_tvalid && m_tready) begin
      if (n_pkt == 0) pkt.push_back(int'(m_tdata));
      if (m_tlast) n_pkt++;
    end
  end

  initial begin
    foreach (bits[i]) bits[i] = bit'($urandom_range(0, 1));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NC; i++) begin
      @(negedge clk);
      tx_valid = 1; tx_bit = bits[i];
      while (!tx_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) tx_valid = 0;
  end

  initial begin
    int errs = 0;
    @(posedge rst_n);
    wait (n_pkt == 1);
    repeat (100) @(posedge clk);
    checks++;
    if (pkt.size() != NC + 4 || pkt[0] != 0 || pkt[1] != 0 || pkt[2] != 8'h03 || pkt[3] != 8'hFF) begin
      failures++; $display("packet: %0d bytes, header %0h %0h %0h %0h", pkt.size(), pkt[0], pkt[1], pkt[2], pkt[3]);
    end else begin
      for (int n = 0; n < NC; n++) begin
        int v;
        v = pkt[4+n];
        if (v > 127) v -= 256;
        if ((v > 0) != bits[n]) errs++;
      end
      $display("%0d sign errors in %0d LLRs", errs, NC);
      checks++;
      if (errs * 100 > NC) failures++;
    end
    for (int f = 1; f < fs.size(); f++) begin
      checks++;
      if (fs[f] - fs[f-1] != longint'(FLEN*CPS)) begin failures++; $display("frame period %0d", fs[f] - fs[f-1]); end
    end
    checks++;
    if (fs.size() != Q || n_sync != Q) begin failures++; $display("%0d frames sent, %0d detections", fs.size(), n_sync); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
