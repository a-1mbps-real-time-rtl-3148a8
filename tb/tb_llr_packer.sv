// tb_llr_packer: block buffering and packet output at small sizes
// (NC=12, NSEG=4, Q=3, LP=3).  Frames are presented as LLR beats: three
// indication LLRs (the index's codeword, symbol i = parity(idx & i), as +5
// for a 1 and -5 for a 0) and four random data LLRs.
// Scenario: a complete block; a block whose segment 1 is lost, followed by a
// frame with an invalid index (dropped) and a new block that closes it; a
// complete block; then two blocks while the output is stalled, so the second
// must be discarded (overflow).  Output readiness is random elsewhere.  Every
// packet byte is compared with the model: sequence number, segment mask, LLRs
// in code order with zeros for missing segments.
module tb_llr_packer;
  localparam int NC = 12, NSEG = 4, Q = 3, LP = 3, IB = 2;
  logic clk = 0, rst_n = 0, llr_valid = 0;
  uv_pkg::llr_t llr = '0;
  logic [7:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast;
  logic ev_close, ev_overflow, ev_bad_index;
  int checks = 0, failures = 0;
  int exp_bytes [$];
  int n_close = 0, n_ovf = 0, n_bad = 0, n_pkt = 0, n_bytes = 0;
  bit stall = 0;

  llr_packer #(.NC(NC), .NSEG(NSEG), .Q(Q), .LP(LP)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) m_tready = stall ? 1'b0 : ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (rst_n) begin
    if (ev_close) n_close++;
    if (ev_overflow) n_ovf++;
    if (ev_bad_index) n_bad++;
    if (m_tvalid && m_tready) begin
      int e;
      checks++; n_bytes++;
      if (exp_bytes.size() == 0) begin failures++; $display("unexpected byte %0d", m_tdata); end
      else begin
        e = exp_bytes.pop_front();
        if (int'(m_tdata) != (e & 255) || m_tlast != (e >> 8)) begin
          failures++;
          if (failures < 10) $display("byte %0d last %0d expected %0d last %0d", m_tdata, m_tlast, e & 255, e >> 8);
        end
      end
      if (m_tlast) n_pkt++;
    end
  end

  // one block's worth of LLRs in the model
  int blk [Q][NSEG];
  bit got [Q];

  task automatic beat(logic signed [7:0] v, bit pilot, bit last);
    @(negedge clk);
    llr_valid = 1; llr.llr = v; llr.pilot = pilot; llr.last = last;
    @(negedge clk) llr_valid = 0;
  endtask

  task automatic frame(int idx);
    int d;
    // Hadamard codeword of the index: symbol i = parity(idx & (i mod 4))
    for (int i = 0; i < LP; i++)
      beat((^(idx & (i % 4))) ? 8'sd5 : -8'sd5, 1, 0);
    for (int k = 0; k < NSEG; k++) begin
      d = $urandom_range(0, 255) - 128;
      if (idx < Q) blk[idx][k] = d;
      beat(8'(d), 0, k == NSEG-1);
    end
    if (idx < Q) got[idx] = 1;
  endtask

  task automatic expect_packet(int seq);
    int mask = 0;
    for (int q = 0; q < Q; q++) if (got[q]) mask |= 1 << q;
    exp_bytes.push_back((seq >> 8) & 255); exp_bytes.push_back(seq & 255);
    exp_bytes.push_back((mask >> 8) & 255); exp_bytes.push_back(mask & 255);
    for (int q = 0; q < Q; q++)
      for (int k = 0; k < NSEG; k++)
        exp_bytes.push_back((got[q] ? (blk[q][k] & 255) : 0) + ((q == Q-1 && k == NSEG-1) ? 256 : 0));
    foreach (got[q]) got[q] = 0;
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    // block 0: complete
    frame(0); frame(1); frame(2); expect_packet(0);
    // block 1: segment 1 lost, then an invalid index, then block 2 starts
    frame(0); frame(2); expect_packet(1);
    frame(3);
    frame(0); frame(1); frame(2); expect_packet(2);
    repeat (200) @(posedge clk);
    // blocks 3 and 4 while the output is stalled: block 4 is discarded
    stall = 1;
    frame(0); frame(1); frame(2); expect_packet(3);
    frame(0); frame(1); frame(2);
    foreach (got[q]) got[q] = 0;
    stall = 0;
    repeat (300) @(posedge clk);
    checks++;
    if (exp_bytes.size() != 0 || n_pkt != 4) begin failures++; $display("packets %0d, bytes missing %0d", n_pkt, exp_bytes.size()); end
    checks++;
    if (n_close != 5 || n_ovf != 1 || n_bad != 1) begin failures++; $display("close %0d overflow %0d bad %0d", n_close, n_ovf, n_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
