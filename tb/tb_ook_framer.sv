// tb_ook_framer: three frames at the default sizes (64 sync, 17 indication,
// 1263 data, 16 guard symbols, 50 clocks per symbol).  The testbench keeps
// the FIFO fed with random bits and samples ook in the middle of every symbol.
// It checks every symbol of each frame against the expected layout (sync
// pattern MSB first, the Hadamard codeword of the segment index q with
// symbol p = parity(q & (p mod 16)), the data bits in order, guard zeros) and
// that consecutive frames start exactly 1360 symbol periods apart.
module tb_ook_framer;
  localparam int CPS = 50, L = 64, LP = 17, NSEG = 1263, Q = 10, G = 16;
  localparam logic [63:0] SYNC = 64'h04314F4725BB357E;
  localparam int NF = 3, FLEN = L + LP + NSEG + G;

  logic clk = 0, rst_n = 0;
  logic s_bit = 0, s_valid = 0, s_ready, ook, frame_start;
  logic [3:0] seg_idx;
  int checks = 0, failures = 0;
  bit data [NF*NSEG];
  longint fs_time [$];
  longint cyc = 0;

  ook_framer dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #5000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // feeder: pushes all data bits as the FIFO allows
  initial begin
    foreach (data[i]) data[i] = bit'($urandom_range(0, 1));
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < NF*NSEG; i++) begin
      @(negedge clk);
      s_valid = 1; s_bit = data[i];
      while (!s_ready) @(negedge clk);
      @(posedge clk);
    end
    @(negedge clk) s_valid = 0;
  end

  always @(posedge clk) if (rst_n && frame_start) fs_time.push_back(cyc);

  // checker
  initial begin
    @(posedge rst_n);
    for (int f = 0; f < NF; f++) begin
      // frames follow back to back, so only the first one is waited for
      if (f == 0) begin
        @(posedge clk iff frame_start);
        repeat (CPS/2) @(posedge clk);
      end
      for (int n = 0; n < FLEN; n++) begin
        logic e;
        if (n < L)           e = SYNC[L-1-n];
        else if (n < L+LP)   e = ^((f % Q) & ((n - L) % 16));
        else if (n < L+LP+NSEG) e = data[f*NSEG + n - L - LP];
        else                 e = 1'b0;
        checks++;
        if (ook !== e) begin
          failures++;
          if (failures < 10) $display("frame %0d symbol %0d: ook=%0d expected %0d", f, n, ook, e);
        end
        repeat (CPS) @(posedge clk);
      end
    end
    for (int f = 1; f < NF; f++) begin
      checks++;
      if (fs_time[f] - fs_time[f-1] != longint'(FLEN*CPS)) begin
        failures++;
        $display("frame period %0d cycles, expected %0d", fs_time[f] - fs_time[f-1], FLEN*CPS);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
