// tb_symbol_deframer: random delayed chip stream, several frames with
// different skip values.  Each symbol must be the sum of M chips starting
// sync_skip chips after the detection; the first LP symbols are tagged
// pilot, the last of LP+NSEG symbols is tagged last with frame_done, and no
// symbol appears outside a frame.  Small sizes (M=4, LP=3, NSEG=6).
module tb_symbol_deframer;
  localparam int M = 4, LP = 3, NSEG = 6, W = 8, CW = 4, NCH = 1200;
  logic clk = 0, rst_n = 0, dly_valid = 0, sync_found = 0;
  logic [CW-1:0] dly_cnt = 0;
  logic [3:0] sync_skip = 0;
  logic sym_valid, frame_done;
  uv_pkg::sym_t sym;
  int checks = 0, failures = 0;
  int c [NCH];
  int exp_q [$];       // expected {cnt, pilot, last} packed as cnt*4+pilot*2+last
  int nsym = 0, ndone = 0;

  symbol_deframer #(.M(M), .LP(LP), .NSEG(NSEG), .W(W), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (sym_valid) begin
      int e;
      checks++; nsym++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected symbol"); end
      else begin
        e = exp_q.pop_front();
        if (int'(sym.cnt) != e/4 || int'(sym.pilot) != (e/2)%2 || int'(sym.last) != e%2 || frame_done != sym.last) begin
          failures++;
          if (failures < 10) $display("symbol %0d/%0d/%0d done %0d expected %0d/%0d/%0d", sym.cnt, sym.pilot, sym.last, frame_done, e/4, (e/2)%2, e%2);
        end
      end
    end
    if (frame_done) ndone++;
  end

  initial begin
    int t = 0;
    foreach (c[i]) c[i] = $urandom_range(0, 9);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int f = 0; f < 6; f++) begin
      int skip, start;
      skip = 1 + (f * 3) % W;
      // some idle chips, then a detection
      for (int n = 0; n < 5 + f; n++) begin
        @(negedge clk) dly_valid = 1; dly_cnt = CW'(c[t]); t++;
        @(negedge clk) dly_valid = 0;
        repeat (3) @(negedge clk);
      end
      @(negedge clk) sync_found = 1; sync_skip = 4'(skip);
      @(negedge clk) sync_found = 0;
      start = t + skip;
      for (int s = 0; s < LP + NSEG; s++) begin
        int sum;
        sum = 0;
        for (int j = 0; j < M; j++) sum += c[start + s*M + j];
        exp_q.push_back(sum*4 + ((s < LP) ? 2 : 0) + ((s == LP+NSEG-1) ? 1 : 0));
      end
      for (int n = 0; n < skip + (LP+NSEG)*M; n++) begin
        @(negedge clk) dly_valid = 1; dly_cnt = CW'(c[t]); t++;
        @(negedge clk) dly_valid = 0;
        repeat (3) @(negedge clk);
      end
    end
    repeat (10) @(posedge clk);
    checks++;
    if (nsym != 6*(LP+NSEG) || ndone != 6 || exp_q.size() != 0) begin
      failures++; $display("symbols %0d frames %0d left %0d", nsym, ndone, exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
