// tb_sync_detector: chip streams with two embedded sync sequences.
//
// The stream is background noise, a guard of zeros, a sync sequence whose
// "on" symbols carry random pulse counts, random data, and later a second
// sync.  A behavioural model in the testbench evaluates act(t) and corr(t)
// straight from the definition (L x M matrix of past chips), applies the
// threshold trigger and the W-chip first-maximum search, and predicts t^ and
// the pilot sums.  Checked: found/not found, sync_skip, act_sum, off_sum,
// that the delayed chip after the skip is chip t^+1, the delay of W chips,
// and that no second detection happens before rearm.
module tb_sync_detector;
  localparam int M = 10, L = 64, W = 20, CW = 4, AW = 14, SPC = 5;
  localparam logic [63:0] SYNC = 64'h04314F4725BB357E;
  localparam int NCH = 4000;

  logic clk = 0, rst_n = 0;
  logic chip_valid = 0, rearm = 0;
  logic [CW-1:0] chip_cnt = 0;
  logic [AW-1:0] c_thd = 14'd300;
  logic dly_valid, sync_found, trigger, peak_update;
  logic [CW-1:0] dly_cnt;
  logic [$clog2(W+1)-1:0] sync_skip;
  logic [AW-1:0] act_sum, off_sum;
  int checks = 0, failures = 0;
  int c [NCH];
  int sync_end [2] = '{1200, 2900};

  sync_detector #(.M(M), .L(L), .W(W), .SYNC(SYNC), .CW(CW)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #10000000; failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int rowsum(int t, int i);
    int s = 0;
    for (int j = 0; j < M; j++) if (t - i*M - j >= 0) s += c[t - i*M - j];
    return s;
  endfunction
  function automatic int act(int t);
    int s = 0;
    for (int i = 0; i < L; i++) if (SYNC[i]) s += rowsum(t, i);
    return s;
  endfunction
  function automatic int off(int t);
    int s = 0;
    for (int i = 0; i < L; i++) if (!SYNC[i]) s += rowsum(t, i);
    return s;
  endfunction

  int chip_idx = -1;            // index of the newest chip given to the DUT
  int dly_seen [$];             // delayed chips observed
  int found_at [$], skip_seen [$], act_seen [$], off_seen [$];
  int dly_at_found [$];

  always @(posedge clk) if (rst_n) begin
    if (dly_valid) dly_seen.push_back(int'(dly_cnt));
    if (sync_found) begin
      found_at.push_back(chip_idx); skip_seen.push_back(int'(sync_skip));
      act_seen.push_back(int'(act_sum)); off_seen.push_back(int'(off_sum));
      dly_at_found.push_back(dly_seen.size());
    end
  end

  initial begin
    // stimulus: noise, then guard and sync, then random data
    for (int t = 0; t < NCH; t++) c[t] = ($urandom_range(0, 30) == 0) ? 1 : 0;
    foreach (sync_end[s]) begin
      for (int t = sync_end[s] - L*M - 80; t <= sync_end[s] - L*M; t++) c[t] = 0;
      for (int i = 0; i < L; i++)
        for (int j = 0; j < M; j++)
          c[sync_end[s] - i*M - j] = SYNC[i] ? $urandom_range(0, 2) : (($urandom_range(0, 20) == 0) ? 1 : 0);
      for (int t = sync_end[s] + 1; t < sync_end[s] + 700 && t < NCH; t++) c[t] = $urandom_range(0, 1) * $urandom_range(0, 2);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int t = 0; t < NCH; t++) begin
      @(negedge clk);
      chip_valid = 1; chip_cnt = CW'(c[t]); chip_idx = t;
      @(negedge clk);
      chip_valid = 0;
      // rearm between the two syncs
      rearm = (t == 2000);
      repeat (SPC-2) @(negedge clk);
      rearm = 0;
    end
    repeat (10) @(posedge clk);

    // behavioural model of the search, per expected detection
    begin
      int armed_from = 0, k = 0;
      for (int s = 0; s < 2; s++) begin
        int tt, best, tb, a_b, o_b;
        tt = -1;
        for (int t = armed_from; t < NCH; t++) if (act(t) > int'(c_thd)) begin tt = t; break; end
        checks++;
        if (tt < 0 || found_at.size() <= s) begin
          failures++; $display("sync %0d: model trigger %0d, DUT detections %0d", s, tt, found_at.size());
          continue;
        end
        best = act(tt) - off(tt); tb = tt; a_b = act(tt); o_b = off(tt);
        for (int t = tt + 1; t < tt + W; t++)
          if (act(t) - off(t) > best) begin best = act(t) - off(t); tb = t; a_b = act(t); o_b = off(t); end
        $display("sync %0d: trigger %0d peak %0d (planted %0d) act %0d off %0d", s, tt, tb, sync_end[s], a_b, o_b);
        checks++; if (tb != sync_end[s]) begin failures++; $display("  model peak not at planted sync end"); end
        checks++; if (found_at[s] != tt + W - 1) begin failures++; $display("  found at chip %0d expected %0d", found_at[s], tt+W-1); end
        checks++; if (skip_seen[s] != tb - tt + 1) begin failures++; $display("  skip %0d expected %0d", skip_seen[s], tb-tt+1); end
        checks++; if (act_seen[s] != a_b || off_seen[s] != o_b) begin failures++; $display("  sums %0d/%0d", act_seen[s], off_seen[s]); end
        // delayed stream: first chip after the skip must be chip t^+1
        k = dly_at_found[s] + skip_seen[s];
        checks++; if (dly_seen[k] != c[tb+1] || dly_seen[k+1] != c[tb+2] || dly_seen[k+5] != c[tb+6]) begin
          failures++; $display("  delayed data chips do not follow the sync end");
        end
        armed_from = 2001 > tt + W ? 2001 : tt + W;
      end
    end
    // the delayed stream is the input delayed by W chips
    checks++;
    for (int t = W; t < NCH; t++) if (dly_seen[t] != c[t-W]) begin failures++; $display("delay wrong at %0d", t); break; end
    checks++;
    if (found_at.size() != 2) begin failures++; $display("%0d detections, expected 2", found_at.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
