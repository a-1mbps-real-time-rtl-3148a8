// tb_pulse_counter: random ADC waveform against a software edge counter.
// Samples hover around the threshold (including samples equal to it, which
// must not count as crossings); every chip count is compared with the count of
// samples above v_thd whose predecessor was below it.
module tb_pulse_counter;
  localparam int ADC_W = 14, S = 5;
  logic clk = 0, rst_n = 0, sample_valid = 0;
  logic signed [ADC_W-1:0] sample = 0, v_thd = 14'sd500;
  logic chip_valid;
  logic [1:0] chip_cnt;
  int checks = 0, failures = 0, cycles = 0;
  int exp_q[$];

  pulse_counter #(.ADC_W(ADC_W), .SAMPLES_PER_CHIP(S)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && chip_valid) begin
    checks++;
    if (exp_q.size() == 0) begin failures++; $display("unexpected chip"); end
    else begin
      int e;
      e = exp_q.pop_front();
      if (int'(chip_cnt) != e) begin
        failures++;
        if (failures < 10) $display("chip count %0d expected %0d", chip_cnt, e);
      end
    end
  end

  initial begin
    int prev_below = 0, acc = 0, ph = 0, nedges = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 20000; n++) begin
      int r;
      logic signed [ADC_W-1:0] s;
      r = $urandom_range(0, 9);
      // low, exactly at threshold, or high
      s = (r < 4) ? 14'sd100 : (r == 4) ? v_thd : 14'sd900;
      if ($urandom_range(0, 19) == 0) s = -14'sd300;
      @(negedge clk);
      sample_valid = 1; sample = s;
      if (prev_below && s > v_thd) begin acc++; nedges++; end
      prev_below = (s < v_thd);
      if (ph == S-1) begin exp_q.push_back(acc); acc = 0; ph = 0; end else ph++;
    end
    @(negedge clk) sample_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d chips missing", exp_q.size()); end
    checks++;
    if (nedges < 1000) begin failures++; $display("too few edges in stimulus"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
