// tb_channel_estimator: random pilot sums and on/off symbol counts.  The
// expected indices are computed in floating point from the estimator
// equations, lambda_b = off/n_off and lambda_s = act/n_on - lambda_b, as
// floor(lambda_s/0.5) and floor(lambda_b/0.01) clamped to 1..32 and 1..64.
// The tables hold 1/(p*i) to 16 fraction bits, so each product may be off by
// sum * 2^-17; where the exact value lies that close to an integer, one step
// of difference is accepted.
// The result must appear exactly 2 cycles after start.
module tb_channel_estimator;
  localparam int L = 64, AW = 14;
  logic clk = 0, rst_n = 0, start = 0;
  logic [AW-1:0] act_sum = 0, off_sum = 0;
  logic [6:0] n_on = 0, n_off = 0;
  logic done;
  logic [5:0] lam_s_idx;
  logic [6:0] lam_b_idx;
  int checks = 0, failures = 0;

  channel_estimator dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic int qidx(real v, real tol, int hi, output bit near);
    int q;
    q = $rtoi($floor(v));
    near = (v - $floor(v) < tol) || ($ceil(v) - v < tol);
    if (q < 1) q = 1;
    if (q > hi) q = hi;
    return q;
  endfunction

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    for (int n = 0; n < 3000; n++) begin
      real lb, ls;
      int es, eb, lat;
      bit near_s, near_b;
      @(negedge clk);
      n_on  = 7'($urandom_range(1, L-1));
      n_off = 7'(L - int'(n_on));
      case (n % 3)
        0: begin act_sum = AW'($urandom_range(0, 20*int'(n_on))); off_sum = AW'($urandom_range(0, int'(n_off))); end
        1: begin act_sum = AW'($urandom_range(0, 4000));          off_sum = AW'($urandom_range(0, 100)); end
        default: begin act_sum = AW'($urandom_range(0, 16383));  off_sum = AW'($urandom_range(0, 16383)); end
      endcase
      lb = real'(off_sum) / real'(n_off);
      ls = real'(act_sum) / real'(n_on) - lb;
      eb = qidx(lb / 0.01, 1e-3 + real'(off_sum) * 0.5 / 65536.0, 64, near_b);
      es = qidx(ls / 0.5, 1e-3 + real'(int'(act_sum) + int'(off_sum)) * 0.5 / 65536.0, 32, near_s);
      start = 1;
      @(negedge clk) start = 0;
      lat = 1;
      while (!done && lat < 10) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 2) begin failures++; $display("latency %0d", lat); end
      checks++;
      if (!(int'(lam_s_idx) == es || (near_s && (int'(lam_s_idx) - es == 1 || es - int'(lam_s_idx) == 1))) ||
          !(int'(lam_b_idx) == eb || (near_b && (int'(lam_b_idx) - eb == 1 || eb - int'(lam_b_idx) == 1)))) begin
        failures++;
        if (failures < 10) $display("act %0d off %0d n_on %0d: got %0d/%0d expected %0d/%0d", act_sum, off_sum, n_on, lam_s_idx, lam_b_idx, es, eb);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
