// tb_egc_combiner: random per-detector chip counts; the combined count must
// be their sum, one cycle later, and only when the chip strobe was high.
module tb_egc_combiner;
  localparam int K = 3, IN_W = 2, OUT_W = 4;
  logic clk = 0, rst_n = 0;
  logic [K-1:0] in_valid = '0;
  logic [K-1:0][IN_W-1:0] in_cnt = '0;
  logic out_valid;
  logic [OUT_W-1:0] out_cnt;
  int checks = 0, failures = 0;
  int exp_sum;
  logic exp_v;

  egc_combiner #(.K(K), .IN_W(IN_W), .OUT_W(OUT_W)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    exp_v = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      // check the previous cycle's result
      checks++;
      if (out_valid !== exp_v || (exp_v && int'(out_cnt) != exp_sum)) begin
        failures++;
        if (failures < 10) $display("out %0d/%0d expected %0d/%0d", out_valid, out_cnt, exp_v, exp_sum);
      end
      in_valid = ($urandom_range(0, 2) == 0) ? '1 : '0;
      exp_sum = 0;
      for (int k = 0; k < K; k++) begin
        in_cnt[k] = IN_W'($urandom_range(0, 3));
        exp_sum += int'(in_cnt[k]);
      end
      exp_v = in_valid[0];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
