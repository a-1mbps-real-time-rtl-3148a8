// egc_combiner: equal gain combining of the K detectors.
//
// Because the K photomultipliers sit close together and see nearly the same
// intensity, the specification replaces maximum-likelihood combining by a
// plain sum: N = N_1 + ... + N_K, which is again Poisson distributed.  The
// sum is formed per chip, one register stage after the K chip counts arrive
// (they arrive together: all counters share one sample strobe).  The register
// stage is a design choice.
module egc_combiner #(
  parameter int K     = uv_pkg::K_PMT,
  parameter int IN_W  = 2,
  parameter int OUT_W = IN_W + $clog2(K)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [K-1:0]              in_valid,
  input  logic [K-1:0][IN_W-1:0]    in_cnt,
  output logic                      out_valid,
  output logic [OUT_W-1:0]          out_cnt
);
  logic [OUT_W-1:0] sum;

  always_comb begin
    sum = '0;
    for (int k = 0; k < K; k++) sum = sum + OUT_W'(in_cnt[k]);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_cnt <= '0;
    end else begin
      out_valid <= in_valid[0];
      if (in_valid[0]) out_cnt <= sum;
    end
  end

  a_aligned: assert property (@(posedge clk) disable iff (!rst_n)
                              (in_valid == '0) || (in_valid == '1));
endmodule
