// channel_estimator: pilot-based estimate of the signal and background means.
//
// From the pulses counted in the synchronization symbols the mean counts per
// symbol are
//   lambda_s + lambda_b = act_sum / n_on,   lambda_b = off_sum / n_off,
// with n_on = s^T 1_L and n_off = L - n_on.  Division is replaced by tables
// built at elaboration, theta_s[i] = 1/(P_S*i) and theta_b[i] = 1/(P_B*i) for
// i = 1..L, held as fixed point with FRAC fraction bits (rounded), so the
// results come out directly in units of the precisions:
//   lam_b_idx = floor(off_sum*theta_b[n_off])
//   lam_s_idx = floor(act_sum*theta_s[n_on] - off_sum*theta_s[n_off]),
// the second product being lambda_b in units of P_S, read from the same
// theta_s table.
// Both indices are clamped to 1..LAMS_MAX and 1..LAMB_MAX, the ranges of the
// LLR table.  The tables, the precisions (0.5 and 0.01) and the estimator
// follow the specification; the fixed-point format, the clamping and the
// table ranges are design choices.  The specification's hardware sentence
// multiplies theta_s by the "on" sum alone, which estimates lambda_s +
// lambda_b; the background part is subtracted here so that the result is
// lambda_s as its estimator equation defines it.
// Timing: start is taken once per frame; done pulses 2 cycles later, with
// the indices valid from then until the next start.
module channel_estimator #(
  parameter int  L        = uv_pkg::L_SYNC,
  parameter real P_S      = uv_pkg::P_S,
  parameter real P_B      = uv_pkg::P_B,
  parameter int  LAMS_MAX = uv_pkg::LAMS_MAX,
  parameter int  LAMB_MAX = uv_pkg::LAMB_MAX,
  parameter int  AW       = uv_pkg::SYM_W + $clog2(L),
  parameter int  FRAC     = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [AW-1:0]                 act_sum,
  input  logic [AW-1:0]                 off_sum,
  input  logic [$clog2(L+1)-1:0]        n_on,
  input  logic [$clog2(L+1)-1:0]        n_off,
  output logic                          done,
  output logic [$clog2(LAMS_MAX+1)-1:0] lam_s_idx,
  output logic [$clog2(LAMB_MAX+1)-1:0] lam_b_idx
);
  localparam int TW = 32;                 // table word
  localparam int PW = AW + TW;            // product width
  localparam int SI = $clog2(LAMS_MAX+1);
  localparam int BI = $clog2(LAMB_MAX+1);

  typedef logic [TW-1:0] theta_t [L+1];

  function automatic theta_t theta_table(real p);
    theta_t t;
    t[0] = '0;
    for (int i = 1; i <= L; i++) t[i] = TW'($rtoi((2.0 ** FRAC) / (p * i) + 0.5));
    return t;
  endfunction

  localparam theta_t THETA_S = theta_table(P_S);
  localparam theta_t THETA_B = theta_table(P_B);

  logic [PW-1:0]          x_r, y_r, z_r;      // (lambda_s+lambda_b)/P_S, lambda_b/P_B, lambda_b/P_S
  logic signed [PW+1:0]   s_fix;
  logic [PW-FRAC-1:0]     b_int;
  logic                   v1;

  assign s_fix = $signed({2'b00, x_r}) - $signed({2'b00, z_r});
  assign b_int = y_r[PW-1:FRAC];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      x_r <= '0; y_r <= '0; z_r <= '0; v1 <= 1'b0; done <= 1'b0; lam_s_idx <= SI'(1); lam_b_idx <= BI'(1);
    end else begin
      v1   <= start;
      done <= v1;
      if (start) begin
        x_r <= PW'(act_sum) * PW'(THETA_S[n_on]);
        y_r <= PW'(off_sum) * PW'(THETA_B[n_off]);
        z_r <= PW'(off_sum) * PW'(THETA_S[n_off]);
      end
      if (v1) begin
        if (s_fix < $signed((PW+2)'(1 << FRAC)))              lam_s_idx <= SI'(1);
        else if (s_fix >= $signed((PW+2)'(LAMS_MAX+1) << FRAC)) lam_s_idx <= SI'(LAMS_MAX);
        else lam_s_idx <= SI'(s_fix >>> FRAC);
        if (b_int < (PW-FRAC)'(1))             lam_b_idx <= BI'(1);
        else if (b_int > (PW-FRAC)'(LAMB_MAX)) lam_b_idx <= BI'(LAMB_MAX);
        else lam_b_idx <= BI'(b_int);
      end
    end
  end
endmodule
