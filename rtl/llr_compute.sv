// llr_compute: per-symbol log-likelihood ratio by table lookup.
//
// For a Poisson count N with means lambda_s + lambda_b (symbol 1) and
// lambda_b (symbol 0) the LLR is N*ln((lambda_s+lambda_b)/lambda_b) -
// lambda_s.  Divided by the logarithm it becomes N - phi with
//   phi(i, j) = ceil(P_S*i / ln((P_S*i + P_B*j) / (P_B*j))),
// where i = floor(lambda_s/P_S) and j = floor(lambda_b/P_B) are the indices
// from the channel estimator.  The table for i = 1..LAMS_MAX, j = 1..LAMB_MAX
// is computed at elaboration from that formula.  phi is looked up once per
// frame, when est_valid pulses, and every symbol of the frame then costs one
// subtraction.  The output keeps the symbol's pilot/last tags, one cycle
// after sym_valid, saturated to LLR_W bits.  The scaled LLR (a common factor
// per frame) suits a min-sum decoder, which is insensitive to scale.  The
// formula and the table follow the specification; the table ranges, widths
// and saturation are design choices.
module llr_compute #(
  parameter int  LAMS_MAX = uv_pkg::LAMS_MAX,
  parameter int  LAMB_MAX = uv_pkg::LAMB_MAX,
  parameter real P_S      = uv_pkg::P_S,
  parameter real P_B      = uv_pkg::P_B,
  parameter int  PHI_W    = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          est_valid,
  input  logic [$clog2(LAMS_MAX+1)-1:0] lam_s_idx,
  input  logic [$clog2(LAMB_MAX+1)-1:0] lam_b_idx,
  input  logic                          sym_valid,
  input  uv_pkg::sym_t                  sym,
  output logic                          llr_valid,
  output uv_pkg::llr_t                  llr
);
  localparam int LW = uv_pkg::LLR_W;
  localparam int SW = uv_pkg::SYM_W;
  localparam int DW = (SW > PHI_W ? SW : PHI_W) + 1;

  typedef logic [PHI_W-1:0] phi_tab_t [(LAMS_MAX+1)*(LAMB_MAX+1)];

  function automatic phi_tab_t phi_table();
    phi_tab_t t;
    for (int i = 0; i <= LAMS_MAX; i++)
      for (int j = 0; j <= LAMB_MAX; j++)
        if (i == 0 || j == 0) t[i*(LAMB_MAX+1)+j] = '0;
        else t[i*(LAMB_MAX+1)+j] =
          PHI_W'($rtoi($ceil((P_S * i) / $ln((P_S * i + P_B * j) / (P_B * j)))));
    return t;
  endfunction

  localparam phi_tab_t PHI = phi_table();

  logic [PHI_W-1:0]    phi_r;
  logic signed [DW:0]   d;

  assign d = $signed({1'b0, DW'(sym.cnt)}) - $signed({1'b0, DW'(phi_r)});

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      phi_r <= '0; llr_valid <= 1'b0; llr <= '0;
    end else begin
      if (est_valid) phi_r <= PHI[int'(lam_s_idx)*(LAMB_MAX+1) + int'(lam_b_idx)];
      llr_valid <= sym_valid;
      if (sym_valid) begin
        llr.pilot <= sym.pilot;
        llr.last  <= sym.last;
        if (d > $signed((DW+1)'((1 << (LW-1)) - 1)))  llr.llr <= LW'((1 << (LW-1)) - 1);
        else if (d < -$signed((DW+1)'(1 << (LW-1)))) llr.llr <= LW'(1 << (LW-1));
        else llr.llr <= LW'(d);
      end
    end
  end
endmodule
