// uv_rx: receiver signal processing, from ADC samples to LLR packets.
//
// Chain (one clock = one ADC sample, 100 MHz):
//   K x pulse_counter   rising-edge pulse counts per chip for each PMT
//   egc_combiner        equal gain combining: sum of the K chip counts
//   sync_detector       correlation trigger, W-chip peak search, pilot sums,
//                       chip stream delayed by W chips
//   symbol_deframer     M chips -> one symbol count, pilot/data tagging
//   channel_estimator   lambda_s, lambda_b from the sync symbols (once a frame)
//   llr_compute         LLR = N - phi(lambda_s, lambda_b)
//   llr_packer          block buffer and packet stream toward the PC
// The channel estimate of a frame is ready 2 cycles after sync_found, long
// before the first data symbol (at least one symbol, 50 cycles, later).
// v_thd (pulse threshold) and c_thd (sync trigger threshold) are run-time
// settings.  The order of the blocks follows the specification; the
// deframer and packer are where it places symbol merging and buffering.
module uv_rx #(
  parameter int K     = uv_pkg::K_PMT,
  parameter int ADC_W = uv_pkg::ADC_W,
  parameter int M     = uv_pkg::M_CHIPS,
  parameter int L     = uv_pkg::L_SYNC,
  parameter int W     = uv_pkg::W_SEARCH,
  parameter int LP    = uv_pkg::L_P,
  parameter int NSEG  = uv_pkg::N_SEG,
  parameter int Q     = uv_pkg::Q_SEG,
  parameter int SPC   = uv_pkg::SAMPLES_PER_CHIP,
  parameter logic [63:0] SYNC = 64'(uv_pkg::SYNC_SEQ),
  parameter int AW    = uv_pkg::SYM_W + $clog2(L)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         adc_valid,
  input  logic [K-1:0][ADC_W-1:0]      adc_sample,
  input  logic signed [ADC_W-1:0]      v_thd,
  input  logic [AW-1:0]                c_thd,
  output logic [7:0]                   m_tdata,
  output logic                         m_tvalid,
  input  logic                         m_tready,
  output logic                         m_tlast,
  output logic                         ev_trigger,
  output logic                         ev_peak_update,
  output logic                         ev_sync,
  output logic                         ev_frame_done,
  output logic                         ev_close,
  output logic                         ev_overflow,
  output logic                         ev_bad_index
);
  localparam int PCW  = $clog2((SPC+1)/2 + 1);
  localparam int CW   = PCW + $clog2(K);
  localparam int NW   = $clog2(L+1);
  localparam logic [63:0] SMASK = (L == 64) ? '1 : ((64'(1) << L) - 1);
  localparam int N_ON  = uv_pkg::popcount64(SYNC & SMASK);
  localparam int N_OFF = L - N_ON;

  logic [K-1:0]           pc_valid;
  logic [K-1:0][PCW-1:0]  pc_cnt;
  logic                   chip_valid, dly_valid, sync_found, frame_done, est_done, sym_valid, llr_valid;
  logic [CW-1:0]          chip_cnt, dly_cnt;
  logic [$clog2(W+1)-1:0] sync_skip;
  logic [AW-1:0]          act_sum, off_sum;
  logic [$clog2(uv_pkg::LAMS_MAX+1)-1:0] lam_s_idx;
  logic [$clog2(uv_pkg::LAMB_MAX+1)-1:0] lam_b_idx;
  uv_pkg::sym_t           sym;
  uv_pkg::llr_t           llr;

  for (genvar k = 0; k < K; k++) begin : g_pmt
    pulse_counter #(.ADC_W(ADC_W), .SAMPLES_PER_CHIP(SPC), .CNT_W(PCW)) u_pc (
      .clk, .rst_n, .sample_valid(adc_valid), .sample($signed(adc_sample[k])), .v_thd(v_thd),
      .chip_valid(pc_valid[k]), .chip_cnt(pc_cnt[k]));
  end

  egc_combiner #(.K(K), .IN_W(PCW), .OUT_W(CW)) u_egc (
    .clk, .rst_n, .in_valid(pc_valid), .in_cnt(pc_cnt), .out_valid(chip_valid), .out_cnt(chip_cnt));

  sync_detector #(.M(M), .L(L), .W(W), .SYNC(SYNC), .CW(CW), .AW(AW)) u_sync (
    .clk, .rst_n, .chip_valid, .chip_cnt, .c_thd, .rearm(frame_done),
    .dly_valid, .dly_cnt, .sync_found, .sync_skip, .act_sum, .off_sum,
    .trigger(ev_trigger), .peak_update(ev_peak_update));

  symbol_deframer #(.M(M), .LP(LP), .NSEG(NSEG), .W(W), .CW(CW)) u_defr (
    .clk, .rst_n, .dly_valid, .dly_cnt, .sync_found, .sync_skip, .sym_valid, .sym, .frame_done);

  channel_estimator #(.L(L), .AW(AW)) u_est (
    .clk, .rst_n, .start(sync_found), .act_sum, .off_sum,
    .n_on(NW'(N_ON)), .n_off(NW'(N_OFF)), .done(est_done), .lam_s_idx, .lam_b_idx);

  llr_compute u_llr (
    .clk, .rst_n, .est_valid(est_done), .lam_s_idx, .lam_b_idx, .sym_valid, .sym, .llr_valid, .llr);

  llr_packer #(.NC(NSEG*Q), .NSEG(NSEG), .Q(Q), .LP(LP)) u_pack (
    .clk, .rst_n, .llr_valid, .llr, .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .ev_close, .ev_overflow, .ev_bad_index);

  assign ev_sync       = sync_found;
  assign ev_frame_done = frame_done;
endmodule
