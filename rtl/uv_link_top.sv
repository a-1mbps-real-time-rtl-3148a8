// uv_link_top: the digital part of the NLOS UV link, transmitter and receiver.
//
// The transmitter board (ook_framer) turns coded bits from the encoding PC
// into framed OOK symbols at 2 Mbit/s on ook; the receiver board (uv_rx)
// turns the samples of K ADCs into LLR packets for the decoding PC.  Between
// ook and adc_sample lie the laser and external modulator, the scattering
// channel, the photomultipliers, attenuators, filters, amplifiers and ADCs,
// none of which is logic; a testbench closes that path with a channel model.
// Both sides run from one 100 MHz clock here; on the real system they are two
// boards with their own clocks, and only the frame structure is shared.
module uv_link_top #(
  parameter int K     = uv_pkg::K_PMT,
  parameter int ADC_W = uv_pkg::ADC_W,
  parameter int M     = uv_pkg::M_CHIPS,
  parameter int L     = uv_pkg::L_SYNC,
  parameter int W     = uv_pkg::W_SEARCH,
  parameter int LP    = uv_pkg::L_P,
  parameter int NSEG  = uv_pkg::N_SEG,
  parameter int Q     = uv_pkg::Q_SEG,
  parameter int SPC   = uv_pkg::SAMPLES_PER_CHIP,
  parameter int GUARD = uv_pkg::GUARD_SYMS,
  parameter logic [63:0] SYNC = 64'(uv_pkg::SYNC_SEQ),
  parameter int AW    = uv_pkg::SYM_W + $clog2(L)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // coded bits from the encoding PC
  input  logic                    tx_bit,
  input  logic                    tx_valid,
  output logic                    tx_ready,
  // drive of the external modulator
  output logic                    ook,
  output logic                    tx_frame_start,
  output logic [$clog2(Q)-1:0]    tx_seg_idx,
  // K ADC channels
  input  logic                    adc_valid,
  input  logic [K-1:0][ADC_W-1:0] adc_sample,
  input  logic signed [ADC_W-1:0] v_thd,
  input  logic [AW-1:0]           c_thd,
  // LLR packets to the decoding PC
  output logic [7:0]              m_tdata,
  output logic                    m_tvalid,
  input  logic                    m_tready,
  output logic                    m_tlast,
  // events, for monitoring
  output logic [6:0]              rx_events
);
  ook_framer #(.CLKS_PER_SYM(SPC*M), .L(L), .SYNC(SYNC), .LP(LP), .NSEG(NSEG), .Q(Q),
               .GUARD(GUARD)) u_tx (
    .clk, .rst_n, .s_bit(tx_bit), .s_valid(tx_valid), .s_ready(tx_ready),
    .ook, .frame_start(tx_frame_start), .seg_idx(tx_seg_idx));

  uv_rx #(.K(K), .ADC_W(ADC_W), .M(M), .L(L), .W(W), .LP(LP), .NSEG(NSEG), .Q(Q), .SPC(SPC),
          .SYNC(SYNC), .AW(AW)) u_rx (
    .clk, .rst_n, .adc_valid, .adc_sample, .v_thd, .c_thd,
    .m_tdata, .m_tvalid, .m_tready, .m_tlast,
    .ev_trigger(rx_events[0]), .ev_peak_update(rx_events[1]), .ev_sync(rx_events[2]),
    .ev_frame_done(rx_events[3]), .ev_close(rx_events[4]), .ev_overflow(rx_events[5]),
    .ev_bad_index(rx_events[6]));
endmodule
