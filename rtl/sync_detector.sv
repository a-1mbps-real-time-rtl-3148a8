// sync_detector: counting-based frame synchronization with a short peak search.
//
// The combined pulse counts arrive one per chip (M chips per symbol).  For the
// newest chip t the detector looks at the last L*M chips as an L x M matrix
// C_t whose row i holds the M chips of the symbol that ended (i-1) symbols
// ago.  It keeps a running M-chip sum B(t) and a delay line of B, so row sum
// i is B(t-(i-1)M) and both metrics cost one L-input adder tree per chip:
//   act(t)  = s^T C_t 1_M            (pulses in the sync "on" symbols)
//   off(t)  = (1-s)^T C_t 1_M        (pulses in the sync "off" symbols)
//   corr(t) = (2s-1)^T C_t 1_M = act - off.
// Instead of an arg-max over all t, the search for the correlation peak is
// started at the first chip t~ with act(t~) > c_thd and runs over the W chips
// t~ .. t~+W-1; the first maximum of corr there is the estimated sync end t^.
// act and off at t^ are latched for the channel estimator.  Data symbols
// start at chip t^+1, which by then is in the past, so the chip stream is
// also output delayed by W chips (dly_*): after sync_found the deframer skips
// sync_skip = t^ - t~ + 1 delayed chips and the next one is the first data
// chip.  The search then stays off until rearm (end of the frame).
//
// Timing: a chip accepted in cycle c updates the delay lines in c, the sums
// in c+1 and the search in c+2; sync_found is a one-cycle pulse in c+3.  The
// chip strobe must therefore be at least 4 cycles apart (it is 5 at 100 MHz).
// The metrics, the threshold trigger and the window follow the
// specification; W, the pattern SYNC and the tie rule are design choices.
module sync_detector #(
  parameter int          M    = uv_pkg::M_CHIPS,
  parameter int          L    = uv_pkg::L_SYNC,
  parameter int          W    = uv_pkg::W_SEARCH,
  parameter logic [63:0] SYNC = 64'(uv_pkg::SYNC_SEQ),
  parameter int          CW   = 4,                  // chip count width
  parameter int          SW   = uv_pkg::SYM_W,      // symbol sum width
  parameter int          AW   = SW + $clog2(L)      // act/off sum width
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       chip_valid,
  input  logic [CW-1:0]              chip_cnt,
  input  logic [AW-1:0]              c_thd,
  input  logic                       rearm,
  output logic                       dly_valid,
  output logic [CW-1:0]              dly_cnt,
  output logic                       sync_found,
  output logic [$clog2(W+1)-1:0]     sync_skip,
  output logic [AW-1:0]              act_sum,
  output logic [AW-1:0]              off_sum,
  output logic                       trigger,
  output logic                       peak_update
);
  localparam int HL = (M > W) ? M : W;          // chip history length
  localparam int BL = (L-1)*M + 1;              // B delay line length
  localparam int KW = $clog2(W+1);

  typedef enum logic [1:0] {ARMED, SEARCH, LOCKED} st_e;

  logic [CW-1:0]        chist [HL];             // chist[j] = c(t-1-j) before the shift
  logic [SW-1:0]        bsum;                   // B(t) of the newest chip
  logic [SW-1:0]        bline [BL];             // bline[d] = B(t-d)
  logic [SW-1:0]        bnext;
  logic                 v1, v2;
  logic [AW-1:0]        act_c, off_c, act_r, off_r;
  logic signed [AW:0]   corr, best;
  logic [KW-1:0]        wc, bk;
  st_e                  st;

  assign bnext = bsum + SW'(chip_cnt) - SW'(chist[M-1]);

  // stage 0: chip history, running symbol sum, B delay line, delayed output
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int j = 0; j < HL; j++) chist[j] <= '0;
      for (int d = 0; d < BL; d++) bline[d] <= '0;
      bsum <= '0; dly_valid <= 1'b0; dly_cnt <= '0; v1 <= 1'b0;
    end else begin
      dly_valid <= chip_valid;
      v1        <= chip_valid;
      if (chip_valid) begin
        chist[0] <= chip_cnt;
        for (int j = 1; j < HL; j++) chist[j] <= chist[j-1];
        dly_cnt  <= chist[W-1];
        bsum     <= bnext;
        bline[0] <= bnext;
        for (int d = 1; d < BL; d++) bline[d] <= bline[d-1];
      end
    end
  end

  // stage 1: the two L-term sums
  always_comb begin
    act_c = '0; off_c = '0;
    for (int i = 0; i < L; i++) begin
      if (SYNC[i]) act_c = act_c + AW'(bline[i*M]);
      else         off_c = off_c + AW'(bline[i*M]);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      act_r <= '0; off_r <= '0; v2 <= 1'b0;
    end else begin
      v2 <= v1;
      if (v1) begin act_r <= act_c; off_r <= off_c; end
    end
  end

  assign corr = $signed({1'b0, act_r}) - $signed({1'b0, off_r});

  // stage 2: threshold trigger and windowed peak search
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= ARMED; best <= '0; wc <= '0; bk <= '0; sync_found <= 1'b0; sync_skip <= '0;
      act_sum <= '0; off_sum <= '0; trigger <= 1'b0; peak_update <= 1'b0;
    end else begin
      sync_found <= 1'b0; trigger <= 1'b0; peak_update <= 1'b0;
      unique case (st)
        ARMED: if (v2 && act_r > c_thd) begin
          trigger <= 1'b1;
          best <= corr; bk <= '0; act_sum <= act_r; off_sum <= off_r;
          if (W == 1) begin
            sync_found <= 1'b1; sync_skip <= KW'(1); st <= LOCKED;
          end else begin
            wc <= KW'(1); st <= SEARCH;
          end
        end
        SEARCH: if (v2) begin
          logic [KW-1:0] k_new;
          k_new = bk;
          if (corr > best) begin
            best <= corr; bk <= wc; k_new = wc;
            act_sum <= act_r; off_sum <= off_r; peak_update <= 1'b1;
          end
          if (wc == KW'(W-1)) begin
            sync_found <= 1'b1; sync_skip <= k_new + 1'b1; st <= LOCKED;
          end else wc <= wc + 1'b1;
        end
        LOCKED: if (rearm) st <= ARMED;
        default: st <= ARMED;
      endcase
    end
  end

  initial assert (W >= 1 && W <= HL && L <= 64) else $error("sync_detector: bad parameters");
endmodule
