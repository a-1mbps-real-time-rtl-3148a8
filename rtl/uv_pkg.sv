// uv_pkg: constants and types shared by the NLOS UV link RTL.
//
// The link sends on-off keyed (OOK) symbols at 2 Mbit/s and detects them by
// counting photoelectron pulses from K photomultipliers.  The numbers below
// that come from the system specification are: K = 3 detectors, M = 10 chips
// per symbol, a 64-symbol synchronization sequence, a 17-bit indication
// (pilot) field, a (12630, 7578) LDPC code cut into Q = 10 segments of 1263
// symbols, estimation precisions p_s = 0.5 and p_b = 0.01, and a 100 MHz ADC.
// Everything marked "design choice" is not fixed by the specification.
package uv_pkg;

  // ---- system specification ----
  localparam int K_PMT            = 3;      // detectors (receiver diversity)
  localparam int M_CHIPS          = 10;     // chips per symbol
  localparam int L_SYNC           = 64;     // synchronization symbols
  localparam int L_P              = 17;     // indication (pilot) symbols
  localparam int N_C              = 12630;  // LDPC code length
  localparam int Q_SEG            = 10;     // segments (frames) per LDPC block
  localparam int N_SEG            = N_C / Q_SEG; // 1263 coded symbols per frame
  localparam int SAMPLES_PER_CHIP = 5;      // 100 MHz / (2 Msym/s * 10 chips)
  localparam int CLKS_PER_SYM     = SAMPLES_PER_CHIP * M_CHIPS; // 50
  localparam real P_S             = 0.5;    // precision of lambda_s estimate
  localparam real P_B             = 0.01;   // precision of lambda_b estimate

  // ---- design choices ----
  localparam int ADC_W      = 14;   // ADC sample width (signed)
  localparam int W_SEARCH   = 100;  // peak-search window, chips (10 symbols)
  localparam int GUARD_SYMS = 16;   // protection interval between frames
  localparam int LAMS_MAX   = 32;   // Lambda_s: largest lambda_s / p_s in the phi table
  localparam int LAMB_MAX   = 64;   // Lambda_b: largest lambda_b / p_b in the phi table
  localparam int LLR_W      = 8;    // LLR width, two's complement
  localparam int SYM_W      = 8;    // pulses per symbol (all K detectors)
  // 63-chip m-sequence of x^6 + x^5 + 1 followed by a 0; sent MSB first.
  // Bit i-1 is s_i, the sync symbol that ends (i-1) symbols before the frame's
  // sync end, so bit 0 is the last sync symbol on air.
  localparam logic [L_SYNC-1:0] SYNC_SEQ = 64'h04314F4725BB357E;

  // Count of ones of a constant vector (used for s^T 1_L).
  function automatic int popcount64(logic [63:0] v);
    int n = 0;
    for (int i = 0; i < 64; i++) n += int'(v[i]);
    return n;
  endfunction

  // One received symbol after deframing.
  typedef struct packed {
    logic [SYM_W-1:0] cnt;    // pulses counted in the symbol, N
    logic             pilot;  // symbol belongs to the indication field
    logic             last;   // last symbol of the frame
  } sym_t;

  // One LLR with the same tags.
  typedef struct packed {
    logic signed [LLR_W-1:0] llr;
    logic                    pilot;
    logic                    last;
  } llr_t;

endpackage
