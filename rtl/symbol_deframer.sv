// symbol_deframer: turns the synchronized chip stream into frame symbols.
//
// After sync_found the deframer drops sync_skip chips of the delayed chip
// stream (the chips up to and including the sync end), then sums every M
// chips into one symbol count N.  The first LP symbols of a frame are the
// indication (pilot) field, the next NSEG are coded data; the last one is
// tagged and frame_done pulses with it so the synchronizer can search again.
// Symbols come out as a sym_t with a one-cycle sym_valid, in the cycle after
// the symbol's last chip.  Merging M chips per symbol and the frame layout
// follow the specification.
module symbol_deframer #(
  parameter int M    = uv_pkg::M_CHIPS,
  parameter int LP   = uv_pkg::L_P,
  parameter int NSEG = uv_pkg::N_SEG,
  parameter int W    = uv_pkg::W_SEARCH,
  parameter int CW   = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   dly_valid,
  input  logic [CW-1:0]          dly_cnt,
  input  logic                   sync_found,
  input  logic [$clog2(W+1)-1:0] sync_skip,
  output logic                   sym_valid,
  output uv_pkg::sym_t           sym,
  output logic                   frame_done
);
  typedef enum logic [1:0] {IDLE, SKIP, COLLECT} st_e;
  localparam int NF = LP + NSEG;
  localparam int NW = $clog2(NF + 1);
  localparam int PW = $clog2(M + 1);
  localparam int SW = uv_pkg::SYM_W;

  st_e                   st;
  logic [$clog2(W+1)-1:0] skip;
  logic [PW-1:0]         ph;
  logic [NW-1:0]         ns;
  logic [SW-1:0]         acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= IDLE; skip <= '0; ph <= '0; ns <= '0; acc <= '0;
      sym_valid <= 1'b0; sym <= '0; frame_done <= 1'b0;
    end else begin
      sym_valid <= 1'b0; frame_done <= 1'b0;
      unique case (st)
        IDLE: if (sync_found) begin skip <= sync_skip; st <= SKIP; end
        SKIP: if (dly_valid) begin
          if (skip <= 1) begin st <= COLLECT; ph <= '0; ns <= '0; acc <= '0; end
          skip <= skip - 1'b1;
        end
        COLLECT: if (dly_valid) begin
          if (ph == PW'(M-1)) begin
            sym_valid <= 1'b1;
            sym.cnt   <= acc + SW'(dly_cnt);
            sym.pilot <= (ns < NW'(LP));
            sym.last  <= (ns == NW'(NF-1));
            acc <= '0; ph <= '0;
            if (ns == NW'(NF-1)) begin frame_done <= 1'b1; st <= IDLE; end
            else ns <= ns + 1'b1;
          end else begin
            acc <= acc + SW'(dly_cnt); ph <= ph + 1'b1;
          end
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
