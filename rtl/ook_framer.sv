// ook_framer: transmitter frame builder and OOK symbol timing.
//
// Coded bits arrive from the PC link one per beat (valid/ready) and are held
// in a FIFO.  When a whole segment of N_SEG bits is buffered, one frame is put
// on the air, one OOK symbol every CLKS_PER_SYM clocks:
//   L_SYNC synchronization symbols (SYNC_SEQ, MSB first),
//   L_P indication symbols: codeword of the segment index q = 0..Q_SEG-1
//     in a Hadamard code, symbol p = parity(q & (p mod 2^IB)) with
//     IB = $clog2(Q) (for IB = 4: symbols 0..15 form a (16,4) code in which
//     any two codewords differ in 8 symbols; the 17th symbol is then 0),
//   N_SEG coded symbols taken from the FIFO,
//   GUARD_SYMS zero symbols (protection interval).
// The next frame follows the interval at once if its payload is ready;
// otherwise ook stays 0 until it is.  ook = 1 means light on.
// Frame layout, field lengths and the 2 Mbit/s symbol rate follow the
// specification; the sync pattern, the index encoding, the interval length
// and the FIFO are design choices.  ook changes one clock after a symbol tick.
module ook_framer #(
  parameter int          CLKS_PER_SYM = uv_pkg::CLKS_PER_SYM,
  parameter int          L            = uv_pkg::L_SYNC,
  parameter logic [63:0] SYNC         = 64'(uv_pkg::SYNC_SEQ),
  parameter int          LP           = uv_pkg::L_P,
  parameter int          NSEG         = uv_pkg::N_SEG,
  parameter int          Q            = uv_pkg::Q_SEG,
  parameter int          GUARD        = uv_pkg::GUARD_SYMS,
  parameter int          FIFO_DEPTH   = 2048
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 s_bit,
  input  logic                 s_valid,
  output logic                 s_ready,
  output logic                 ook,
  output logic                 frame_start,
  output logic [$clog2(Q)-1:0] seg_idx
);
  typedef enum logic [2:0] {IDLE, SYNC_F, PILOT_F, DATA_F, GUARD_F} st_e;

  localparam int CW = $clog2(FIFO_DEPTH+1);
  localparam int NW = $clog2(NSEG+L+LP+GUARD+1);

  st_e                         st;
  logic [NW-1:0]               n;
  logic [$clog2(CLKS_PER_SYM)-1:0] div;
  logic                        tick;
  logic                        pop, head;
  logic [CW-1:0]               fcount;
  logic [LP-1:0]               pilot_word;

  localparam int IB  = (Q > 1) ? $clog2(Q) : 1;   // index bits

  bit_fifo #(.DEPTH(FIFO_DEPTH), .W(1)) u_fifo (
    .clk, .rst_n, .wr_valid(s_valid), .wr_data(s_bit), .wr_ready(s_ready),
    .rd_en(pop), .rd_data(head), .count(fcount));

  assign tick       = (div == ($clog2(CLKS_PER_SYM))'(CLKS_PER_SYM-1));
  assign pop        = tick && (st == DATA_F);
  // pilot_word[LP-1] goes out first
  always_comb begin
    pilot_word = '0;
    for (int p = 0; p < LP; p++) pilot_word[LP-1-p] = ^(IB'(seg_idx) & IB'(p));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      div <= '0; st <= IDLE; n <= '0; ook <= 1'b0; frame_start <= 1'b0; seg_idx <= '0;
    end else begin
      div         <= tick ? '0 : div + 1'b1;
      frame_start <= 1'b0;
      if (tick) begin
        unique case (st)
          IDLE: begin
            if (fcount >= CW'(NSEG)) begin
              ook <= SYNC[L-1]; frame_start <= 1'b1;
              if (L == 1) begin st <= PILOT_F; n <= '0; end
              else        begin st <= SYNC_F;  n <= NW'(1); end
            end else ook <= 1'b0;
          end
          SYNC_F: begin
            ook <= SYNC[L-1-int'(n)];
            if (n == NW'(L-1)) begin st <= PILOT_F; n <= '0; end else n <= n + 1'b1;
          end
          PILOT_F: begin
            ook <= pilot_word[LP-1-int'(n)];
            if (n == NW'(LP-1)) begin st <= DATA_F; n <= '0; end else n <= n + 1'b1;
          end
          DATA_F: begin
            ook <= head;
            if (n == NW'(NSEG-1)) begin
              st <= GUARD_F; n <= '0;
              seg_idx <= (seg_idx == ($clog2(Q))'(Q-1)) ? '0 : seg_idx + 1'b1;
            end else n <= n + 1'b1;
          end
          GUARD_F: begin
            ook <= 1'b0;
            if (n == NW'(GUARD-1)) begin st <= IDLE; n <= '0; end else n <= n + 1'b1;
          end
          default: st <= IDLE;
        endcase
      end
    end
  end

  initial begin
    assert (GUARD >= 1 && NSEG <= FIFO_DEPTH && LP >= IB && L <= 64)
      else $error("ook_framer: unsupported parameters");
  end
endmodule
