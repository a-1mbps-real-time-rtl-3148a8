// llr_packer: LLR block buffer and packet output toward the decoding PC.
//
// Each received frame carries one segment of an LDPC block: LP indication
// symbols giving the segment index, then NSEG coded symbols.  The index q is
// sent as a Hadamard codeword, symbol p = parity(q & (p mod 2^IB)) with
// IB = $clog2(Q); two codewords differ in half of every 2^IB symbols.  The
// packer decodes it softly: for every candidate c < 2^IB it adds the LLRs of
// the symbols where codeword c has a 1, which is the log-likelihood of c up
// to a constant, and takes the first candidate with the largest sum.  It then
// writes the frame's NSEG data LLRs at offset index*NSEG of an NC-entry
// block buffer.  A frame whose index is Q or more is dropped.  A block is
// closed when segment Q-1 ends, or when a frame starts whose index is not
// above the previous one (the tail of the old block was lost).  A closed
// block is sent as one packet on an 8-bit valid/ready stream:
//   byte 0-1  block sequence number (big endian)
//   byte 2-3  mask of the segments received, bit q = segment q
//   byte 4..  NC LLRs in code order, two's complement; a segment that never
//             arrived is sent as zeros (erasures).
// The buffer has two banks so one block can be sent while the next is being
// written; if a block closes while the previous packet is still going out,
// the new block is discarded and ev_overflow pulses.  Output runs at one byte
// per cycle when m_tready stays high; m_tlast marks the final byte.
// Buffering one coded block and sending it to the PC follows the
// specification; the index encoding, packet format, two banks and erasure
// fill are design choices.
module llr_packer #(
  parameter int NC   = uv_pkg::N_C,
  parameter int NSEG = uv_pkg::N_SEG,
  parameter int Q    = uv_pkg::Q_SEG,
  parameter int LP   = uv_pkg::L_P
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         llr_valid,
  input  uv_pkg::llr_t llr,
  output logic [7:0]   m_tdata,
  output logic         m_tvalid,
  input  logic         m_tready,
  output logic         m_tlast,
  output logic         ev_close,
  output logic         ev_overflow,
  output logic         ev_bad_index
);
  localparam int LW = uv_pkg::LLR_W;
  localparam int AW = $clog2(2*NC);
  localparam int KW = $clog2(NSEG+1);
  localparam int QW = $clog2(Q);
  localparam int RW = $clog2(NC+5);
  localparam int IB  = (Q > 1) ? $clog2(Q) : 1;   // index bits
  localparam int NCW = 1 << IB;                    // candidate codewords
  localparam int SW  = LW + $clog2(LP+1);          // width of a metric
  localparam int PCW = $clog2(LP+1);

  logic [LW-1:0] mem [2*NC];

  // ---------------- write side ----------------
  logic signed [SW-1:0] met [NCW];   // per candidate index: correlation metric
  logic signed [SW-1:0] best;
  logic [PCW-1:0] pcnt;               // indication symbols seen in this frame
  logic [IB-1:0]  idx_c;
  logic [KW-1:0]  k;
  logic [QW-1:0]  seg, last_seg;
  logic           drop, wbank;
  logic [Q-1:0]   wmask;
  logic [15:0]    blk_seq;

  logic           is_data, first, drop_c, close_first, close_last, bank_c, wr_en;
  logic [QW-1:0]  seg_c;
  logic [Q-1:0]   mask_c, mask_new;
  logic [AW-1:0]  wr_addr;

  // ---------------- read side ----------------
  logic           rbusy, rbank, rdone;
  logic [Q-1:0]   rmask;
  logic [15:0]    rseq, rmask16;
  logic [RW-1:0]  rcnt;
  logic [QW-1:0]  rseg;
  logic [KW-1:0]  roff;
  logic [AW-1:0]  raddr;
  logic           adv;

  always_comb begin
    idx_c = '0;
    best  = met[0];
    for (int c = 1; c < NCW; c++)
      if (met[c] > best) begin best = met[c]; idx_c = IB'(c); end
    is_data     = llr_valid && !llr.pilot;
    first       = (k == '0);
    seg_c       = first ? QW'(idx_c) : seg;
    drop_c      = first ? (32'(idx_c) >= 32'(Q)) : drop;
    close_first = is_data && first && !drop_c && (wmask != '0) && (seg_c <= last_seg);
    bank_c      = (close_first && (!rbusy || rdone)) ? ~wbank : wbank;
    mask_c      = close_first ? '0 : wmask;
    mask_new    = mask_c | (Q'(1) << seg_c);
    close_last  = is_data && llr.last && !drop_c && (seg_c == QW'(Q-1));
    wr_en       = is_data && !drop_c;
    wr_addr     = AW'(bank_c ? NC : 0) + AW'(seg_c) * AW'(NSEG) + AW'(k);
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= llr.llr;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int c = 0; c < NCW; c++) met[c] <= '0;
      pcnt <= '0; k <= '0; seg <= '0; last_seg <= '0; drop <= 1'b0; wbank <= 1'b0;
      wmask <= '0; blk_seq <= '0; rbusy <= 1'b0; rbank <= 1'b0; rmask <= '0; rseq <= '0;
      ev_close <= 1'b0; ev_overflow <= 1'b0; ev_bad_index <= 1'b0;
    end else begin
      ev_close <= 1'b0; ev_overflow <= 1'b0; ev_bad_index <= 1'b0;
      if (rdone) rbusy <= 1'b0;
      if (llr_valid && llr.pilot) begin
        // candidate c collects the LLR where its codeword symbol is 1
        for (int c = 0; c < NCW; c++)
          met[c] <= ((pcnt == '0) ? SW'(0) : met[c])
                    + ((^(IB'(c) & IB'(pcnt))) ? SW'($signed(llr.llr)) : SW'(0));
        pcnt <= pcnt + 1'b1;
        k    <= '0;
      end
      if (is_data) begin
        pcnt <= '0;
        k <= llr.last ? '0 : k + 1'b1;
        if (first) begin
          seg <= seg_c; drop <= drop_c;
          if (drop_c) ev_bad_index <= 1'b1;
        end
        if (close_first) begin
          ev_close <= 1'b1; blk_seq <= blk_seq + 1'b1; wmask <= '0;
          if (!rbusy || rdone) begin
            rbusy <= 1'b1; rbank <= wbank; rmask <= wmask; rseq <= blk_seq; wbank <= ~wbank;
          end else ev_overflow <= 1'b1;
        end
        if (llr.last && !drop_c) begin
          last_seg <= seg_c;
          if (close_last) begin
            ev_close <= 1'b1; blk_seq <= blk_seq + 1'b1; wmask <= '0;
            if (!rbusy || rdone) begin
              rbusy <= 1'b1; rbank <= bank_c; rmask <= mask_new; rseq <= blk_seq; wbank <= ~bank_c;
            end else ev_overflow <= 1'b1;
          end else wmask <= mask_new;
        end
      end
    end
  end

  // ---------------- packet output ----------------
  assign rmask16 = 16'(rmask);
  assign adv     = rbusy && (rcnt <= RW'(NC+3)) && (!m_tvalid || m_tready);
  assign rdone   = m_tvalid && m_tready && m_tlast;
  assign raddr   = AW'(rbank ? NC : 0) + AW'(rseg) * AW'(NSEG) + AW'(roff);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      m_tvalid <= 1'b0; m_tdata <= '0; m_tlast <= 1'b0; rcnt <= '0; rseg <= '0; roff <= '0;
    end else begin
      if (adv) begin
        m_tvalid <= 1'b1;
        m_tlast  <= (rcnt == RW'(NC+3));
        unique case (rcnt)
          RW'(0):  m_tdata <= rseq[15:8];
          RW'(1):  m_tdata <= rseq[7:0];
          RW'(2):  m_tdata <= rmask16[15:8];
          RW'(3):  m_tdata <= rmask16[7:0];
          default: begin
            m_tdata <= rmask[rseg] ? 8'(signed'(mem[raddr])) : 8'h00;
            if (roff == KW'(NSEG-1)) begin roff <= '0; rseg <= rseg + 1'b1; end
            else roff <= roff + 1'b1;
          end
        endcase
        rcnt <= rcnt + 1'b1;
      end else if (m_tready) begin
        m_tvalid <= 1'b0;
      end
      if (rdone) begin rcnt <= '0; rseg <= '0; roff <= '0; m_tlast <= 1'b0; end
    end
  end

  a_stream_hold: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata) && $stable(m_tlast));

  initial assert (Q <= 16 && NSEG >= 2 && LP >= IB && NC == NSEG*Q)
    else $error("llr_packer: unsupported parameters");
endmodule
