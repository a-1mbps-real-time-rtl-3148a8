// bit_fifo: synchronous first-in first-out buffer for a narrow data stream.
//
// Used by the transmitter to hold coded bits from the PC link until a whole
// frame payload is present.  Write side is valid/ready; the read side shows
// the head word on rd_data whenever count > 0 and removes it on rd_en.  A
// write and a read in the same cycle are both taken.  count is exact and
// updates one cycle after the operation.  Depth and width are free
// parameters; DEPTH must be a power of two.
module bit_fifo #(
  parameter int DEPTH = 2048,
  parameter int W     = 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       wr_valid,
  input  logic [W-1:0]               wr_data,
  output logic                       wr_ready,
  input  logic                       rd_en,
  output logic [W-1:0]               rd_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int AW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;

  wire do_wr = wr_valid && wr_ready;
  wire do_rd = rd_en && (count != 0);

  assign wr_ready = (count != ($clog2(DEPTH+1))'(DEPTH));
  assign rd_data  = mem[rp];

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_wr) wp <= wp + 1'b1;
      if (do_rd) rp <= rp + 1'b1;
      count <= count + (($clog2(DEPTH+1))'(do_wr)) - (($clog2(DEPTH+1))'(do_rd));
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> count != 0);
endmodule
