// pulse_counter: photoelectron pulse counting on one PMT's ADC samples.
//
// A pulse is recorded at a sample that is above the threshold v_thd while the
// previous sample was below it (both comparisons strict), which is the
// rising-edge rule of the specification.  Edges are summed over one chip of
// SAMPLES_PER_CHIP samples (5 samples = 50 ns at 100 MHz, a tenth of a 2 Mbit/s
// symbol) and the sum is output with a one-cycle chip_valid pulse in the cycle
// after the chip's last sample.  The previous sample is carried across chip
// boundaries, so an edge is never lost or counted twice; it belongs to the
// chip holding the sample above threshold.  Chips are aligned to reset.  The
// ADC width and the positive pulse polarity are design choices.
module pulse_counter #(
  parameter int ADC_W            = uv_pkg::ADC_W,
  parameter int SAMPLES_PER_CHIP = uv_pkg::SAMPLES_PER_CHIP,
  // at most one edge per two samples, so ceil(S/2) edges fit
  parameter int CNT_W            = $clog2((SAMPLES_PER_CHIP+1)/2 + 1)
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    sample_valid,
  input  logic signed [ADC_W-1:0] sample,
  input  logic signed [ADC_W-1:0] v_thd,
  output logic                    chip_valid,
  output logic [CNT_W-1:0]        chip_cnt
);
  localparam int PW = $clog2(SAMPLES_PER_CHIP);

  logic             prev_below;   // previous sample < v_thd
  logic [PW-1:0]    phase;        // sample index within the chip
  logic [CNT_W-1:0] acc;
  logic             edge_now;

  assign edge_now = prev_below && (sample > v_thd);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev_below <= 1'b0; phase <= '0; acc <= '0; chip_valid <= 1'b0; chip_cnt <= '0;
    end else begin
      chip_valid <= 1'b0;
      if (sample_valid) begin
        prev_below <= (sample < v_thd);
        if (phase == PW'(SAMPLES_PER_CHIP-1)) begin
          phase      <= '0;
          chip_cnt   <= acc + CNT_W'(edge_now);
          chip_valid <= 1'b1;
          acc        <= '0;
        end else begin
          phase <= phase + 1'b1;
          acc   <= acc + CNT_W'(edge_now);
        end
      end
    end
  end
endmodule
