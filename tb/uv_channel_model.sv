// uv_channel_model: behavioural stand-in for everything between the
// modulator drive and the ADC outputs (laser, scattering channel, K
// photomultipliers with their analog chain, ADCs).  Not synthesizable.
//
// Once per clock (one 100 MHz ADC sample) each detector starts a
// photoelectron pulse with probability P_ON/65536 while the delayed symbol is
// on and P_BG/65536 while it is off, independently of the others; a pulse
// holds the output at AMP for PULSE_LEN samples over a small noise floor, and
// pulses that overlap merge, as they do on a real PMT.  The symbol reaches
// the detectors DELAY samples after ook.  force_on makes the channel act as
// if the symbol were on, blank removes all light; both travel with the delay.
// The two probabilities start at P_ON and P_BG and are held in the variables
// p_on and p_bg, which a testbench may change at run time (by hierarchical
// assignment) to sweep the signal and background levels.
module uv_channel_model #(
  parameter int K         = 3,
  parameter int ADC_W     = 14,
  parameter int DELAY     = 37,
  parameter int P_ON      = 9000,
  parameter int P_BG      = 130,
  parameter int AMP       = 900,
  parameter int PULSE_LEN = 2
) (
  input  logic                    clk,
  input  logic                    ook,
  input  logic                    force_on,
  input  logic                    blank,
  output logic                    adc_valid,
  output logic [K-1:0][ADC_W-1:0] adc_sample
);
  logic [2:0] dl [DELAY];
  int hi [K];
  int p_on = P_ON, p_bg = P_BG;

  initial begin
    foreach (dl[i]) dl[i] = '0;
    foreach (hi[k]) hi[k] = 0;
    adc_valid = 1'b0;
    adc_sample = '0;
  end

  always @(posedge clk) begin
    logic on, fo, bl;
    {bl, fo, on} = dl[DELAY-1];
    for (int i = DELAY-1; i > 0; i--) dl[i] <= dl[i-1];
    dl[0] <= {blank, force_on, ook};
    adc_valid <= 1'b1;
    for (int k = 0; k < K; k++) begin
      int p;
      p = bl ? 0 : ((on || fo) ? p_on : p_bg);
      if (int'($urandom_range(0, 65535)) < p) hi[k] = PULSE_LEN;
      adc_sample[k] <= ADC_W'((hi[k] > 0 ? AMP : 0) + int'($urandom_range(0, 80)) - 40);
      if (hi[k] > 0) hi[k]--;
    end
  end
endmodule
