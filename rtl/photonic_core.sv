// photonic_core -- behavioural model of the analog part of one PPU.
//
// This is not synthesizable hardware; it stands for the four DACs, the
// two-wavelength laser, MZM1..MZM4, the two wavelength demultiplexers, the
// four photodetectors and the four ADCs. MZM1 (lambda1) and MZM2 (lambda2)
// carry the A slices, both outputs are split to MZM3 and MZM4 which carry the
// B slices, and demultiplexing by wavelength gives four intensities:
//   adc[0] = dac[0]*dac[2]  (a1*b1, MZM3 lambda1)   adc[1] = dac[1]*dac[2]  (a2*b1, MZM3 lambda2)
//   adc[2] = dac[0]*dac[3]  (a1*b2, MZM4 lambda1)   adc[3] = dac[1]*dac[3]  (a2*b2, MZM4 lambda2)
// dac[0..3] are the codes of DAC Players 1..4. The model is ideal: linear,
// noise-free, unity scale, saturating at the ADC full scale, with a fixed
// latency of LAT clock cycles from DAC code to ADC code. The channel mapping
// follows the paper; the scaling and latency are this model's own.
module photonic_core
  import lmhp_pkg::*;
#(
  parameter int unsigned DAC_W = DAC_W_DEF,
  parameter int unsigned ADC_W = ADC_W_DEF,
  parameter int unsigned LAT   = PHOT_LAT_DEF
) (
  input  logic             clk,
  input  logic [DAC_W-1:0] dac_code [4],
  output logic [ADC_W-1:0] adc_code [4]
);

  logic [ADC_W-1:0] pipe [LAT][4];

  function automatic logic [ADC_W-1:0] detect(logic [DAC_W-1:0] x, logic [DAC_W-1:0] y);
    logic [2*DAC_W-1:0] p;
    p = x * y;
    return (p > (2*DAC_W)'((1 << ADC_W) - 1)) ? '1 : p[ADC_W-1:0];
  endfunction

  always_ff @(posedge clk) begin
    pipe[0][0] <= detect(dac_code[0], dac_code[2]);
    pipe[0][1] <= detect(dac_code[1], dac_code[2]);
    pipe[0][2] <= detect(dac_code[0], dac_code[3]);
    pipe[0][3] <= detect(dac_code[1], dac_code[3]);
    for (int s = 1; s < LAT; s++) pipe[s] <= pipe[s-1];
  end

  assign adc_code = pipe[LAT-1];

endmodule
