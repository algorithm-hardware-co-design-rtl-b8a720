// sar_adc_analog -- BEHAVIOURAL MODEL of the analog part of the SAR ADC: the
// sample-and-hold at the ADC input (S/R), the DAC that produces the threshold
// voltage for a code index, and the comparator. Not synthesizable circuitry in
// a real chip; written so the digital SAR logic can be simulated against it.
//
// Voltages are modelled as unsigned integers in units of the ADC grid step
// V_grid (the value of one bit-line count after the trans-impedance amplifier
// at unity gain). The DAC threshold for index idx of a uniform ADC sits at
// (idx - 1/2) * V_grid, so for an integer held voltage the comparator output
// is simply vhold >= idx. A voltage above full scale compares high against
// every index, which saturates the code, as a real ADC does.
//
// Interface/timing: vhold takes vin at the rising edge that ends a cycle with
// sample = 1 and keeps it until the next sample. vcomp follows dac_idx
// combinationally (the comparator is evaluated within the A/D-operation cycle).
// The analog part is the paper's unmodified SAR ADC; the integer voltage
// representation is this model's.
module sar_adc_analog
  import trq_pkg::*;
#(
  parameter int unsigned VIN_W = 8   // width of the modelled input voltage
)(
  input  logic             clk,
  input  logic [VIN_W-1:0] vin,
  input  logic             sample,
  input  logic [R_ADC-1:0] dac_idx,
  output logic             vcomp
);

  logic [VIN_W-1:0] vhold;


  always_ff @(posedge clk)
    if (sample) vhold <= vin;

  assign vcomp = (32'(vhold) >= 32'(dac_idx));

endmodule
