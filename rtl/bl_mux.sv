// bl_mux -- BEHAVIOURAL MODEL of the analog multiplexer between the held
// bit-line voltages of a processing element and the input Vin of the shared
// ADC. The paper shows this multiplexer and states that the ADC is shared in
// time; in the chip it is an analog switch network, here a selection of the
// integer held value.
//
// Interface/timing: vin = held[sel], combinational. A select beyond NBL-1
// gives 0 (no bit line connected).
module bl_mux #(
  parameter int unsigned NBL  = 256,
  parameter int unsigned BL_W = 8
)(
  input  logic [NBL-1:0][BL_W-1:0] held,
  input  logic [$clog2(NBL)-1:0]   sel,
  output logic [BL_W-1:0]          vin
);

  always_comb vin = (32'(sel) < NBL) ? held[sel] : '0;

endmodule
