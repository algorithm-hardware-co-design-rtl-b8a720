// bl_sample_hold -- BEHAVIOURAL MODEL of the per-bit-line sample-and-hold (SH)
// circuits of a processing element. In the chip these hold the analog voltage
// of every bit line so that a time-shared ADC can convert them one after the
// other while the crossbar moves on. Values are integers in V_grid units.
//
// Interface/timing: on the rising edge that ends a cycle with capture = 1 all
// NBL inputs are stored; held shows them until the next capture.
module bl_sample_hold #(
  parameter int unsigned NBL  = 256,
  parameter int unsigned BL_W = 8
)(
  input  logic                     clk,
  input  logic                     capture,
  input  logic [NBL-1:0][BL_W-1:0] bl,
  output logic [NBL-1:0][BL_W-1:0] held
);


  always_ff @(posedge clk)
    if (capture) held <= bl;

endmodule
