// reram_xbar_pair -- BEHAVIOURAL MODEL of one processing element's ReRAM
// crossbar pair (positive and negative crossbar) with 1-bit cells and 1-bit
// word-line drivers. The real part is analog: the word-line voltages multiply
// the cell conductances and the currents sum along each bit line. Here the
// current of bit line j is the integer count sum_i wl[i] & cell(i,j), in units
// of one on-cell's current, which the trans-impedance amplifier (unity gain,
// not modelled separately) turns into a voltage in V_grid units.
//
// Organisation: S rows (word lines). Bit lines 0 .. NBL/2-1 form the positive
// crossbar, NBL/2 .. NBL-1 the negative one. Each weight of KW bits occupies
// KW adjacent bit lines, bit b of the weight on bit line (column*KW + b) of the
// positive (w > 0) or negative (w < 0) crossbar. The paper maps weights
// bit-sliced to bit lines and splits the sign over a positive and a negative
// crossbar; the ordering of bits within a column is this design's choice.
//
// Interface/timing: cells are programmed one row at a time: prog_en writes
// prog_row_bits into row prog_row at the rising clock edge. bl follows wl and
// the stored cells combinationally. Cells power up in an unknown state and must be programmed.
module reram_xbar_pair #(
  parameter int unsigned S    = 128,            // rows (crossbar size)
  parameter int unsigned NBL  = 256,            // bit lines of both crossbars
  parameter int unsigned BL_W = $clog2(S + 1)   // width of a bit-line value
)(
  input  logic                    clk,
  input  logic                    prog_en,
  input  logic [$clog2(S)-1:0]    prog_row,
  input  logic [NBL-1:0]          prog_row_bits,
  input  logic [S-1:0]            wl,
  output logic [NBL-1:0][BL_W-1:0] bl
);

  // stored column-wise: cells[j][i] is the cell of row i on bit line j
  logic [S-1:0] cells [NBL];

  always_ff @(posedge clk)
    if (prog_en)
      for (int j = 0; j < NBL; j++) cells[j][prog_row] <= prog_row_bits[j];

  always_comb
    for (int j = 0; j < NBL; j++) bl[j] = BL_W'($countones(wl & cells[j]));

endmodule
