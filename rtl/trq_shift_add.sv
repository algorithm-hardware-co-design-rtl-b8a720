// trq_shift_add -- shift-and-add (S+A) unit with the TRQ decoding shift.
//
// Each ADC code is a bit-sliced partial product: the bit-line count of one
// weight bit (#W) for one input bit cycle (#In). The S+A unit weights it by
// 2^(#W + #In) and adds it into the partial sum of its output column,
// subtracting it when it comes from the negative crossbar. Because a TRQ code
// is not a plain binary number, the shift controller first decodes it, which
// takes only shifts: an R2 code (range bit 1) is moved left by M more bits, so
// the total shift is #W + #In + M instead of #W + #In; an R1 code gets the
// configured Bias concatenated on the left of its value bits. The range bit
// itself is dropped. Results are in units of Delta_R1.
//
// The decoding rule (shift by M for range bit 1, bias on the left of R1 codes)
// and the 16-bit partial sums are the paper's. The sign input for the negative
// crossbar, the per-column partial-sum registers, two's-complement wrap on
// overflow and the two-stage pipeline are this design's choices.
//
// Pipeline: in the cycle with in_valid = 1 the shift controller computes the
// shifted, signed addend into the shift register; in the next cycle the adder
// adds it into psum[col]; psum shows the new sum after that second edge.
// clear zeroes all partial sums (and drops an addend in flight); busy is 1
// while an addend is in the shift register.
module trq_shift_add
  import trq_pkg::*;
#(
  parameter int unsigned NCOL   = 16,   // output columns per crossbar pair
  parameter int unsigned KW     = 8,    // weight bits = bit lines per weight (alpha)
  parameter int unsigned KI     = 8,    // input bits = input cycles
  parameter int unsigned PSUM_W = 16    // partial-sum width
)(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clear,
  input  trq_cfg_t                     cfg,
  input  logic                         in_valid,
  input  adc_code_t                    code,
  input  logic [$clog2(KW)-1:0]        wbit,
  input  logic [$clog2(KI)-1:0]        ibit,
  input  logic                         neg,
  input  logic [$clog2(NCOL)-1:0]      col,
  output logic                         busy,
  output logic [NCOL-1:0][PSUM_W-1:0]  psum
);

  localparam int unsigned DW = 2*R_ADC + KW + KI;   // decoded and shifted width

  // shift controller: decode, then align to the bit position
  logic [DW-1:0]     shifted;
  logic [PSUM_W-1:0] addend;
  always_comb begin
    shifted = DW'(decode_code(code, cfg)) << (32'(wbit) + 32'(ibit));
    addend  = neg ? PSUM_W'(-shifted) : PSUM_W'(shifted);
  end

  // shift register stage
  logic                    sr_valid;
  logic [PSUM_W-1:0]       sr_addend;
  logic [$clog2(NCOL)-1:0] sr_col;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sr_valid  <= 1'b0;
      sr_addend <= '0;
      sr_col    <= '0;
    end else begin
      sr_valid <= in_valid && !clear;
      if (in_valid) begin
        sr_addend <= addend;
        sr_col    <= col;
      end
    end
  end

  // adder and partial-sum registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) psum <= '0;
    else if (clear) psum <= '0;
    else if (sr_valid) psum[sr_col] <= psum[sr_col] + sr_addend;
  end

  assign busy = sr_valid;

endmodule
