// trq_pkg -- constants and types shared by the twin-range-quantisation (TRQ)
// SAR ADC datapath.
//
// R_ADC is the resolution of the SAR ADC's analog part (8 bits for a 128-row
// crossbar with 1-bit cells and 1-bit input drivers: log2(128)+1). Every
// configuration field is sized from it. The ADC output code is one range bit
// followed by an R_ADC-bit value field, so the same word carries a TRQ code
// (range bit + N_R1 or N_R2 value bits) or a plain uniform code of up to R_ADC
// bits. The value field being R_ADC wide and the field widths of cfg_t are
// choices of this design; the paper fixes only the meaning of the fields.
package trq_pkg;

  localparam int unsigned R_ADC = 8;                  // ADC resolution (bits)
  localparam int unsigned NW    = $clog2(R_ADC + 1);  // width of a bit-count field

  // Conversion mode held in the configuration register.
  typedef enum logic {
    MODE_UNIFORM = 1'b0,   // plain (early-stopped) binary search, one range
    MODE_TWIN    = 1'b1    // twin-range search: detection phase, then R1 or R2
  } adc_mode_e;

  // Configuration shared by the SAR logic and the shift-and-add unit.
  //   n_r1, n_r2 : value bits resolved in R1 / R2 (0..R_ADC)
  //   m          : log2(Delta_R2 / Delta_R1), the R2 decode shift
  //   dr1        : log2(Delta_R1) in units of the ADC grid step V_grid
  //   bias       : R1 offset; R1 = [bias, bias+1) * 2^n_r1 * Delta_R1
  typedef struct packed {
    adc_mode_e              mode;
    logic [NW-1:0]          n_r1;
    logic [NW-1:0]          n_r2;
    logic [NW-1:0]          m;
    logic [NW-1:0]          dr1;
    logic [R_ADC-1:0]       bias;
  } trq_cfg_t;

  // Output code of one A/D conversion.
  typedef struct packed {
    logic                   r2;     // range bit: 0 = R1, 1 = R2 (MSB of the code)
    logic [R_ADC-1:0]       value;  // unsigned code inside the range, LSB aligned
  } adc_code_t;

  // Reset configuration: full-precision uniform 8-bit conversion.
  localparam trq_cfg_t CFG_RESET = '{
    mode: MODE_UNIFORM,
    n_r1: NW'(R_ADC),
    n_r2: NW'(R_ADC),
    m:    '0,
    dr1:  '0,
    bias: '0
  };

  // Value of a code in units of Delta_R1, as the shift-and-add unit decodes it:
  // an R2 code is shifted left by M, an R1 code gets the bias concatenated on
  // its left.
  function automatic logic [2*R_ADC-1:0] decode_code(adc_code_t c, trq_cfg_t cfg);
    logic [2*R_ADC-1:0] v;
    if (c.r2) v = (2*R_ADC)'(c.value) << cfg.m;
    else      v = ((2*R_ADC)'(cfg.bias) << cfg.n_r1) | (2*R_ADC)'(c.value);
    return v;
  endfunction

endpackage
