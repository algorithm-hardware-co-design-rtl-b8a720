// trq_pim_pe -- one ReRAM processing element with its reconfigurable SAR ADC
// and shift-and-add unit, performing twin-range-quantised (TRQ) A/D
// conversion of every bit-line result.
//
// Data flow: the sequencer feeds the KI-bit inputs bit-serially onto the word
// lines of a positive/negative crossbar pair; the sample-and-hold circuits
// keep all bit-line values; the multiplexer hands them one at a time to the
// single shared ADC (analog S/R, DAC and comparator plus the twin-range SAR
// logic); the shift-and-add unit decodes each compact code, weights it by its
// weight bit and input bit and accumulates signed partial sums per output
// column. The configuration register sets N_R1, N_R2, M, Delta_R1, Bias and
// the mode for both the SAR logic and the shift-and-add unit.
// The crossbar, sample-and-hold, multiplexer and analog ADC part are
// behavioural models; the configuration register, SAR logic, shift-and-add and
// sequencer are synthesizable. The block structure follows the accelerator
// described for TRQ (one PE, its time-shared ADC with modified SAR logic and a
// shift-and-add unit with a decoding shift); the single ADC per PE, the
// observation ports and the configuration lock during an MVM are this
// design's choices.
//
// Interface:
//   cfg_*     configuration register port (see trq_cfg_reg); writes made while
//             busy are dropped so a running MVM keeps one configuration.
//   prog_*    write one crossbar row of cells (weights are programmed before use).
//   start     begins one MVM on in_vec (when busy = 0); done pulses when psum
//             holds the NCOL signed partial sums, sum_i in[i]*w[i][col] with
//             each bit-line value passed through the TRQ quantiser. With
//             acc = 1 at start the sums of the previous MVM are kept and added
//             to (merging row blocks of a layer split over crossbars).
//   conv_*    observation of every conversion: code, range, A/D operations.
//   adops_total counts A/D operations since reset (the ADC energy measure).
module trq_pim_pe
  import trq_pkg::*;
#(
  parameter int unsigned S      = 128,   // crossbar rows
  parameter int unsigned KI     = 8,     // input bits
  parameter int unsigned KW     = 8,     // weight bits
  parameter int unsigned NCOL   = 16,    // weights per crossbar (128 bit lines / 8)
  parameter int unsigned PSUM_W = 16,    // partial-sum width
  localparam int unsigned NBL   = 2 * NCOL * KW,
  localparam int unsigned BL_W  = $clog2(S + 1)
)(
  input  logic                        clk,
  input  logic                        rst_n,
  // configuration register
  input  logic                        cfg_wr_en,
  input  logic [2:0]                  cfg_wr_addr,
  input  logic [R_ADC-1:0]            cfg_wr_data,
  input  logic [2:0]                  cfg_rd_addr,
  output logic [R_ADC-1:0]            cfg_rd_data,
  output logic                        cfg_wr_err,
  // crossbar programming
  input  logic                        prog_en,
  input  logic [$clog2(S)-1:0]        prog_row,
  input  logic [NBL-1:0]              prog_row_bits,
  // MVM
  input  logic                        start,
  input  logic                        acc,
  input  logic [S-1:0][KI-1:0]        in_vec,
  output logic                        busy,
  output logic                        done,
  output logic [NCOL-1:0][PSUM_W-1:0] psum,
  // observation
  output logic                        conv_done,
  output adc_code_t                   conv_code,
  output logic                        conv_in_r1,
  output logic [NW:0]                 conv_nops,
  output logic [31:0]                 adops_total
);

  trq_cfg_t cfg;

  trq_cfg_reg u_cfg (
    .clk, .rst_n,
    .wr_en   (cfg_wr_en && !busy),
    .wr_addr (cfg_wr_addr),
    .wr_data (cfg_wr_data),
    .rd_addr (cfg_rd_addr),
    .rd_data (cfg_rd_data),
    .wr_err  (cfg_wr_err),
    .cfg     (cfg)
  );

  // processing element
  logic [S-1:0]                wl;
  logic                        sh_capture;
  logic [$clog2(NBL)-1:0]      mux_sel;
  logic [NBL-1:0][BL_W-1:0]    bl, held;
  logic [BL_W-1:0]             vin;

  reram_xbar_pair #(.S(S), .NBL(NBL), .BL_W(BL_W)) u_xbar (
    .clk, .prog_en, .prog_row, .prog_row_bits, .wl, .bl
  );

  bl_sample_hold #(.NBL(NBL), .BL_W(BL_W)) u_sh (
    .clk, .capture(sh_capture), .bl, .held
  );

  bl_mux #(.NBL(NBL), .BL_W(BL_W)) u_mux (
    .held, .sel(mux_sel), .vin
  );

  // ADC
  logic             adc_start, adc_sample, adc_cmp_en, vcomp;
  logic [R_ADC-1:0] dac_idx;

  sar_adc_analog #(.VIN_W(BL_W)) u_adc_analog (
    .clk, .vin, .sample(adc_sample), .dac_idx, .vcomp
  );

  trq_sar_logic u_sar (
    .clk, .rst_n, .cfg,
    .start   (adc_start),
    .busy    (),
    .sample  (adc_sample),
    .cmp_en  (adc_cmp_en),
    .dac_idx (dac_idx),
    .vcomp   (vcomp),
    .done    (conv_done),
    .code    (conv_code),
    .in_r1   (conv_in_r1),
    .nops    (conv_nops)
  );

  // shift-and-add
  logic                    sa_clear, sa_valid, sa_neg, sa_busy;
  logic [$clog2(KW)-1:0]   sa_wbit;
  logic [$clog2(KI)-1:0]   sa_ibit;
  logic [$clog2(NCOL)-1:0] sa_col;

  trq_shift_add #(.NCOL(NCOL), .KW(KW), .KI(KI), .PSUM_W(PSUM_W)) u_sa (
    .clk, .rst_n,
    .clear    (sa_clear),
    .cfg,
    .in_valid (sa_valid),
    .code     (conv_code),
    .wbit     (sa_wbit),
    .ibit     (sa_ibit),
    .neg      (sa_neg),
    .col      (sa_col),
    .busy     (sa_busy),
    .psum
  );

  trq_pe_ctrl #(.S(S), .KI(KI), .KW(KW), .NCOL(NCOL)) u_ctrl (
    .clk, .rst_n, .start, .acc, .in_vec, .busy, .done,
    .wl, .sh_capture, .mux_sel,
    .adc_start, .adc_done(conv_done),
    .sa_clear, .sa_valid, .sa_wbit, .sa_ibit, .sa_neg, .sa_col, .sa_busy
  );

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) adops_total <= '0;
    else if (adc_cmp_en) adops_total <= adops_total + 1;

endmodule
