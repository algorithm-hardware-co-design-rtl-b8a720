// trq_sar_logic -- SAR control logic with twin ranges (the "LOGIC & SAR"
// block of the reconfigurable ADC).
//
// A conventional SAR ADC resolves its K-bit code by binary search, one
// comparator decision (an "A/D operation") per bit. This controller drives the
// same, unmodified DAC and comparator but changes the search so that most
// conversions end early:
//   * Twin-range mode. A detection phase first compares the held voltage with
//     the upper edge of R1, (bias+1) * 2^N_R1 * Delta_R1, and, when bias is not
//     zero, also with its lower edge bias * 2^N_R1 * Delta_R1 (nu = 1 or 2
//     operations, as in the paper's energy equation). A sample inside R1 is
//     then binary-searched with N_R1 steps of Delta_R1 starting at the lower
//     edge ("early bird", no precision lost when Delta_R1 is one grid step).
//     Any other sample is binary-searched over the whole scale with N_R2 steps
//     of Delta_R2 = 2^M * Delta_R1 ("early stopping": full range, fewer bits).
//   * Uniform mode. No detection phase; N_R2 steps of Delta_R2 over the whole
//     scale. With N_R2 = 8, M = 0, Delta_R1 = 1 this is the ordinary 8-bit ADC.
// The output code is the range bit (0 = R1, 1 = R2; uniform codes carry 1 so
// the shift-and-add unit decodes both modes alike) and the value bits, LSB
// aligned.
//
// DAC indices are in units of the ADC grid V_grid; the comparator is assumed to
// answer "Vhold is at or above the threshold of index idx" (vcomp = 1). A trial
// index at or above 2^R_ADC lies above full scale: the DAC is not asked, the
// decision is taken as 0, and the step still counts as an A/D operation (the
// cycle is spent). Step sizes as powers of two and the fixed order of the
// detection comparisons follow the paper; the exact state sequence, the use
// of one clock per A/D operation and the handshake are this design's.
//
// Timing: start is taken when the controller is idle (or in its done cycle).
// The next cycle pulses sample (the S/R captures Vin at its end). Each of the
// following nops cycles is one A/D operation (cmp_en = 1, dac_idx valid,
// vcomp read at the clock edge). The cycle after the last operation has done=1
// with code, in_r1 and nops valid, so done comes nops+2 cycles after start.
// The configuration is captured at start and held for the conversion.
module trq_sar_logic
  import trq_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  trq_cfg_t         cfg,
  input  logic             start,
  output logic             busy,
  output logic             sample,
  output logic             cmp_en,
  output logic [R_ADC-1:0] dac_idx,
  input  logic             vcomp,
  output logic             done,
  output adc_code_t        code,
  output logic             in_r1,
  output logic [NW:0]      nops
);

  localparam int unsigned IW = 3*R_ADC + 2;   // wide enough for any trial index

  typedef enum logic [2:0] {S_IDLE, S_SAMPLE, S_DET_HI, S_DET_LO, S_SEARCH, S_DONE} state_e;

  state_e             state, state_n;
  trq_cfg_t           cfg_q;
  logic               ge_hi_q;
  logic [IW-1:0]      base_q;     // lower edge of the range being searched
  logic [NW:0]        slog_q;     // log2 of the search step
  logic [NW-1:0]      bitptr_q;   // bit under test
  logic [R_ADC-1:0]   val_q;      // resolved value bits
  logic               r2_q;

  // R1 edges from the captured configuration
  logic [IW-1:0] r1_lo, r1_hi;
  assign r1_lo = IW'(cfg_q.bias) << ((NW+1)'(cfg_q.n_r1) + (NW+1)'(cfg_q.dr1));
  assign r1_hi = (IW'(cfg_q.bias) + IW'(1)) << ((NW+1)'(cfg_q.n_r1) + (NW+1)'(cfg_q.dr1));

  // trial index of this cycle
  logic [R_ADC-1:0] trial;
  logic [IW-1:0]    idx_w;
  logic             over, dec;
  always_comb begin
    trial = val_q | (R_ADC'(1) << bitptr_q);
    unique case (state)
      S_DET_HI: idx_w = r1_hi;
      S_DET_LO: idx_w = r1_lo;
      default:  idx_w = base_q + (IW'(trial) << slog_q);
    endcase
    over    = (idx_w >= IW'(2**R_ADC));
    dac_idx = over ? '1 : idx_w[R_ADC-1:0];
    dec     = !over && vcomp;
  end

  assign cmp_en = (state == S_DET_HI) || (state == S_DET_LO) || (state == S_SEARCH);
  assign sample = (state == S_SAMPLE);
  assign busy   = (state != S_IDLE) && (state != S_DONE);
  assign done   = (state == S_DONE);
  assign code   = '{r2: r2_q, value: val_q};
  assign in_r1  = !r2_q;

  // search set-up for the range chosen by the detection phase
  logic          go_r1;
  logic [NW-1:0] nbits_sel;
  always_comb begin
    go_r1 = 1'b0;
    if (state == S_DET_HI) go_r1 = !dec && (cfg_q.bias == '0);
    if (state == S_DET_LO) go_r1 = dec && !ge_hi_q;
    nbits_sel = go_r1 ? cfg_q.n_r1 : cfg_q.n_r2;
  end

  always_comb begin
    state_n = state;
    unique case (state)
      S_IDLE:   if (start) state_n = S_SAMPLE;
      S_SAMPLE: if (cfg_q.mode == MODE_TWIN) state_n = S_DET_HI;
                else state_n = (cfg_q.n_r2 == '0) ? S_DONE : S_SEARCH;
      S_DET_HI: if (cfg_q.bias != '0) state_n = S_DET_LO;
                else state_n = (nbits_sel == '0) ? S_DONE : S_SEARCH;
      S_DET_LO: state_n = (nbits_sel == '0) ? S_DONE : S_SEARCH;
      S_SEARCH: if (bitptr_q == '0) state_n = S_DONE;
      S_DONE:   state_n = start ? S_SAMPLE : S_IDLE;
      default:  state_n = S_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      cfg_q    <= CFG_RESET;
      ge_hi_q  <= 1'b0;
      base_q   <= '0;
      slog_q   <= '0;
      bitptr_q <= '0;
      val_q    <= '0;
      r2_q     <= 1'b0;
      nops     <= '0;
    end else begin
      state <= state_n;
      if (cmp_en) nops <= nops + 1'b1;
      unique case (state)
        S_IDLE, S_DONE: if (start) begin
          cfg_q <= cfg;
          nops  <= '0;
          val_q <= '0;
        end
        S_SAMPLE: begin
          // uniform mode goes straight to the R2-style search
          r2_q     <= 1'b1;
          base_q   <= '0;
          slog_q   <= (NW+1)'(cfg_q.dr1) + (NW+1)'(cfg_q.m);
          bitptr_q <= cfg_q.n_r2 - 1'b1;
        end
        S_DET_HI, S_DET_LO: begin
          if (state == S_DET_HI) ge_hi_q <= dec;
          if (state == S_DET_LO || cfg_q.bias == '0) begin
            r2_q     <= !go_r1;
            base_q   <= go_r1 ? r1_lo : '0;
            slog_q   <= go_r1 ? (NW+1)'(cfg_q.dr1) : (NW+1)'(cfg_q.dr1) + (NW+1)'(cfg_q.m);
            bitptr_q <= nbits_sel - 1'b1;
          end
        end
        S_SEARCH: begin
          if (dec) val_q <= trial;
          bitptr_q <= bitptr_q - 1'b1;
        end
        default: ;
      endcase
    end
  end

  // A new conversion may only be requested when the controller is free.
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
