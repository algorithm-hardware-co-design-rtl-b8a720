// trq_cfg_reg -- configuration register of the reconfigurable ADC and
// shift-and-add unit.
//
// Holds the per-layer TRQ settings that the paper keeps "in the register near
// the ADC and the Shift and Add module": output bit widths N_R1 and N_R2, the
// step size Delta_R1 (as log2 in V_grid units; Delta_R2 = 2^M * Delta_R1 is
// derived, never stored), the non-uniform degree M, the R1 offset Bias and the
// twin-range / uniform mode switch. The field list is the paper's; the
// addressed write/read port, the addresses and the reset value (uniform,
// full 8-bit precision) are this design's choices.
//
// Interface: a write with wr_en=1 stores wr_data into field wr_addr at the
// next rising clock edge; cfg shows the stored fields from that edge on.
// rd_data returns field rd_addr combinationally. Unused upper data bits of a
// narrow field are dropped on write and read back as zero.
//   addr 0: mode (bit 0)   1: N_R1   2: N_R2   3: M   4: log2 Delta_R1   5: Bias
// A write to an address above 5 is ignored and raises wr_err for one cycle.
module trq_cfg_reg
  import trq_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [2:0]       wr_addr,
  input  logic [R_ADC-1:0] wr_data,
  input  logic [2:0]       rd_addr,
  output logic [R_ADC-1:0] rd_data,
  output logic             wr_err,
  output trq_cfg_t         cfg
);

  localparam logic [2:0] A_MODE = 3'd0, A_NR1 = 3'd1, A_NR2 = 3'd2,
                         A_M    = 3'd3, A_DR1 = 3'd4, A_BIAS = 3'd5;

  // A field holding a bit count never exceeds R_ADC; larger writes saturate.
  function automatic logic [NW-1:0] sat_bits(logic [R_ADC-1:0] d);
    return (32'(d) > R_ADC) ? NW'(R_ADC) : NW'(d);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg    <= CFG_RESET;
      wr_err <= 1'b0;
    end else begin
      wr_err <= 1'b0;
      if (wr_en) begin
        unique case (wr_addr)
          A_MODE: cfg.mode <= adc_mode_e'(wr_data[0]);
          A_NR1:  cfg.n_r1 <= sat_bits(wr_data);
          A_NR2:  cfg.n_r2 <= sat_bits(wr_data);
          A_M:    cfg.m    <= sat_bits(wr_data);
          A_DR1:  cfg.dr1  <= sat_bits(wr_data);
          A_BIAS: cfg.bias <= wr_data;
          default: wr_err  <= 1'b1;
        endcase
      end
    end
  end

  always_comb begin
    unique case (rd_addr)
      A_MODE: rd_data = R_ADC'(cfg.mode);
      A_NR1:  rd_data = R_ADC'(cfg.n_r1);
      A_NR2:  rd_data = R_ADC'(cfg.n_r2);
      A_M:    rd_data = R_ADC'(cfg.m);
      A_DR1:  rd_data = R_ADC'(cfg.dr1);
      A_BIAS: rd_data = cfg.bias;
      default: rd_data = '0;
    endcase
  end

endmodule
