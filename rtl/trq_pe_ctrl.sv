// trq_pe_ctrl -- sequencer of one processing element and its time-shared ADC
// and shift-and-add unit.
//
// An MVM with KI-bit inputs on 1-bit word-line drivers is done as KI input bit
// cycles, least significant bit first. In each cycle the controller drives bit
// c of every input onto the word lines, has the sample-and-hold circuits
// capture all bit lines, and then converts the bit lines one after the other
// through the multiplexer and the single shared ADC, tagging every result for
// the shift-and-add unit with its weight bit (#W), input bit (#In), sign
// (positive or negative crossbar) and output column. The paper gives the
// bit-serial inputs, the bit-sliced weights and the time-shared,
// column-wise and cyclic operation; the order of the loops, the bit-line
// numbering (see reram_xbar_pair) and the handshakes are this design's.
//
// A layer larger than one crossbar pair is split over several row blocks whose
// results are merged by accumulation: with acc = 1 at start the partial sums
// are kept and the new MVM adds to them (the paper merges partitions "by
// shift-and-add and accumulator"; the acc control is this design's).
//
// Timing: start (when idle) latches in_vec and, unless acc = 1, clears the
// partial sums. Each
// input cycle takes one capture cycle, one cycle issuing the first conversion
// and then, per bit line, the nops+2 cycles from a conversion's start to its
// done, the next conversion starting in the previous one's done cycle. After
// the last conversion two cycles drain the shift-and-add pipeline, then done
// is 1 for one cycle with the final partial sums valid. In all, one MVM takes
// 4 + 2*KI + sum over all KI*NBL conversions of (nops + 2) cycles counted
// from the start cycle to the done cycle.
module trq_pe_ctrl #(
  parameter int unsigned S    = 128,   // rows (inputs per MVM)
  parameter int unsigned KI   = 8,     // input bits
  parameter int unsigned KW   = 8,     // weight bits (bit lines per weight)
  parameter int unsigned NCOL = 16,    // weights (output columns) per crossbar
  localparam int unsigned NBL = 2 * NCOL * KW
)(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic                      acc,
  input  logic [S-1:0][KI-1:0]      in_vec,
  output logic                      busy,
  output logic                      done,
  // processing element
  output logic [S-1:0]              wl,
  output logic                      sh_capture,
  output logic [$clog2(NBL)-1:0]    mux_sel,
  // ADC
  output logic                      adc_start,
  input  logic                      adc_done,
  // shift-and-add unit
  output logic                      sa_clear,
  output logic                      sa_valid,
  output logic [$clog2(KW)-1:0]     sa_wbit,
  output logic [$clog2(KI)-1:0]     sa_ibit,
  output logic                      sa_neg,
  output logic [$clog2(NCOL)-1:0]   sa_col,
  input  logic                      sa_busy
);

  typedef enum logic [2:0] {C_IDLE, C_DRIVE, C_ISSUE, C_WAIT, C_FLUSH, C_DONE} cstate_e;

  cstate_e                  state;
  logic [S-1:0][KI-1:0]     in_q;
  logic [$clog2(KI)-1:0]    cyc_q;
  logic [$clog2(NBL)-1:0]   bl_q;

  localparam int unsigned HALF = NBL / 2;

  logic last_bl, last_cyc;
  assign last_bl  = (32'(bl_q) == NBL - 1);
  assign last_cyc = (32'(cyc_q) == KI - 1);

  always_comb begin
    for (int i = 0; i < S; i++) wl[i] = in_q[i][cyc_q];
  end

  // bit-line tags
  logic [31:0] bl_in_xbar;
  always_comb begin
    sa_neg  = (32'(bl_q) >= HALF);
    bl_in_xbar  = sa_neg ? 32'(bl_q) - HALF : 32'(bl_q);
    sa_col  = $bits(sa_col)'(bl_in_xbar / KW);
    sa_wbit = $bits(sa_wbit)'(bl_in_xbar % KW);
    sa_ibit = cyc_q;
  end

  assign mux_sel    = bl_q;
  assign sh_capture = (state == C_DRIVE);
  assign sa_valid   = (state == C_WAIT) && adc_done;
  assign adc_start  = (state == C_ISSUE) || (sa_valid && !last_bl);
  assign sa_clear   = (state == C_IDLE) && start && !acc;
  assign busy       = (state != C_IDLE);
  assign done       = (state == C_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE;
      in_q  <= '0;
      cyc_q <= '0;
      bl_q  <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (start) begin
          in_q  <= in_vec;
          cyc_q <= '0;
          bl_q  <= '0;
          state <= C_DRIVE;
        end
        C_DRIVE: state <= C_ISSUE;
        C_ISSUE: state <= C_WAIT;
        C_WAIT: if (adc_done) begin
          if (!last_bl) bl_q <= bl_q + 1'b1;
          else if (!last_cyc) begin
            bl_q  <= '0;
            cyc_q <= cyc_q + 1'b1;
            state <= C_DRIVE;
          end else state <= C_FLUSH;
        end
        C_FLUSH: if (!sa_busy) state <= C_DONE;
        C_DONE:  state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

  // Start is only meaningful when idle.
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);

endmodule
