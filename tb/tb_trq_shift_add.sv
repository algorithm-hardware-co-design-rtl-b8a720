// tb_trq_shift_add -- self-checking test of the shift-and-add unit.
//
// Random TRQ codes with random tags (weight bit, input bit, sign, column) and
// random configurations are fed one per cycle, sometimes back to back into the
// same column. A reference keeps the partial sums modulo 2^PSUM_W, decoding
// each code arithmetically: value * 2^M for an R2 code,
// bias * 2^N_R1 + value for an R1 code, times 2^(#W + #In), negated for the
// negative crossbar. Checked: all partial sums after every input, the
// two-cycle latency (unchanged after one edge, updated after two) and clear.
module tb_trq_shift_add;
  import trq_pkg::*;

  localparam int NCOL = 16, KW = 8, KI = 8, PSUM_W = 16;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                        clear, in_valid, neg, busy;
  trq_cfg_t                    cfg;
  adc_code_t                   code;
  logic [2:0]                  wbit, ibit;
  logic [3:0]                  col;
  logic [NCOL-1:0][PSUM_W-1:0] psum;

  trq_shift_add #(.NCOL(NCOL), .KW(KW), .KI(KI), .PSUM_W(PSUM_W)) dut (.*);

  int checks = 0, failures = 0, n_r1 = 0, n_r2 = 0, n_neg = 0, n_wrap = 0;
  longint ref_ps [NCOL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  task automatic check_all(string what);
    bit ok = 1;
    for (int j = 0; j < NCOL; j++)
      if (psum[j] != PSUM_W'(ref_ps[j])) ok = 0;
    check(ok, what);
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint dec, prev_ps;
    clear = 0; in_valid = 0; neg = 0; cfg = CFG_RESET; code = '0;
    wbit = 0; ibit = 0; col = 0;
    for (int j = 0; j < NCOL; j++) ref_ps[j] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_all("after reset");
    // latency check on one addend
    cfg = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 0};
    code = '{r2: 1'b1, value: 8'd5}; wbit = 1; ibit = 2; neg = 0; col = 3;
    in_valid = 1;
    @(negedge clk) in_valid = 0;
    check(psum[3] == 0, "psum updated after one edge");
    @(negedge clk);
    check(psum[3] == 16'((5 << 4) << 3), $sformatf("R2 decode got %0d", psum[3]));
    ref_ps[3] = (5 << 4) << 3;
    // random stream
    for (int k = 0; k < 4000; k++) begin
      cfg.mode = MODE_TWIN;
      cfg.n_r1 = NW'($urandom_range(0, 7));
      cfg.n_r2 = NW'($urandom_range(1, 8));
      cfg.m    = NW'($urandom_range(0, 8 - int'(cfg.n_r2)));
      cfg.bias = ($urandom_range(0, 2) == 0) ? R_ADC'($urandom_range(1, 3)) : '0;
      code.r2  = 1'($urandom_range(0, 1));
      code.value = code.r2 ? R_ADC'($urandom_range(0, (1 << cfg.n_r2) - 1))
                           : R_ADC'($urandom_range(0, (1 << cfg.n_r1) - 1));
      wbit = 3'($urandom); ibit = 3'($urandom); neg = 1'($urandom);
      col  = ($urandom_range(0, 3) == 0) ? col : 4'($urandom);
      dec = code.r2 ? longint'(code.value) << cfg.m
                    : (longint'(cfg.bias) << cfg.n_r1) + longint'(code.value);
      dec = dec << (int'(wbit) + int'(ibit));
      if (code.r2) n_r2++; else n_r1++;
      if (neg) n_neg++;
      prev_ps = ref_ps[col];
      ref_ps[col] = neg ? ref_ps[col] - dec : ref_ps[col] + dec;
      if ((ref_ps[col] >>> PSUM_W) != (prev_ps >>> PSUM_W)) n_wrap++;
      in_valid = 1;
      @(negedge clk);
      // keep cfg stable for this cycle's decode already done; next input
      if ($urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(negedge clk);
        check_all($sformatf("stream k=%0d", k));
      end
    end
    in_valid = 0;
    @(negedge clk);
    check_all("end of stream");
    // clear
    clear = 1;
    @(negedge clk) clear = 0;
    for (int j = 0; j < NCOL; j++) ref_ps[j] = 0;
    check_all("after clear");
    check(n_r1 > 0 && n_r2 > 0 && n_neg > 0 && n_wrap > 0, "mechanism not exercised");
    $display("R1=%0d R2=%0d neg=%0d wrap=%0d", n_r1, n_r2, n_neg, n_wrap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
