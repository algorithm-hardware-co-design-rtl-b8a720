// tb_trq_sar_logic -- self-checking test of the twin-range SAR logic.
//
// A comparator model (vcomp = held voltage >= DAC index, the uniform ADC's
// (idx - 1/2) LSB threshold for integer voltages) closes the loop. For random
// configurations and voltages the expected code is computed arithmetically
// (no binary search): in twin-range mode a voltage u in
// [bias, bias+1) * 2^(N_R1 + log2 Delta_R1) gives range 0 and value
// (u - lower edge) >> log2 Delta_R1 after nu + N_R1 operations (nu = 1, or 2
// when bias != 0); any other voltage, and every voltage in uniform mode, gives
// range 1 and value min(u >> (log2 Delta_R1 + M), 2^N_R2 - 1) after
// nu + N_R2 (uniform: N_R2) operations. Checked per conversion: range bit,
// value, reported operation count, counted cmp_en cycles, and done arriving
// nops + 2 cycles after start. Also runs the paper's Fig. 4 example.
module tb_trq_sar_logic;
  import trq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  trq_cfg_t         cfg;
  logic             start, busy, sample, cmp_en, vcomp, done, in_r1;
  logic [R_ADC-1:0] dac_idx;
  adc_code_t        code;
  logic [NW:0]      nops;
  logic [7:0]       vin, vhold;

  trq_sar_logic dut (.*);

  always_ff @(posedge clk) if (sample) vhold <= vin;
  assign vcomp = (vhold >= dac_idx);

  int checks = 0, failures = 0;
  int n_r1_conv = 0, n_r2_conv = 0, n_bias = 0, n_unif = 0, n_over = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic convert(input trq_cfg_t c, input int u);
    int th, lo, hi, nu, exp_val, exp_nops, cyc, ops;
    bit exp_r2;
    int n1 = int'(c.n_r1), n2 = int'(c.n_r2), mm = int'(c.m), d1 = int'(c.dr1);
    // reference
    th = 1 << (n1 + d1);
    lo = int'(c.bias) * th;
    hi = (int'(c.bias) + 1) * th;
    nu = (c.bias != 0) ? 2 : 1;
    if (c.mode == MODE_TWIN && u >= lo && u < hi) begin
      exp_r2 = 0; exp_val = (u - lo) >> d1; exp_nops = nu + n1;
    end else begin
      exp_r2 = 1;
      exp_val = u >> (d1 + mm);
      if (exp_val > (1 << n2) - 1) exp_val = (1 << n2) - 1;
      exp_nops = (c.mode == MODE_TWIN) ? nu + n2 : n2;
    end
    if (c.mode == MODE_UNIFORM) n_unif++;
    else if (exp_r2) n_r2_conv++;
    else n_r1_conv++;
    if (c.mode == MODE_TWIN && c.bias != 0) n_bias++;
    if (hi > 255 || (exp_r2 && ((1 << n2) << (d1 + mm)) > 256)) n_over++;
    // run
    cfg = c; vin = 8'(u);
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    cyc = 1; ops = 0;
    while (!done && cyc < 50) begin
      if (cmp_en) ops++;
      @(negedge clk) cyc++;
    end
    check(code.r2 == exp_r2, $sformatf("range u=%0d cfg=%p got %0d", u, c, code.r2));
    check(int'(code.value) == exp_val, $sformatf("value u=%0d cfg=%p got %0d exp %0d", u, c, code.value, exp_val));
    check(int'(nops) == exp_nops, $sformatf("nops u=%0d cfg=%p got %0d exp %0d", u, c, nops, exp_nops));
    check(ops == exp_nops, $sformatf("cmp_en cycles %0d exp %0d", ops, exp_nops));
    check(cyc == exp_nops + 2, $sformatf("latency %0d exp %0d", cyc, exp_nops + 2));
    check(in_r1 == !exp_r2, "in_r1 flag");
    @(negedge clk);
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trq_cfg_t c;
    start = 0; cfg = CFG_RESET; vin = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // Fig. 4 example: 3-bit codes, N_R1 = N_R2 = 2, M = 3 (ideal case, Delta_R1 = 1)
    c = '{mode: MODE_TWIN, n_r1: 2, n_r2: 2, m: 3, dr1: 0, bias: 0};
    for (int u = 0; u < 32; u++) convert(c, u);
    // full-precision uniform 8-bit
    c = CFG_RESET;
    for (int u = 0; u < 256; u += 5) convert(c, u);
    // ideal-case TRQ for an 8-bit ADC: N_R2 + M = 8
    c = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 0};
    for (int u = 0; u < 256; u += 3) convert(c, u);
    // with bias
    c = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 2};
    for (int u = 0; u < 64; u++) convert(c, u);
    // random configurations
    for (int k = 0; k < 3000; k++) begin
      c.mode = adc_mode_e'($urandom_range(0, 1));
      c.n_r1 = NW'($urandom_range(0, 8));
      c.n_r2 = NW'($urandom_range(0, 8));
      c.m    = NW'($urandom_range(0, 8 - int'(c.n_r2)));
      c.dr1  = NW'($urandom_range(0, 2));
      c.bias = ($urandom_range(0, 1) == 1) ? R_ADC'($urandom_range(0, 7)) : '0;
      convert(c, $urandom_range(0, 255));
    end
    // every mechanism must have happened
    check(n_r1_conv > 0, "no early-bird (R1) conversion");
    check(n_r2_conv > 0, "no R2 (early-stopped) conversion");
    check(n_bias > 0, "no conversion with bias");
    check(n_unif > 0, "no uniform-mode conversion");
    check(n_over > 0, "no trial above full scale");
    $display("R1=%0d R2=%0d bias=%0d uniform=%0d overrange=%0d", n_r1_conv, n_r2_conv, n_bias, n_unif, n_over);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
