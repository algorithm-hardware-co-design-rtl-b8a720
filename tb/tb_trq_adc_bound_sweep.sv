// tb_trq_adc_bound_sweep -- the ADC-length sweep of the evaluation (upper bound
// of N_R1, N_R2 = 8, 7, 6, 5, 4 bits on an 8-bit ADC), run on the SAR logic and
// the analog ADC model with a skewed bit-line distribution.
//
// Bit-line values are drawn from a geometric-like distribution: most are a few
// grid steps, a few reach full scale, as crossbar outputs of a 128-row array
// with sparse inputs do. For each bound B the ideal-case configuration is used
// (Delta_R1 = 1 grid, N_R2 = B, M = 8 - B, bias = 0) and N_R1 is chosen by
// minimising the operation count sum_i (1 + N_R1 or 1 + N_R2) over a
// calibration set of samples, the energy criterion of the parameter search.
// Then fresh samples are converted; every code and operation count is checked
// against the arithmetic quantiser, and R1 codes must be lossless. The
// remaining share of A/D operations against 8 per conversion is printed and
// must stay below 100 %.
module tb_trq_adc_bound_sweep;
  import trq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  trq_cfg_t         cfg;
  logic             start, busy, sample, cmp_en, vcomp, done, in_r1;
  logic [R_ADC-1:0] dac_idx;
  adc_code_t        code;
  logic [NW:0]      nops;
  logic [7:0]       vin;

  trq_sar_logic u_sar (.*);
  sar_adc_analog #(.VIN_W(8)) u_ana (.clk, .vin, .sample, .dac_idx, .vcomp);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic int draw();
    int v = 0;
    // geometric steps of 1 with probability 0.7, occasional large outliers
    if ($urandom_range(0, 99) < 3) return $urandom_range(16, 255);
    while ($urandom_range(0, 99) < 70 && v < 255) v++;
    return v;
  endfunction

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cal [1000];
    int best_n1, best_cost, cost, u, expv, expn, total_ops, nconv, lossless;
    start = 0; cfg = CFG_RESET; vin = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 1000; i++) cal[i] = draw();
    for (int b = 8; b >= 4; b--) begin
      // choose N_R1 minimising the operation count on the calibration set
      best_n1 = 0; best_cost = 1 << 30;
      for (int n1 = 0; n1 <= b; n1++) begin
        cost = 0;
        for (int i = 0; i < 1000; i++) cost += 1 + ((cal[i] < (1 << n1)) ? n1 : b);
        if (cost < best_cost) begin best_cost = cost; best_n1 = n1; end
      end
      cfg = '{mode: MODE_TWIN, n_r1: NW'(best_n1), n_r2: NW'(b), m: NW'(8 - b), dr1: '0, bias: '0};
      total_ops = 0; nconv = 0; lossless = 1;
      for (int k = 0; k < 2000; k++) begin
        u = draw();
        if (u < (1 << best_n1)) begin expv = u; expn = 1 + best_n1; end
        else begin
          expv = u >> (8 - b);
          expn = 1 + b;
        end
        vin = 8'(u);
        @(negedge clk) start = 1;
        @(negedge clk) start = 0;
        while (!done) @(negedge clk);
        check(int'(code.value) == expv && code.r2 == (u >= (1 << best_n1)),
              $sformatf("B=%0d u=%0d code=%p", b, u, code));
        check(int'(nops) == expn, $sformatf("B=%0d u=%0d nops=%0d exp %0d", b, u, nops, expn));
        if (!code.r2 && int'(decode_code(code, cfg)) != u) lossless = 0;
        total_ops += int'(nops); nconv++;
        @(negedge clk);
      end
      check(lossless == 1, "R1 conversion not lossless");
      check(total_ops < 8 * nconv, "no saving against 8 operations per conversion");
      $display("bound %0d bits: N_R1=%0d M=%0d, A/D operations %0.1f %% of 8-bit SAR",
               b, best_n1, 8 - b, 100.0 * real'(total_ops) / real'(8 * nconv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
