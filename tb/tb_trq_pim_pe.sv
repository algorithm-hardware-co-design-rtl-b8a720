// tb_trq_pim_pe -- end-to-end test of one processing element with its
// twin-range ADC and shift-and-add unit, at the default (full) size:
// 128 x 8-bit inputs, 16 signed 8-bit weights per crossbar pair, 8-bit ADC,
// 16-bit partial sums.
//
// Random signed weights are programmed into the positive/negative crossbars,
// bit b of weight column j on bit line j*8+b. For each of several
// configurations (uniform 8-bit, uniform 4-bit early stop, ideal-case TRQ,
// TRQ with bias, TRQ with a coarser R1 step) an MVM is run and compared with a
// reference built from first principles: the bit-line counts of every input
// bit cycle are recomputed from the weights and inputs, each count is passed
// through the TRQ quantiser (the paper's T_k with its R1/R2 rules, written
// arithmetically), decoded, weighted by 2^(#W + #In), signed and summed modulo
// 2^16. The uniform 8-bit result must also equal the exact dot product. Also
// checked: the MVM cycle count and the A/D-operation count against the
// reference operation counts, and that a configuration write during an MVM is
// dropped. Every mechanism (early bird in R1, early-stopped R2, bias
// detection, uniform mode, M-shift decoding, negative crossbar, partial-sum
// wrap, above-full-scale trials, dropped configuration write, accumulation of
// a second row block onto kept partial sums) must occur.
module tb_trq_pim_pe;
  import trq_pkg::*;

  localparam int S = 128, KI = 8, KW = 8, NCOL = 16, NBL = 256;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 cfg_wr_en, cfg_wr_err, prog_en, start, acc, busy, done;
  logic [2:0]           cfg_wr_addr, cfg_rd_addr;
  logic [7:0]           cfg_wr_data, cfg_rd_data;
  logic [6:0]           prog_row;
  logic [NBL-1:0]       prog_row_bits;
  logic [S-1:0][KI-1:0] in_vec;
  logic [NCOL-1:0][15:0] psum;
  logic                 conv_done, conv_in_r1;
  adc_code_t            conv_code;
  logic [NW:0]          conv_nops;
  logic [31:0]          adops_total;

  trq_pim_pe dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s", what); end
  endtask

  // mechanism counters
  int m_r1 = 0, m_r2 = 0, m_bias = 0, m_unif = 0, m_mshift = 0, m_neg = 0,
      m_wrap = 0, m_over = 0, m_drop = 0, m_acc = 0;
  longint acc_base [NCOL];   // partial sums kept by an accumulating MVM

  int w [S][NCOL];      // signed weights
  int x [S];            // inputs

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic cfg_write(int a, int d);
    @(negedge clk);
    cfg_wr_en = 1; cfg_wr_addr = 3'(a); cfg_wr_data = 8'(d);
    @(negedge clk);
    cfg_wr_en = 0;
  endtask

  task automatic set_cfg(trq_cfg_t c);
    cfg_write(0, int'(c.mode)); cfg_write(1, int'(c.n_r1)); cfg_write(2, int'(c.n_r2));
    cfg_write(3, int'(c.m));    cfg_write(4, int'(c.dr1));  cfg_write(5, int'(c.bias));
  endtask

  // cell bit of bit line bl in row i
  function automatic bit cellbit(int i, int bl);
    int col = (bl % (NBL / 2)) / KW, b = bl % KW;
    int mag = (bl < NBL / 2) ? ((w[i][col] > 0) ? w[i][col] : 0)
                             : ((w[i][col] < 0) ? -w[i][col] : 0);
    return bit'((mag >> b) & 1);
  endfunction

  // TRQ quantiser: decoded value (units of Delta_R1) and A/D operations
  task automatic trq(input trq_cfg_t c, input int u, output longint val, output int ops);
    int n1 = int'(c.n_r1), n2 = int'(c.n_r2), mm = int'(c.m), d1 = int'(c.dr1);
    int th = 1 << (n1 + d1);
    int lo = int'(c.bias) * th, hi = (int'(c.bias) + 1) * th;
    int nu = (c.bias != 0) ? 2 : 1;
    int q;
    if (c.mode == MODE_TWIN && u >= lo && u < hi) begin
      q = (u - lo) >> d1;
      val = longint'(c.bias) * (1 << n1) + longint'(q);
      ops = nu + n1;
      m_r1++;
    end else begin
      q = u >> (d1 + mm);
      if (q > (1 << n2) - 1) q = (1 << n2) - 1;
      val = longint'(q) << mm;
      ops = (c.mode == MODE_TWIN) ? nu + n2 : n2;
      if (c.mode == MODE_TWIN) m_r2++; else m_unif++;
      if (mm != 0 && q != 0) m_mshift++;
      if ((((1 << n2) - 1) << (d1 + mm)) >= 256) m_over++;
    end
    if (c.mode == MODE_TWIN && c.bias != 0) m_bias++;
    if (c.mode == MODE_TWIN && hi >= 256) m_over++;
  endtask

  task automatic run_mvm(trq_cfg_t c, string name, bit exact, bit accum = 0);
    longint ref_ps [NCOL];
    longint val, exact_ps;
    int ops, tot_ops = 0, cyc = 0, cnt, ops0;
    bit wrapped;
    for (int j = 0; j < NCOL; j++) ref_ps[j] = accum ? acc_base[j] : 0;
    for (int cy = 0; cy < KI; cy++)
      for (int bl = 0; bl < NBL; bl++) begin
        cnt = 0;
        for (int i = 0; i < S; i++) cnt += int'(((x[i] >> cy) & 1) == 1 && cellbit(i, bl));
        trq(c, cnt, val, ops);
        tot_ops += ops + 2;
        val = val << ((bl % KW) + cy);
        if (bl >= NBL / 2) begin ref_ps[(bl - NBL / 2) / KW] -= val; if (val != 0) m_neg++; end
        else ref_ps[bl / KW] += val;
      end
    set_cfg(c);
    ops0 = adops_total;
    for (int i = 0; i < S; i++) in_vec[i] = 8'(x[i]);
    @(negedge clk) begin start = 1; acc = accum; end
    @(negedge clk) begin start = 0; acc = 0; end
    cyc = 1;
    // try to change the configuration in the middle of the MVM
    repeat (20) @(negedge clk) cyc++;
    cfg_wr_en = 1; cfg_wr_addr = 3'd3; cfg_wr_data = 8'(int'(c.m) ^ 1);
    @(negedge clk) cyc++;
    cfg_wr_en = 0; cfg_rd_addr = 3'd3;
    #1 check(cfg_rd_data == 8'(c.m), "configuration write during MVM was taken");
    if (cfg_rd_data == 8'(c.m)) m_drop++;
    while (!done && cyc < 200000) @(negedge clk) cyc++;
    for (int j = 0; j < NCOL; j++) begin
      check(psum[j] == 16'(ref_ps[j]), $sformatf("%s col %0d psum %0d exp %0d", name, j, $signed(psum[j]), 16'(ref_ps[j])));
      if (ref_ps[j] > 32767 || ref_ps[j] < -32768) m_wrap++;
      if (exact) begin
        exact_ps = 0;
        for (int i = 0; i < S; i++) exact_ps += longint'(x[i]) * w[i][j];
        check(psum[j] == 16'(exact_ps), $sformatf("%s col %0d not the exact dot product", name, j));
      end
      acc_base[j] = longint'(psum[j]);
    end
    if (accum) m_acc++;
    // 4 + 2*KI + sum (nops+2), start cycle to done cycle inclusive
    check(cyc + 1 == 4 + 2 * KI + tot_ops, $sformatf("%s cycles %0d exp %0d", name, cyc + 1, 4 + 2 * KI + tot_ops));
    check(int'(adops_total) - ops0 == tot_ops - 2 * KI * NBL,
          $sformatf("%s A/D ops %0d exp %0d", name, int'(adops_total) - ops0, tot_ops - 2 * KI * NBL));
    $display("%s: %0d cycles, %0.1f A/D ops per conversion", name, cyc + 1,
             real'(tot_ops - 2 * KI * NBL) / real'(KI * NBL));
  endtask

  task automatic gen_data(int big);
    for (int i = 0; i < S; i++) begin
      x[i] = ($urandom_range(0, 99) < big) ? $urandom_range(0, 255) : $urandom_range(0, 3);
      for (int j = 0; j < NCOL; j++)
        w[i][j] = ($urandom_range(0, 99) < big) ? $urandom_range(0, 254) - 127 : $urandom_range(0, 6) - 3;
    end
    for (int i = 0; i < S; i++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 7'(i);
      for (int bl = 0; bl < NBL; bl++) prog_row_bits[bl] = cellbit(i, bl);
    end
    @(negedge clk) prog_en = 0;
  endtask

  initial begin
    trq_cfg_t c;
    cfg_wr_en = 0; cfg_wr_addr = 0; cfg_wr_data = 0; cfg_rd_addr = 0;
    prog_en = 0; prog_row = 0; prog_row_bits = '0; start = 0; acc = 0; in_vec = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // skewed data: most bit-line values small, a few large
    gen_data(10);
    run_mvm(CFG_RESET, "uniform 8b", 1);
    c = '{mode: MODE_UNIFORM, n_r1: 4, n_r2: 4, m: 4, dr1: 0, bias: 0};
    run_mvm(c, "uniform 4b", 0);
    c = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 0};
    run_mvm(c, "TRQ N_R1=3 N_R2=4 M=4", 0);
    c = '{mode: MODE_TWIN, n_r1: 2, n_r2: 4, m: 4, dr1: 0, bias: 1};
    run_mvm(c, "TRQ bias=1", 0);
    c = '{mode: MODE_TWIN, n_r1: 3, n_r2: 3, m: 3, dr1: 1, bias: 0};
    run_mvm(c, "TRQ Delta_R1=2", 0);
    // a second row block of the same layer, accumulated onto the last result
    gen_data(10);
    c = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 0};
    run_mvm(c, "TRQ second row block, accumulated", 0, 1);
    // dense data: large sums, partial-sum wrap
    gen_data(90);
    run_mvm(CFG_RESET, "uniform 8b dense", 1);
    c = '{mode: MODE_TWIN, n_r1: 4, n_r2: 5, m: 3, dr1: 0, bias: 0};
    run_mvm(c, "TRQ dense", 0);
    // R1 reaching full scale: upper edge 256 lies above the DAC range
    c = '{mode: MODE_TWIN, n_r1: 7, n_r2: 4, m: 4, dr1: 0, bias: 1};
    run_mvm(c, "TRQ R1=[128,256)", 0);
    $display("mechanisms: R1=%0d R2=%0d bias=%0d uniform=%0d Mshift=%0d neg=%0d wrap=%0d over=%0d dropped_cfg=%0d acc=%0d",
             m_r1, m_r2, m_bias, m_unif, m_mshift, m_neg, m_wrap, m_over, m_drop, m_acc);
    check(m_r1 > 0, "no early bird"); check(m_r2 > 0, "no R2 conversion");
    check(m_bias > 0, "no bias"); check(m_unif > 0, "no uniform mode");
    check(m_mshift > 0, "no M shift"); check(m_neg > 0, "no negative crossbar");
    check(m_wrap > 0, "no wrap"); check(m_over > 0, "no above-full-scale trial");
    check(m_drop > 0, "no dropped cfg write");
    check(m_acc > 0, "no accumulating MVM");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
