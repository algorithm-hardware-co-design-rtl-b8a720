// tb_trq_pe_ctrl -- self-checking test of the PE sequencer at full size
// (128 inputs of 8 bits, 16 columns of 8-bit weights, 256 bit lines).
// A stand-in ADC answers each start with done after a random 2..11 cycles,
// and a stand-in shift-and-add unit is busy for one cycle after each result.
// Checked: clear at start; per input cycle c one capture with the word lines
// equal to bit c of every input; then bit lines 0..255 converted in order,
// each result tagged with #In = c, sign = (bit line >= 128), column and #W
// from the bit-line number; no start while a conversion runs; done after the
// last result plus the drain cycles, with the cycle count matching the sum
// of the conversion latencies; a second MVM started with acc = 1 does not
// clear the partial sums.
module tb_trq_pe_ctrl;
  localparam int S = 128, KI = 8, KW = 8, NCOL = 16, NBL = 256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic                 start, acc, busy, done, sh_capture, adc_start, adc_done;
  logic [S-1:0][KI-1:0] in_vec, in_ref;
  logic [S-1:0]         wl;
  logic [7:0]           mux_sel;
  logic                 sa_clear, sa_valid, sa_neg, sa_busy;
  logic [2:0]           sa_wbit, sa_ibit;
  logic [3:0]           sa_col;

  trq_pe_ctrl #(.S(S), .KI(KI), .KW(KW), .NCOL(NCOL)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // stand-in ADC
  int adc_cnt = 0;
  bit adc_run = 0;
  int lat_sum = 0;
  always_ff @(posedge clk) begin
    if (adc_start) begin
      adc_run <= 1;
      adc_cnt <= $urandom_range(1, 10);
    end else if (adc_run && adc_cnt > 0) adc_cnt <= adc_cnt - 1;
    if (adc_done && !adc_start) adc_run <= 0;
  end
  assign adc_done = adc_run && adc_cnt == 0;
  always_ff @(posedge clk) sa_busy <= sa_valid;

  // expected sequence
  int exp_cyc = 0, exp_bl = 0, n_conv = 0, n_cap = 0, n_clear = 0, cycles = 0;
  bit counting = 0;
  always @(negedge clk) if (rst_n) begin
    if (counting) cycles++;
    if (sa_clear) n_clear++;
    if (adc_start) check(!(adc_run && !adc_done), "start while ADC busy");
    if (sh_capture) begin
      n_cap++;
      check(exp_bl == 0, "capture in the middle of a cycle");
      for (int i = 0; i < S; i++)
        if (wl[i] != in_ref[i][exp_cyc]) begin check(0, $sformatf("wl[%0d] cycle %0d", i, exp_cyc)); break; end
    end
    if (sa_valid) begin
      n_conv++;
      check(int'(mux_sel) == exp_bl, $sformatf("bl %0d exp %0d", mux_sel, exp_bl));
      check(int'(sa_ibit) == exp_cyc, "ibit");
      check(sa_neg == (exp_bl >= NBL / 2), "neg");
      check(int'(sa_col) == (exp_bl % (NBL / 2)) / KW, "col");
      check(int'(sa_wbit) == exp_bl % KW, "wbit");
      if (exp_bl == NBL - 1) begin exp_bl = 0; exp_cyc++; end
      else exp_bl++;
    end
  end
  // latency of every conversion, start cycle to done cycle
  int t_start = 0, tnow = 0;
  always @(posedge clk) begin
    tnow++;
    if (adc_done) lat_sum += tnow - t_start;
    if (adc_start) t_start = tnow;
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; acc = 0;
    for (int i = 0; i < S; i++) in_vec[i] = 8'($urandom);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1; counting = 1; in_ref = in_vec;
    @(negedge clk) start = 0;
    for (int i = 0; i < S; i++) in_vec[i] = 8'($urandom);   // must have been latched
    while (!done) @(negedge clk);
    counting = 0;
    check(n_conv == KI * NBL, $sformatf("conversions %0d", n_conv));
    check(n_cap == KI, $sformatf("captures %0d", n_cap));
    check(n_clear == 1, "clear");
    // start cycle; per input cycle one capture and one issue cycle plus the
    // conversions (start to done each, back to back); two drain cycles
    check(cycles == 1 + 2 * KI + lat_sum + 2, $sformatf("cycles %0d exp %0d", cycles, 1 + 2 * KI + lat_sum + 2));
    @(negedge clk);
    check(!busy, "busy after done");
    // second MVM accumulating onto the first: no clear
    exp_cyc = 0; exp_bl = 0;
    in_ref = in_vec;
    start = 1; acc = 1;
    @(negedge clk) start = 0; acc = 0;
    while (!done) @(negedge clk);
    check(n_conv == 2 * KI * NBL, $sformatf("conversions after second MVM %0d", n_conv));
    check(n_clear == 1, "accumulating MVM cleared the partial sums");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
