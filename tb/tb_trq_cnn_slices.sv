// tb_trq_cnn_slices -- runs one layer slice of each evaluated network through
// a full-size processing element: LeNet-5 fc1 (400 inputs), a ResNet-20
// stage-3 3x3x64 convolution (576 inputs), a ResNet-18 stage-4 3x3x512
// convolution (4608 inputs) and a SqueezeNet1.1 fire-module 3x3 expand layer
// over 64 squeeze channels (576 inputs). Each slice is one output position of
// 16 output channels. The inputs are split into blocks of 128 rows, padded
// with zeros. Each block is programmed into the crossbars and run as one MVM,
// and every block after the first accumulates onto the kept partial sums.
//
// The layer sizes are the networks' own. The weights and activations are
// generated here, because the trained networks are not available: the
// activations are ReLU-like (about half zero, the rest mostly small) and the
// weights are signed 8-bit, centred on zero, mostly small.
//
// Each slice runs twice:
// - Uniform 8-bit conversion. The result must equal the exact dot product
//   modulo 2^16.
// - The ideal-case TRQ setting for a 4-bit bound (N_R2 = 4, M = 4, N_R1 = 3).
//   The result must equal a reference that passes every bit-line value through
//   the TRQ quantiser.
// Each MVM also checks its cycle count and its A/D-operation count. The test
// prints the TRQ share of A/D operations relative to 8-bit uniform conversion,
// and the relative error of the TRQ result against the exact one.
module tb_trq_cnn_slices;
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

  initial begin : watchdog
    repeat (6000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wl [][NCOL];   // weights of the whole layer slice
  int xl [];         // inputs of the whole layer slice
  int w [S][NCOL];   // weights of the current row block
  int x [S];         // inputs of the current row block

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

  function automatic bit cellbit(int i, int bl);
    int col = (bl % (NBL / 2)) / KW, b = bl % KW;
    int mag = (bl < NBL / 2) ? ((w[i][col] > 0) ? w[i][col] : 0)
                             : ((w[i][col] < 0) ? -w[i][col] : 0);
    return bit'((mag >> b) & 1);
  endfunction

  // TRQ quantiser: decoded value (units of Delta_R1) and A/D operations
  function automatic longint trq(trq_cfg_t c, int u, output int ops);
    int n1 = int'(c.n_r1), n2 = int'(c.n_r2), mm = int'(c.m), d1 = int'(c.dr1);
    int th = 1 << (n1 + d1);
    int lo = int'(c.bias) * th, hi = (int'(c.bias) + 1) * th;
    int nu = (c.bias != 0) ? 2 : 1;
    int q;
    if (c.mode == MODE_TWIN && u >= lo && u < hi) begin
      q = (u - lo) >> d1;
      ops = nu + n1;
      return longint'(c.bias) * (1 << n1) + longint'(q);
    end
    q = u >> (d1 + mm);
    if (q > (1 << n2) - 1) q = (1 << n2) - 1;
    ops = (c.mode == MODE_TWIN) ? nu + n2 : n2;
    return longint'(q) << mm;
  endfunction

  // program row block blk of the layer slice into the crossbars
  task automatic load_block(int blk);
    for (int i = 0; i < S; i++) begin
      int k = blk * S + i;
      x[i] = (k < xl.size()) ? xl[k] : 0;
      for (int j = 0; j < NCOL; j++) w[i][j] = (k < xl.size()) ? wl[k][j] : 0;
    end
    for (int i = 0; i < S; i++) begin
      @(negedge clk);
      prog_en = 1; prog_row = 7'(i);
      for (int bl = 0; bl < NBL; bl++) prog_row_bits[bl] = cellbit(i, bl);
    end
    @(negedge clk) prog_en = 0;
  endtask

  // run the whole slice with one setting; returns the A/D operations used
  task automatic run_slice(trq_cfg_t c, string name, output longint res [NCOL],
                           output longint adops);
    longint ref_ps [NCOL];
    int nblk = (xl.size() + S - 1) / S;
    int ops, tot_ops, cyc, cnt, ops0;
    longint val;
    for (int j = 0; j < NCOL; j++) ref_ps[j] = 0;
    adops = 0;
    set_cfg(c);
    for (int blk = 0; blk < nblk; blk++) begin
      load_block(blk);
      tot_ops = 0;
      for (int cy = 0; cy < KI; cy++)
        for (int bl = 0; bl < NBL; bl++) begin
          cnt = 0;
          for (int i = 0; i < S; i++) cnt += int'(((x[i] >> cy) & 1) == 1 && cellbit(i, bl));
          val = trq(c, cnt, ops) << ((bl % KW) + cy);
          tot_ops += ops + 2;
          if (bl >= NBL / 2) ref_ps[(bl - NBL / 2) / KW] -= val;
          else ref_ps[bl / KW] += val;
        end
      ops0 = adops_total;
      for (int i = 0; i < S; i++) in_vec[i] = 8'(x[i]);
      @(negedge clk) begin start = 1; acc = (blk != 0); end
      @(negedge clk) begin start = 0; acc = 0; end
      cyc = 1;
      while (!done && cyc < 200000) @(negedge clk) cyc++;
      check(cyc + 1 == 4 + 2 * KI + tot_ops,
            $sformatf("%s block %0d cycles %0d exp %0d", name, blk, cyc + 1, 4 + 2 * KI + tot_ops));
      check(int'(adops_total) - ops0 == tot_ops - 2 * KI * NBL,
            $sformatf("%s block %0d A/D ops %0d exp %0d", name, blk, int'(adops_total) - ops0,
                      tot_ops - 2 * KI * NBL));
      adops += longint'(int'(tot_ops - 2 * KI * NBL));
    end
    for (int j = 0; j < NCOL; j++) begin
      check(psum[j] == 16'(ref_ps[j]),
            $sformatf("%s col %0d psum %0d exp %0d", name, j, $signed(psum[j]), $signed(16'(ref_ps[j]))));
      res[j] = ref_ps[j];
    end
  endtask

  task automatic run_layer(string name, int k_in);
    trq_cfg_t c4;
    longint r8 [NCOL], r4 [NCOL], ex, ops8, ops4;
    real err = 0.0, mag = 0.0;
    xl = new[k_in];
    wl = new[k_in];
    for (int k = 0; k < k_in; k++) begin
      int r = $urandom_range(0, 99);
      xl[k] = (r < 50) ? 0 : (r < 90) ? $urandom_range(1, 15) : $urandom_range(16, 255);
      for (int j = 0; j < NCOL; j++) begin
        r = $urandom_range(0, 99);
        wl[k][j] = (r < 85) ? $urandom_range(0, 16) - 8 : $urandom_range(0, 254) - 127;
      end
    end
    run_slice(CFG_RESET, {name, " uniform 8b"}, r8, ops8);
    for (int j = 0; j < NCOL; j++) begin
      ex = 0;
      for (int k = 0; k < k_in; k++) ex += longint'(xl[k]) * wl[k][j];
      check(psum[j] == 16'(ex), $sformatf("%s col %0d not the exact dot product", name, j));
      mag += (ex < 0) ? real'(-ex) : real'(ex);
      r8[j] = ex;
    end
    c4 = '{mode: MODE_TWIN, n_r1: 3, n_r2: 4, m: 4, dr1: 0, bias: 0};
    run_slice(c4, {name, " TRQ 4b"}, r4, ops4);
    for (int j = 0; j < NCOL; j++) err += (r4[j] > r8[j]) ? real'(r4[j] - r8[j]) : real'(r8[j] - r4[j]);
    $display("%s: %0d inputs, %0d row blocks; TRQ uses %0.1f%% of the 8-bit A/D operations, mean |error| %0.2f%% of mean |result|",
             name, k_in, (k_in + S - 1) / S, 100.0 * real'(ops4) / real'(ops8),
             (mag > 0.0) ? 100.0 * err / mag : 0.0);
  endtask

  initial begin
    cfg_wr_en = 0; cfg_wr_addr = 0; cfg_wr_data = 0; cfg_rd_addr = 0;
    prog_en = 0; prog_row = 0; prog_row_bits = '0; start = 0; acc = 0; in_vec = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run_layer("LeNet-5 fc1", 400);
    run_layer("ResNet-20 conv 3x3x64", 576);
    run_layer("SqueezeNet1.1 expand 3x3x64", 576);
    run_layer("ResNet-18 conv 3x3x512", 4608);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
