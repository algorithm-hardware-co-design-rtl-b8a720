// tb_trq_cfg_reg -- self-checking test of the configuration register.
// Checks the reset value (uniform mode, N_R1 = N_R2 = 8, M = 0, Delta_R1 = 1,
// Bias = 0), that each addressed write changes only its own field from the
// next edge on, read-back of every field, saturation of bit counts at R_ADC,
// and that a write to an unused address changes nothing and flags wr_err.
module tb_trq_cfg_reg;
  import trq_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic             wr_en, wr_err;
  logic [2:0]       wr_addr, rd_addr;
  logic [R_ADC-1:0] wr_data, rd_data;
  trq_cfg_t         cfg;

  trq_cfg_reg dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference copy of the fields, indexed by address
  int ref_f [6];

  task automatic write(int a, int d);
    trq_cfg_t old;
    @(negedge clk);
    old = cfg;
    wr_en = 1; wr_addr = 3'(a); wr_data = R_ADC'(d);
    @(negedge clk);
    wr_en = 0;
    if (a < 6) ref_f[a] = (a == 0) ? (d & 1) : (a == 5) ? (d & 255) : ((d > 8) ? 8 : d);
    check(wr_err == (a > 5), $sformatf("wr_err addr %0d", a));
    if (a > 5) check(cfg == old, "write to unused address changed cfg");
  endtask

  task automatic check_fields(string what);
    check(int'(cfg.mode) == ref_f[0] && int'(cfg.n_r1) == ref_f[1] && int'(cfg.n_r2) == ref_f[2] &&
          int'(cfg.m) == ref_f[3] && int'(cfg.dr1) == ref_f[4] && int'(cfg.bias) == ref_f[5],
          $sformatf("%s cfg=%p", what, cfg));
    for (int a = 0; a < 8; a++) begin
      rd_addr = 3'(a);
      #1;
      check(int'(rd_data) == ((a < 6) ? ref_f[a] : 0), $sformatf("%s read addr %0d got %0d", what, a, rd_data));
    end
  endtask

  initial begin
    wr_en = 0; wr_addr = 0; wr_data = 0; rd_addr = 0;
    ref_f = '{0, 8, 8, 0, 0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    check_fields("reset");
    write(0, 1); check_fields("mode");
    write(1, 3); check_fields("n_r1");
    write(2, 4); check_fields("n_r2");
    write(3, 4); check_fields("m");
    write(4, 1); check_fields("dr1");
    write(5, 6); check_fields("bias");
    write(1, 200); check_fields("n_r1 saturates");
    write(6, 9); check_fields("unused address 6");
    write(7, 1); check_fields("unused address 7");
    for (int k = 0; k < 200; k++) begin
      write($urandom_range(0, 7), $urandom_range(0, 255));
      check_fields($sformatf("random %0d", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
