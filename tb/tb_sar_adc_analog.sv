// tb_sar_adc_analog -- self-checking test of the analog ADC model: the held
// voltage follows vin only at a sample edge, and vcomp is 1 exactly when the
// held voltage is at or above the DAC index, for every index.
module tb_sar_adc_analog;
  import trq_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic [7:0] vin, dac_idx;
  logic sample, vcomp;
  sar_adc_analog #(.VIN_W(8)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int v;
    sample = 0; vin = 0; dac_idx = 0;
    for (int k = 0; k < 300; k++) begin
      @(negedge clk);
      v = $urandom_range(0, 255);
      vin = 8'(v); sample = 1;
      @(negedge clk) sample = 0;
      vin = 8'($urandom);                // must not be taken without sample
      @(negedge clk);
      for (int i = 0; i < 256; i += 7) begin
        dac_idx = 8'(i);
        #1 check(vcomp == (v >= i), $sformatf("v=%0d idx=%0d vcomp=%0d", v, i, vcomp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
