// tb_bl_sample_hold -- self-checking test of the sample-and-hold array: all
// bit lines are stored at a capture edge and held while the inputs change.
module tb_bl_sample_hold;
  localparam int NBL = 256, BL_W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic capture;
  logic [NBL-1:0][BL_W-1:0] bl, held, expv;
  bl_sample_hold #(.NBL(NBL), .BL_W(BL_W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    capture = 0;
    for (int k = 0; k < 50; k++) begin
      @(negedge clk);
      for (int j = 0; j < NBL; j++) bl[j] = 8'($urandom);
      expv = bl; capture = 1;
      @(negedge clk) capture = 0;
      for (int h = 0; h < 3; h++) begin
        for (int j = 0; j < NBL; j++) bl[j] = 8'($urandom);
        @(negedge clk);
        checks++;
        if (held != expv) begin failures++; $display("FAIL held k=%0d h=%0d", k, h); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
