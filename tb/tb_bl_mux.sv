// tb_bl_mux -- self-checking test of the bit-line multiplexer: for random held
// values every select returns its own bit line.
module tb_bl_mux;
  localparam int NBL = 256, BL_W = 8;
  logic [NBL-1:0][BL_W-1:0] held;
  logic [7:0] sel;
  logic [BL_W-1:0] vin;
  bl_mux #(.NBL(NBL), .BL_W(BL_W)) dut (.*);
  int checks = 0, failures = 0;
  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    for (int k = 0; k < 20; k++) begin
      for (int j = 0; j < NBL; j++) held[j] = 8'($urandom);
      for (int j = 0; j < NBL; j++) begin
        sel = 8'(j);
        #1;
        checks++;
        if (vin != held[j]) begin failures++; if (failures < 10) $display("FAIL sel=%0d", j); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
