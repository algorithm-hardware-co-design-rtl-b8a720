// tb_reram_xbar_pair -- self-checking test of the crossbar model at full size
// (128 rows, 256 bit lines). Random cells are programmed row by row; for random
// word-line patterns (and the all-ones and all-zeros patterns) every bit-line
// value is compared with a popcount computed from a separate copy of the cells.
module tb_reram_xbar_pair;
  localparam int S = 128, NBL = 256, BL_W = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  logic                     prog_en;
  logic [6:0]               prog_row;
  logic [NBL-1:0]           prog_row_bits;
  logic [S-1:0]             wl;
  logic [NBL-1:0][BL_W-1:0] bl;
  reram_xbar_pair #(.S(S), .NBL(NBL), .BL_W(BL_W)) dut (.*);
  logic [NBL-1:0] ref_cells [S];
  int checks = 0, failures = 0;
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    int cnt;
    prog_en = 0; prog_row = 0; prog_row_bits = '0; wl = '0;
    for (int r = 0; r < S; r++) begin
      @(negedge clk);
      for (int w = 0; w < NBL / 32; w++) ref_cells[r][w*32 +: 32] = $urandom;
      if (r == 5) ref_cells[r] = '1;
      prog_en = 1; prog_row = 7'(r); prog_row_bits = ref_cells[r];
    end
    @(negedge clk) prog_en = 0;
    for (int k = 0; k < 40; k++) begin
      if (k == 0) wl = '1;
      else if (k == 1) wl = '0;
      else for (int w = 0; w < S / 32; w++) wl[w*32 +: 32] = $urandom;
      #1;
      for (int j = 0; j < NBL; j++) begin
        cnt = 0;
        for (int i = 0; i < S; i++) cnt += int'(wl[i] && ref_cells[i][j]);
        checks++;
        if (int'(bl[j]) != cnt) begin
          failures++;
          if (failures < 10) $display("FAIL k=%0d bl[%0d]=%0d exp %0d", k, j, bl[j], cnt);
        end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
