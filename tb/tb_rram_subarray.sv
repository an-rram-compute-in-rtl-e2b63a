// tb_rram_subarray: programs a full 512 x 12 sub-array with random weights
// through the one-hot write port, reads every cell back, then applies random
// column inputs and checks every row current against a popcount of the
// reference weights ANDed with the inputs.
module tb_rram_subarray;
  import bmvm_pkg::*;
  logic                       clk = 0;
  logic [ROWS-1:0]            row_sel = '0;
  logic [COLS-1:0]            col_sel = '0, xin = '0;
  logic                       we = 0, wdata = 0, rdata;
  logic [ROWS-1:0][IMC_W-1:0] imc;
  logic [ROWS-1:0][COLS-1:0]  ref_w;
  int checks = 0, failures = 0;

  rram_subarray dut (.clk, .row_sel, .col_sel, .we, .wdata, .rdata, .xin, .imc);

  always #5 clk = ~clk;

  initial begin
    repeat (40000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++) ref_w[r][c] = 1'($urandom);
    // program every cell
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++) begin
        @(negedge clk);
        row_sel = '0; row_sel[r] = 1'b1;
        col_sel = '0; col_sel[c] = 1'b1;
        we = 1'b1;
        wdata = ref_w[r][c];
      end
    @(negedge clk);
    we = 1'b0;
    // read back every cell
    for (int r = 0; r < int'(ROWS); r++)
      for (int c = 0; c < int'(COLS); c++) begin
        row_sel = '0; row_sel[r] = 1'b1;
        col_sel = '0; col_sel[c] = 1'b1;
        #1;
        checks++;
        if (rdata !== ref_w[r][c]) begin
          failures++;
          if (failures < 10) $display("FAIL read r=%0d c=%0d: %0b", r, c, rdata);
        end
      end
    row_sel = '0;
    col_sel = '0;
    // row currents
    for (int t = 0; t < 30; t++) begin
      xin = (t == 0) ? '1 : COLS'($urandom);
      #1;
      for (int r = 0; r < int'(ROWS); r++) begin
        int n;
        n = 0;
        for (int c = 0; c < int'(COLS); c++) if (xin[c] && ref_w[r][c]) n++;
        checks++;
        if (int'(imc[r]) != n) begin
          failures++;
          if (failures < 10) $display("FAIL imc row %0d: %0d, expected %0d", r, imc[r], n);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
