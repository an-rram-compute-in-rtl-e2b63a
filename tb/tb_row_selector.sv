// tb_row_selector: every row address must select exactly that row, and
// nothing is selected while the decoder is disabled.
module tb_row_selector;
  import bmvm_pkg::*;
  logic                    en;
  logic [$clog2(ROWS)-1:0] row_addr;
  logic [ROWS-1:0]         row_sel;
  int checks = 0, failures = 0;

  row_selector dut (.en, .row_addr, .row_sel);

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < int'(ROWS); r++) begin
      en = 1'b1;
      row_addr = $bits(row_addr)'(r);
      #1;
      checks++;
      if ($countones(row_sel) != 1 || !row_sel[r]) begin
        failures++;
        $display("FAIL row %0d: sel has %0d ones", r, $countones(row_sel));
      end
      en = 1'b0;
      #1;
      checks++;
      if (row_sel != '0) begin
        failures++;
        $display("FAIL row %0d selected while disabled", r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
