// tb_xor_tree: random partial parities; each result bit must equal the
// parity of the four partial bits of its row, counted independently.
module tb_xor_tree;
  import bmvm_pkg::*;
  logic [N_SUB-1:0][ROWS-1:0] yp;
  logic [ROWS-1:0]            y;
  int checks = 0, failures = 0;

  xor_tree dut (.yp, .y);

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 40; t++) begin
      for (int s = 0; s < int'(N_SUB); s++)
        for (int r = 0; r < int'(ROWS); r++)
          yp[s][r] = (t < 16) ? 1'(t >> s) : 1'($urandom);
      #1;
      for (int r = 0; r < int'(ROWS); r++) begin
        int ones;
        ones = 0;
        for (int s = 0; s < int'(N_SUB); s++) ones += int'(yp[s][r]);
        checks++;
        if (y[r] !== 1'(ones % 2)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d row %0d: y=%0b ones=%0d", t, r, y[r], ones);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
