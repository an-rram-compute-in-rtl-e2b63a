// tb_pcspc: drives the PCSPC model with the GRC/CpC pattern of one period
// (GRC low for PERIOD_CYC-1 steps, CpC rising one step before GRC) for every
// row current 0..11 units, in random order. Checks, against counts worked out
// here: the number of LRC pulses before the comparator fires (half the
// current, rounded down), V_charge at that moment (V_TH/2 for odd currents,
// 0 for even ones), the comparator output (1 for even currents) and that the
// result holds through the next period's integration.
module tb_pcspc;
  import bmvm_pkg::*;
  logic             clk = 0, rst_n = 0;
  logic [IMC_W-1:0] imc = '0;
  logic             grc = 1, cpc = 0;
  logic [VCH_W-1:0] vcharge;
  logic             lrc, vxor;
  int checks = 0, failures = 0;

  pcspc dut (.clk, .rst_n, .imc, .grc, .cpc, .vcharge, .lrc, .vxor);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what, int h);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s for I_MC=%0d units (vcharge=%0d vxor=%0b)", what, h, vcharge, vxor);
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 120; t++) begin
      int h, pulses;
      bit prev;
      h = (t < 12) ? t : int'($urandom % 12);
      prev = vxor;
      pulses = 0;
      // one period: phases 0..PERIOD_CYC-1, signals change at the falling edge
      for (int ph = 0; ph < int'(PERIOD_CYC); ph++) begin
        @(negedge clk);
        imc = IMC_W'(h);
        grc = (ph == int'(PERIOD_CYC) - 1);
        cpc = (ph >= int'(PERIOD_CYC) - 2);
        if (ph >= 1 && ph <= int'(INT_CYC)) pulses += int'(lrc);
        if (ph == int'(INT_CYC)) begin
          // comparator fires at the end of this step
          check(vcharge == VCH_W'((h % 2) * (VTH / 2)), "V_charge residue", h);
          if (t > 0) check(vxor == prev, "vxor held during integration", h);
        end
        if (ph == int'(PERIOD_CYC) - 1) begin
          check(pulses == h / 2, "number of LRC pulses", h);
          check(vxor == 1'(h % 2 == 0), "comparator output", h);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
