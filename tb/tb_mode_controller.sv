// tb_mode_controller: random mode requests and input offers. A reference
// phase counter, kept here, predicts GRC, CpC, x_ready, load and capture in
// every cycle; the test also checks that a result is captured exactly one
// period after its vector was loaded, that memory accesses are only accepted
// in memory mode, and that every mode switch happens.
module tb_mode_controller;
  import bmvm_pkg::*;
  logic  clk = 0, rst_n = 0;
  mode_e mode_req = MODE_MEM, mode;
  logic  x_valid = 0, x_ready, load, capture, mem_ready, grc, cpc, bias_en;
  int checks = 0, failures = 0;
  int ph_ref, to_cim = 0, to_mem = 0, loads = 0, captures = 0;
  int load_time [$];
  mode_e mode_ref;

  mode_controller dut (.clk, .rst_n, .mode_req, .mode, .x_valid, .x_ready, .load,
                       .capture, .mem_ready, .grc, .cpc, .bias_en);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t (ph_ref=%0d)", what, $time, ph_ref);
    end
  endtask

  int cycle = 0;
  bit inflight_ref = 0;

  initial begin
    mode_ref = MODE_MEM;
    ph_ref = PERIOD_CYC - 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      bit last;
      // stimulus
      if ($urandom % 40 == 0) mode_req = (mode_req == MODE_MEM) ? MODE_CIM : MODE_MEM;
      x_valid = ($urandom % 4) != 0;
      #1;
      // expected outputs in this cycle
      last = (mode_ref == MODE_CIM) && (ph_ref == int'(PERIOD_CYC) - 1);
      check(mode == mode_ref, "mode");
      check(bias_en == (mode_ref == MODE_CIM), "bias_en");
      check(grc == ((mode_ref == MODE_MEM) || ph_ref == int'(PERIOD_CYC) - 1), "GRC");
      check(cpc == ((mode_ref == MODE_CIM) && ph_ref >= int'(PERIOD_CYC) - 2), "CpC");
      check(x_ready == (last && mode_req == MODE_CIM), "x_ready");
      check(load == (last && mode_req == MODE_CIM && x_valid), "load");
      check(capture == (last && inflight_ref), "capture");
      check(mem_ready == (mode_ref == MODE_MEM && mode_req == MODE_MEM), "mem_ready");
      if (capture) begin
        captures++;
        check(load_time.size() > 0 && cycle - load_time.pop_front() == int'(PERIOD_CYC),
              "capture one period after load");
      end
      if (load) begin
        loads++;
        load_time.push_back(cycle);
      end
      // advance the reference at the clock edge
      @(posedge clk);
      cycle++;
      if (mode_ref == MODE_MEM) begin
        inflight_ref = 0;
        if (mode_req == MODE_CIM) begin
          mode_ref = MODE_CIM;
          to_cim++;
        end
      end else begin
        if (last) begin
          inflight_ref = load;
          if (mode_req == MODE_MEM) begin
            mode_ref = MODE_MEM;
            to_mem++;
          end
        end
        ph_ref = (ph_ref == int'(PERIOD_CYC) - 1) ? 0 : ph_ref + 1;
      end
      if (mode_ref == MODE_MEM) ph_ref = PERIOD_CYC - 1;
      @(negedge clk);
    end
    check(to_cim > 2 && to_mem > 2, "mode switches happened");
    check(loads > 20 && captures > 20, "vectors were loaded and captured");
    $display("mode switches to CIM %0d, to memory %0d, loads %0d, captures %0d",
             to_cim, to_mem, loads, captures);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
