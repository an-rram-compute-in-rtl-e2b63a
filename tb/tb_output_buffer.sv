// tb_output_buffer: captured values appear one cycle after capture with a
// one-cycle valid pulse and hold while capture is low.
module tb_output_buffer;
  import bmvm_pkg::*;
  logic            clk = 0, rst_n = 0;
  logic            capture = 0, rd_capture = 0, rd_in = 0;
  logic [ROWS-1:0] y_in = '0, y, exp_y;
  logic            y_valid, rdata, rvalid, exp_r;
  int checks = 0, failures = 0;

  output_buffer dut (.clk, .rst_n, .capture, .y_in, .rd_capture, .rd_in,
                     .y, .y_valid, .rdata, .rvalid);

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    exp_y = '0;
    exp_r = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      bit cap, rcap;
      @(negedge clk);
      cap  = ($urandom % 3) == 0;
      rcap = ($urandom % 3) == 0;
      capture    = cap;
      rd_capture = rcap;
      for (int w = 0; w < int'(ROWS) / 32; w++) y_in[w*32 +: 32] = $urandom;
      rd_in = 1'($urandom);
      if (cap)  exp_y = y_in;
      if (rcap) exp_r = rd_in;
      @(negedge clk);
      check(y_valid == cap, "y_valid");
      check(rvalid == rcap, "rvalid");
      check(y == exp_y, "y");
      check(rdata == exp_r, "rdata");
      capture    = 0;
      rd_capture = 0;
      y_in       = ~y_in;
      @(negedge clk);
      check(!y_valid && !rvalid, "valid pulse length");
      check(y == exp_y && rdata == exp_r, "hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
