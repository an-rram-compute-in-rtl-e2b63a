// tb_ft_input_driver: for random spare-column pairs and random input
// vectors, the column drive must put the 9 logical bits of each sub-array on
// its non-spare columns in ascending order, drive spares low and the bias
// column high. Also checks refused configurations, the load register and
// the one-hot column select of memory mode.
module tb_ft_input_driver;
  import bmvm_pkg::*;
  localparam int XW = N_SUB * N_COMP;
  localparam int PW = N_SUB * COLS;
  logic               clk = 0, rst_n = 0;
  logic               cfg_we = 0, cfg_err;
  logic [1:0]         cfg_sub = '0;
  logic [3:0]         cfg_skip0 = '0, cfg_skip1 = '0;
  logic               load = 0, cim_mode = 0;
  logic [XW-1:0]      x = '0, x_ref = '0;
  logic [5:0]         col_addr = '0;
  logic [PW-1:0]      wl;
  int                 sk0 [N_SUB], sk1 [N_SUB];
  int checks = 0, failures = 0;

  ft_input_driver dut (.clk, .rst_n, .cfg_we, .cfg_sub, .cfg_skip0, .cfg_skip1,
                       .cfg_err, .load, .x, .cim_mode, .col_addr, .wl);

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
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  // Expected drive, built by walking the columns and skipping the spares.
  task automatic check_drive();
    for (int s = 0; s < int'(N_SUB); s++) begin
      int k;
      k = 0;
      for (int c = 0; c < int'(COLS); c++) begin
        logic e;
        if (c == int'(COLS) - 1)            e = 1'b1;
        else if (c == sk0[s] || c == sk1[s]) e = 1'b0;
        else begin
          e = x_ref[s*N_COMP + k];
          k++;
        end
        check(wl[s*COLS + c] == e, $sformatf("drive sub %0d col %0d", s, c));
      end
    end
  endtask

  initial begin
    for (int s = 0; s < int'(N_SUB); s++) begin
      sk0[s] = COLS - 3;
      sk1[s] = COLS - 2;
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    cim_mode = 1;
    for (int t = 0; t < 200; t++) begin
      bit good;
      int s, a, b;
      // configuration write, sometimes illegal
      s = int'($urandom % N_SUB);
      a = int'($urandom % COLS);
      b = (t % 5 == 0) ? a : int'($urandom % COLS);
      good = (a != b) && (a < int'(COLS) - 1) && (b < int'(COLS) - 1);
      @(negedge clk);
      cfg_we = 1; cfg_sub = 2'(s); cfg_skip0 = 4'(a); cfg_skip1 = 4'(b);
      @(negedge clk);
      cfg_we = 0;
      check(cfg_err == !good, "cfg_err");
      if (good) begin
        sk0[s] = a;
        sk1[s] = b;
      end
      // new input vector
      x = {$urandom, $urandom};
      load = 1;
      @(negedge clk);
      load = 0;
      x_ref = x;
      x = ~x;                    // must not reach the columns without load
      @(negedge clk);
      check_drive();
    end
    // memory mode: one-hot column select
    cim_mode = 0;
    for (int c = 0; c < PW; c++) begin
      col_addr = 6'(c);
      #1;
      check(wl == (PW'(1) << c), $sformatf("column select %0d", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
