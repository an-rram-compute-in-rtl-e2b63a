// tb_rram_nvcim_bmvm: end-to-end test of the macro at its full size
// (4 sub-arrays of 512 x 12, a 512 x 36 matrix), with no parameter changed.
//
// Sequence: pick spare columns for two sub-arrays (and try a refused pair),
// program a random matrix A plus the bias column through memory mode, with
// random junk in the spare columns, read a sample of cells back, switch to
// CIM mode and stream input vectors (back-to-back and with gaps). Every
// result y is compared with A x over GF(2), computed here. Then the test
// returns to memory mode, moves the spares of another sub-array, reprograms
// it and checks again. Latency (PERIOD_CYC+1 cycles from the accepted vector
// to y_valid) and back-to-back throughput (one vector per PERIOD_CYC cycles)
// are checked. Row 0 of A is all ones and row 1 all zeros, so the all-ones
// vector gives the largest row current (10 units including the bias cell).
// The test counts each mechanism (mode switches both ways, spare remaps,
// refused configuration, memory reads, LRC pulses, the largest current,
// both parities) and fails if one never happened.
module tb_rram_nvcim_bmvm;
  import bmvm_pkg::*;
  localparam int XW = N_SUB * N_COMP;
  localparam int PW = N_SUB * COLS;

  logic              clk = 0, rst_n = 0;
  logic              mode_req = 0, mode;
  logic              mem_req = 0, mem_we = 0, mem_wdata = 0;
  logic [8:0]        mem_row = '0;
  logic [5:0]        mem_col = '0;
  logic              mem_ready, mem_rdata, mem_rvalid;
  logic              cfg_we = 0, cfg_err;
  logic [1:0]        cfg_sub = '0;
  logic [3:0]        cfg_skip0 = '0, cfg_skip1 = '0;
  logic              x_valid = 0, x_ready;
  logic [XW-1:0]     x = '0;
  logic [ROWS-1:0]   y;
  logic              y_valid, bias_en;

  rram_nvcim_bmvm dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s at cycle %0d", what, cycle);
    end
  endtask

  // ---------------------------------------------------------------- model
  logic [ROWS-1:0][XW-1:0] A;             // the matrix
  logic [ROWS-1:0][PW-1:0] phys;          // what is programmed in the cells
  int sk0 [N_SUB], sk1 [N_SUB];           // spare columns per sub-array

  function automatic logic [ROWS-1:0] ref_y(logic [XW-1:0] v);
    logic [ROWS-1:0] r;
    for (int i = 0; i < int'(ROWS); i++) r[i] = ^(A[i] & v);
    return r;
  endfunction

  // physical layout of sub-array s for the current spares
  function automatic void layout(int s);
    for (int i = 0; i < int'(ROWS); i++) begin
      int k;
      k = 0;
      for (int c = 0; c < int'(COLS); c++) begin
        if (c == int'(COLS) - 1)             phys[i][s*COLS + c] = 1'b1;
        else if (c == sk0[s] || c == sk1[s]) phys[i][s*COLS + c] = 1'($urandom);
        else begin
          phys[i][s*COLS + c] = A[i][s*N_COMP + k];
          k++;
        end
      end
    end
  endfunction

  // --------------------------------------------------------- counters
  int n_to_cim = 0, n_to_mem = 0, n_remap = 0, n_refused = 0, n_reads = 0;
  int n_lrc = 0, n_max_current = 0, n_odd = 0, n_even = 0, n_results = 0;
  logic mode_q = 0;
  always @(posedge clk) begin
    mode_q <= mode;
    if (mode && !mode_q) n_to_cim++;
    if (!mode && mode_q) n_to_mem++;
    if (dut.g_sub[0].g_row[0].lrc) n_lrc++;
    if (dut.g_sub[1].g_row[0].lrc) n_lrc++;
    if (dut.g_sub[0].imc[0] == 4'(N_COMP + 1) && mode) n_max_current++;
  end

  // --------------------------------------------------------- drivers
  task automatic cfg(int s, int a, int b, bit expect_ok);
    @(negedge clk);
    cfg_we = 1; cfg_sub = 2'(s); cfg_skip0 = 4'(a); cfg_skip1 = 4'(b);
    @(negedge clk);
    cfg_we = 0;
    check(cfg_err == !expect_ok, "cfg_err");
    if (expect_ok) begin
      sk0[s] = a;
      sk1[s] = b;
      n_remap++;
    end else n_refused++;
  endtask

  task automatic mem_write(int r, int c, logic d);
    @(negedge clk);
    mem_req = 1; mem_we = 1; mem_row = 9'(r); mem_col = 6'(c); mem_wdata = d;
    #1;
    check(mem_ready, "mem_ready in memory mode");
    @(negedge clk);
    mem_req = 0; mem_we = 0;
  endtask

  task automatic program_sub(int s);
    layout(s);
    for (int i = 0; i < int'(ROWS); i++)
      for (int c = 0; c < int'(COLS); c++) begin
        @(negedge clk);
        mem_req = 1; mem_we = 1; mem_row = 9'(i); mem_col = 6'(s*COLS + c);
        mem_wdata = phys[i][s*COLS + c];
      end
    @(negedge clk);
    mem_req = 0; mem_we = 0;
  endtask

  task automatic mem_read_check(int r, int c);
    @(negedge clk);
    mem_req = 1; mem_we = 0; mem_row = 9'(r); mem_col = 6'(c);
    @(negedge clk);
    mem_req = 0;
    check(mem_rvalid && mem_rdata == phys[r][c], $sformatf("read r=%0d c=%0d", r, c));
    n_reads++;
  endtask

  task automatic set_mode(bit m);
    @(negedge clk);
    mode_req = m;
    // wait until the mode has changed
    while (mode != m) @(negedge clk);
  endtask

  // Result checker: expected vectors and accept cycles in order.
  logic [XW-1:0] sent [$];
  int            sent_cycle [$];
  always @(posedge clk) begin
    if (x_valid && x_ready) begin
      sent.push_back(x);
      sent_cycle.push_back(cycle);
    end
    if (y_valid && rst_n) begin
      logic [XW-1:0]   v;
      logic [ROWS-1:0] e;
      int              c0;
      n_results++;
      if (sent.size() == 0) check(0, "unexpected y_valid");
      else begin
        v  = sent.pop_front();
        c0 = sent_cycle.pop_front();
        e  = ref_y(v);
        check(y == e, $sformatf("y for x=%h (%0d rows wrong)", v, $countones(y ^ e)));
        check(cycle - c0 == int'(PERIOD_CYC) + 1, "latency");
        n_odd  += $countones(y);
        n_even += int'(ROWS) - $countones(y);
      end
    end
  end

  task automatic stream(int n, bit gaps);
    int last = -1;
    for (int t = 0; t < n; t++) begin
      @(negedge clk);
      x = (t == 0) ? '1 : {$urandom, $urandom};
      x_valid = 1;
      @(posedge clk);
      while (!x_ready) @(posedge clk);
      if (!gaps && last >= 0) check(cycle - last == int'(PERIOD_CYC), "back-to-back rate");
      last = cycle;
      @(negedge clk);
      x_valid = 0;
      if (gaps) repeat ($urandom % 20) @(negedge clk);
    end
    // drain
    repeat (3 * PERIOD_CYC) @(negedge clk);
    check(sent.size() == 0, "all results returned");
  endtask

  // --------------------------------------------------------- sequence
  initial begin
    for (int i = 0; i < int'(ROWS); i++)
      for (int j = 0; j < XW; j++)
        A[i][j] = (i == 0) ? 1'b1 : (i == 1) ? 1'b0 : 1'($urandom);
    for (int s = 0; s < int'(N_SUB); s++) begin
      sk0[s] = COLS - 3;
      sk1[s] = COLS - 2;
    end
    repeat (3) @(negedge clk);
    rst_n = 1;

    cfg(0, 2, 5, 1);
    cfg(2, 10, 0, 1);
    cfg(1, 4, 4, 0);            // refused: same column twice
    cfg(3, 11, 3, 0);           // refused: bias column
    for (int s = 0; s < int'(N_SUB); s++) program_sub(s);
    for (int t = 0; t < 300; t++) mem_read_check(int'($urandom % ROWS), int'($urandom % PW));
    check(!bias_en, "bias off in memory mode");

    set_mode(1);
    check(bias_en, "bias on in CIM mode");
    stream(40, 0);
    stream(20, 1);

    set_mode(0);
    cfg(3, 3, 7, 1);
    program_sub(3);
    // rewrite a few cells of A directly
    for (int t = 0; t < 20; t++) begin
      int i, j, s, k, c;
      i = 2 + int'($urandom % (ROWS - 2));
      j = int'($urandom % XW);
      A[i][j] = ~A[i][j];
      s = j / N_COMP;
      k = j % N_COMP;
      // physical column of logical bit k
      c = 0;
      for (int cc = 0, kk = 0; cc < int'(COLS) - 1; cc++)
        if (cc != sk0[s] && cc != sk1[s]) begin
          if (kk == k) c = cc;
          kk++;
        end
      phys[i][s*COLS + c] = A[i][j];
      mem_write(i, s*COLS + c, A[i][j]);
    end
    for (int t = 0; t < 50; t++) mem_read_check(int'($urandom % ROWS), int'($urandom % PW));

    set_mode(1);
    stream(30, 0);
    set_mode(0);

    $display("mode->CIM %0d, mode->memory %0d, spare remaps %0d, refused configs %0d, reads %0d",
             n_to_cim, n_to_mem, n_remap, n_refused, n_reads);
    $display("LRC pulses (rows observed) %0d, max-current periods %0d, results %0d, odd bits %0d, even bits %0d",
             n_lrc, n_max_current, n_results, n_odd, n_even);
    check(n_to_cim >= 2, "switch to CIM mode happened");
    check(n_to_mem >= 1, "switch to memory mode happened");
    check(n_remap >= 3, "spare remap happened");
    check(n_refused >= 2, "refused configuration happened");
    check(n_reads > 0, "memory read happened");
    check(n_lrc > 0, "LRC pulses happened");
    check(n_max_current > 0, "largest row current (10 units) happened");
    check(n_odd > 0 && n_even > 0, "both parities happened");
    check(n_results == 90, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
