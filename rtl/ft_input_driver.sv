// ft_input_driver: fault-tolerant data input driver, reused as the column
// selector.
//
// Each sub-array has COLS_P physical columns: N_COMP_P compute, two are
// inactive spares, and the last one (COLS_P-1) is the bias column, which is
// always driven high so that its cell (programmed to the low-resistance
// state) adds one constant unit current to every row. Which two of columns
// 0..COLS_P-2 are the inactive spares is set per sub-array at run time, so a
// column with defective RRAM cells can be retired. The N_COMP_P logical bits
// of a sub-array fill the remaining columns in ascending order; the inactive
// columns are driven low.
//
// CIM mode (cim_mode = 1): x is registered when load is high and the mapped
// vector appears on wl from the next cycle, held until the next load.
// Memory mode: wl is the one-hot select of physical column col_addr
// (sub-array col_addr / COLS_P, column col_addr % COLS_P).
//
// Configuration: a cycle with cfg_we high writes the spare pair (cfg_skip0,
// cfg_skip1) of sub-array cfg_sub. A pair that is equal or names the bias
// column or beyond is refused and flagged by a one-cycle cfg_err pulse.
// After reset the spares are columns COLS_P-3 and COLS_P-2, so logical bit k
// of a sub-array drives column k.
//
// The column count, the spare/bias split and the run-time choice of spares
// follow the published design; the register interface, the reset choice and
// the fixed position of the bias column are this design's own.
module ft_input_driver
  import bmvm_pkg::*;
#(
  parameter int unsigned N_SUB_P  = N_SUB,
  parameter int unsigned COLS_P   = COLS,
  parameter int unsigned N_COMP_P = N_COMP,
  localparam int unsigned XW      = N_SUB_P * N_COMP_P,
  localparam int unsigned PW      = N_SUB_P * COLS_P,
  localparam int unsigned CW      = $clog2(COLS_P),
  localparam int unsigned SW      = (N_SUB_P > 1) ? $clog2(N_SUB_P) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // spare-column configuration
  input  logic                 cfg_we,
  input  logic [SW-1:0]        cfg_sub,
  input  logic [CW-1:0]        cfg_skip0,
  input  logic [CW-1:0]        cfg_skip1,
  output logic                 cfg_err,
  // data input
  input  logic                 load,
  input  logic [XW-1:0]        x,
  // mode and column select
  input  logic                 cim_mode,
  input  logic [$clog2(PW)-1:0] col_addr,
  output logic [PW-1:0]        wl
);

  logic [N_SUB_P-1:0][CW-1:0] skip0_q, skip1_q;
  logic [XW-1:0]              x_q;
  logic                       cfg_ok;

  always_comb
    cfg_ok = (cfg_skip0 != cfg_skip1)
          && (32'(cfg_skip0) < COLS_P - 1)
          && (32'(cfg_skip1) < COLS_P - 1)
          && (32'(cfg_sub) < N_SUB_P);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < int'(N_SUB_P); s++) begin
        skip0_q[s] <= CW'(COLS_P - 3);
        skip1_q[s] <= CW'(COLS_P - 2);
      end
      x_q     <= '0;
      cfg_err <= 1'b0;
    end else begin
      cfg_err <= cfg_we && !cfg_ok;
      if (cfg_we && cfg_ok) begin
        skip0_q[cfg_sub] <= cfg_skip0;
        skip1_q[cfg_sub] <= cfg_skip1;
      end
      if (load) x_q <= x;
    end
  end

  // Rank of column c among the non-spare columns of its sub-array.
  function automatic int rank(int c, logic [CW-1:0] sk0, logic [CW-1:0] sk1);
    return c - int'(CW'(c) > sk0) - int'(CW'(c) > sk1);
  endfunction

  // Column drive: logical bit k of sub-array s goes to the k-th column of
  // 0..COLS_P-2 that is not a spare.
  always_comb begin
    wl = '0;
    if (cim_mode) begin
      for (int s = 0; s < int'(N_SUB_P); s++) begin
        for (int c = 0; c < int'(COLS_P) - 1; c++) begin
          if (CW'(c) != skip0_q[s] && CW'(c) != skip1_q[s]
              && rank(c, skip0_q[s], skip1_q[s]) < int'(N_COMP_P))
            wl[s*COLS_P + c] = x_q[s*N_COMP_P + rank(c, skip0_q[s], skip1_q[s])];
        end
        wl[s*COLS_P + COLS_P - 1] = 1'b1;     // bias column
      end
    end else if (32'(col_addr) < PW) begin
      wl[col_addr] = 1'b1;
    end
  end

endmodule
