// rram_nvcim_bmvm: RRAM compute-in-memory macro for binary matrix-vector
// multiplication, y = A x over GF(2) (AND for products, XOR for the sum).
//
// A (ROWS_P x N_SUB_P*N_COMP_P, 512 x 36 by default) is stored in N_SUB_P RRAM
// sub-arrays of ROWS_P x COLS_P cells. Sub-array s holds columns
// 9s..9s+8 of A in its compute columns; its bias column must be programmed
// to 1 in every row. In CIM mode all rows of all sub-arrays evaluate at once:
// each row's cell currents add up on its source line, a PCSPC per row turns
// the summed current into the parity of that row's products (a partial
// result y'), and an XOR tree merges the N_SUB_P partial results of a row
// into y. One 512-bit result is produced per PCSPC period.
//
// Interface (all synchronous to clk, active-low asynchronous reset rst_n):
//   mode_req/mode      1 = CIM mode, 0 = memory mode (after reset: memory).
//   mem_*              memory mode: one cell per accepted cycle
//                      (mem_req & mem_ready). mem_row is the row, mem_col the
//                      physical column 0..N_SUB_P*COLS_P-1 (sub-array
//                      mem_col / COLS_P). mem_we=1 writes mem_wdata; a read
//                      returns mem_rdata with mem_rvalid one cycle later.
//   cfg_*              choose the two inactive spare columns of a sub-array
//                      (see ft_input_driver); cfg_err flags a refused pair.
//   x_valid/x/x_ready  CIM mode: a vector is taken on a cycle where both
//                      valid and ready are high (once per period).
//   y/y_valid          the result, PERIOD_CYC+1 cycles after the vector was
//                      taken; y_valid pulses for one cycle.
//   bias_en            enable for the analog bias module (not modelled).
//
// Block structure and sizes follow the published design; the control
// interface, the clocking of the PCSPCs and the register stages are this
// design's own.
module rram_nvcim_bmvm
  import bmvm_pkg::*;
#(
  parameter int unsigned N_SUB_P  = N_SUB,
  parameter int unsigned ROWS_P   = ROWS,
  parameter int unsigned COLS_P   = COLS,
  parameter int unsigned N_COMP_P = N_COMP,
  localparam int unsigned XW      = N_SUB_P * N_COMP_P,
  localparam int unsigned PW      = N_SUB_P * COLS_P,
  localparam int unsigned CW      = $clog2(COLS_P),
  localparam int unsigned SW      = (N_SUB_P > 1) ? $clog2(N_SUB_P) : 1,
  localparam int unsigned RW      = $clog2(ROWS_P)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // mode
  input  logic                  mode_req,
  output logic                  mode,
  // memory mode
  input  logic                  mem_req,
  input  logic                  mem_we,
  input  logic [RW-1:0]         mem_row,
  input  logic [$clog2(PW)-1:0] mem_col,
  input  logic                  mem_wdata,
  output logic                  mem_ready,
  output logic                  mem_rdata,
  output logic                  mem_rvalid,
  // spare-column configuration
  input  logic                  cfg_we,
  input  logic [SW-1:0]         cfg_sub,
  input  logic [CW-1:0]         cfg_skip0,
  input  logic [CW-1:0]         cfg_skip1,
  output logic                  cfg_err,
  // CIM mode
  input  logic                  x_valid,
  input  logic [XW-1:0]         x,
  output logic                  x_ready,
  output logic [ROWS_P-1:0]     y,
  output logic                  y_valid,
  // analog bias module
  output logic                  bias_en
);

  mode_e                             mode_q;
  logic                              load, capture, grc, cpc;
  logic                              mem_go;
  logic [PW-1:0]                     wl;
  logic [ROWS_P-1:0]                 row_sel;
  logic [N_SUB_P-1:0]                sub_rdata;
  logic [N_SUB_P-1:0][ROWS_P-1:0]    yp;
  logic [ROWS_P-1:0]                 y_merged;

  always_comb begin
    mode   = mode_q;
    mem_go = mem_req && mem_ready;
  end

  mode_controller u_ctrl (
    .clk, .rst_n,
    .mode_req (mode_e'(mode_req)),
    .mode     (mode_q),
    .x_valid, .x_ready, .load, .capture,
    .mem_ready,
    .grc, .cpc, .bias_en
  );

  ft_input_driver #(.N_SUB_P(N_SUB_P), .COLS_P(COLS_P), .N_COMP_P(N_COMP_P)) u_drv (
    .clk, .rst_n,
    .cfg_we, .cfg_sub, .cfg_skip0, .cfg_skip1, .cfg_err,
    .load, .x,
    .cim_mode (mode_q == MODE_CIM),
    .col_addr (mem_col),
    .wl
  );

  row_selector #(.ROWS_P(ROWS_P)) u_rowsel (
    .en (mem_go), .row_addr (mem_row), .row_sel
  );

  for (genvar s = 0; s < int'(N_SUB_P); s++) begin : g_sub
    logic [ROWS_P-1:0][IMC_W-1:0] imc;

    rram_subarray #(.ROWS_P(ROWS_P), .COLS_P(COLS_P)) u_array (
      .clk,
      .row_sel,
      .col_sel (wl[s*COLS_P +: COLS_P]),
      .we      (mem_go && mem_we),
      .wdata   (mem_wdata),
      .rdata   (sub_rdata[s]),
      .xin     (wl[s*COLS_P +: COLS_P]),
      .imc
    );

    // vcharge and lrc are left for observation of the PCSPC waveforms.
    for (genvar r = 0; r < int'(ROWS_P); r++) begin : g_row
      logic [VCH_W-1:0] vcharge;
      logic             lrc;
      pcspc u_pcspc (
        .clk, .rst_n,
        .imc (imc[r]), .grc, .cpc,
        .vcharge, .lrc,
        .vxor (yp[s][r])
      );
    end
  end

  xor_tree #(.N_SUB_P(N_SUB_P), .ROWS_P(ROWS_P)) u_xor (
    .yp, .y (y_merged)
  );

  output_buffer #(.ROWS_P(ROWS_P)) u_obuf (
    .clk, .rst_n,
    .capture,
    .y_in       (y_merged),
    .rd_capture (mem_go && !mem_we),
    .rd_in      (|sub_rdata),
    .y, .y_valid,
    .rdata      (mem_rdata),
    .rvalid     (mem_rvalid)
  );

endmodule
