// rram_subarray: behavioural model of one RRAM sub-array (ROWS x COLS AND
// operation units) together with its RRAM write driver and RRAM read buffer.
//
// Each cell stores one weight a_ij (1 = low-resistance state). In CIM mode the
// column inputs xin drive every row at once; each cell is an and_unit and the
// cell currents of a row add up on its source line, giving imc[r], the number
// of cells that conduct one 4 uA unit current. In memory mode one cell,
// picked by the one-hot row_sel and col_sel, is programmed with wdata on a
// clock edge where we is high, and rdata shows its state combinationally.
//
// The array storage and the current summation stand for analog circuits
// (RRAM cells, write pulses, sense amplifier); this model keeps only their
// logical effect. Weights have no reset: like RRAM they keep whatever was
// last programmed, and must be written before they are used.
module rram_subarray
  import bmvm_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned COLS_P = COLS
) (
  input  logic                         clk,
  // memory mode
  input  logic [ROWS_P-1:0]            row_sel,
  input  logic [COLS_P-1:0]            col_sel,
  input  logic                         we,
  input  logic                         wdata,
  output logic                         rdata,
  // CIM mode
  input  logic [COLS_P-1:0]            xin,
  output logic [ROWS_P-1:0][IMC_W-1:0] imc
);

  logic [ROWS_P-1:0][COLS_P-1:0] w;       // stored weights
  logic [ROWS_P-1:0][COLS_P-1:0] z;       // cell output currents (unit counts)
  logic [ROWS_P-1:0]             row_rd;  // read contribution of each row

  for (genvar r = 0; r < int'(ROWS_P); r++) begin : g_row
    // Write driver: program the selected cell of this row.
    always_ff @(posedge clk) begin
      for (int c = 0; c < int'(COLS_P); c++)
        if (we && row_sel[r] && col_sel[c]) w[r][c] <= wdata;
    end

    // Read buffer input: the selected cell, if it is in this row.
    always_comb row_rd[r] = row_sel[r] && |(col_sel & w[r]);

    // AND operation units.
    for (genvar c = 0; c < int'(COLS_P); c++) begin : g_col
      and_unit u_cell (.x(xin[c]), .a(w[r][c]), .z(z[r][c]));
    end

    // Current accumulation on the row's source line.
    always_comb begin
      imc[r] = '0;
      for (int c = 0; c < int'(COLS_P); c++)
        imc[r] += IMC_W'(z[r][c]);
    end
  end

  // Read buffer: state of the selected cell.
  always_comb rdata = |row_rd;

endmodule
