// row_selector: decodes the row address of a memory-mode access into the
// one-hot row select shared by the RRAM write drivers and read buffers of all
// sub-arrays. With en low no row is selected. Purely combinational.
module row_selector
  import bmvm_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS
) (
  input  logic                      en,
  input  logic [$clog2(ROWS_P)-1:0] row_addr,
  output logic [ROWS_P-1:0]         row_sel
);

  always_comb begin
    row_sel = '0;
    if (en && (32'(row_addr) < ROWS_P)) row_sel[row_addr] = 1'b1;
  end

endmodule
