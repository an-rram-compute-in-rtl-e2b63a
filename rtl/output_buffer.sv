// output_buffer: data output buffer of the macro.
//
// On a cycle with capture high it registers the merged result vector y_in
// (one bit per row) and pulses y_valid in the following cycle; y holds until
// the next capture. Likewise rd_capture registers the read-buffer bit of a
// memory-mode read into rdata and pulses rvalid. A plain register stage: the
// published design names the buffer but not its structure.
module output_buffer
  import bmvm_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              capture,
  input  logic [ROWS_P-1:0] y_in,
  input  logic              rd_capture,
  input  logic              rd_in,
  output logic [ROWS_P-1:0] y,
  output logic              y_valid,
  output logic              rdata,
  output logic              rvalid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      y_valid <= 1'b0;
      rdata   <= 1'b0;
      rvalid  <= 1'b0;
    end else begin
      y_valid <= capture;
      rvalid  <= rd_capture;
      if (capture)    y     <= y_in;
      if (rd_capture) rdata <= rd_in;
    end
  end

endmodule
