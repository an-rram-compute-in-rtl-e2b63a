// xor_tree: merges the partial parities of the sub-arrays into the final
// result bits.
//
// Every sub-array computes, per row, the parity y' of its own share of the
// input vector; the row's result is the XOR of the N_SUB_P partial parities.
// The tree is built as log2(N_SUB_P) levels of 2-input XORs per row (a
// balanced tree is this design's choice; an odd count at a level passes its
// last input through). Purely combinational.
//
// Interface: yp[s][r] is the partial parity of row r from sub-array s;
// y[r] the merged result.
module xor_tree
  import bmvm_pkg::*;
#(
  parameter int unsigned N_SUB_P = N_SUB,
  parameter int unsigned ROWS_P  = ROWS
) (
  input  logic [N_SUB_P-1:0][ROWS_P-1:0] yp,
  output logic [ROWS_P-1:0]              y
);

  localparam int unsigned LEVELS = (N_SUB_P > 1) ? $clog2(N_SUB_P) : 0;

  // lvl[l] holds the N_SUB_P >> l (rounded up) operands of level l.
  logic [LEVELS:0][N_SUB_P-1:0][ROWS_P-1:0] lvl;

  always_comb begin
    lvl = '0;
    lvl[0] = yp;
    for (int l = 0; l < int'(LEVELS); l++) begin
      int unsigned n;
      n = (N_SUB_P + (1 << l) - 1) >> l;           // operands at level l
      for (int k = 0; k < int'((n + 1) / 2); k++) begin
        if (2 * k + 1 < int'(n)) lvl[l+1][k] = lvl[l][2*k] ^ lvl[l][2*k+1];
        else                     lvl[l+1][k] = lvl[l][2*k];
      end
    end
    y = lvl[LEVELS][0];
  end

endmodule
