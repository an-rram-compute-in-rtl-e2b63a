// bmvm_pkg: sizes and timing shared by the RRAM compute-in-memory BMVM macro.
//
// The array geometry follows the published design: four sub-arrays of
// 512 rows x 12 columns, of which 9 columns compute, 2 are inactive spares
// and 1 is a bias column that always adds one unit current. The PCSPC timing
// (steps per period, integration steps) is this design's own choice: the
// period is 8 steps of the control clock, e.g. 320 MHz for a 40 MHz PCSPC rate.
package bmvm_pkg;

  // Array geometry.
  localparam int unsigned N_SUB   = 4;    // sub-arrays
  localparam int unsigned ROWS    = 512;  // rows per sub-array (= result bits)
  localparam int unsigned COLS    = 12;   // physical columns per sub-array
  localparam int unsigned N_COMP  = 9;    // computation columns per sub-array

  // Width of an accumulated row current, in units of the 4 uA cell current.
  localparam int unsigned IMC_W   = $clog2(COLS + 1);

  // PCSPC timing, in control-clock steps.
  localparam int unsigned PERIOD_CYC = 8;              // one PCSPC period
  localparam int unsigned INT_CYC    = PERIOD_CYC - 2; // integration steps before CpC rises
  localparam int unsigned VTH        = 2 * INT_CYC;    // V_TH judge threshold (charge units)
  localparam int unsigned VREF       = INT_CYC / 2;    // comparator reference (charge units)
  localparam int unsigned VCH_W      = 8;              // width of the V_charge model

  typedef enum logic {
    MODE_MEM = 1'b0,   // weights are written and read like a memory
    MODE_CIM = 1'b1    // the array computes y = A x over GF(2)
  } mode_e;

endpackage
