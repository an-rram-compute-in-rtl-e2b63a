// pcspc: behavioural model of the pulsed current-sensing parity checker
// attached to each row of a sub-array.
//
// The accumulated row current I_MC charges a capacitor while the global reset
// clock GRC is low. A threshold detector (the V_TH judge) fires a local reset
// pulse LRC each time V_charge reaches V_TH, discharging the capacitor, so
// V_charge is a saw-tooth. The integration time and V_TH are matched so that a
// current of H units produces floor(H/2) ramp pulses and leaves V_charge near
// V_TH/2 for odd H and near 0 for even H. A comparator with V_ref on its
// non-inverting input fires on the rising edge of the comparator clock CpC,
// which comes one step before GRC rises, and sets vxor = (V_charge < V_ref).
// vxor is therefore 1 for an even count; since every row includes one bias
// cell that always conducts, that is 1 for an odd count of computation cells,
// i.e. the XOR of the row's AND products.
//
// Discrete-time model: one clock step with grc low adds imc charge units to
// V_charge; reaching VTH_P removes VTH_P units (ideal instantaneous local
// reset) and pulses lrc for that step; grc high clears V_charge. The circuit
// structure and the waveforms follow the published design; the step counts,
// the charge units and the ideal discharge are this model's choices.
//
// Timing: vxor is registered at the clock edge where cpc is first seen high
// and holds until the next such edge. VTH_P must be 2 x the number of
// integration steps before that edge.
module pcspc
  import bmvm_pkg::*;
#(
  parameter int unsigned VTH_P  = VTH,
  parameter int unsigned VREF_P = VREF
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IMC_W-1:0] imc,
  input  logic             grc,
  input  logic             cpc,
  output logic [VCH_W-1:0] vcharge,
  output logic             lrc,
  output logic             vxor
);

  logic             cpc_q;
  logic [VCH_W-1:0] vnext;

  always_comb vnext = vcharge + VCH_W'(imc);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vcharge <= '0;
      lrc     <= 1'b0;
      vxor    <= 1'b0;
      cpc_q   <= 1'b0;
    end else begin
      cpc_q <= cpc;
      // Capacitor C1 with global reset (MN1) and local reset (MN2).
      if (grc) begin
        vcharge <= '0;
        lrc     <= 1'b0;
      end else if (vnext >= VCH_W'(VTH_P)) begin
        vcharge <= vnext - VCH_W'(VTH_P);
        lrc     <= 1'b1;
      end else begin
        vcharge <= vnext;
        lrc     <= 1'b0;
      end
      // Clocked comparator: V_ref on '+', V_charge on '-'.
      if (cpc && !cpc_q) vxor <= (vcharge < VCH_W'(VREF_P));
    end
  end

  // One step never carries more than one threshold of charge.
  a_imc_range: assert property (@(posedge clk) disable iff (!rst_n) imc < IMC_W'(VTH_P))
    else $error("pcspc: imc %0d not below VTH %0d", imc, VTH_P);

endmodule
