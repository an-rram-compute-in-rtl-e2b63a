// mode_controller: chooses between memory mode and CIM mode and sequences the
// PCSPC clocks.
//
// Memory mode: the PCSPCs are held in reset (GRC high, CpC low) and a memory
// access is accepted on every cycle (mem_ready).
//
// CIM mode: a phase counter steps through one PCSPC period of PERIOD_P
// cycles, phases 0..PERIOD_P-1. GRC is low in phases 0..PERIOD_P-2, so the
// row currents integrate for INT_P = PERIOD_P-2 steps before CpC rises in
// phase PERIOD_P-2, one step (t_d) ahead of GRC, which is high in the last
// phase only. CpC stays high through the last phase and falls with GRC.
// An input vector is accepted (x_ready with x_valid, which also pulses load)
// in the last phase, so it is stable during the whole next period; the
// comparators decide at the end of phase PERIOD_P-2 and the output buffer
// captures the XOR tree in the last phase (capture). Result latency is one
// period, and one vector can be accepted every period.
//
// Mode changes follow mode_req: into CIM mode on the next cycle, starting in
// the last phase; out of CIM mode only at the end of a period, with the last
// result captured on that same edge, so no result is lost. bias_en enables
// the analog bias module in CIM mode.
//
// The two modes follow the published design; the phase counts, the handshake
// and the switching rule are this design's own choices.
module mode_controller
  import bmvm_pkg::*;
#(
  parameter int unsigned PERIOD_P = PERIOD_CYC
) (
  input  logic  clk,
  input  logic  rst_n,
  input  mode_e mode_req,
  output mode_e mode,
  // CIM handshake
  input  logic  x_valid,
  output logic  x_ready,
  output logic  load,
  output logic  capture,
  // memory handshake
  output logic  mem_ready,
  // PCSPC clocks and bias enable
  output logic  grc,
  output logic  cpc,
  output logic  bias_en
);

  localparam int unsigned PH_W = $clog2(PERIOD_P);
  localparam logic [PH_W-1:0] PH_LAST = PH_W'(PERIOD_P - 1);
  localparam logic [PH_W-1:0] PH_CMP  = PH_W'(PERIOD_P - 2);

  logic [PH_W-1:0] ph;
  logic            inflight;   // a vector is being evaluated this period
  logic            period_end;

  always_comb begin
    period_end = (mode == MODE_CIM) && (ph == PH_LAST);
    x_ready    = period_end && (mode_req == MODE_CIM);
    load       = x_ready && x_valid;
    capture    = period_end && inflight;
    mem_ready  = (mode == MODE_MEM) && (mode_req == MODE_MEM);
    grc        = (mode == MODE_MEM) || (ph == PH_LAST);
    cpc        = (mode == MODE_CIM) && (ph >= PH_CMP);
    bias_en    = (mode == MODE_CIM);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode     <= MODE_MEM;
      ph       <= PH_LAST;
      inflight <= 1'b0;
    end else if (mode == MODE_MEM) begin
      ph       <= PH_LAST;
      inflight <= 1'b0;
      if (mode_req == MODE_CIM) mode <= MODE_CIM;
    end else begin
      ph <= (ph == PH_LAST) ? '0 : ph + 1'b1;
      if (period_end) begin
        inflight <= load;
        if (mode_req == MODE_MEM) mode <= MODE_MEM;
      end
    end
  end

  // The comparator must fire at least one step before GRC resets C1.
  initial assert (PERIOD_P >= 4) else $error("mode_controller: PERIOD_P too small");
  a_load_only_at_end: assert property (@(posedge clk) disable iff (!rst_n) load |-> period_end);
  a_no_mem_in_cim:    assert property (@(posedge clk) disable iff (!rst_n)
                                       (mode == MODE_CIM) |-> !mem_ready);

endmodule
