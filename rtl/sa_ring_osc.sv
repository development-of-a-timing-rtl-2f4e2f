// sa_ring_osc: behavioural model of the ring oscillator of the semi-analog TDC,
// including its power switches. Not synthesizable: on silicon the node
// voltages are analog quantities held on parasitic capacitance.
//
// A START NAND and N_STAGES-1 inverters form a ring of N_STAGES inverting
// stages; amp[k] is the voltage of node k (amp[0] is the NAND output), as a
// code from 0 (ground) to AMP_FULL (supply). With START low the nodes rest at
// supply, ground, supply, ... (even nodes high). When START rises an inversion
// wave runs round the ring. STOP, through an inverter, opens switches that cut
// every stage from both supply and ground: from then on no node can charge or
// discharge, so each node keeps the voltage it had, including nodes caught in
// the middle of a transition. Reading those voltages (off chip, with an ADC)
// locates the wave to a fraction of a stage.
//
// Model: time is stepped every DT. A powered stage drives its output towards
// the rail opposite to its input's logic level (threshold AMP_FULL/2) by
// STEP = AMP_FULL*DT/T_RISE per step, so a full swing takes T_RISE; an input
// exactly at the threshold leaves the output where it is. When STEP divides
// AMP_FULL/2 a stage starts to move exactly T_RISE/2 + DT after the stage
// before it, and the loop time is N_STAGES*(T_RISE/2 + DT). last_hi is the
// logic level (above threshold) of the last node, which clocks the pass
// counter. The ring is a combinational loop by nature; synthesis tools that
// ignore the time step report it as a logic loop, and turn the held node
// voltages into latches; both are expected for this model.
//
// Interface: start, stop in; amp[N_STAGES-1:0] (AMP_W bits each), last_hi out.
// The stage count, the switches at STOP and the charge-holding readout follow
// the published design; the linear-slew model and the values of T_RISE and DT
// are this design's own assumptions.
module sa_ring_osc #(
  parameter int unsigned N_STAGES = tdc_pkg::SA_STAGES,
  parameter real         T_RISE   = 200.0,  // ps, full swing of one node
  parameter real         DT       = 1.0     // ps, model time step
) (
  input  logic                                   start,
  input  logic                                   stop,
  output logic [N_STAGES-1:0][tdc_pkg::AMP_W-1:0] amp,
  output logic                                   last_hi
);
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  localparam int FULL = int'(AMP_FULL);
  localparam int HALF = FULL / 2;
  localparam int STEP = int'(real'(FULL) * DT / T_RISE);

  logic sw_on;           // gate of the power switches: inverted STOP
  assign sw_on = ~stop;

  int v [N_STAGES];

  always begin
    int tgt [N_STAGES];
    #(DT);
    for (int k = 0; k < N_STAGES; k++) begin
      if (v[k] > FULL) v[k] = FULL;
      if (v[k] < 0)    v[k] = 0;
    end
    if (sw_on) begin
      // input exactly at the threshold: the stage neither charges nor discharges
      if (!start)                     tgt[0] = FULL;
      else if (v[N_STAGES-1] == HALF) tgt[0] = v[0];
      else                            tgt[0] = (v[N_STAGES-1] > HALF) ? 0 : FULL;
      for (int k = 1; k < N_STAGES; k++)
        tgt[k] = (v[k-1] == HALF) ? v[k] : ((v[k-1] > HALF) ? 0 : FULL);
      for (int k = 0; k < N_STAGES; k++) begin
        if (v[k] < tgt[k])      v[k] = (tgt[k] - v[k] < STEP) ? tgt[k] : v[k] + STEP;
        else if (v[k] > tgt[k]) v[k] = (v[k] - tgt[k] < STEP) ? tgt[k] : v[k] - STEP;
      end
    end
  end

  always_comb begin
    for (int k = 0; k < N_STAGES; k++) amp[k] = AMP_W'(v[k]);
  end
  assign last_hi = v[N_STAGES-1] > HALF;
endmodule
