// sa_tdc: the semi-analog TDC.
//
// Operation. The same ring-oscillator principle as the fully digital TDC, with
// slower inverters and an analog readout. START releases an inversion wave
// round a ring of 9 inverting stages (a NAND on START and 8 inverters); a
// 6-bit counter on the last node counts the passes. STOP opens power switches
// that isolate every stage, so the charge on each node, and with it the
// position of the wave to a fraction of a stage, is held and can be read out
// on the INV lines. Because one stage is always part-way through a
// transition, digitising the lines with more than one bit gives a finer time
// than the stage delay. The counter needs no STOP input: once the ring is
// frozen its last node no longer switches.
//
// Interface: start, stop in; inv_amp[8:0] (AMP_W-bit amplitude codes of the
// analog lines), count[5:0] out. inv_amp follows the nodes while stop is low
// and holds from the rising edge of stop; count is cleared while start is low.
//
// The stage count, the 6-bit counter on the last node and the switches
// controlled by an inverted STOP follow the published design. The ring is a
// behavioural model; its slew, the amplitude code and the counter's clear are
// this design's own choices.
module sa_tdc #(
  parameter real T_RISE = 200.0,  // ps, full swing of one node
  parameter real DT     = 1.0     // ps, model time step
) (
  input  logic                                            start,
  input  logic                                            stop,
  output logic [tdc_pkg::SA_STAGES-1:0][tdc_pkg::AMP_W-1:0] inv_amp,
  output logic [tdc_pkg::SA_COUNT_W-1:0]                  count
);
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  logic last_hi;

  sa_ring_osc #(.N_STAGES(SA_STAGES), .T_RISE(T_RISE), .DT(DT)) u_ring (
    .start(start), .stop(stop), .amp(inv_amp), .last_hi(last_hi)
  );

  tdc_counter #(.WIDTH(SA_COUNT_W)) u_cnt (
    .cnt_in(last_hi), .stop(1'b0), .clr_n(start), .count(count)
  );
endmodule
