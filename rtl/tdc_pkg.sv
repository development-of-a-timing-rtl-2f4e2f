// tdc_pkg: sizes shared by the two ring-oscillator TDCs.
//
// Fully digital (Vernier-style) TDC: a ring of 20 inverters closed through a
// START-controlled NAND (21 inverting stages), an open auxiliary chain of 22
// inverters, 21 differential sampling flip-flops and a 7-bit pass counter.
// Semi-analog TDC: a ring of 9 inverting stages (NAND plus 8 inverters) whose
// node voltages are frozen by power switches at STOP, and a 6-bit counter.
// All of these counts are the published ones. The amplitude resolution of the
// semi-analog model (AMP_FULL) is a modelling choice only: on silicon these
// lines are analog and are digitised off chip.
package tdc_pkg;
  timeunit 1ps; timeprecision 1fs;

  // Fully digital TDC
  localparam int unsigned FD_RING_INV = 20;               // inverters in the ring
  localparam int unsigned FD_AUX_INV  = 22;               // inverters in the auxiliary chain
  localparam int unsigned FD_N_FF     = 21;               // differential flip-flops, INV[20:0]
  localparam int unsigned FD_COUNT_W  = 7;                // COUNT[6:0]

  // Semi-analog TDC
  localparam int unsigned SA_STAGES   = 9;                // NAND + 8 inverters, INV[8:0]
  localparam int unsigned SA_COUNT_W  = 6;                // COUNT[5:0]

  // Amplitude code used by the semi-analog model for a normalised node voltage:
  // 0 is ground, AMP_FULL is the supply.
  localparam int unsigned AMP_W       = 10;
  localparam int unsigned AMP_FULL    = 1000;
  typedef logic [AMP_W-1:0] amp_t;
endpackage
