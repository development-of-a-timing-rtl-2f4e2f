// tdc_prototype: the two TDC test structures side by side.
//
// The fully digital TDC and the semi-analog TDC were made as separate test
// structures (in two different 110 nm processes), each with its own START and
// STOP inputs and its own outputs; in the test system one of them at a time
// receives a START/STOP pair from a programmable delay generator, its COUNT
// bus goes to an FPGA and, for the semi-analog TDC, its INV lines go through an
// ADC. This module simply places both TDCs under one top so that both can be
// driven and read in one simulation; it adds no logic of its own.
//
// Interface: fd_start, fd_stop -> fd_inv[20:0], fd_count[6:0];
//            sa_start, sa_stop -> sa_inv_amp[8:0], sa_count[5:0].
module tdc_prototype (
  input  logic                                            fd_start,
  input  logic                                            fd_stop,
  output logic [tdc_pkg::FD_N_FF-1:0]                     fd_inv,
  output logic [tdc_pkg::FD_COUNT_W-1:0]                  fd_count,
  input  logic                                            sa_start,
  input  logic                                            sa_stop,
  output logic [tdc_pkg::SA_STAGES-1:0][tdc_pkg::AMP_W-1:0] sa_inv_amp,
  output logic [tdc_pkg::SA_COUNT_W-1:0]                  sa_count
);
  timeunit 1ps; timeprecision 1fs;

  fd_tdc u_fd (.start(fd_start), .stop(fd_stop), .inv(fd_inv), .count(fd_count));
  sa_tdc u_sa (.start(sa_start), .stop(sa_stop), .inv_amp(sa_inv_amp), .count(sa_count));
endmodule
