// fd_tdc: the fully digital TDC (Vernier-style ring-oscillator TDC).
//
// Operation. With START and STOP low the NAND output is 1 and both inverter
// chains rest in alternating states; the pass counter is held at zero. When
// START rises an inversion wave runs round the 21-stage ring and, one
// inverter behind, down the 22-inverter auxiliary chain, whose last output
// clocks the 7-bit counter once per pass. When STOP rises the 21 differential
// flip-flops sample the pairs (ring node k, auxiliary node k) and the counter
// stops. INV[k] is 1 when the wave has passed stage k an odd number of times,
// so within a pass INV reads as a thermometer code, e.g.
// 000000000011111111111 when the wave has passed the first 11 stages. The
// pair COUNT|INV is then mapped to the START-STOP interval by calibration
// off chip; INV is the fractional part of the integer COUNT.
//
// Flip-flop polarity alternates: for even k D is the auxiliary node and D_N
// the ring node, for odd k the other way round, so that every INV bit reads 0
// at rest.
//
// Interface: start, stop in; inv[20:0], count[6:0] out. inv is valid after
// the rising edge of stop; count is frozen while stop is high and cleared
// while start is low.
//
// The structure (ring of 20 inverters closed by a NAND on START, open chain
// of 22 inverters, 21 differential flip-flops, 7-bit counter on the last
// auxiliary inverter, all-zero INV at rest) follows the published design.
// The chains are behavioural delay models; delay values, the flip-flop's
// resolution rule and the counter's clear are this design's own choices.
module fd_tdc #(
  parameter real T_INV  = 28.0,   // ps
  parameter real T_NAND = 30.0    // ps
) (
  input  logic                           start,
  input  logic                           stop,
  output logic [tdc_pkg::FD_N_FF-1:0]    inv,
  output logic [tdc_pkg::FD_COUNT_W-1:0] count
);
  timeunit 1ps; timeprecision 1fs;
  import tdc_pkg::*;

  logic [FD_RING_INV:0]  node;   // ring: node[0] is the NAND output
  logic [FD_AUX_INV-1:0] s;      // auxiliary chain

  fd_ring_osc #(.N_INV(FD_RING_INV), .T_INV(T_INV), .T_NAND(T_NAND)) u_ring (
    .start(start), .node(node)
  );

  fd_aux_chain #(.N_INV(FD_AUX_INV), .T_INV(T_INV)) u_aux (
    .in(node[0]), .s(s)
  );

  for (genvar k = 0; k < FD_N_FF; k++) begin : g_ff
    if (k % 2 == 0) begin : g_even
      diff_dff u_ff (.d(s[k]),    .d_n(node[k]), .stop(stop), .q(inv[k]));
    end else begin : g_odd
      diff_dff u_ff (.d(node[k]), .d_n(s[k]),    .stop(stop), .q(inv[k]));
    end
  end

  tdc_counter #(.WIDTH(FD_COUNT_W)) u_cnt (
    .cnt_in(s[FD_AUX_INV-1]), .stop(stop), .clr_n(start), .count(count)
  );
endmodule
