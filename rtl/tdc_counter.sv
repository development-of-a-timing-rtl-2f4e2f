// tdc_counter: pass counter of a ring-oscillator TDC.
//
// Counts every transition of cnt_in, i.e. every time the inversion wave passes
// the node the counter is attached to, rising and falling alike. It counts
// only while stop is low and is held at zero while clr_n (the START input of
// the TDC) is low. The count wraps modulo 2**WIDTH.
//
// Realisation: two WIDTH-bit counters, one on each edge of cnt_in, with an
// asynchronous clear from clr_n; count is their sum modulo 2**WIDTH.
//
// Interface: cnt_in (last node of the chain), stop, clr_n, count[WIDTH-1:0].
// Timing: count is valid one edge after the last counted transition; once
// stop is high the value is held until clr_n goes low.
//
// The width (7 bits for the fully digital TDC, 6 for the semi-analog one) and
// the rule "the counter will increase each time this wave passes through the
// last node" follow the published design. Counting both edges, the clear by
// START and the gating by stop as a level are this design's own choices.
module tdc_counter #(
  parameter int unsigned WIDTH = tdc_pkg::FD_COUNT_W
) (
  input  logic             cnt_in,
  input  logic             stop,
  input  logic             clr_n,
  output logic [WIDTH-1:0] count
);
  timeunit 1ps; timeprecision 1fs;

  logic [WIDTH-1:0] n_rise, n_fall;

  always_ff @(posedge cnt_in or negedge clr_n) begin
    if (!clr_n)     n_rise <= '0;
    else if (!stop) n_rise <= n_rise + 1'b1;
  end

  always_ff @(negedge cnt_in or negedge clr_n) begin
    if (!clr_n)     n_fall <= '0;
    else if (!stop) n_fall <= n_fall + 1'b1;
  end

  assign count = n_rise + n_fall;
endmodule
