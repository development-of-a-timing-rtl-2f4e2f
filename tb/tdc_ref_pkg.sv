// tdc_ref_pkg: analytic reference for the testbenches of the two TDCs.
//
// Fully digital TDC, with inverter delay ti and NAND delay tn, START at 0:
// ring node k switches at tn + k*ti + p*L (L = tn + 20*ti, p = 0,1,...),
// auxiliary node k one inverter later, the counter input (auxiliary node 21)
// at tn + 22*ti + p*L. A flip-flop reads 1 when its D is 1 and its D_N 0.
// fd_expect returns the INV and COUNT a STOP at time d must capture.
//
// Semi-analog TDC model with T_RISE = 2*h and time step 1 (h a multiple of
// the step, amplitude step 5 for full scale 1000): node k starts its p-th
// ramp (k + 9p)*(h+1) steps after START is first seen, ramps take 2*h steps.
// sa_expect returns the frozen amplitudes and the count after n steps.
package tdc_ref_pkg;
  timeunit 1ps; timeprecision 1fs;

  function automatic int ntr(real a, real l, real t);
    return (t > a) ? int'($floor((t - a) / l)) + 1 : 0;
  endfunction

  function automatic void fd_expect(input real d, input real ti, input real tn,
                                    output logic [20:0] inv, output logic [6:0] count);
    real l = tn + 20.0 * ti;
    for (int k = 0; k <= 20; k++) begin
      logic ring, aux;
      ring = 1'(k % 2 == 0) ^ 1'(ntr(tn + k * ti, l, d) % 2);
      aux  = 1'(k % 2 == 1) ^ 1'(ntr(tn + (k + 1) * ti, l, d) % 2);
      inv[k] = (k % 2 == 0) ? (aux & ~ring) : (ring & ~aux);
    end
    count = 7'(ntr(tn + 22.0 * ti, l, d));
  endfunction

  // number of passes of the wave through the last ring node before d
  function automatic int fd_passes(input real d, input real ti, input real tn);
    return ntr(tn + 20.0 * ti, tn + 20.0 * ti, d);
  endfunction

  // n: model steps taken with START high and the switches closed
  function automatic void sa_expect(input int n, input int h,
                                    output int amp [9], output logic [5:0] count);
    int s = h + 1, c = 0;
    for (int k = 0; k < 9; k++) begin
      int hi;
      hi = (k % 2 == 0) ? 1000 : 0;    // level before the current ramp
      amp[k] = hi;
      for (int p = 0; n - (k + 9 * p) * s > 0; p++) begin
        int st;
        st = n - (k + 9 * p) * s;
        if (st > 2 * h) st = 2 * h;
        amp[k] = (hi == 1000) ? 1000 - 5 * st : 5 * st;
        hi = (hi == 1000) ? 0 : 1000;
      end
    end
    // last node: falls below threshold after h steps, rises above after h+1
    for (int p = 0; ; p++) begin
      int need;
      need = (p % 2 == 0) ? h : h + 1;
      if (n - (8 + 9 * p) * s >= need) c++;
      else break;
    end
    count = 6'(c);
  endfunction
endpackage
