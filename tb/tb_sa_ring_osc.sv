// tb_sa_ring_osc: self-checking test of the semi-analog ring model and its
// power switches. START rises half a step after a model step; STOP rises
// n steps later. The frozen node amplitudes and the number of transitions of
// last_hi are compared with the analytic reference, and the amplitudes must
// not move while STOP is high, even after START falls.
module tb_sa_ring_osc;
  timeunit 1ps; timeprecision 1fs;
  import tdc_ref_pkg::*;
  localparam int H = 100;   // T_RISE/2 in steps
  logic start, stop, last_hi;
  logic [8:0][9:0] amp;
  int checks = 0, failures = 0, edges = 0;

  sa_ring_osc dut (.start(start), .stop(stop), .amp(amp), .last_hi(last_hi));

  always @(last_hi) if (start) edges++;

  task automatic measure(input int n);
    int e_amp [9];
    logic [5:0] e_cnt;
    logic [8:0][9:0] held;
    sa_expect(n, H, e_amp, e_cnt);
    edges = 0;
    start = 1'b1;
    #(n);
    stop = 1'b1;
    #3;
    checks++;
    for (int k = 0; k < 9; k++)
      if (int'(amp[k]) != e_amp[k]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d amp[%0d]=%0d exp %0d", n, k, amp[k], e_amp[k]);
      end
    checks++;
    if (6'(edges) != e_cnt) begin failures++; $display("FAIL n=%0d edges=%0d exp %0d", n, edges, e_cnt); end
    held = amp;
    #500; start = 1'b0; #1500;
    checks++;
    if (amp !== held) begin failures++; $display("FAIL n=%0d amplitudes moved while stopped", n); end
    stop = 1'b0;
    #4000;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b0; stop = 1'b0;
    #4000.5;                         // off the model's step grid
    checks++;
    for (int k = 0; k < 9; k++)
      if (int'(amp[k]) != ((k % 2 == 0) ? 1000 : 0)) begin failures++; $display("FAIL rest amp[%0d]=%0d", k, amp[k]); end
    for (int n = 1; n < 2000; n += 37) measure(n);
    repeat (40) measure($urandom_range(1, 10000));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
