// tb_sa_tdc: self-checking test of the semi-analog TDC at its default sizes
// (9 INV lines, 6-bit COUNT). For each START-STOP interval the held INV
// amplitudes and COUNT are compared with the analytic reference. The lines are
// also digitised as a 1-bit and a 3-bit ADC would do; the test counts how
// often a 3-bit reading resolves a node caught mid-transition, which is the
// source of the finer resolution of this TDC.
module tb_sa_tdc;
  timeunit 1ps; timeprecision 1fs;
  import tdc_ref_pkg::*;
  localparam int H = 100;
  logic start, stop;
  logic [8:0][9:0] inv_amp;
  logic [5:0] count;
  int checks = 0, failures = 0, mid = 0;

  sa_tdc dut (.start(start), .stop(stop), .inv_amp(inv_amp), .count(count));

  task automatic measure(input int n);
    int e_amp [9];
    logic [5:0] e_cnt;
    sa_expect(n, H, e_amp, e_cnt);
    start = 1'b1;
    #(n);
    stop = 1'b1;
    #3;
    checks++;
    if (count !== e_cnt) begin failures++; $display("FAIL n=%0d count=%0d exp %0d", n, count, e_cnt); end
    for (int k = 0; k < 9; k++) begin
      int q3;
      checks++;
      if (int'(inv_amp[k]) != e_amp[k]) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d inv[%0d]=%0d exp %0d", n, k, inv_amp[k], e_amp[k]);
      end
      q3 = int'(inv_amp[k]) * 8 / 1001;    // 3-bit ADC code
      if (q3 > 0 && q3 < 7) mid++;
    end
    #500; start = 1'b0; #500;
    checks++;
    if (count !== '0) begin failures++; $display("FAIL counter not cleared by START low"); end
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
    start = 1'b1; stop = 1'b0; #10;
    start = 1'b0;
    #4000.5;
    for (int n = 5; n < 2000; n += 53) measure(n);
    repeat (40) measure($urandom_range(1, 10000));
    checks++;
    if (mid == 0) begin failures++; $display("FAIL no node caught mid-transition"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
