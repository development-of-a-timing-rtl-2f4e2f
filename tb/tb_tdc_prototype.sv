// tb_tdc_prototype: end-to-end test of both TDCs at their default sizes.
//
// It plays the part of the test system: a delay generator that puts a
// programmable interval between START and STOP (here in 1 ps steps over
// 0..10 ns for the fully digital TDC and 5 ps steps over 0..10 ns for the
// semi-analog TDC), and the readout of COUNT|INV, through a 1-bit and a 3-bit
// ADC for the analog lines. Every reading is compared with the analytic
// reference. The sweep also checks that the fully digital TDC never returns
// to a code it has left, i.e. that each COUNT|INV maps to one time interval,
// and that 3-bit digitisation of the analog lines yields more distinct codes,
// i.e. finer time bins, than 1-bit digitisation, and prints the mean and
// widest time bin of one code for both TDCs (with noiseless models the bin
// width is what the measured spread of one output reduces to).
//
// Mechanisms counted (each must occur at least once): rest state all zero,
// counter increments (wave wrapped round the ring), second-half INV patterns
// (zeros shifting in), outputs frozen after STOP, counter cleared by START
// low, semi-analog amplitudes held by the power switches, semi-analog nodes
// caught mid-transition, semi-analog counter increments.
module tb_tdc_prototype;
  timeunit 1ps; timeprecision 1fs;
  import tdc_ref_pkg::*;
  localparam real TI = 28.0, TN = 30.0;
  localparam int  H  = 100;

  logic fd_start, fd_stop, sa_start, sa_stop;
  logic [20:0]     fd_inv;
  logic [6:0]      fd_count;
  logic [8:0][9:0] sa_inv_amp;
  logic [5:0]      sa_count;

  int checks = 0, failures = 0;
  int m_rest = 0, m_wrap = 0, m_second = 0, m_freeze = 0, m_clear = 0;
  int m_hold = 0, m_mid = 0, m_sa_wrap = 0;
  int fd_codes = 0, sa_codes1 = 0, sa_codes3 = 0;
  int fd_bin_max = 0, sa_bin_max = 0;   // widest time bin of one code, ps

  tdc_prototype dut (
    .fd_start(fd_start), .fd_stop(fd_stop), .fd_inv(fd_inv), .fd_count(fd_count),
    .sa_start(sa_start), .sa_stop(sa_stop), .sa_inv_amp(sa_inv_amp), .sa_count(sa_count)
  );

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("FAIL %s", msg);
  endtask

  task automatic fd_measure(input real d, output logic [27:0] code);
    logic [20:0] e_inv;
    logic [6:0]  e_cnt;
    fd_expect(d, TI, TN, e_inv, e_cnt);
    fd_start = 1'b1;
    #(d);
    fd_stop = 1'b1;
    #2;
    checks++;
    if (fd_inv !== e_inv || fd_count !== e_cnt)
      fail($sformatf("fd d=%0.1f got %0d|%b exp %0d|%b", d, fd_count, fd_inv, e_cnt, e_inv));
    code = {fd_count, fd_inv};
    if (fd_count != 0) m_wrap++;
    if (fd_inv[0] == 1'b0 && fd_inv != '0) m_second++;
    #300;
    checks++;
    if ({fd_count, fd_inv} !== code) fail("fd output moved after STOP");
    else m_freeze++;
    fd_start = 1'b0;
    #2;
    checks++;
    if (fd_count !== '0) fail("fd counter not cleared"); else m_clear++;
    #1800;
    fd_stop = 1'b0;
    #20;
  endtask

  task automatic sa_measure(input int n, output logic [14:0] c1, output logic [32:0] c3);
    int e_amp [9];
    logic [5:0] e_cnt;
    logic [8:0][9:0] held;
    sa_expect(n, H, e_amp, e_cnt);
    sa_start = 1'b1;
    #(n);
    sa_stop = 1'b1;
    #3;
    checks++;
    if (sa_count !== e_cnt) fail($sformatf("sa n=%0d count=%0d exp %0d", n, sa_count, e_cnt));
    if (sa_count != 0) m_sa_wrap++;
    for (int k = 0; k < 9; k++) begin
      int q3;
      checks++;
      if (int'(sa_inv_amp[k]) != e_amp[k])
        fail($sformatf("sa n=%0d inv[%0d]=%0d exp %0d", n, k, sa_inv_amp[k], e_amp[k]));
      q3 = int'(sa_inv_amp[k]) * 8 / 1001;
      c3[3*k +: 3] = 3'(q3);
      c1[k] = sa_inv_amp[k] > 10'd500;
      c3[32:27] = sa_count;
      c1[14:9]  = sa_count;
      if (q3 > 0 && q3 < 7) m_mid++;
    end
    held = sa_inv_amp;
    #1000;
    checks++;
    if (sa_inv_amp !== held) fail("sa amplitudes moved while stopped"); else m_hold++;
    sa_start = 1'b0;
    #2;
    sa_stop = 1'b0;
    #1500;
  endtask

  initial begin
    #2000000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [27:0] code, prev;
    bit seen [logic [27:0]];
    bit seen1 [logic [14:0]];
    bit seen3 [logic [32:0]];
    fd_start = 1'b1; fd_stop = 1'b1; sa_start = 1'b1; sa_stop = 1'b0;
    #10;
    fd_start = 1'b0; sa_start = 1'b0;
    #3000;
    fd_stop = 1'b0; #10; fd_stop = 1'b1; #2;
    checks++;
    if (fd_inv !== '0 || fd_count !== '0) fail("fd rest state not zero"); else m_rest++;
    fd_stop = 1'b0; #100;

    fork
      begin : fd_sweep
        int run;
        prev = '1;
        run = 0;
        for (int i = 0; i <= 10000; i++) begin
          fd_measure(i + 0.5, code);
          if (code == prev) run++;
          else begin
            if (i > 0 && run > fd_bin_max) fd_bin_max = run;
            run = 1;
            checks++;
            if (seen.exists(code)) fail($sformatf("fd code %h reappeared at d=%0d", code, i));
            seen[code] = 1'b1;
            prev = code;
          end
        end
        fd_codes = seen.num();
      end
      begin : sa_sweep
        logic [14:0] c1;
        logic [32:0] c3, c3_prev;
        int run;
        #0.5;
        c3_prev = '1;
        run = 0;
        for (int n = 1; n <= 10000; n += 5) begin
          sa_measure(n, c1, c3);
          if (c3 == c3_prev) run += 5;
          else begin
            if (n > 1 && run > sa_bin_max) sa_bin_max = run;
            run = 5;
            c3_prev = c3;
          end
          seen1[c1] = 1'b1;
          seen3[c3] = 1'b1;
        end
        sa_codes1 = seen1.num();
        sa_codes3 = seen3.num();
      end
    join

    $display("fd: %0d distinct COUNT|INV codes over 0..10 ns, mean bin %0.1f ps, widest %0d ps",
             fd_codes, 10000.0 / fd_codes, fd_bin_max);
    $display("sa: %0d distinct codes with 1-bit, %0d with 3-bit digitisation (3-bit: mean bin %0.1f ps, widest %0d ps)",
             sa_codes1, sa_codes3, 10000.0 / sa_codes3, sa_bin_max);
    $display("mechanisms: rest=%0d wrap=%0d second_half=%0d freeze=%0d clear=%0d sa_hold=%0d sa_mid=%0d sa_wrap=%0d",
             m_rest, m_wrap, m_second, m_freeze, m_clear, m_hold, m_mid, m_sa_wrap);
    checks++;
    if (m_rest == 0 || m_wrap == 0 || m_second == 0 || m_freeze == 0 || m_clear == 0 ||
        m_hold == 0 || m_mid == 0 || m_sa_wrap == 0) fail("a mechanism never occurred");
    checks++;
    if (!(sa_codes3 > sa_codes1)) fail("3-bit digitisation gave no finer bins");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
