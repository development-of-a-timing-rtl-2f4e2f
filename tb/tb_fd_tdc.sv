// tb_fd_tdc: self-checking test of the fully digital TDC at its default
// sizes (21 INV bits, 7-bit COUNT). Each measurement raises START, raises STOP
// d later and compares INV and COUNT with the analytic reference; it then
// checks that COUNT stays frozen while STOP is high, lowers START (clearing
// the counter) and waits for the chains to settle. d covers the rest state,
// the published example code 000000000011111111111 and random values over
// the 0..10 ns range of the measurements, in 1 ps steps plus half a ps so
// that no STOP coincides with an edge.
module tb_fd_tdc;
  timeunit 1ps; timeprecision 1fs;
  import tdc_ref_pkg::*;
  localparam real TI = 28.0, TN = 30.0;
  logic start, stop;
  logic [20:0] inv;
  logic [6:0]  count;
  int checks = 0, failures = 0;

  fd_tdc dut (.start(start), .stop(stop), .inv(inv), .count(count));

  task automatic measure(input real d);
    logic [20:0] e_inv;
    logic [6:0]  e_cnt, held;
    fd_expect(d, TI, TN, e_inv, e_cnt);
    start = 1'b1;
    #(d);
    stop = 1'b1;
    #2;
    checks++;
    if (inv !== e_inv || count !== e_cnt) begin
      failures++;
      if (failures < 10) $display("FAIL d=%0.1f got %0d|%b exp %0d|%b", d, count, inv, e_cnt, e_inv);
    end
    held = count;
    #1000;
    checks++;
    if (count !== held || inv !== e_inv) begin failures++; $display("FAIL d=%0.1f output moved after STOP", d); end
    start = 1'b0;
    #3000;
    stop = 1'b0;
    #100;
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 1'b1; stop = 1'b1; #10;
    start = 1'b0; #3000;
    stop = 1'b0; #10; stop = 1'b1; #2;   // read the rest state
    checks++;
    if (inv !== '0 || count !== '0) begin failures++; $display("FAIL rest state %0d|%b", count, inv); end
    stop = 1'b0; #100;
    // published example: the wave has passed the first 11 stages
    measure(TN + 11 * TI + 10.5);
    checks++;
    if (inv !== 21'b000000000011111111111) begin failures++; $display("FAIL example code %b", inv); end
    for (int i = 0; i < 60; i++) measure(i * 7.0 + 0.5);           // first loops, fine steps
    repeat (200) measure($urandom_range(10000) + 0.5);             // 0..10 ns
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
