// tb_diff_dff: self-checking test of the differential sampling flip-flop.
// Drives all four input combinations and random sequences; after every rising
// edge of stop q must equal d AND NOT d_n, and input changes without an edge
// must not disturb q.
module tb_diff_dff;
  timeunit 1ps; timeprecision 1fs;
  logic d, d_n, stop, q;
  int checks = 0, failures = 0;

  diff_dff dut (.d(d), .d_n(d_n), .stop(stop), .q(q));

  task automatic sample(input logic a, input logic b);
    logic expq;
    d = a; d_n = b; #10;
    stop = 1'b1; #1;
    expq = a & ~b;
    checks++;
    if (q !== expq) begin failures++; $display("FAIL d=%b d_n=%b q=%b exp=%b", a, b, q, expq); end
    // inputs move while stop is high: q must hold
    d = ~a; d_n = ~b; #5;
    checks++;
    if (q !== expq) begin failures++; $display("FAIL q changed without edge"); end
    stop = 1'b0; #5;
    d = $urandom_range(1); d_n = $urandom_range(1); #5;
    checks++;
    if (q !== expq) begin failures++; $display("FAIL q changed on falling stop"); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    stop = 1'b0; d = 0; d_n = 1; #10;
    sample(0, 0); sample(0, 1); sample(1, 0); sample(1, 1);
    repeat (200) sample(1'($urandom_range(1)), 1'($urandom_range(1)));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
