// tb_tdc_counter: self-checking test of the pass counter at its default
// 7-bit width. A reference count of input transitions seen while stop is low
// is kept in the testbench and compared with count after every transition;
// the test also checks the clear by clr_n, the freeze by stop and the
// wrap-around after 128 passes.
module tb_tdc_counter;
  timeunit 1ps; timeprecision 1fs;
  localparam int W = 7;
  logic cnt_in, stop, clr_n;
  logic [W-1:0] count;
  int checks = 0, failures = 0, ref_cnt = 0, wraps = 0, frozen = 0;

  tdc_counter dut (.cnt_in(cnt_in), .stop(stop), .clr_n(clr_n), .count(count));

  task automatic check(string what);
    checks++;
    if (count !== W'(ref_cnt)) begin
      failures++;
      $display("FAIL %s: count=%0d expected=%0d", what, count, W'(ref_cnt));
    end
  endtask

  task automatic toggle();
    cnt_in = ~cnt_in; #10;
    if (!stop && clr_n) ref_cnt++;
    if (stop) frozen++;
    check("toggle");
  endtask

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cnt_in = 1'b1; stop = 1'b0; clr_n = 1'b1; #10;
    clr_n = 1'b0; #10; ref_cnt = 0; check("clear");
    repeat (5) toggle();          // held at zero while clr_n low
    clr_n = 1'b1; #10;
    repeat (37) toggle();
    stop = 1'b1; #10;
    repeat (9) toggle();          // frozen
    stop = 1'b0; #10;
    repeat (300) begin            // passes 128 and 256: wrap-around
      toggle();
      if (count == 0) wraps++;
    end
    // random mix
    repeat (500) begin
      case ($urandom_range(9))
        0: begin stop = ~stop; #10; end
        1: begin clr_n = 1'b0; #10; ref_cnt = 0; check("clear"); clr_n = 1'b1; #10; end
        default: toggle();
      endcase
    end
    checks++;
    if (wraps == 0 || frozen == 0) begin failures++; $display("FAIL wrap or freeze not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
