// tb_fd_ring_osc: self-checking test of the fully digital ring oscillator
// model. Checks the alternating rest state with START low and, after START
// rises, the level of every node just before and just after its expected
// switching times T_NAND + k*T_INV + p*(T_NAND + 20*T_INV) for several passes.
module tb_fd_ring_osc;
  timeunit 1ps; timeprecision 1fs;
  localparam int N = 20;
  localparam real TI = 28.0, TN = 30.0, L = TN + N * TI;
  logic start;
  logic [N:0] node;
  int checks = 0, failures = 0;

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  fd_ring_osc dut (.start(start), .node(node));

  // number of transitions of node k in the interval (0, t) after START
  function automatic int ntr(int k, real t);
    real a = TN + k * TI;
    return (t > a) ? int'($floor((t - a) / L)) + 1 : 0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    realtime t0;
    start = 1'b1; #5; start = 1'b0; #3000;
    for (int k = 0; k <= N; k++) begin
      checks++;
      if (node[k] !== 1'(k % 2 == 0)) begin failures++; $display("FAIL rest node %0d", k); end
    end
    for (int rep = 0; rep < 3; rep++) begin
      start = 1'b1; t0 = $realtime;
      // sample at many random instants over 8 loops
      for (int i = 0; i < 200; i++) begin
        real t;
        t = $realtime - t0 + 3.0 + $urandom_range(200);
        #(t - ($realtime - t0));
        if (t < 8 * L) begin
          for (int k = 0; k <= N; k++) begin
            logic expv;
            expv = 1'(k % 2 == 0) ^ 1'(ntr(k, t) % 2);
            // keep clear of the edges
            if (fabs((t - TN - k * TI) - L * $floor((t - TN - k * TI) / L)) > 0.5) begin
              checks++;
              if (node[k] !== expv) begin
                failures++;
                if (failures < 10) $display("FAIL t=%0.1f node %0d = %b exp %b", t, k, node[k], expv);
              end
            end
          end
        end
      end
      start = 1'b0; #5000;
      for (int k = 0; k <= N; k++) begin
        checks++;
        if (node[k] !== 1'(k % 2 == 0)) begin failures++; $display("FAIL rest after stop node %0d", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
