// tb_fd_aux_chain: self-checking test of the open auxiliary inverter chain
// model. The input is toggled at random intervals longer than the chain delay
// resolution; output k must equal the input as it was (k+1)*T_INV earlier,
// inverted k+1 times.
module tb_fd_aux_chain;
  timeunit 1ps; timeprecision 1fs;
  localparam int N = 22;
  localparam real TI = 28.0;
  logic in;
  logic [N-1:0] s;
  int checks = 0, failures = 0;

  function automatic real fabs(real x);
    return (x < 0.0) ? -x : x;
  endfunction
  // history of input edges
  realtime edge_t [$];
  logic    edge_v [$];

  fd_aux_chain dut (.in(in), .s(s));

  function automatic logic in_at(realtime t);
    logic v = edge_v[0];
    foreach (edge_t[i]) if (edge_t[i] <= t) v = edge_v[i];
    return v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = 1'b1; edge_t.push_back(0.0); edge_v.push_back(1'b1);
    #2000;
    repeat (300) begin
      #($urandom_range(40, 400) * 1.0 + 0.25);
      in = ~in; edge_t.push_back($realtime); edge_v.push_back(in);
      #($urandom_range(1, 39) * 1.0);
      for (int k = 0; k < N; k++) begin
        realtime tk;
        logic    expv;
        bit      near;
        tk   = $realtime - (k + 1) * TI;
        expv = in_at(tk) ^ 1'((k + 1) % 2);
        // skip samples within 0.5 ps of an input edge seen at this output
        near = 0;
        foreach (edge_t[i]) if (fabs(edge_t[i] - tk) < 0.5) near = 1;
        if (!near) begin
          checks++;
          if (s[k] !== expv) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0t s[%0d]=%b exp %b", $realtime, k, s[k], expv);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
