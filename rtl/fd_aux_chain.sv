// fd_aux_chain: behavioural model of the open auxiliary (secondary) inverter
// chain of the fully digital TDC. Not synthesizable: on silicon these are
// full-custom fast inverters identical to those of the ring.
//
// The chain is driven by the NAND output of the ring (node[0]). Its first
// inverter gives s[0] = NOT node[0]; inverter k gives s[k] = NOT s[k-1], so
// s[k] is the complement of ring node k, delayed by one inverter. The sampling
// flip-flops read the pairs (node[k], s[k]) for k = 0..N_INV-2, and the last
// output s[N_INV-1] drives the pass counter. At rest s[k] = 1 for odd k.
//
// Each stage is a transport delay of T_INV. Interface: in (NAND output),
// s[N_INV-1:0] out. The 22 inverters follow the published design; the delay
// value is an assumption.
module fd_aux_chain #(
  parameter int unsigned N_INV = tdc_pkg::FD_AUX_INV,
  parameter real         T_INV = 28.0   // ps
) (
  input  logic             in,
  output logic [N_INV-1:0] s
);
  timeunit 1ps; timeprecision 1fs;

  for (genvar k = 0; k < N_INV; k++) begin : g_inv
    logic a, y;
    if (k == 0) begin : g_first
      assign a = in;
    end else begin : g_next
      assign a = s[k-1];
    end
    always begin
      y <= #(T_INV) ~a;
      @(a);
    end
    assign s[k] = y;
  end
endmodule
