// fd_ring_osc: behavioural model of the ring oscillator of the fully digital TDC.
// This is not synthesizable logic: on silicon it is a full-custom chain of fast
// inverters whose propagation delay is the time base of the TDC.
//
// A NAND gate, one input of which is START, closes a ring of N_INV inverters,
// giving N_INV+1 inverting stages (an odd number). node[0] is the NAND output
// and node[k] the output of the k-th inverter; node[N_INV] feeds the NAND.
// With START low the NAND output is 1 and the nodes rest at 1,0,1,0,...
// (node[k] = 1 for even k). When START rises the NAND acts as an inverter and
// a single inversion wave runs round the ring, node[k] switching at
// T_NAND + k*T_INV after START and then once every loop time
// T_NAND + N_INV*T_INV.
//
// Each stage is a transport delay. The ring is a combinational loop by
// nature; a tool that ignores the delays reports it as a logic loop.
// Interface: start in, node[N_INV:0] out.
// The stage counts and the NAND with START follow the published design;
// the delay values are assumptions (they are not published).
module fd_ring_osc #(
  parameter int unsigned N_INV  = tdc_pkg::FD_RING_INV,
  parameter real         T_INV  = 28.0,  // ps, one inverter
  parameter real         T_NAND = 30.0   // ps, the START NAND
) (
  input  logic             start,
  output logic [N_INV:0]   node
);
  timeunit 1ps; timeprecision 1fs;

  logic nand_y;
  always begin
    nand_y <= #(T_NAND) ~(start & node[N_INV]);
    @(start or node[N_INV]);
  end
  assign node[0] = nand_y;

  for (genvar k = 1; k <= N_INV; k++) begin : g_inv
    logic y;
    always begin
      y <= #(T_INV) ~node[k-1];
      @(node[k-1]);
    end
    assign node[k] = y;
  end
endmodule
