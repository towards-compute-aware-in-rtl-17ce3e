// crossbar: the switch's Crossbar.
//
// Moves one packet per output port per cycle: output o is driven by the
// head packet of VC out_vc[o] of input port out_src[o], as granted by the
// switch arbiter.  Output ports are independent, so up to N_PORTS packets
// cross in the same cycle.
//
// Paper: a crossbar between the ports.  Own choice: a full N x N
// multiplexer of whole packets.
//
// Interface: per input port and VC the head packet; per output port the
// grant (valid, source port, source VC); out: valid and packet per output.
// Timing: combinational.
module crossbar
  import cais_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned NUM_VC  = 8,
  localparam int unsigned PORT_W = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned VC_W   = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  pkt_t               in_pkt  [N_PORTS][NUM_VC],
  input  logic [N_PORTS-1:0] sel_valid,
  input  logic [PORT_W-1:0]  sel_src [N_PORTS],
  input  logic [VC_W-1:0]    sel_vc  [N_PORTS],
  output logic [N_PORTS-1:0] out_valid,
  output pkt_t               out_pkt [N_PORTS]
);
  for (genvar o = 0; o < N_PORTS; o++) begin : g_out
    assign out_valid[o] = sel_valid[o];
    assign out_pkt[o]   = in_pkt[sel_src[o]][sel_vc[o]];
  end
endmodule
