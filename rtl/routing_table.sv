// routing_table: the switch's Routing Table.
//
// It maps the destination GPU of a packet to the switch output port that
// leads to that GPU.  Requests carry the home GPU of their address (chosen
// by the GPU hub), responses carry the requester, so one table serves both.
// Every input port has its own lookup port.  The table is written through a
// configuration port and resets to the identity map (GPU g on port g).
//
// Paper: a routing table forwards requests to their target GPUs.  Own
// choices: indexing by GPU ID, the configuration port, identity reset.
//
// Interface: lookup i: `dst[i]` -> `oport[i]`, combinational.  Write:
// `cfg_we`, `cfg_gpu`, `cfg_port`, effective at the clock edge.
module routing_table
  import cais_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned N_GPU   = 8,
  localparam int unsigned PORT_W = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [GPU_ID_W-1:0] dst   [N_PORTS],
  output logic [PORT_W-1:0]   oport [N_PORTS],
  input  logic                cfg_we,
  input  logic [GPU_ID_W-1:0] cfg_gpu,
  input  logic [PORT_W-1:0]   cfg_port
);
  logic [PORT_W-1:0] tbl_q [2**GPU_ID_W];

  for (genvar i = 0; i < N_PORTS; i++) begin : g_lookup
    assign oport[i] = tbl_q[dst[i]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < 2**GPU_ID_W; g++) tbl_q[g] <= PORT_W'(g % N_GPU);
    end else if (cfg_we) begin
      tbl_q[cfg_gpu] <= cfg_port;
    end
  end
endmodule
