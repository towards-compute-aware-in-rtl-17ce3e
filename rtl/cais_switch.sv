// cais_switch: a compute-aware in-switch computing (CAIS) switch.
//
// N_PORTS ports, one per GPU, each with its own merge unit on the egress
// side, a shared routing table, a round-robin arbiter and a crossbar that
// move packets from the ports' input virtual channels to their output
// sides, and the Group Sync Table that counts TB-group sync requests and
// broadcasts releases.  A mergeable request for GPU h's memory is routed to
// port h and meets there every other request for the same 128 B line, so the
// merge unit of port h can merge them: one load is sent to GPU h and its
// data is replicated to all requesters; reductions are summed and one sum is
// written to GPU h.
//
// Paper: ports, routing table, arbiter, crossbar, merge unit per port,
// Group Sync Table (switch diagram and architecture-support figure); sizes
// 40 KB / 320-entry merge table per port, eight 256-deep VCs per input
// port, round-robin arbitration.  Own choices: see the submodules.
//
// Interface: per port an rx stream (GPU -> switch) and a tx stream
// (switch -> GPU) of cais_pkg::pkt_t with valid/ready; a routing-table write
// port; per-port merge events and occupancy; a release event.
// Timing: a packet needs at least three cycles from rx to tx (VC, egress
// queue, egress multiplexer).
module cais_switch
  import cais_pkg::*;
#(
  parameter int unsigned N_PORTS     = 8,
  parameter int unsigned N_GPU       = 8,
  parameter int unsigned NUM_VC      = 8,
  parameter int unsigned VC_DEPTH    = 256,
  parameter int unsigned ENTRIES     = 320,
  parameter int unsigned TIMEOUT     = 4096,
  parameter int unsigned GST_ENTRIES = 64,
  localparam int unsigned PORT_W     = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned VC_W       = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_PORTS-1:0]  rx_valid,
  output logic [N_PORTS-1:0]  rx_ready,
  input  pkt_t                rx_pkt [N_PORTS],
  output logic [N_PORTS-1:0]  tx_valid,
  input  logic [N_PORTS-1:0]  tx_ready,
  output pkt_t                tx_pkt [N_PORTS],
  input  logic                rt_cfg_we,
  input  logic [GPU_ID_W-1:0] rt_cfg_gpu,
  input  logic [PORT_W-1:0]   rt_cfg_port,
  output merge_ev_t           ev [N_PORTS],
  output logic [15:0]         occupancy [N_PORTS],
  output logic                ev_release
);
  logic [GPU_ID_W-1:0] rt_dst   [N_PORTS];
  logic [PORT_W-1:0]   rt_oport [N_PORTS];
  logic [NUM_VC-1:0]   head_valid [N_PORTS];
  pkt_t                head_pkt   [N_PORTS][NUM_VC];
  logic [PORT_W-1:0]   head_oport [N_PORTS][NUM_VC];
  logic [NUM_VC-1:0]   pop        [N_PORTS];
  logic [NUM_VC-1:0]   xin_ready  [N_PORTS];
  logic [N_PORTS-1:0]  xout_valid, sel_valid;
  pkt_t                xout_pkt   [N_PORTS];
  logic [PORT_W-1:0]   sel_src    [N_PORTS];
  logic [VC_W-1:0]     sel_vc     [N_PORTS];
  logic [N_PORTS-1:0]  sync_valid, sync_ready, rel_ready;
  pkt_t                sync_pkt   [N_PORTS];
  logic                rel_valid;
  logic [GROUP_W:0]    rel_key;

  routing_table #(.N_PORTS(N_PORTS), .N_GPU(N_GPU)) u_rt (
    .clk, .rst_n, .dst (rt_dst), .oport (rt_oport),
    .cfg_we (rt_cfg_we), .cfg_gpu (rt_cfg_gpu), .cfg_port (rt_cfg_port)
  );

  for (genvar p = 0; p < N_PORTS; p++) begin : g_port
    cais_port #(
      .PORT_ID (p), .N_GPU (N_GPU), .N_PORTS (N_PORTS), .NUM_VC (NUM_VC),
      .VC_DEPTH (VC_DEPTH), .ENTRIES (ENTRIES), .TIMEOUT (TIMEOUT)
    ) u_port (
      .clk, .rst_n,
      .rx_valid (rx_valid[p]), .rx_ready (rx_ready[p]), .rx_pkt (rx_pkt[p]),
      .tx_valid (tx_valid[p]), .tx_ready (tx_ready[p]), .tx_pkt (tx_pkt[p]),
      .rt_dst (rt_dst[p]), .rt_oport (rt_oport[p]),
      .vc_head_valid (head_valid[p]), .vc_head_pkt (head_pkt[p]),
      .vc_head_oport (head_oport[p]), .vc_pop (pop[p]),
      .xin_valid (xout_valid[p]), .xin_ready (xin_ready[p]), .xin_pkt (xout_pkt[p]),
      .sync_valid (sync_valid[p]), .sync_ready (sync_ready[p]), .sync_pkt (sync_pkt[p]),
      .rel_valid (rel_valid), .rel_ready (rel_ready[p]), .rel_key (rel_key),
      .ev (ev[p]), .occupancy (occupancy[p])
    );
  end

  switch_arbiter #(.N_PORTS(N_PORTS), .NUM_VC(NUM_VC)) u_arb (
    .clk, .rst_n, .head_valid, .head_oport, .out_ready (xin_ready),
    .pop, .out_valid (sel_valid), .out_src (sel_src), .out_vc (sel_vc)
  );

  crossbar #(.N_PORTS(N_PORTS), .NUM_VC(NUM_VC)) u_xbar (
    .in_pkt (head_pkt), .sel_valid, .sel_src, .sel_vc,
    .out_valid (xout_valid), .out_pkt (xout_pkt)
  );

  group_sync_table #(.N_PORTS(N_PORTS), .N_GPU(N_GPU), .ENTRIES(GST_ENTRIES)) u_gst (
    .clk, .rst_n, .sync_valid, .sync_ready, .sync_pkt,
    .rel_valid, .rel_ready, .rel_key, .ev_release
  );
endmodule
