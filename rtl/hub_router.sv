// hub_router: the GPU's hub towards the switches, with deterministic
// switch selection.
//
// A GPU is linked to every one of N_SWITCH switches.  For merging to work,
// all requests for the same address must meet in the same switch, so the
// hub chooses the switch by a fixed hash of the packet's 128 B line address
// (an XOR-fold into log2(N_SWITCH) bits); sync packets are hashed on their
// {phase, Group ID} key, so all GPUs' syncs of one group meet in one Group
// Sync Table.  A load response is hashed on the same address as its
// request and so returns to the switch that holds the merge session.  The
// hub also stamps requests with the GPU's ID as source and the home GPU of
// the address as destination.  Outbound, memory traffic from the GPU and
// sync requests from the synchronizer share the links round-robin; inbound,
// the links are merged round-robin and releases go to the synchronizer.
//
// Paper: deterministic routing by a lightweight hash of the request address
// (or a subset of its bits), similar to existing NVSwitch systems; the hub
// on the GPU.  Own choices: the XOR-fold hash, hashing syncs by group,
// stamping src / dst, round-robin merging.  N_SWITCH must be a power of two.
//
// Interface: gpu_tx / gpu_rx packet streams to the GPU memory system,
// sreq / sresp to the synchronizer, link_tx / link_rx arrays towards the
// switches.  Timing: combinational pass, no buffering.
module hub_router
  import cais_pkg::*;
#(
  parameter int unsigned N_SWITCH = 4,
  localparam int unsigned SW_W    = (N_SWITCH > 1) ? $clog2(N_SWITCH) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [GPU_ID_W-1:0]  gpu_id,
  // GPU memory system
  input  logic                 gpu_tx_valid,
  output logic                 gpu_tx_ready,
  input  pkt_t                 gpu_tx_pkt,
  output logic                 gpu_rx_valid,
  input  logic                 gpu_rx_ready,
  output pkt_t                 gpu_rx_pkt,
  // synchronizer
  input  logic                 sreq_valid,
  output logic                 sreq_ready,
  input  pkt_t                 sreq_pkt,
  output logic                 sresp_valid,
  input  logic                 sresp_ready,
  output pkt_t                 sresp_pkt,
  // links to the switches
  output logic [N_SWITCH-1:0]  link_tx_valid,
  input  logic [N_SWITCH-1:0]  link_tx_ready,
  output pkt_t                 link_tx_pkt [N_SWITCH],
  input  logic [N_SWITCH-1:0]  link_rx_valid,
  output logic [N_SWITCH-1:0]  link_rx_ready,
  input  pkt_t                 link_rx_pkt [N_SWITCH]
);
  localparam int unsigned SEL_BITS = $clog2(N_SWITCH);

  // ---- outbound ----
  logic [1:0]     o_gnt;
  logic           o_idx, o_any, o_ready;
  pkt_t           o_pkt;
  logic [SW_W-1:0] o_sw;

  rr_arbiter #(.N(2)) u_out_arb (
    .clk, .rst_n, .req ({sreq_valid, gpu_tx_valid}), .advance (o_ready),
    .gnt (o_gnt), .gnt_idx (o_idx), .any (o_any)
  );

  always_comb begin
    o_pkt = o_idx ? sreq_pkt : gpu_tx_pkt;
    if (o_pkt.ptype == PKT_LD_REQ || o_pkt.ptype == PKT_RED_REQ ||
        o_pkt.ptype == PKT_ST_REQ) begin
      o_pkt.src = gpu_id;
      o_pkt.dst = home_gpu(o_pkt.addr);
    end
    o_sw = SW_W'(switch_hash(o_pkt, SEL_BITS));
    for (int s = 0; s < N_SWITCH; s++) begin
      link_tx_valid[s] = o_any && o_sw == SW_W'(s);
      link_tx_pkt[s]   = o_pkt;
    end
  end
  assign o_ready      = link_tx_ready[o_sw];
  assign gpu_tx_ready = o_gnt[0] && o_ready;
  assign sreq_ready   = o_gnt[1] && o_ready;

  // ---- inbound ----
  logic [N_SWITCH-1:0] i_gnt;
  logic [SW_W-1:0]     i_idx;
  logic                i_any, i_is_rel, i_ready;
  pkt_t                i_pkt;

  rr_arbiter #(.N(N_SWITCH)) u_in_arb (
    .clk, .rst_n, .req (link_rx_valid), .advance (i_ready),
    .gnt (i_gnt), .gnt_idx (i_idx), .any (i_any)
  );
  assign i_pkt         = link_rx_pkt[i_idx];
  assign i_is_rel      = i_pkt.ptype == PKT_SYNC_REL;
  assign gpu_rx_valid  = i_any && !i_is_rel;
  assign gpu_rx_pkt    = i_pkt;
  assign sresp_valid   = i_any && i_is_rel;
  assign sresp_pkt     = i_pkt;
  assign i_ready       = i_is_rel ? sresp_ready : gpu_rx_ready;
  assign link_rx_ready = i_ready ? i_gnt : '0;
endmodule
