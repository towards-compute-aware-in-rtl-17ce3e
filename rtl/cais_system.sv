// cais_system: a CAIS multi-GPU fabric, the top of this design.
//
// N_GPU GPUs are each linked to all N_SWITCH switches, as in a DGX-H100
// (eight GPUs, four NVSwitches).  Each GPU contributes its hub (deterministic
// switch selection) and its TB-group synchronizer; each switch has one CAIS
// port per GPU.  The GPUs themselves (SMs, TB and warp schedulers, memory)
// are outside this design: their memory traffic enters and leaves at the
// gpu_tx / gpu_rx ports, and their schedulers talk to the synchronizers
// through the sched_sync / sched_notify ports.
//
// What happens to a mergeable request: a GPU issues ld.cais or red.cais for
// a line homed on GPU h; its hub hashes the line address to pick switch s
// and sends the packet there; switch s routes it to its port h, whose merge
// unit merges it with the same request from the other GPUs.  Loads reach
// GPU h once and their data is fanned out; reductions reach GPU h as one
// sum.  A TB-group sync goes to the switch chosen by hashing the group, and
// its release comes back to every GPU.
//
// Paper: the system of the architecture figures and the evaluated
// configuration (8 GPUs, 4 NVSwitches, 40 KB / 320-entry merge table per
// switch port, eight 256-deep VCs).  Own choices: see the submodules; all
// switches share one routing-table write port, selected by rt_cfg_we.
//
// Interface: per GPU g, valid/ready packet streams gpu_tx[g] (GPU -> fabric)
// and gpu_rx[g] (fabric -> GPU), sched_sync[g] in and sched_notify[g] out;
// per switch and port the merge-event pulses and table occupancy.
module cais_system
  import cais_pkg::*;
#(
  parameter int unsigned N_GPU        = 8,
  parameter int unsigned N_SWITCH     = 4,
  parameter int unsigned NUM_VC       = 8,
  parameter int unsigned VC_DEPTH     = 256,
  parameter int unsigned ENTRIES      = 320,
  parameter int unsigned TIMEOUT      = 4096,
  parameter int unsigned GST_ENTRIES  = 64,
  parameter int unsigned SYNC_ENTRIES = 16,
  parameter int unsigned META_W       = 16,
  localparam int unsigned PORT_W      = (N_GPU > 1) ? $clog2(N_GPU) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // GPU memory systems
  input  logic [N_GPU-1:0]     gpu_tx_valid,
  output logic [N_GPU-1:0]     gpu_tx_ready,
  input  pkt_t                 gpu_tx_pkt [N_GPU],
  output logic [N_GPU-1:0]     gpu_rx_valid,
  input  logic [N_GPU-1:0]     gpu_rx_ready,
  output pkt_t                 gpu_rx_pkt [N_GPU],
  // TB / warp schedulers
  input  logic [N_GPU-1:0]     sched_sync_valid,
  output logic [N_GPU-1:0]     sched_sync_ready,
  input  logic [GROUP_W-1:0]   sched_sync_group [N_GPU],
  input  sync_phase_e          sched_sync_phase [N_GPU],
  input  logic [META_W-1:0]    sched_sync_meta  [N_GPU],
  output logic [N_GPU-1:0]     sched_notify_valid,
  input  logic [N_GPU-1:0]     sched_notify_ready,
  output logic [GROUP_W-1:0]   sched_notify_group [N_GPU],
  output sync_phase_e          sched_notify_phase [N_GPU],
  output logic [META_W-1:0]    sched_notify_meta  [N_GPU],
  // routing-table configuration
  input  logic [N_SWITCH-1:0]  rt_cfg_we,
  input  logic [GPU_ID_W-1:0]  rt_cfg_gpu,
  input  logic [PORT_W-1:0]    rt_cfg_port,
  // statistics
  output merge_ev_t            ev [N_SWITCH][N_GPU],
  output logic [15:0]          occupancy [N_SWITCH][N_GPU],
  output logic [N_SWITCH-1:0]  ev_release
);
  // links: hub g <-> switch s port g
  logic [N_SWITCH-1:0] up_valid   [N_GPU];
  logic [N_SWITCH-1:0] up_ready   [N_GPU];
  pkt_t                up_pkt     [N_GPU][N_SWITCH];
  logic [N_SWITCH-1:0] down_valid [N_GPU];
  logic [N_SWITCH-1:0] down_ready [N_GPU];
  pkt_t                down_pkt   [N_GPU][N_SWITCH];

  logic [N_GPU-1:0]    sw_rx_valid [N_SWITCH];
  logic [N_GPU-1:0]    sw_rx_ready [N_SWITCH];
  pkt_t                sw_rx_pkt   [N_SWITCH][N_GPU];
  logic [N_GPU-1:0]    sw_tx_valid [N_SWITCH];
  logic [N_GPU-1:0]    sw_tx_ready [N_SWITCH];
  pkt_t                sw_tx_pkt   [N_SWITCH][N_GPU];

  for (genvar g = 0; g < N_GPU; g++) begin : g_gpu
    logic sreq_valid, sreq_ready, sresp_valid, sresp_ready;
    pkt_t sreq_pkt, sresp_pkt;

    gpu_synchronizer #(.ENTRIES(SYNC_ENTRIES), .META_W(META_W)) u_sync (
      .clk, .rst_n, .gpu_id (GPU_ID_W'(g)),
      .sync_valid (sched_sync_valid[g]), .sync_ready (sched_sync_ready[g]),
      .sync_group (sched_sync_group[g]), .sync_phase (sched_sync_phase[g]),
      .sync_meta (sched_sync_meta[g]),
      .notify_valid (sched_notify_valid[g]), .notify_ready (sched_notify_ready[g]),
      .notify_group (sched_notify_group[g]), .notify_phase (sched_notify_phase[g]),
      .notify_meta (sched_notify_meta[g]),
      .req_valid (sreq_valid), .req_ready (sreq_ready), .req_pkt (sreq_pkt),
      .resp_valid (sresp_valid), .resp_ready (sresp_ready), .resp_pkt (sresp_pkt)
    );

    hub_router #(.N_SWITCH(N_SWITCH)) u_hub (
      .clk, .rst_n, .gpu_id (GPU_ID_W'(g)),
      .gpu_tx_valid (gpu_tx_valid[g]), .gpu_tx_ready (gpu_tx_ready[g]), .gpu_tx_pkt (gpu_tx_pkt[g]),
      .gpu_rx_valid (gpu_rx_valid[g]), .gpu_rx_ready (gpu_rx_ready[g]), .gpu_rx_pkt (gpu_rx_pkt[g]),
      .sreq_valid, .sreq_ready, .sreq_pkt, .sresp_valid, .sresp_ready, .sresp_pkt,
      .link_tx_valid (up_valid[g]), .link_tx_ready (up_ready[g]), .link_tx_pkt (up_pkt[g]),
      .link_rx_valid (down_valid[g]), .link_rx_ready (down_ready[g]), .link_rx_pkt (down_pkt[g])
    );

    for (genvar s = 0; s < N_SWITCH; s++) begin : g_link
      assign sw_rx_valid[s][g] = up_valid[g][s];
      assign sw_rx_pkt[s][g]   = up_pkt[g][s];
      assign up_ready[g][s]    = sw_rx_ready[s][g];
      assign down_valid[g][s]  = sw_tx_valid[s][g];
      assign down_pkt[g][s]    = sw_tx_pkt[s][g];
      assign sw_tx_ready[s][g] = down_ready[g][s];
    end
  end

  for (genvar s = 0; s < N_SWITCH; s++) begin : g_sw
    cais_switch #(
      .N_PORTS (N_GPU), .N_GPU (N_GPU), .NUM_VC (NUM_VC), .VC_DEPTH (VC_DEPTH),
      .ENTRIES (ENTRIES), .TIMEOUT (TIMEOUT), .GST_ENTRIES (GST_ENTRIES)
    ) u_switch (
      .clk, .rst_n,
      .rx_valid (sw_rx_valid[s]), .rx_ready (sw_rx_ready[s]), .rx_pkt (sw_rx_pkt[s]),
      .tx_valid (sw_tx_valid[s]), .tx_ready (sw_tx_ready[s]), .tx_pkt (sw_tx_pkt[s]),
      .rt_cfg_we (rt_cfg_we[s]), .rt_cfg_gpu, .rt_cfg_port,
      .ev (ev[s]), .occupancy (occupancy[s]), .ev_release (ev_release[s])
    );
  end
endmodule
