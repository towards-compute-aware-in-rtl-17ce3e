// gpu_synchronizer: the GPU-side synchronizer for TB-group coordination.
//
// The TB scheduler (pre-launch) or a warp reaching its first *.cais
// instruction (pre-access) registers a {Group ID, phase} with the
// synchronizer ("sync").  The synchronizer keeps it in a small table of
// {Group ID, Status, MetaData}, sends one empty sync request packet to the
// switch ("req"), and waits.  When the switch's release for that group and
// phase comes back ("resp"), the row is marked released and the scheduler is
// notified with the row's metadata ("notify"), which lets the pending TB be
// dispatched or the waiting warp proceed; the row is then freed.  So each
// synchronisation costs one packet each way between GPU and switch.
//
// Paper: the table fields, the four interfaces notify / sync / req / resp,
// the pre-launch and pre-access uses, two empty packets per TB.  Own choices:
// table size, the status encoding, lowest-index-first service, MetaData as
// an opaque word (e.g. the TB or warp ID), back-pressure when full.
//
// Interface: sync (in) and notify (out) valid/ready streams towards the
// schedulers; req (out) and resp (in) packet streams towards the switch.
// Timing: a request leaves at the earliest one cycle after registration; the
// notification follows one cycle after the release arrives.
module gpu_synchronizer
  import cais_pkg::*;
#(
  parameter int unsigned ENTRIES = 16,
  parameter int unsigned META_W  = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [GPU_ID_W-1:0] gpu_id,
  // from the TB / warp scheduler
  input  logic                sync_valid,
  output logic                sync_ready,
  input  logic [GROUP_W-1:0]  sync_group,
  input  sync_phase_e         sync_phase,
  input  logic [META_W-1:0]   sync_meta,
  // to the TB / warp scheduler
  output logic                notify_valid,
  input  logic                notify_ready,
  output logic [GROUP_W-1:0]  notify_group,
  output sync_phase_e         notify_phase,
  output logic [META_W-1:0]   notify_meta,
  // to / from the switch
  output logic                req_valid,
  input  logic                req_ready,
  output pkt_t                req_pkt,
  input  logic                resp_valid,
  output logic                resp_ready,
  input  pkt_t                resp_pkt
);
  typedef enum logic [1:0] {SY_FREE, SY_WAIT_SEND, SY_SENT, SY_RELEASED} sy_status_e;

  sy_status_e         status_q [ENTRIES];
  logic [GROUP_W-1:0] group_q  [ENTRIES];
  sync_phase_e        phase_q  [ENTRIES];
  logic [META_W-1:0]  meta_q   [ENTRIES];

  int unsigned free_i, send_i, rel_i;
  logic        free_ok, send_ok, rel_ok;

  always_comb begin
    free_ok = 1'b0; send_ok = 1'b0; rel_ok = 1'b0;
    free_i = 0; send_i = 0; rel_i = 0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (status_q[i] == SY_FREE && !free_ok)      begin free_ok = 1'b1; free_i = i; end
      if (status_q[i] == SY_WAIT_SEND && !send_ok) begin send_ok = 1'b1; send_i = i; end
      if (status_q[i] == SY_RELEASED && !rel_ok)   begin rel_ok  = 1'b1; rel_i  = i; end
    end
  end

  assign sync_ready = free_ok;

  always_comb begin
    req_valid     = send_ok;
    req_pkt       = '0;
    req_pkt.ptype = PKT_SYNC_REQ;
    req_pkt.src   = gpu_id;
    req_pkt.dst   = gpu_id;
    req_pkt.addr  = ADDR_W'({phase_q[send_i], group_q[send_i]});
  end

  assign notify_valid = rel_ok;
  assign notify_group = group_q[rel_i];
  assign notify_phase = phase_q[rel_i];
  assign notify_meta  = meta_q[rel_i];
  assign resp_ready   = 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ENTRIES; i++) begin
        status_q[i] <= SY_FREE;
        group_q[i]  <= '0;
        phase_q[i]  <= SYNC_PRE_LAUNCH;
        meta_q[i]   <= '0;
      end
    end else begin
      if (sync_valid && sync_ready) begin
        status_q[free_i] <= SY_WAIT_SEND;
        group_q[free_i]  <= sync_group;
        phase_q[free_i]  <= sync_phase;
        meta_q[free_i]   <= sync_meta;
      end
      if (req_valid && req_ready) status_q[send_i] <= SY_SENT;
      if (resp_valid && resp_pkt.ptype == PKT_SYNC_REL) begin
        for (int i = 0; i < ENTRIES; i++)
          if (status_q[i] == SY_SENT && {phase_q[i], group_q[i]} == sync_key(resp_pkt))
            status_q[i] <= SY_RELEASED;
      end
      if (notify_valid && notify_ready) status_q[rel_i] <= SY_FREE;
    end
  end
endmodule
