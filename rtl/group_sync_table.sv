// group_sync_table: the switch's Group Sync Table for TB-group
// coordination.
//
// Before a thread block (TB) of a merge group is launched (pre-launch) and
// before its first *.cais access (pre-access), every GPU's synchronizer
// sends the switch an empty sync packet tagged with the Group ID.  The table
// keeps a counter per active {Group ID, phase}.  The first request of a
// group opens a row with Count = 1, each further request increments it, and
// when Count reaches the number of participating GPUs the row is freed and a
// release for the group is broadcast to every port.  One sync request is
// accepted per cycle, round-robin over the ports.  When the table is full a
// request for a new group waits; the round-robin pointer moves on even when
// the chosen request cannot be taken, so a port whose request would close
// an open group is not stuck behind one that needs a new row.
//
// Paper: the table of Group ID and Count, release when all GPUs have sent
// their request, broadcast release.  Own choices: all N_GPU GPUs take part
// in every group, the phase bit is part of the key, table size, full-table
// back-pressure.
//
// Interface: per port a sync request stream (valid/ready, packet); one
// release stream (valid, key) that is taken only when every port is ready.
// Timing: a release leaves in the cycle the last request is accepted.
module group_sync_table
  import cais_pkg::*;
#(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned N_GPU   = 8,
  parameter int unsigned ENTRIES = 64,
  localparam int unsigned PORT_W = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned CNT_W  = $clog2(N_GPU + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N_PORTS-1:0]  sync_valid,
  output logic [N_PORTS-1:0]  sync_ready,
  input  pkt_t                sync_pkt [N_PORTS],
  output logic                rel_valid,
  input  logic [N_PORTS-1:0]  rel_ready,
  output logic [GROUP_W:0]    rel_key,
  output logic                ev_release
);
  logic [ENTRIES-1:0] valid_q;
  logic [GROUP_W:0]   key_q [ENTRIES];
  logic [CNT_W-1:0]   cnt_q [ENTRIES];

  logic [N_PORTS-1:0] gnt;
  logic [PORT_W-1:0]  gidx;
  logic               any, accept;
  logic [GROUP_W:0]   key;
  logic               hit, free_ok;
  int unsigned        hit_i, free_i;
  logic               last;

  rr_arbiter #(.N(N_PORTS)) u_arb (
    .clk, .rst_n, .req (sync_valid), .advance (any),
    .gnt, .gnt_idx (gidx), .any
  );

  assign key = sync_key(sync_pkt[gidx]);

  always_comb begin
    hit = 1'b0; hit_i = 0; free_ok = 1'b0; free_i = 0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && key_q[i] == key && !hit) begin hit = 1'b1; hit_i = i; end
      if (!valid_q[i] && !free_ok) begin free_ok = 1'b1; free_i = i; end
    end
    // does this request complete the group?
    last = hit ? (cnt_q[hit_i] + CNT_W'(1) >= CNT_W'(N_GPU)) : (N_GPU <= 1);
    rel_valid = any && last && (hit || free_ok);
    rel_key   = key;
    accept    = any && (hit || free_ok) && (!last || (&rel_ready));
    sync_ready = accept ? gnt : '0;
    ev_release = rel_valid && (&rel_ready);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        key_q[i] <= '0;
        cnt_q[i] <= '0;
      end
    end else if (accept) begin
      if (hit) begin
        if (last) valid_q[hit_i] <= 1'b0;
        else      cnt_q[hit_i]   <= cnt_q[hit_i] + CNT_W'(1);
      end else if (!last) begin
        valid_q[free_i] <= 1'b1;
        key_q[free_i]   <= key;
        cnt_q[free_i]   <= CNT_W'(1);
      end
    end
  end
endmodule
