// cais_port: one port of a CAIS switch, with its merge unit.
//
// Ingress (GPU -> switch): a packet received from the GPU is sorted by type
// and CAIS flag.  A CAIS load response (data coming back from the home GPU
// for a merged load) goes to the merge unit; a TB-group sync request goes
// to the switch's Group Sync Table; everything else goes to Route.  Route
// also takes the load responses the merge unit generates; a round-robin
// picks between the two, the routing table gives the output port, and the
// packet enters its virtual channel, from where the arbiter and crossbar
// move it to the output port.
// Egress (switch -> GPU): a packet from the crossbar is sorted by the
// request demultiplexer into one of two small queues.  A CAIS request
// (ld.cais or red.cais for this port's GPU, which is the home of the
// address) waits for the merge unit; anything else waits to go straight
// out.  With separate queues a merge unit that is stalled cannot block the
// responses another port's merge unit is sending, which would otherwise
// close a cycle between two ports and deadlock them.  The crossbar is told,
// per VC, which queue has room.  The egress multiplexer picks, round-robin,
// among TB-group releases, merge-unit output (forwarded requests, sums) and
// unmerged packets.
//
// Paper: the port diagram (RX, Ingress, CAIS-flag demultiplexer, Route,
// merge unit, request demultiplexer, Egress, TX) and the micro-function
// dataflow.  Own choices: the two 2-deep egress queues that decouple the
// crossbar from the merge unit, the release queue, round-robin at both
// multiplexers, sync packets taken off at ingress.

// Interface: rx (from GPU) and tx (to GPU) valid/ready streams; routing
// lookup (`rt_dst` -> `rt_oport`); VC heads and pops towards the arbiter
// and crossbar; xin from the crossbar with a per-VC ready; sync_out to and
// rel_in from the Group Sync Table.  Timing: ingress to VC in one cycle; a crossbar packet
// waits at least one cycle in the egress queue.
module cais_port
  import cais_pkg::*;
#(
  parameter int unsigned PORT_ID  = 0,
  parameter int unsigned N_GPU    = 8,
  parameter int unsigned N_PORTS  = 8,
  parameter int unsigned NUM_VC   = 8,
  parameter int unsigned VC_DEPTH = 256,
  parameter int unsigned ENTRIES  = 320,
  parameter int unsigned TIMEOUT  = 4096,
  localparam int unsigned PORT_W  = (N_PORTS > 1) ? $clog2(N_PORTS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // link to the GPU
  input  logic                rx_valid,
  output logic                rx_ready,
  input  pkt_t                rx_pkt,
  output logic                tx_valid,
  input  logic                tx_ready,
  output pkt_t                tx_pkt,
  // routing table lookup
  output logic [GPU_ID_W-1:0] rt_dst,
  input  logic [PORT_W-1:0]   rt_oport,
  // towards arbiter / crossbar
  output logic [NUM_VC-1:0]   vc_head_valid,
  output pkt_t                vc_head_pkt   [NUM_VC],
  output logic [PORT_W-1:0]   vc_head_oport [NUM_VC],
  input  logic [NUM_VC-1:0]   vc_pop,
  // from crossbar
  input  logic                xin_valid,
  output logic [NUM_VC-1:0]   xin_ready,
  input  pkt_t                xin_pkt,
  // Group Sync Table
  output logic                sync_valid,
  input  logic                sync_ready,
  output pkt_t                sync_pkt,
  input  logic                rel_valid,
  output logic                rel_ready,
  input  logic [GROUP_W:0]    rel_key,
  // statistics
  output merge_ev_t           ev,
  output logic [15:0]         occupancy
);
  // ---------------- ingress ----------------
  logic is_cais_resp, is_sync;
  logic mu_resp_ready;
  logic ing_valid, ing_ready;             // ingress -> route
  logic mu_route_valid, mu_route_ready;
  pkt_t mu_route_pkt;

  assign is_cais_resp = rx_pkt.ptype == PKT_LD_RESP && rx_pkt.cais;
  assign is_sync      = rx_pkt.ptype == PKT_SYNC_REQ;
  assign ing_valid    = rx_valid && !is_cais_resp && !is_sync;
  assign sync_valid   = rx_valid && is_sync;
  assign sync_pkt     = rx_pkt;
  assign rx_ready     = is_cais_resp ? mu_resp_ready :
                        is_sync      ? sync_ready    : ing_ready;

  // Route: round-robin between ingress and merge-unit responses
  logic [1:0] r_gnt;
  logic       r_idx, r_any;
  pkt_t       r_pkt;
  logic       vc_in_ready;

  rr_arbiter #(.N(2)) u_route_arb (
    .clk, .rst_n, .req ({mu_route_valid, ing_valid}),
    .advance (vc_in_ready), .gnt (r_gnt), .gnt_idx (r_idx), .any (r_any)
  );
  assign r_pkt          = r_idx ? mu_route_pkt : rx_pkt;
  assign rt_dst         = r_pkt.dst;
  assign ing_ready      = r_gnt[0] && vc_in_ready;
  assign mu_route_ready = r_gnt[1] && vc_in_ready;

  vc_buffer #(.NUM_VC(NUM_VC), .VC_DEPTH(VC_DEPTH), .PORT_W(PORT_W)) u_vc (
    .clk, .rst_n,
    .in_valid (r_any), .in_ready (vc_in_ready),
    .in_vc ($clog2(NUM_VC)'(vc_of(r_pkt))), .in_pkt (r_pkt), .in_oport (rt_oport),
    .head_valid (vc_head_valid), .head_pkt (vc_head_pkt),
    .head_oport (vc_head_oport), .pop (vc_pop)
  );

  // ---------------- egress ----------------
  // Two queues: CAIS requests wait for the merge unit in mq, everything else
  // (responses, sums of other ports, plain traffic) in dq, so a busy merge
  // unit never holds up the responses other merge units are sending.
  logic mq_in_ready, mq_valid;
  logic dq_in_ready, dq_valid, dq_ready;
  pkt_t mq_pkt, dq_pkt;
  logic xin_merge;
  logic mu_req_ready;
  assign xin_merge = is_merge_req(xin_pkt);

  sync_fifo #(.T(pkt_t), .DEPTH(2)) u_merge_q (
    .clk, .rst_n,
    .in_valid (xin_valid && xin_merge), .in_ready (mq_in_ready), .in_data (xin_pkt),
    .out_valid (mq_valid), .out_ready (mu_req_ready), .out_data (mq_pkt), .count ()
  );
  sync_fifo #(.T(pkt_t), .DEPTH(2)) u_direct_q (
    .clk, .rst_n,
    .in_valid (xin_valid && !xin_merge), .in_ready (dq_in_ready), .in_data (xin_pkt),
    .out_valid (dq_valid), .out_ready (dq_ready), .out_data (dq_pkt), .count ()
  );
  always_comb begin
    for (int v = 0; v < NUM_VC; v++)
      xin_ready[v] = vc_to_merge(3'(v)) ? mq_in_ready : dq_in_ready;
  end

  // release queue
  logic              rq_valid, rq_ready;
  logic [GROUP_W:0]  rq_key;
  sync_fifo #(.T(logic [GROUP_W:0]), .DEPTH(2)) u_rel_q (
    .clk, .rst_n,
    .in_valid (rel_valid), .in_ready (rel_ready), .in_data (rel_key),
    .out_valid (rq_valid), .out_ready (rq_ready), .out_data (rq_key), .count ()
  );
  pkt_t rel_pkt;
  always_comb begin
    rel_pkt       = '0;
    rel_pkt.ptype = PKT_SYNC_REL;
    rel_pkt.dst   = GPU_ID_W'(PORT_ID);
    rel_pkt.addr  = ADDR_W'(rq_key);
  end

  // merge unit
  logic mu_eg_valid, mu_eg_ready;
  pkt_t mu_eg_pkt;
  merge_unit #(.N_GPU(N_GPU), .ENTRIES(ENTRIES), .TIMEOUT(TIMEOUT)) u_merge (
    .clk, .rst_n,
    .req_in_valid (mq_valid), .req_in_ready (mu_req_ready), .req_in (mq_pkt),
    .resp_in_valid (rx_valid && is_cais_resp), .resp_in_ready (mu_resp_ready), .resp_in (rx_pkt),
    .egress_out_valid (mu_eg_valid), .egress_out_ready (mu_eg_ready), .egress_out (mu_eg_pkt),
    .route_out_valid (mu_route_valid), .route_out_ready (mu_route_ready), .route_out (mu_route_pkt),
    .ev, .occupancy
  );

  // Egress multiplexer: 0 release, 1 merge unit, 2 unmerged
  logic [2:0] e_gnt;
  logic [1:0] e_idx;
  logic       e_any;
  rr_arbiter #(.N(3)) u_egress_arb (
    .clk, .rst_n, .req ({dq_valid, mu_eg_valid, rq_valid}),
    .advance (tx_ready), .gnt (e_gnt), .gnt_idx (e_idx), .any (e_any)
  );
  assign tx_valid    = e_any;
  assign tx_pkt      = e_gnt[0] ? rel_pkt : e_gnt[1] ? mu_eg_pkt : dq_pkt;
  assign rq_ready    = e_gnt[0] && tx_ready;
  assign mu_eg_ready = e_gnt[1] && tx_ready;
  assign dq_ready    = e_gnt[2] && tx_ready;

  // The arbiter only grants a packet whose queue has room.
  a_xin_room: assert property (@(posedge clk) disable iff (!rst_n)
                               xin_valid |-> (xin_merge ? mq_in_ready : dq_in_ready));
endmodule
