// merge_unit: the per-port merge unit of a CAIS switch.
//
// It sits on the egress side of the port that leads to a home GPU, so every
// mergeable request for that GPU's memory passes through it.  It joins the
// four parts the switch-port diagram shows: the CAM Lookup Table (session
// search), the Merging Table (status, count, content), the Ctrl Unit (the
// load and reduction micro-functions and eviction) and the vector ALU (FP32
// sums).  Sizes follow the paper: 320 rows of 128 B, 40 KB per port.
//
// Interface: req_in takes ld.cais / red.cais requests arriving from the
// crossbar; resp_in takes ld.cais responses coming back from the home GPU;
// egress_out carries forwarded requests and sums to the home GPU; route_out
// carries load responses back into the switch towards the requesters.  All
// four are valid/ready streams of cais_pkg::pkt_t.  `ev` pulses one bit per
// merge event.  Timing: see merge_ctrl; a lookup and its table update take
// one cycle.
module merge_unit
  import cais_pkg::*;
#(
  parameter int unsigned N_GPU   = 8,
  parameter int unsigned ENTRIES = 320,
  parameter int unsigned TIMEOUT = 4096
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  req_in_valid,
  output logic  req_in_ready,
  input  pkt_t  req_in,
  input  logic  resp_in_valid,
  output logic  resp_in_ready,
  input  pkt_t  resp_in,
  output logic  egress_out_valid,
  input  logic  egress_out_ready,
  output pkt_t  egress_out,
  output logic  route_out_valid,
  input  logic  route_out_ready,
  output pkt_t  route_out,
  output merge_ev_t ev,
  output logic [15:0] occupancy
);
  localparam int unsigned IDX_W = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;
  localparam int unsigned KEY_W = LINE_W + 1;
  localparam int unsigned CNT_W = $clog2(N_GPU) + 1;

  logic [KEY_W-1:0]   cam_search_key, cam_rd_key, cam_alloc_key;
  logic               cam_hit, cam_free_valid, cam_lru_valid, cam_to_valid;
  logic [IDX_W-1:0]   cam_hit_idx, cam_free_idx, cam_lru_idx, cam_to_idx;
  logic [IDX_W-1:0]   cam_rd_idx, cam_alloc_idx, cam_free_idx_w, cam_touch_idx;
  logic               cam_alloc_en, cam_free_en, cam_touch_en;
  logic [ENTRIES-1:0] lw_vec;

  logic [IDX_W-1:0]   mt_rd_idx, mt_wr_idx;
  merge_status_e      mt_rd_status, mt_wr_status;
  logic [CNT_W-1:0]   mt_rd_count, mt_wr_count;
  logic [DATA_W-1:0]  mt_rd_content, mt_wr_content;
  logic               mt_rd_pend, mt_wr_pend, mt_wr_en;

  logic [DATA_W-1:0]  alu_acc, alu_pkt, alu_sum;

  cam_lookup_table #(.ENTRIES(ENTRIES), .KEY_W(KEY_W), .TIMEOUT(TIMEOUT)) u_cam (
    .clk, .rst_n,
    .search_key (cam_search_key), .hit (cam_hit), .hit_idx (cam_hit_idx),
    .free_valid (cam_free_valid), .free_idx (cam_free_idx),
    .lru_valid  (cam_lru_valid),  .lru_idx (cam_lru_idx),
    .pin_vec    (lw_vec),
    .to_valid   (cam_to_valid),   .to_idx (cam_to_idx),
    .rd_idx     (cam_rd_idx),     .rd_key (cam_rd_key),
    .alloc_en   (cam_alloc_en),   .alloc_idx (cam_alloc_idx), .alloc_key (cam_alloc_key),
    .free_en    (cam_free_en),    .free_idx_w (cam_free_idx_w),
    .touch_en   (cam_touch_en),   .touch_idx (cam_touch_idx),
    .occupancy  (occupancy)
  );

  merging_table #(.ENTRIES(ENTRIES), .CNT_W(CNT_W)) u_mt (
    .clk, .rst_n,
    .rd_idx (mt_rd_idx), .rd_status (mt_rd_status), .rd_count (mt_rd_count),
    .rd_content (mt_rd_content), .rd_pend (mt_rd_pend),
    .wr_en (mt_wr_en), .wr_idx (mt_wr_idx), .wr_status (mt_wr_status),
    .wr_count (mt_wr_count), .wr_content (mt_wr_content), .wr_pend (mt_wr_pend),
    .lw_vec (lw_vec)
  );

  vec_alu u_alu (.acc (alu_acc), .pkt (alu_pkt), .sum (alu_sum));

  merge_ctrl #(.N_GPU(N_GPU), .ENTRIES(ENTRIES), .CNT_W(CNT_W)) u_ctrl (
    .clk, .rst_n,
    .req_in_valid, .req_in_ready, .req_in,
    .resp_in_valid, .resp_in_ready, .resp_in,
    .egress_out_valid, .egress_out_ready, .egress_out,
    .route_out_valid, .route_out_ready, .route_out,
    .cam_search_key, .cam_hit, .cam_hit_idx,
    .cam_free_valid, .cam_free_idx, .cam_lru_valid, .cam_lru_idx,
    .cam_to_valid, .cam_to_idx, .cam_rd_idx, .cam_rd_key,
    .cam_alloc_en, .cam_alloc_idx, .cam_alloc_key,
    .cam_free_en, .cam_free_idx_w, .cam_touch_en, .cam_touch_idx,
    .mt_rd_idx, .mt_rd_status, .mt_rd_count, .mt_rd_content, .mt_rd_pend,
    .mt_wr_en, .mt_wr_idx, .mt_wr_status, .mt_wr_count, .mt_wr_content, .mt_wr_pend,
    .alu_acc, .alu_pkt, .alu_sum,
    .ev
  );
endmodule
