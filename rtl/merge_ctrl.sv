// merge_ctrl: the merge unit's Ctrl Unit.  It runs the two in-switch
// micro-functions on the CAM Lookup Table and the Merging Table, and the
// eviction rules.
//
// Load merging (ld.cais):
//   request, miss    -> forward the request to the home GPU, open a session
//                       {Load-Wait, Count=1, request info in slot 0}
//   request, hit LW  -> store the request info in slot Count, Count+1
//   request, hit LR  -> answer at once from the cached data, Count+1;
//                       release the session when Count reaches nGPU-1
//   response, hit LW -> answer every stored request (one per cycle), then
//                       cache the data, status Load-Ready; release at once
//                       if Count already equals nGPU-1 or an eviction of the
//                       row was deferred
// Reduction merging (red.cais):
//   miss             -> open a session {Reduction, Count=1, data}
//   hit              -> data = data + packet (vector ALU), Count+1; at
//                       nGPU-1 send the sum to the home GPU and release
// Eviction: when a session must be opened and the tables are full, the LRU
// row is the victim.  A Reduction victim sends its partial sum to the home
// GPU; a Load-Ready victim is dropped; a Load-Wait victim is marked for
// release when its data arrives and the new request bypasses the unit.  The
// evicting cycle does not consume the new request, which is looked up again
// on the next cycle.  A Reduction or Load-Ready row whose timer reaches the
// timeout is evicted the same way.  Requests forwarded unmerged (bypass)
// leave with the CAIS flag cleared, so their responses travel the normal
// path; a CAIS response that finds no Load-Wait row is also passed on.
//
// Paper: the micro-function steps, the states and Count rule, LRU and
// timeout eviction, deferral of Load-Wait victims.  Own choices: priorities
// (drain > timeout > response > request), one action per cycle, the
// re-lookup after an eviction, the CAIS-flag convention for bypassed
// traffic, releasing a filled row whose Count is already nGPU-1, and
// bypassing a load that finds a Load-Wait row with Count = nGPU-1.
//
// Interface: valid/ready streams req_in (CAIS requests from the crossbar),
// resp_in (CAIS load responses from the home GPU), egress_out (to the home
// GPU), route_out (responses back into the switch).  Timing: one request or
// response per cycle when outputs are ready; a fill answers its W stored
// requests in W cycles plus one cycle to cache the data.
module merge_ctrl
  import cais_pkg::*;
#(
  parameter int unsigned N_GPU   = 8,
  parameter int unsigned ENTRIES = 320,
  parameter int unsigned CNT_W   = 4,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned KEY_W  = LINE_W + 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // packet streams
  input  logic               req_in_valid,
  output logic               req_in_ready,
  input  pkt_t               req_in,
  input  logic               resp_in_valid,
  output logic               resp_in_ready,
  input  pkt_t               resp_in,
  output logic               egress_out_valid,
  input  logic               egress_out_ready,
  output pkt_t               egress_out,
  output logic               route_out_valid,
  input  logic               route_out_ready,
  output pkt_t               route_out,
  // CAM Lookup Table
  output logic [KEY_W-1:0]   cam_search_key,
  input  logic               cam_hit,
  input  logic [IDX_W-1:0]   cam_hit_idx,
  input  logic               cam_free_valid,
  input  logic [IDX_W-1:0]   cam_free_idx,
  input  logic               cam_lru_valid,
  input  logic [IDX_W-1:0]   cam_lru_idx,
  input  logic               cam_to_valid,
  input  logic [IDX_W-1:0]   cam_to_idx,
  output logic [IDX_W-1:0]   cam_rd_idx,
  input  logic [KEY_W-1:0]   cam_rd_key,
  output logic               cam_alloc_en,
  output logic [IDX_W-1:0]   cam_alloc_idx,
  output logic [KEY_W-1:0]   cam_alloc_key,
  output logic               cam_free_en,
  output logic [IDX_W-1:0]   cam_free_idx_w,
  output logic               cam_touch_en,
  output logic [IDX_W-1:0]   cam_touch_idx,
  // Merging Table
  output logic [IDX_W-1:0]   mt_rd_idx,
  input  merge_status_e      mt_rd_status,
  input  logic [CNT_W-1:0]   mt_rd_count,
  input  logic [DATA_W-1:0]  mt_rd_content,
  input  logic               mt_rd_pend,
  output logic               mt_wr_en,
  output logic [IDX_W-1:0]   mt_wr_idx,
  output merge_status_e      mt_wr_status,
  output logic [CNT_W-1:0]   mt_wr_count,
  output logic [DATA_W-1:0]  mt_wr_content,
  output logic               mt_wr_pend,
  // Vec. ALU
  output logic [DATA_W-1:0]  alu_acc,
  output logic [DATA_W-1:0]  alu_pkt,
  input  logic [DATA_W-1:0]  alu_sum,
  // statistics
  output merge_ev_t          ev
);
  localparam logic [CNT_W-1:0] LAST = CNT_W'(N_GPU - 1);   // nGPU-1

  typedef enum logic {S_IDLE, S_DRAIN} state_e;
  state_e             state_q;
  logic [IDX_W-1:0]   d_idx_q;
  logic [CNT_W-1:0]   d_slot_q;
  pkt_t               d_pkt_q;          // the response being distributed

  // which source is being handled this cycle
  logic do_drain, do_to, do_resp, do_req;
  logic is_load;
  pkt_t cur;

  function automatic req_info_t slot_of(input logic [DATA_W-1:0] c,
                                        input logic [CNT_W-1:0] k);
    return c[k*REQ_INFO_W +: REQ_INFO_W];
  endfunction

  function automatic logic [DATA_W-1:0] set_slot(input logic [DATA_W-1:0] c,
                                                 input logic [CNT_W-1:0] k,
                                                 input req_info_t r);
    logic [DATA_W-1:0] o;
    o = c;
    o[k*REQ_INFO_W +: REQ_INFO_W] = r;
    return o;
  endfunction

  // a packet that carries a partial or final sum to the home GPU
  function automatic pkt_t sum_pkt(input logic [KEY_W-1:0] key,
                                   input logic [DATA_W-1:0] d);
    pkt_t p;
    p       = '0;
    p.ptype = PKT_RED_REQ;
    p.cais  = 1'b0;
    p.addr  = {key[KEY_W-1:1], LINE_OFS_W'(0)};
    p.dst   = home_gpu(p.addr);
    p.src   = home_gpu(p.addr);
    p.data  = d;
    return p;
  endfunction

  assign do_drain = (state_q == S_DRAIN);
  assign do_to    = !do_drain && cam_to_valid;
  assign do_resp  = !do_drain && !do_to && resp_in_valid;
  assign do_req   = !do_drain && !do_to && !resp_in_valid && req_in_valid;
  assign cur      = do_resp ? resp_in : req_in;
  assign is_load  = do_resp || (req_in.ptype == PKT_LD_REQ);
  assign cam_search_key = {line_of(cur.addr), is_load};

  // ---- next-state / action logic -----------------------------------------
  logic             go_drain;
  logic [IDX_W-1:0] victim;

  always_comb begin
    req_in_ready     = 1'b0;
    resp_in_ready    = 1'b0;
    egress_out_valid = 1'b0;
    egress_out       = cur;
    route_out_valid  = 1'b0;
    route_out        = cur;
    cam_alloc_en     = 1'b0;
    cam_alloc_idx    = cam_free_idx;
    cam_alloc_key    = cam_search_key;
    cam_free_en      = 1'b0;
    cam_free_idx_w   = cam_hit_idx;
    cam_touch_en     = 1'b0;
    cam_touch_idx    = cam_hit_idx;
    mt_wr_en         = 1'b0;
    mt_wr_idx        = cam_hit_idx;
    mt_wr_status     = mt_rd_status;
    mt_wr_count      = mt_rd_count;
    mt_wr_content    = mt_rd_content;
    mt_wr_pend       = mt_rd_pend;
    alu_acc          = mt_rd_content;
    alu_pkt          = req_in.data;
    go_drain         = 1'b0;
    ev               = '0;

    // row read by both tables this cycle
    victim = do_to ? cam_to_idx : cam_lru_idx;
    if (do_drain)                mt_rd_idx = d_idx_q;
    else if (do_to)              mt_rd_idx = cam_to_idx;
    else if (cam_hit)            mt_rd_idx = cam_hit_idx;
    else                         mt_rd_idx = cam_lru_idx;
    cam_rd_idx = victim;

    if (do_drain) begin
      // answer stored request d_slot_q, then cache the data
      if (d_slot_q < mt_rd_count) begin
        route_out_valid = 1'b1;
        route_out       = d_pkt_q;
        route_out.cais  = 1'b0;
        route_out.dst   = slot_of(mt_rd_content, d_slot_q).src;
        route_out.tag   = slot_of(mt_rd_content, d_slot_q).tag;
      end else begin
        mt_wr_en      = 1'b1;
        mt_wr_idx     = d_idx_q;
        mt_wr_status  = ST_LOAD_READY;
        mt_wr_content = d_pkt_q.data;
        mt_wr_pend    = 1'b0;
        ev.ld_fill    = 1'b1;
        if (mt_rd_count >= LAST || mt_rd_pend) begin
          cam_free_en    = 1'b1;
          cam_free_idx_w = d_idx_q;
          ev.ld_release  = 1'b1;
        end else begin
          cam_touch_en  = 1'b1;
          cam_touch_idx = d_idx_q;
        end
      end
    end else if (do_to) begin
      if (mt_rd_status == ST_REDUCTION) begin
        egress_out_valid = 1'b1;
        egress_out       = sum_pkt(cam_rd_key, mt_rd_content);
        if (egress_out_ready) begin
          cam_free_en      = 1'b1;
          cam_free_idx_w   = cam_to_idx;
          ev.evict_timeout = 1'b1;
        end
      end else begin
        cam_free_en      = 1'b1;
        cam_free_idx_w   = cam_to_idx;
        ev.evict_timeout = 1'b1;
      end
    end else if (do_resp) begin
      if (cam_hit && mt_rd_status == ST_LOAD_WAIT) begin
        resp_in_ready = 1'b1;
        go_drain      = 1'b1;
      end else begin
        route_out_valid = 1'b1;
        route_out.cais  = 1'b0;
        resp_in_ready   = route_out_ready;
      end
    end else if (do_req) begin
      if (cam_hit) begin
        if (is_load && mt_rd_status == ST_LOAD_READY) begin
          route_out_valid = 1'b1;
          route_out       = req_in;
          route_out.ptype = PKT_LD_RESP;
          route_out.cais  = 1'b0;
          route_out.src   = home_gpu(req_in.addr);
          route_out.dst   = req_in.src;
          route_out.data  = mt_rd_content;
          if (route_out_ready) begin
            req_in_ready    = 1'b1;
            ev.ld_hit_ready = 1'b1;
            if (mt_rd_count + CNT_W'(1) >= LAST) begin
              cam_free_en   = 1'b1;
              ev.ld_release = 1'b1;
            end else begin
              mt_wr_en     = 1'b1;
              mt_wr_count  = mt_rd_count + CNT_W'(1);
              cam_touch_en = 1'b1;
            end
          end
        end else if (is_load) begin
          // Load-Wait
          if (mt_rd_count < LAST) begin
            req_in_ready   = 1'b1;
            mt_wr_en       = 1'b1;
            mt_wr_count    = mt_rd_count + CNT_W'(1);
            mt_wr_content  = set_slot(mt_rd_content, mt_rd_count,
                                      '{src: req_in.src, tag: req_in.tag});
            cam_touch_en   = 1'b1;
            ev.ld_hit_wait = 1'b1;
          end else begin
            egress_out_valid = 1'b1;
            egress_out.cais  = 1'b0;
            req_in_ready     = egress_out_ready;
            ev.bypass        = egress_out_ready;
          end
        end else begin
          // reduction hit: accumulate
          if (mt_rd_count + CNT_W'(1) >= LAST) begin
            egress_out_valid = 1'b1;
            egress_out       = sum_pkt(cam_search_key, alu_sum);
            if (egress_out_ready) begin
              req_in_ready   = 1'b1;
              cam_free_en    = 1'b1;
              ev.red_merge   = 1'b1;
              ev.red_release = 1'b1;
            end
          end else begin
            req_in_ready  = 1'b1;
            mt_wr_en      = 1'b1;
            mt_wr_count   = mt_rd_count + CNT_W'(1);
            mt_wr_content = alu_sum;
            cam_touch_en  = 1'b1;
            ev.red_merge  = 1'b1;
          end
        end
      end else if (cam_free_valid) begin
        // miss, room for a new session
        mt_wr_idx = cam_free_idx;
        if (is_load) begin
          egress_out_valid = 1'b1;
          egress_out.cais  = 1'b1;
          if (egress_out_ready) begin
            req_in_ready  = 1'b1;
            cam_alloc_en  = 1'b1;
            mt_wr_en      = 1'b1;
            mt_wr_status  = ST_LOAD_WAIT;
            mt_wr_count   = CNT_W'(1);
            mt_wr_content = set_slot('0, '0, '{src: req_in.src, tag: req_in.tag});
            mt_wr_pend    = 1'b0;
            ev.ld_alloc   = 1'b1;
          end
        end else if (LAST <= CNT_W'(1)) begin
          // a single contributor: nothing to merge with
          egress_out_valid = 1'b1;
          egress_out.cais  = 1'b0;
          req_in_ready     = egress_out_ready;
          ev.bypass        = egress_out_ready;
        end else begin
          req_in_ready  = 1'b1;
          cam_alloc_en  = 1'b1;
          mt_wr_en      = 1'b1;
          mt_wr_status  = ST_REDUCTION;
          mt_wr_count   = CNT_W'(1);
          mt_wr_content = req_in.data;
          mt_wr_pend    = 1'b0;
          ev.red_alloc  = 1'b1;
        end
      end else begin
        // miss with full tables: LRU eviction
        mt_wr_idx      = cam_lru_idx;
        cam_free_idx_w = cam_lru_idx;
        if (mt_rd_status == ST_REDUCTION) begin
          egress_out_valid = 1'b1;
          egress_out       = sum_pkt(cam_rd_key, mt_rd_content);
          if (egress_out_ready) begin
            cam_free_en  = 1'b1;
            ev.evict_lru = 1'b1;
          end
        end else if (mt_rd_status == ST_LOAD_READY) begin
          cam_free_en  = 1'b1;
          ev.evict_lru = 1'b1;
        end else begin
          // Load-Wait: defer its eviction, let this request bypass
          egress_out_valid = 1'b1;
          egress_out.cais  = 1'b0;
          if (egress_out_ready) begin
            req_in_ready   = 1'b1;
            ev.bypass      = 1'b1;
            if (!mt_rd_pend) begin
              mt_wr_en       = 1'b1;
              mt_wr_pend     = 1'b1;
              ev.evict_defer = 1'b1;
            end
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q  <= S_IDLE;
      d_idx_q  <= '0;
      d_slot_q <= '0;
      d_pkt_q  <= '0;
    end else begin
      case (state_q)
        S_IDLE: if (go_drain) begin
          state_q  <= S_DRAIN;
          d_idx_q  <= cam_hit_idx;
          d_slot_q <= '0;
          d_pkt_q  <= resp_in;
        end
        S_DRAIN: begin
          if (d_slot_q < mt_rd_count) begin
            if (route_out_ready) d_slot_q <= d_slot_q + CNT_W'(1);
          end else begin
            state_q <= S_IDLE;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // Handshake rule: a packet is consumed only when the unit raises ready.
  a_one_src: assert property (@(posedge clk) disable iff (!rst_n)
                              !(req_in_ready && resp_in_ready));
endmodule
