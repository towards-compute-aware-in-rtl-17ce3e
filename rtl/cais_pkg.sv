// cais_pkg: types and constants shared by the compute-aware in-switch
// computing (CAIS) switch, the GPU-side hub and the TB-group synchronizer.
//
// A packet is carried as one word: a header (type, CAIS flag, source and
// destination GPU, tag, address) and a 128 B payload.  The 128 B payload is
// the size of one Merging Table entry (40 KB / 320 entries) and the largest
// coalesced NVLink request.  Packets move whole, one per cycle per link;
// splitting them into 16 B flits is left to the link layer, which this
// design does not model.
//
// The one-bit `cais` flag is the field the ld.cais / red.cais instructions
// set: it tells the switch that the request may be merged.  Packet type
// encodings, field widths, the address layout and the TB-group sync packets
// are this design's own choices.
package cais_pkg;

  // ---- sizes -------------------------------------------------------------
  localparam int unsigned GPU_ID_W   = 3;      // up to 8 GPUs
  localparam int unsigned ADDR_W     = 48;     // byte address
  localparam int unsigned LINE_BYTES = 128;    // merge granule / payload
  localparam int unsigned LINE_OFS_W = 7;      // log2(LINE_BYTES)
  localparam int unsigned LINE_W     = ADDR_W - LINE_OFS_W;
  localparam int unsigned DATA_W     = LINE_BYTES * 8;   // 1024
  localparam int unsigned LANES      = DATA_W / 32;      // FP32 lanes
  localparam int unsigned TAG_W      = 10;     // request tag from the GPU
  localparam int unsigned GROUP_W    = 16;     // TB-group ID

  // ---- packet types ------------------------------------------------------
  typedef enum logic [2:0] {
    PKT_LD_REQ   = 3'd0,   // load request (ld / ld.cais)
    PKT_LD_RESP  = 3'd1,   // load response with data
    PKT_RED_REQ  = 3'd2,   // reduction (add.f32) request (red / red.cais)
    PKT_ST_REQ   = 3'd3,   // ordinary store, never merged
    PKT_SYNC_REQ = 3'd4,   // TB-group sync request, GPU -> switch
    PKT_SYNC_REL = 3'd5    // TB-group release, switch -> GPU
  } pkt_type_e;

  // Sync phase carried in a sync packet (Sec. "pre-launch" / "pre-access").
  typedef enum logic {
    SYNC_PRE_LAUNCH = 1'b0,
    SYNC_PRE_ACCESS = 1'b1
  } sync_phase_e;

  typedef struct packed {
    pkt_type_e             ptype;
    logic                  cais;   // mergeable (set by *.cais instructions)
    logic [GPU_ID_W-1:0]   src;    // requesting / sending GPU
    logic [GPU_ID_W-1:0]   dst;    // GPU the packet is routed to
    logic [TAG_W-1:0]      tag;    // requester's tag, echoed in responses
    logic [ADDR_W-1:0]     addr;   // byte address; sync: {.., phase, group}
    logic [DATA_W-1:0]     data;   // 128 B payload
  } pkt_t;

  localparam int unsigned PKT_W = $bits(pkt_t);

  // Home GPU of an address: the top GPU_ID_W address bits.
  function automatic logic [GPU_ID_W-1:0] home_gpu(input logic [ADDR_W-1:0] a);
    return a[ADDR_W-1 -: GPU_ID_W];
  endfunction

  function automatic logic [LINE_W-1:0] line_of(input logic [ADDR_W-1:0] a);
    return a[ADDR_W-1:LINE_OFS_W];
  endfunction

  // Sync packets carry {phase, group} in the low address bits.
  function automatic logic [GROUP_W:0] sync_key(input pkt_t p);
    return p.addr[GROUP_W:0];
  endfunction

  // Merging Table entry status (Fig. 5 / Fig. 6).
  typedef enum logic [1:0] {
    ST_REDUCTION  = 2'd0,
    ST_LOAD_WAIT  = 2'd1,
    ST_LOAD_READY = 2'd2
  } merge_status_e;

  // Request info kept in the Content Array while a load waits for data.
  typedef struct packed {
    logic [GPU_ID_W-1:0] src;
    logic [TAG_W-1:0]    tag;
  } req_info_t;

  localparam int unsigned REQ_INFO_W = $bits(req_info_t);

  // One-cycle event pulses from a merge unit, for statistics.
  typedef struct packed {
    logic ld_alloc;       // ld.cais miss: session opened, request forwarded
    logic ld_hit_wait;    // ld.cais hit on Load-Wait: request stored
    logic ld_hit_ready;   // ld.cais hit on Load-Ready: served from cache
    logic ld_fill;        // response arrived: stored requests answered
    logic ld_release;     // load session released (Count = nGPU-1)
    logic red_alloc;      // red.cais miss: session opened
    logic red_merge;      // red.cais hit: summed in the switch
    logic red_release;    // all contributions in: sum sent to home GPU
    logic evict_lru;      // table full: LRU victim evicted
    logic evict_timeout;  // timer expired: entry evicted
    logic evict_defer;    // LRU victim in Load-Wait: eviction deferred
    logic bypass;         // request passed on unmerged
  } merge_ev_t;

  // Virtual channel of a packet.  Load and reduction traffic, mergeable or
  // not, travel in separate VCs so that neither blocks the other.
  function automatic logic [2:0] vc_of(input pkt_t p);
    case (p.ptype)
      PKT_LD_REQ:   return p.cais ? 3'd0 : 3'd1;
      PKT_LD_RESP:  return 3'd2;
      PKT_RED_REQ:  return p.cais ? 3'd3 : 3'd4;
      PKT_ST_REQ:   return 3'd5;
      PKT_SYNC_REQ: return 3'd6;
      default:      return 3'd7;
    endcase
  endfunction

  // VCs whose packets an egress port hands to its merge unit (ld.cais and
  // red.cais requests); the other VCs go straight to the link.
  function automatic logic vc_to_merge(input logic [2:0] v);
    return v == 3'd0 || v == 3'd3;
  endfunction

  function automatic logic is_merge_req(input pkt_t p);
    return p.cais && (p.ptype == PKT_LD_REQ || p.ptype == PKT_RED_REQ);
  endfunction

  // Deterministic switch selection (Hub): XOR-fold of the 128 B line
  // address, or of the {phase, group} key for sync packets, into SEL_W bits.
  function automatic logic [7:0] switch_hash(input pkt_t p, input int unsigned sel_w);
    logic [7:0] h;
    logic [LINE_W-1:0] v;
    h = '0;
    if (p.ptype == PKT_SYNC_REQ || p.ptype == PKT_SYNC_REL)
      v = LINE_W'(p.addr[GROUP_W:0]);
    else
      v = line_of(p.addr);
    if (sel_w != 0) begin
      for (int i = 0; i < LINE_W; i++) h[i % sel_w] = h[i % sel_w] ^ v[i];
    end
    return h;
  endfunction

endpackage
