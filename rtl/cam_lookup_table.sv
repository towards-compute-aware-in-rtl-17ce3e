// cam_lookup_table: the merge unit's CAM Lookup Table.
//
// Each entry holds {Valid, Addr, Load}: the 128 B line address of an open
// merge session and whether it is a load (1) or a reduction (0) session.  An
// arriving request is matched by associative search on {Addr, Load}; a hit
// returns the entry index, which is also the index of the session's row in
// the Merging Table.  Besides the fields the paper lists, every entry has an
// age timer that counts cycles since its last access.  The timer serves two
// eviction rules: the entry with the largest age is the LRU victim offered
// when the table is full, and an entry whose age has reached TIMEOUT is
// reported for timeout eviction unless the caller pins it (a Load-Wait
// session must wait for its data and is never timed out).
//
// Paper: the table, its fields, LRU eviction and a per-entry timer.  Own
// choices: the timer doubles as the LRU order, lowest index wins ties, the
// free-entry search is a priority encoder, TIMEOUT is a cycle count.
//
// Interface: `search_key` -> `hit`/`hit_idx`, `free_valid`/`free_idx`,
// `lru_valid`/`lru_idx`, `to_valid`/`to_idx` are combinational from the
// current contents; `rd_idx` -> `rd_key` reads one entry.  `alloc_en`,
// `free_en` and `touch_en` update the table at the rising clock edge; an
// allocated or touched entry restarts its timer.  Reset clears all valids.
module cam_lookup_table
  import cais_pkg::*;
#(
  parameter int unsigned ENTRIES = 320,
  parameter int unsigned KEY_W   = LINE_W + 1,    // {line address, is_load}
  parameter int unsigned TIMEOUT = 4096,          // cycles since last access
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1,
  localparam int unsigned AGE_W  = $clog2(TIMEOUT + 1) + 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // associative search
  input  logic [KEY_W-1:0] search_key,
  output logic             hit,
  output logic [IDX_W-1:0] hit_idx,
  // allocation / victim selection
  output logic             free_valid,
  output logic [IDX_W-1:0] free_idx,
  output logic             lru_valid,
  output logic [IDX_W-1:0] lru_idx,
  input  logic [ENTRIES-1:0] pin_vec,        // entries never timed out
  output logic             to_valid,
  output logic [IDX_W-1:0] to_idx,
  // entry read
  input  logic [IDX_W-1:0] rd_idx,
  output logic [KEY_W-1:0] rd_key,
  // updates
  input  logic             alloc_en,
  input  logic [IDX_W-1:0] alloc_idx,
  input  logic [KEY_W-1:0] alloc_key,
  input  logic             free_en,
  input  logic [IDX_W-1:0] free_idx_w,
  input  logic             touch_en,
  input  logic [IDX_W-1:0] touch_idx,
  output logic [15:0]      occupancy
);
  logic [ENTRIES-1:0] valid_q;
  logic [KEY_W-1:0]   key_q [ENTRIES];
  logic [AGE_W-1:0]   age_q [ENTRIES];

  localparam logic [AGE_W-1:0] AGE_MAX = '1;

  // ---- combinational search ---------------------------------------------
  always_comb begin
    logic [AGE_W-1:0] best_age;
    hit        = 1'b0;
    hit_idx    = '0;
    free_valid = 1'b0;
    free_idx   = '0;
    lru_valid  = 1'b0;
    lru_idx    = '0;
    best_age   = '0;
    occupancy  = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i]) occupancy = occupancy + 16'd1;
      if (valid_q[i] && key_q[i] == search_key && !hit) begin
        hit     = 1'b1;
        hit_idx = IDX_W'(i);
      end
      if (!valid_q[i] && !free_valid) begin
        free_valid = 1'b1;
        free_idx   = IDX_W'(i);
      end
      if (valid_q[i] && (!lru_valid || age_q[i] > best_age)) begin
        lru_valid = 1'b1;
        lru_idx   = IDX_W'(i);
        best_age  = age_q[i];
      end
    end
  end

  // Timeout search, kept apart from the key search: it does not depend on
  // the search key.
  always_comb begin
    to_valid = 1'b0;
    to_idx   = '0;
    for (int i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && !pin_vec[i] && age_q[i] >= AGE_W'(TIMEOUT) && !to_valid) begin
        to_valid = 1'b1;
        to_idx   = IDX_W'(i);
      end
    end
  end

  assign rd_key = key_q[rd_idx];

  // ---- updates -------------------------------------------------------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        key_q[i] <= '0;
        age_q[i] <= '0;
      end
    end else begin
      for (int i = 0; i < ENTRIES; i++) begin
        if (valid_q[i] && age_q[i] != AGE_MAX) age_q[i] <= age_q[i] + AGE_W'(1);
      end
      if (touch_en) age_q[touch_idx] <= '0;
      if (free_en) valid_q[free_idx_w] <= 1'b0;
      if (alloc_en) begin
        valid_q[alloc_idx] <= 1'b1;
        key_q[alloc_idx]   <= alloc_key;
        age_q[alloc_idx]   <= '0;
      end
    end
  end

  // An allocation must target a free entry.
  a_alloc_free: assert property (@(posedge clk) disable iff (!rst_n)
                                 alloc_en |-> !valid_q[alloc_idx]);
endmodule
