// merging_table: the merge unit's Merging Table.
//
// Row i belongs to the session held in row i of the CAM Lookup Table.  A row
// keeps the session Status (Reduction, Load-Wait or Load-Ready), Count (the
// number of requests merged so far) and a 128 B Content Array.  For a
// reduction the content is the running FP32 sum; for a Load-Wait session it
// holds the info {source GPU, tag} of each request waiting for the data,
// slot k in bits [k*REQ_INFO_W +: REQ_INFO_W]; for Load-Ready it caches the
// data returned by the home GPU.  One extra bit per row, `pend`, marks a
// Load-Wait row chosen for LRU eviction, whose release is deferred until its
// data arrives.
//
// Paper: the three fields, the three states, 128 B content, 320 rows (40 KB
// per port).  Own choices: the deferred-eviction bit, the request-info slot
// layout, a single read port and a single write port.
//
// Interface: `rd_idx` -> `rd_*` is an asynchronous read; a write with `wr_en`
// replaces a whole row at the rising edge.  `lw_vec` flags every row whose
// status is Load-Wait.  Reset sets all rows to Reduction / 0 / empty.
module merging_table
  import cais_pkg::*;
#(
  parameter int unsigned ENTRIES = 320,
  parameter int unsigned CNT_W   = 4,
  localparam int unsigned IDX_W  = (ENTRIES > 1) ? $clog2(ENTRIES) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [IDX_W-1:0]    rd_idx,
  output merge_status_e       rd_status,
  output logic [CNT_W-1:0]    rd_count,
  output logic [DATA_W-1:0]   rd_content,
  output logic                rd_pend,
  input  logic                wr_en,
  input  logic [IDX_W-1:0]    wr_idx,
  input  merge_status_e       wr_status,
  input  logic [CNT_W-1:0]    wr_count,
  input  logic [DATA_W-1:0]   wr_content,
  input  logic                wr_pend,
  output logic [ENTRIES-1:0]  lw_vec
);
  merge_status_e      status_q  [ENTRIES];
  logic [CNT_W-1:0]   count_q   [ENTRIES];
  logic [DATA_W-1:0]  content_q [ENTRIES];
  logic [ENTRIES-1:0] pend_q;

  assign rd_status  = status_q[rd_idx];
  assign rd_count   = count_q[rd_idx];
  assign rd_content = content_q[rd_idx];
  assign rd_pend    = pend_q[rd_idx];

  always_comb begin
    for (int i = 0; i < ENTRIES; i++) lw_vec[i] = (status_q[i] == ST_LOAD_WAIT);
  end

  // Status, count and pend are reset; the content array is a plain memory
  // written before it is read.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q <= '0;
      for (int i = 0; i < ENTRIES; i++) begin
        status_q[i] <= ST_REDUCTION;
        count_q[i]  <= '0;
      end
    end else if (wr_en) begin
      status_q[wr_idx] <= wr_status;
      count_q[wr_idx]  <= wr_count;
      pend_q[wr_idx]   <= wr_pend;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) content_q[wr_idx] <= wr_content;
  end
endmodule
