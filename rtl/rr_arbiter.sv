// rr_arbiter: round-robin arbiter, the arbitration policy the switch uses
// everywhere (crossbar allocation, VC selection, stream merging).
//
// The request just after the last winner has the highest priority.  The
// pointer moves past the winner only when `advance` is high (the grant was
// used), so a request that could not be served keeps its turn.
// Interface: `req` N bits in, `gnt` one-hot out, `gnt_idx` its index,
// `any` = some request.  Timing: the grant is combinational; the pointer
// updates at the clock edge.
module rr_arbiter #(
  parameter int unsigned N = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          advance,
  output logic [N-1:0]  gnt,
  output logic [IW-1:0] gnt_idx,
  output logic          any
);
  logic [IW-1:0] ptr_q;   // highest-priority index

  always_comb begin
    int unsigned j;
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      j = (int'(ptr_q) + k) % N;
      if (!any && req[j]) begin
        any      = 1'b1;
        gnt[j]   = 1'b1;
        gnt_idx  = IW'(j);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr_q <= '0;
    else if (advance && any)
      ptr_q <= (gnt_idx == IW'(N - 1)) ? '0 : gnt_idx + IW'(1);
  end
endmodule
