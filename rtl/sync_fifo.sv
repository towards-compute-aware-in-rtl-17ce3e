// sync_fifo: single-clock first-in first-out queue used for buffering
// inside the switch and the GPU hub.
//
// A circular buffer of DEPTH words of type T with read and write pointers and
// a count.  Interface: valid/ready on both sides; `in_ready` is low when
// full, `out_valid` high when not empty, the head word is on `out_data`.
// Timing: a word written in one cycle can be read in the next; one push and
// one pop per cycle.  Reset empties the queue; the storage is not reset.
module sync_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  T                 mem [DEPTH];
  logic [PW-1:0]    rd_q, wr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;
  logic push, pop;

  assign in_ready  = (cnt_q != ($clog2(DEPTH+1))'(DEPTH));
  assign out_valid = (cnt_q != '0);
  assign out_data  = mem[rd_q];
  assign count     = cnt_q;
  assign push      = in_valid && in_ready;
  assign pop       = out_valid && out_ready;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q  <= '0;
      wr_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (push) wr_q <= inc(wr_q);
      if (pop)  rd_q <= inc(rd_q);
      cnt_q <= cnt_q + ($clog2(DEPTH+1))'(push) - ($clog2(DEPTH+1))'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_q] <= in_data;
  end
endmodule
