// vec_alu: the merge unit's vector ALU ("Vec. ALU" in the switch port).
//
// It adds the 128 B payload of an arriving red.cais request to the partial
// sum read from the Merging Table's Content Array, as 32 independent FP32
// lanes (red.cais.global.add.f32).  The result is written back into the
// table, or sent to the home GPU when the last contribution has arrived.
// The paper names the ALU and its two inputs (table content and packet
// data); the lane count follows from the 128 B entry and FP32 data type,
// and the lane adder (fp32_add, round-to-nearest-even, flush-to-zero) is
// this design's own.
//
// Interface: acc and pkt are 1024-bit vectors, lane i in bits [32i+31:32i];
// sum = acc + pkt lane by lane.  Timing: combinational.
module vec_alu
  import cais_pkg::*;
#(
  parameter int unsigned N_LANES = LANES
) (
  input  logic [N_LANES*32-1:0] acc,
  input  logic [N_LANES*32-1:0] pkt,
  output logic [N_LANES*32-1:0] sum
);
  for (genvar i = 0; i < N_LANES; i++) begin : g_lane
    fp32_add u_add (
      .a (acc[32*i +: 32]),
      .b (pkt[32*i +: 32]),
      .s (sum[32*i +: 32])
    );
  end
endmodule
