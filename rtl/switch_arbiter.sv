// switch_arbiter: the switch's Arbiter, a separable round-robin allocator
// of crossbar outputs to input virtual channels.
//
// Stage 1, per input port: among its VCs whose head packet is valid and
// whose output port can accept a packet of that VC, a round-robin arbiter
// picks one.
// Stage 2, per output port: among the input ports whose pick targets it, a
// second round-robin arbiter picks one.  The winning VC is popped and the
// crossbar is told which input port and VC drive each output.  A VC whose
// output is busy is skipped, so it never blocks the other VCs of its port;
// this is the round-robin, per-VC arbitration the paper uses to avoid
// head-of-line blocking between load and reduction traffic.
//
// Paper: round-robin arbitration, separate VCs.  Own choices: the separable
// two-stage structure, input-first order, pointers that move only on a grant.
//
// Interface: per input port the VC head valids and output ports, per output
// port one ready bit per VC (an output may have room for one packet class
// and not for another); out: per-VC pop, per output a valid, source port and source
// VC.  Timing: combinational grant, one packet per output per cycle.
module switch_arbiter #(
  parameter int unsigned N_PORTS = 8,
  parameter int unsigned NUM_VC  = 8,
  localparam int unsigned PORT_W = (N_PORTS > 1) ? $clog2(N_PORTS) : 1,
  localparam int unsigned VC_W   = (NUM_VC > 1) ? $clog2(NUM_VC) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [NUM_VC-1:0]   head_valid [N_PORTS],
  input  logic [PORT_W-1:0]   head_oport [N_PORTS][NUM_VC],
  input  logic [NUM_VC-1:0]   out_ready  [N_PORTS],
  output logic [NUM_VC-1:0]   pop        [N_PORTS],
  output logic [N_PORTS-1:0]  out_valid,
  output logic [PORT_W-1:0]   out_src    [N_PORTS],
  output logic [VC_W-1:0]     out_vc     [N_PORTS]
);
  logic [NUM_VC-1:0]  elig    [N_PORTS];
  logic [NUM_VC-1:0]  vgnt    [N_PORTS];
  logic [VC_W-1:0]    vsel    [N_PORTS];
  logic [N_PORTS-1:0] in_act;
  logic [PORT_W-1:0]  in_out  [N_PORTS];
  logic [N_PORTS-1:0] oreq    [N_PORTS];
  logic [N_PORTS-1:0] ognt    [N_PORTS];
  logic [PORT_W-1:0]  osel    [N_PORTS];
  logic [N_PORTS-1:0] in_won;

  // stage 1: one VC per input port
  for (genvar p = 0; p < N_PORTS; p++) begin : g_in
    always_comb begin
      for (int v = 0; v < NUM_VC; v++)
        elig[p][v] = head_valid[p][v] && out_ready[head_oport[p][v]][v];
    end
    rr_arbiter #(.N(NUM_VC)) u_vc_arb (
      .clk, .rst_n, .req (elig[p]), .advance (in_won[p]),
      .gnt (vgnt[p]), .gnt_idx (vsel[p]), .any (in_act[p])
    );
    assign in_out[p] = head_oport[p][vsel[p]];
  end

  // stage 2: one input port per output port
  for (genvar o = 0; o < N_PORTS; o++) begin : g_out
    always_comb begin
      for (int p = 0; p < N_PORTS; p++)
        oreq[o][p] = in_act[p] && in_out[p] == PORT_W'(o);
    end
    rr_arbiter #(.N(N_PORTS)) u_port_arb (
      .clk, .rst_n, .req (oreq[o]), .advance (1'b1),
      .gnt (ognt[o]), .gnt_idx (osel[o]), .any (out_valid[o])
    );
    assign out_src[o] = osel[o];
    assign out_vc[o]  = vsel[osel[o]];
  end

  always_comb begin
    for (int p = 0; p < N_PORTS; p++) begin
      in_won[p] = 1'b0;
      for (int o = 0; o < N_PORTS; o++) in_won[p] = in_won[p] | ognt[o][p];
      pop[p] = in_won[p] ? vgnt[p] : '0;
    end
  end

  // Each output takes at most one packet, each input gives at most one.
  for (genvar o = 0; o < N_PORTS; o++) begin : g_chk
    a_onehot: assert property (@(posedge clk) disable iff (!rst_n)
                               $onehot0(ognt[o]));
  end
endmodule
