// vc_buffer: the input virtual channels of one switch port.
//
// NUM_VC independent FIFOs, each VC_DEPTH packets deep (the paper's switch
// has eight 256-deep VCs per input port).  A packet is written into the VC
// chosen by cais_pkg::vc_of, which keeps mergeable loads, load responses,
// mergeable reductions and other traffic apart, so a blocked class cannot
// hold up another (head-of-line blocking).  Each entry carries the packet
// and the output port the routing table chose for it.
//
// Paper: eight VCs of depth 256 per input port, separate VCs for load and
// reduction traffic.  Own choices: the depth counts whole packets (the paper
// does not give the unit), the VC of each packet class.
//
// Interface: push side valid/ready with `in_vc`; per VC a head valid, head
// packet, head output port and a pop strobe.  `in_ready` reflects the VC
// named by `in_vc`.  Timing: a pushed packet is visible at the head one
// cycle later.
module vc_buffer
  import cais_pkg::*;
#(
  parameter int unsigned NUM_VC   = 8,
  parameter int unsigned VC_DEPTH = 256,
  parameter int unsigned PORT_W   = 3
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  output logic                          in_ready,
  input  logic [$clog2(NUM_VC)-1:0]     in_vc,
  input  pkt_t                          in_pkt,
  input  logic [PORT_W-1:0]             in_oport,
  output logic [NUM_VC-1:0]             head_valid,
  output pkt_t                          head_pkt   [NUM_VC],
  output logic [PORT_W-1:0]             head_oport [NUM_VC],
  input  logic [NUM_VC-1:0]             pop
);
  typedef struct packed {
    logic [PORT_W-1:0] oport;
    pkt_t              pkt;
  } vc_word_t;

  logic [NUM_VC-1:0] rdy;

  for (genvar v = 0; v < NUM_VC; v++) begin : g_vc
    vc_word_t w_in, w_out;
    assign w_in = '{oport: in_oport, pkt: in_pkt};
    sync_fifo #(.T(vc_word_t), .DEPTH(VC_DEPTH)) u_fifo (
      .clk, .rst_n,
      .in_valid  (in_valid && in_vc == ($clog2(NUM_VC))'(v)),
      .in_ready  (rdy[v]),
      .in_data   (w_in),
      .out_valid (head_valid[v]),
      .out_ready (pop[v]),
      .out_data  (w_out),
      .count     ()
    );
    assign head_pkt[v]   = w_out.pkt;
    assign head_oport[v] = w_out.oport;
  end

  assign in_ready = rdy[in_vc];
endmodule
