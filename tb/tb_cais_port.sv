// tb_cais_port: directed test of one switch port with its merge unit.
//
// The testbench stands in for the routing table (output port = destination
// GPU xor 1), the arbiter and crossbar (it pops the VCs at random and feeds
// the egress side), the Group Sync Table and the GPU on the link.  Phases:
//   1. ingress: mixed packets from the GPU must land in the VC of their
//      class, in order, with the routed output port; sync requests must
//      leave on the sync interface instead;
//   2. egress: plain packets from the crossbar must reach the link unchanged
//      and in order; group releases must become release packets;
//   3. load merging: three ld.cais for one line of this port's GPU must
//      produce one request on the link; the GPU's response must come back
//      as three responses in the load-response VC, one per requester, with
//      the data and each requester's tag;
//   4. reduction merging: three red.cais for one line must produce one
//      reduction on the link carrying the FP32 sum.
module tb_cais_port;
  import cais_pkg::*;
  localparam int ME = 2, NV = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic rx_valid, rx_ready, tx_valid, tx_ready;
  pkt_t rx_pkt, tx_pkt;
  logic [GPU_ID_W-1:0] rt_dst;
  logic [1:0] rt_oport;
  logic [NV-1:0] vc_head_valid, vc_pop, xin_ready;
  pkt_t vc_head_pkt [NV];
  logic [1:0] vc_head_oport [NV];
  logic xin_valid;
  pkt_t xin_pkt;
  logic sync_valid, sync_ready, rel_valid, rel_ready;
  pkt_t sync_pkt;
  logic [GROUP_W:0] rel_key;
  merge_ev_t ev;
  logic [15:0] occupancy;

  cais_port #(.PORT_ID(ME), .N_GPU(4), .N_PORTS(4), .NUM_VC(NV), .VC_DEPTH(4),
              .ENTRIES(4), .TIMEOUT(100)) dut (.*);

  assign rt_oport = 2'(rt_dst ^ 3'd1);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- drivers and collectors ----
  pkt_t rxq [$], xq [$], txc [$], syc [$];
  logic [GROUP_W:0] relq [$];
  pkt_t vcc [NV][$];
  logic [1:0] vco [NV][$];

  always @(negedge clk) begin
    rx_valid = rst_n && rxq.size() > 0;
    if (rxq.size() > 0) rx_pkt = rxq[0];
    xin_valid = 0;
    if (xq.size() > 0) begin
      xin_pkt = xq[0];
      xin_valid = rst_n && xin_ready[vc_of(xq[0])] && $urandom_range(0, 1);
    end
    rel_valid = rst_n && relq.size() > 0;
    if (relq.size() > 0) rel_key = relq[0];
    tx_ready = $urandom_range(0, 3) != 0;
    sync_ready = $urandom_range(0, 1);
    for (int v = 0; v < NV; v++) vc_pop[v] = vc_head_valid[v] && $urandom_range(0, 2) == 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (rx_valid && rx_ready) void'(rxq.pop_front());
    if (xin_valid) void'(xq.pop_front());
    if (rel_valid && rel_ready) void'(relq.pop_front());
    if (tx_valid && tx_ready) txc.push_back(tx_pkt);
    if (sync_valid && sync_ready) syc.push_back(sync_pkt);
    for (int v = 0; v < NV; v++) if (vc_pop[v]) begin
      vcc[v].push_back(vc_head_pkt[v]);
      vco[v].push_back(vc_head_oport[v]);
    end
  end

  function automatic logic [31:0] i2f(input int v);
    int e;
    if (v <= 0) return 32'h0;
    e = 0;
    for (int b = 0; b < 24; b++) if (v >> b != 0) e = b;
    return {1'b0, 8'(127 + e), 23'((v << (23 - e)) & 32'h7fffff)};
  endfunction

  task automatic wait_idle(input int n);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    pkt_t p, sent [$], syncs [$];
    pkt_t exp_vc [NV][$];
    xin_valid = 0; xin_pkt = '0; rx_valid = 0; rx_pkt = '0; rel_valid = 0; rel_key = '0;
    tx_ready = 0; sync_ready = 0; vc_pop = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // 1. ingress
    for (int n = 0; n < 60; n++) begin
      p = '0;
      p.tag = TAG_W'(n);
      p.src = 3'(ME);
      p.dst = 3'($urandom_range(0, 3));
      p.addr = {p.dst, 38'($urandom), 7'h0};
      case ($urandom_range(0, 6))
        0: p.ptype = PKT_LD_REQ;
        1: begin p.ptype = PKT_LD_REQ; p.cais = 1; end
        2: p.ptype = PKT_RED_REQ;
        3: begin p.ptype = PKT_RED_REQ; p.cais = 1; end
        4: p.ptype = PKT_ST_REQ;
        5: p.ptype = PKT_LD_RESP;
        default: begin p.ptype = PKT_SYNC_REQ; p.addr = ADDR_W'(n); end
      endcase
      rxq.push_back(p);
      if (p.ptype == PKT_SYNC_REQ) syncs.push_back(p);
      else exp_vc[vc_of(p)].push_back(p);
    end
    wait_idle(400);
    check(syc.size() == syncs.size(), "sync request count");
    foreach (syncs[i]) if (i < syc.size()) check(syc[i] == syncs[i], "sync request contents");
    for (int v = 0; v < NV; v++) begin
      check(vcc[v].size() == exp_vc[v].size(), $sformatf("vc %0d packet count", v));
      foreach (exp_vc[v][i]) if (i < vcc[v].size()) begin
        check(vcc[v][i] == exp_vc[v][i], $sformatf("vc %0d order / contents", v));
        check(vco[v][i] == 2'(exp_vc[v][i].dst ^ 3'd1), "routed output port");
      end
      vcc[v].delete(); vco[v].delete();
    end

    // 2. egress of plain packets and releases
    for (int n = 0; n < 30; n++) begin
      p = '0;
      p.tag = TAG_W'(100 + n);
      p.src = 3'($urandom_range(0, 3));
      p.dst = 3'(ME);
      p.addr = {3'(ME), 38'($urandom), 7'h0};
      case (n % 3)
        0: p.ptype = PKT_LD_REQ;
        1: p.ptype = PKT_LD_RESP;
        default: p.ptype = PKT_ST_REQ;
      endcase
      xq.push_back(p); sent.push_back(p);
    end
    relq.push_back(17'h1_0005); relq.push_back(17'h0_0009);
    wait_idle(300);
    begin
      int nrel = 0, k = 0;
      foreach (txc[i]) begin
        if (txc[i].ptype == PKT_SYNC_REL) begin
          check(txc[i].dst == 3'(ME), "release destination");
          check(sync_key(txc[i]) == (nrel == 0 ? 17'h1_0005 : 17'h0_0009), "release key");
          nrel++;
        end else begin
          if (k < sent.size()) check(txc[i] == sent[k], "egress order / contents");
          k++;
        end
      end
      check(nrel == 2, "two releases");
      check(k == sent.size(), "all egress packets out");
    end
    txc.delete();

    // 3. load merging
    foreach (vcc[v]) vcc[v].delete();
    for (int s = 0, n = 0; s < 4; s++) if (s != ME) begin
      p = '0;
      p.ptype = PKT_LD_REQ; p.cais = 1; p.src = 3'(s); p.dst = 3'(ME);
      p.tag = TAG_W'(200 + s); p.addr = {3'(ME), 38'h55, 7'h0};
      xq.push_back(p); n++;
    end
    wait_idle(100);
    check(txc.size() == 1, $sformatf("one merged load on the link, saw %0d", txc.size()));
    if (txc.size() > 0) begin
      check(txc[0].ptype == PKT_LD_REQ && txc[0].cais && txc[0].addr == {3'(ME), 38'h55, 7'h0}, "forwarded load");
      p = txc[0];
      p.ptype = PKT_LD_RESP; p.dst = txc[0].src; p.src = 3'(ME);
      for (int k = 0; k < LANES; k++) p.data[32*k +: 32] = i2f(k + 7);
      rxq.push_back(p);
    end
    wait_idle(100);
    check(vcc[2].size() == 3, $sformatf("three load responses, saw %0d", vcc[2].size()));
    foreach (vcc[2][i]) begin
      int s;
      s = int'(vcc[2][i].dst);
      check(s != ME && vcc[2][i].tag == TAG_W'(200 + s) && vcc[2][i].ptype == PKT_LD_RESP, "response requester / tag");
      check(vcc[2][i].data == p.data && !vcc[2][i].cais, "response data");
      check(vco[2][i] == 2'(s ^ 1), "response routed");
    end
    txc.delete();

    // 4. reduction merging
    for (int s = 0; s < 4; s++) if (s != ME) begin
      p = '0;
      p.ptype = PKT_RED_REQ; p.cais = 1; p.src = 3'(s); p.dst = 3'(ME);
      p.addr = {3'(ME), 38'h77, 7'h0};
      for (int k = 0; k < LANES; k++) p.data[32*k +: 32] = i2f((s + 1) * (k + 1));
      xq.push_back(p);
    end
    wait_idle(100);
    check(txc.size() == 1, $sformatf("one summed reduction on the link, saw %0d", txc.size()));
    if (txc.size() > 0) begin
      bit ok = 1;
      for (int k = 0; k < LANES; k++) if (txc[0].data[32*k +: 32] != i2f((1 + 2 + 4) * (k + 1))) ok = 0;
      check(ok && txc[0].ptype == PKT_RED_REQ && !txc[0].cais && txc[0].dst == 3'(ME), "reduction sum");
    end
    check(occupancy == 0, "merge table empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
