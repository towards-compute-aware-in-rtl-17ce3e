// tb_hub_router: self-checking test of the GPU hub with deterministic
// switch selection.
//
// Outbound, random loads, reductions and stores from the GPU and sync
// requests from the synchronizer are offered under random link
// back-pressure.  Every packet must leave on exactly one link, the one
// given by the XOR-fold of its 128 B line address (or of its sync key), be
// stamped with this GPU as source and the address's home GPU (top three
// address bits) as destination, and keep its order within its source.
// Requests for the same line must always take the same link.  Inbound,
// random packets arrive on all links; releases must go to the synchronizer
// and everything else to the GPU, each exactly once and in link order.
module tb_hub_router;
  import cais_pkg::*;
  localparam int NS = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [GPU_ID_W-1:0] gpu_id = 3'd2;
  logic gpu_tx_valid, gpu_tx_ready, gpu_rx_valid, gpu_rx_ready;
  pkt_t gpu_tx_pkt, gpu_rx_pkt, sreq_pkt, sresp_pkt;
  logic sreq_valid, sreq_ready, sresp_valid, sresp_ready;
  logic [NS-1:0] link_tx_valid, link_tx_ready, link_rx_valid, link_rx_ready;
  pkt_t link_tx_pkt [NS], link_rx_pkt [NS];

  hub_router #(.N_SWITCH(NS)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference switch choice: bit i of the line address folds into bit i%2
  function automatic int ref_switch(input pkt_t p);
    logic [40:0] v;
    logic [1:0] h;
    v = (p.ptype == PKT_SYNC_REQ) ? 41'(p.addr[16:0]) : p.addr[47:7];
    h = '0;
    for (int i = 0; i < 41; i++) h[i & 1] ^= v[i];
    return int'(h);
  endfunction

  function automatic pkt_t rand_pkt(input bit sync, input int n);
    pkt_t p;
    p = '0;
    p.tag = TAG_W'(n);
    if (sync) begin
      p.ptype = PKT_SYNC_REQ; p.src = gpu_id; p.dst = gpu_id;
      p.addr = ADDR_W'({1'($urandom), 16'($urandom)});
    end else begin
      case ($urandom_range(0, 2))
        0: p.ptype = PKT_LD_REQ;
        1: p.ptype = PKT_RED_REQ;
        default: p.ptype = PKT_ST_REQ;
      endcase
      p.cais = 1'($urandom);
      // a small pool of lines, so lines repeat
      p.addr = {3'($urandom), 38'($urandom_range(0, 15)), 7'($urandom)};
      p.src = 3'($urandom); p.dst = 3'($urandom);   // must be overwritten
      p.data[31:0] = $urandom;
    end
    return p;
  endfunction

  int n_gpu = 0, n_sync = 0, n_gpu_out = 0, n_sync_out = 0;
  int line_sw [logic [40:0]];
  int rx_sent [NS], rx_got [NS];
  int n_rel = 0, n_oth = 0;

  initial begin
    gpu_tx_valid = 0; sreq_valid = 0; link_rx_valid = '0;
    gpu_tx_pkt = '0; sreq_pkt = '0;
    for (int s = 0; s < NS; s++) begin link_rx_pkt[s] = '0; rx_sent[s] = 0; rx_got[s] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      bit acc_g, acc_s;
      bit [NS-1:0] acc_rx;
      @(negedge clk);
      if (!gpu_tx_valid && $urandom_range(0, 1)) begin gpu_tx_valid = 1; gpu_tx_pkt = rand_pkt(0, n_gpu); end
      if (!sreq_valid && $urandom_range(0, 3) == 0) begin sreq_valid = 1; sreq_pkt = rand_pkt(1, n_sync); end
      link_tx_ready = NS'($urandom);
      for (int s = 0; s < NS; s++) if (!link_rx_valid[s] && $urandom_range(0, 2) == 0) begin
        link_rx_valid[s] = 1;
        link_rx_pkt[s] = '0;
        link_rx_pkt[s].ptype = ($urandom_range(0, 3) == 0) ? PKT_SYNC_REL : PKT_LD_RESP;
        link_rx_pkt[s].src = 3'(s);     // the TB marks the link in src / tag
        link_rx_pkt[s].tag = TAG_W'(rx_sent[s]);
      end
      gpu_rx_ready = $urandom_range(0, 3) != 0;
      sresp_ready  = $urandom_range(0, 1);
      #1;
      // outbound
      check($onehot0(link_tx_valid), "packet on more than one link");
      acc_g = gpu_tx_valid && gpu_tx_ready;
      acc_s = sreq_valid && sreq_ready;
      check(!(acc_g && acc_s), "two packets out in one cycle");
      if (acc_g || acc_s) begin
        pkt_t exp;
        int s;
        exp = acc_g ? gpu_tx_pkt : sreq_pkt;
        s = ref_switch(exp);
        check(link_tx_valid[s] && link_tx_ready[s], "packet accepted but not on its hashed link");
        if (acc_g) begin
          exp.src = gpu_id; exp.dst = exp.addr[47:45];
          if (line_sw.exists(exp.addr[47:7])) check(line_sw[exp.addr[47:7]] == s, "same line, different switch");
          line_sw[exp.addr[47:7]] = s;
          n_gpu_out++;
        end else n_sync_out++;
        check(link_tx_pkt[s] == exp, "outbound packet contents");
      end else if (gpu_tx_valid || sreq_valid) begin
        check((link_tx_valid & link_tx_ready) == '0, "link handshake without a source accepted");
      end
      // inbound
      acc_rx = link_rx_valid & link_rx_ready;
      check($onehot0(acc_rx), "more than one inbound packet taken");
      for (int s = 0; s < NS; s++) if (acc_rx[s]) begin
        if (link_rx_pkt[s].ptype == PKT_SYNC_REL) begin
          check(sresp_valid && sresp_ready && !gpu_rx_valid && sresp_pkt == link_rx_pkt[s], "release not to synchronizer");
          n_rel++;
        end else begin
          check(gpu_rx_valid && gpu_rx_ready && !sresp_valid && gpu_rx_pkt == link_rx_pkt[s], "response not to GPU");
          n_oth++;
        end
        check(int'(link_rx_pkt[s].tag) == rx_got[s], "inbound order");
        rx_got[s]++;
      end
      if (acc_rx == '0) check(!(gpu_rx_valid && gpu_rx_ready) && !(sresp_valid && sresp_ready), "delivered without taking");
      @(posedge clk);
      #1;
      if (acc_g) begin gpu_tx_valid = 0; n_gpu++; end
      if (acc_s) begin sreq_valid = 0; n_sync++; end
      for (int s = 0; s < NS; s++) if (acc_rx[s]) begin link_rx_valid[s] = 0; rx_sent[s]++; end
    end
    check(n_gpu_out > 100 && n_sync_out > 50 && n_rel > 50 && n_oth > 100, "too little traffic");
    $display("gpu_out=%0d sync_out=%0d rel_in=%0d other_in=%0d", n_gpu_out, n_sync_out, n_rel, n_oth);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
