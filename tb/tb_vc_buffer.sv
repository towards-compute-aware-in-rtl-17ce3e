// tb_vc_buffer: self-checking test of the input virtual-channel buffer.
//
// Random pushes into random VCs and random pops; each VC is checked against
// its own reference queue (order, packet, output port), a full VC must
// refuse pushes while the others still accept, and a packet pushed into one
// VC must never appear in another.
module tb_vc_buffer;
  import cais_pkg::*;
  localparam int NUM_VC = 8, DEPTH = 4, PORT_W = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready;
  logic [2:0] in_vc;
  pkt_t in_pkt;
  logic [PORT_W-1:0] in_oport;
  logic [NUM_VC-1:0] head_valid, pop;
  pkt_t head_pkt [NUM_VC];
  logic [PORT_W-1:0] head_oport [NUM_VC];

  vc_buffer #(.NUM_VC(NUM_VC), .VC_DEPTH(DEPTH), .PORT_W(PORT_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  logic [TAG_W-1:0] q_tag [NUM_VC][$];
  logic [PORT_W-1:0] q_port [NUM_VC][$];
  int n_full = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; pop = '0; in_pkt = '0; in_vc = 0; in_oport = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      in_valid = 1'($urandom_range(0, 1));
      in_vc    = 3'($urandom_range(0, it < 1500 ? 1 : 7));
      in_pkt.tag = TAG_W'(it);
      in_oport = PORT_W'($urandom);
      for (int v = 0; v < NUM_VC; v++) pop[v] = head_valid[v] && ($urandom_range(0, 3) == 0);
      #1;
      check(in_ready == (q_tag[in_vc].size() < DEPTH), "in_ready vs fill level");
      if (!in_ready) n_full++;
      for (int v = 0; v < NUM_VC; v++) begin
        check(head_valid[v] == (q_tag[v].size() > 0), "head_valid");
        if (head_valid[v] && q_tag[v].size() > 0) begin
          check(head_pkt[v].tag == q_tag[v][0], $sformatf("vc %0d order", v));
          check(head_oport[v] == q_port[v][0], "oport");
        end
      end
      @(posedge clk);
      for (int v = 0; v < NUM_VC; v++) if (pop[v]) begin
        void'(q_tag[v].pop_front()); void'(q_port[v].pop_front());
      end
      if (in_valid && in_ready) begin q_tag[in_vc].push_back(in_pkt.tag); q_port[in_vc].push_back(in_oport); end
    end
    check(n_full > 0, "no VC ever filled");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
