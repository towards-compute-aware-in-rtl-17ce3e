// tb_gpu_synchronizer: self-checking test of the GPU-side TB-group
// synchronizer.
//
// The testbench plays both the TB scheduler and the switch.  It registers
// syncs for random {group, phase} keys with random metadata, collects the
// sync request packets the synchronizer sends (checking type, source GPU
// and key, and that each registration sends exactly one), answers each with
// a release after a random delay (also sending releases for keys nobody
// waits on), and checks that every registration is notified exactly once,
// only after its release, with its own metadata.  With a four-row table the
// scheduler is back-pressured; that stall, request back-pressure from the
// switch and notify back-pressure are counted and must each occur.
module tb_gpu_synchronizer;
  import cais_pkg::*;
  localparam int ENT = 4, MW = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [GPU_ID_W-1:0] gpu_id = 3'd5;
  logic sync_valid, sync_ready, notify_valid, notify_ready, req_valid, req_ready, resp_valid, resp_ready;
  logic [GROUP_W-1:0] sync_group, notify_group;
  sync_phase_e sync_phase, notify_phase;
  logic [MW-1:0] sync_meta, notify_meta;
  pkt_t req_pkt, resp_pkt;

  gpu_synchronizer #(.ENTRIES(ENT), .META_W(MW)) dut (.*);

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

  // state per key {phase, group}: 0 idle, 1 registered, 2 request seen, 3 released
  int st [logic [GROUP_W:0]];
  logic [MW-1:0] meta [logic [GROUP_W:0]];
  logic [GROUP_W:0] to_release [$];
  int n_reg = 0, n_notify = 0, n_full = 0, n_req_bp = 0, n_notify_bp = 0;
  localparam int TOTAL = 300;

  initial begin
    logic [GROUP_W:0] k;
    bit sacc;
    sync_valid = 0; notify_ready = 0; req_ready = 0; resp_valid = 0; resp_pkt = '0;
    sync_group = '0; sync_phase = SYNC_PRE_LAUNCH; sync_meta = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    while (n_notify < TOTAL) begin
      @(negedge clk);
      // scheduler side: a new registration for a key not in flight
      if (!sync_valid && n_reg < TOTAL && $urandom_range(0, 2) == 0) begin
        k = {1'($urandom), GROUP_W'($urandom_range(0, 9))};
        if (!st.exists(k) || st[k] == 0) begin
          sync_valid = 1; sync_group = k[GROUP_W-1:0]; sync_phase = sync_phase_e'(k[GROUP_W]);
          sync_meta = MW'($urandom);
        end
      end
      req_ready    = $urandom_range(0, 3) != 0;
      notify_ready = $urandom_range(0, 3) != 0;
      // switch side: release a collected key, or a stray one
      resp_valid = 0;
      resp_pkt = '0;
      resp_pkt.ptype = PKT_SYNC_REL;
      if (to_release.size() > 0 && $urandom_range(0, 3) == 0) begin
        int j;
        j = $urandom_range(0, to_release.size() - 1);
        resp_valid = 1; resp_pkt.addr = ADDR_W'(to_release[j]);
        to_release.delete(j);
      end else if ($urandom_range(0, 9) == 0) begin
        k = {1'($urandom), GROUP_W'(16'h8000 + $urandom_range(0, 9))};
        resp_valid = 1; resp_pkt.addr = ADDR_W'(k);
      end
      #1;
      check(resp_ready, "resp_ready low");
      if (sync_valid && !sync_ready) n_full++;
      if (req_valid && !req_ready) n_req_bp++;
      if (notify_valid && !notify_ready) n_notify_bp++;
      if (req_valid && req_ready) begin
        k = sync_key(req_pkt);
        check(req_pkt.ptype == PKT_SYNC_REQ && req_pkt.src == gpu_id, "request type or source");
        check(st.exists(k) && st[k] == 1, "request for a key not registered or sent twice");
        if (st.exists(k) && st[k] == 1) begin st[k] = 2; to_release.push_back(k); end
      end
      if (notify_valid && notify_ready) begin
        k = {notify_phase, notify_group};
        check(st.exists(k) && st[k] == 3, "notify before release");
        check(meta.exists(k) && notify_meta == meta[k], "notify metadata");
        st[k] = 0; n_notify++;
      end
      if (resp_valid) begin
        k = sync_key(resp_pkt);
        if (st.exists(k) && st[k] == 2) st[k] = 3;
      end
      if (sync_valid && sync_ready) begin
        k = {sync_phase, sync_group};
        st[k] = 1; meta[k] = sync_meta; n_reg++;
      end
      sacc = sync_valid && sync_ready;
      @(posedge clk);
      #1 if (sacc) sync_valid = 0;   // otherwise held until accepted
    end
    check(n_full > 0, "table never full");
    check(n_req_bp > 0 && n_notify_bp > 0, "no back-pressure seen");
    $display("registered=%0d notified=%0d full=%0d req_bp=%0d notify_bp=%0d", n_reg, n_notify, n_full, n_req_bp, n_notify_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
