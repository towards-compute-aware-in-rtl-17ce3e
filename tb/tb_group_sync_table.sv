// tb_group_sync_table: self-checking test of the switch's Group Sync Table.
//
// Four ports each send one sync request for each of forty {group, phase}
// keys, all in the same order but at independent random speeds, so fast
// ports run ahead and fill the four-row table.  A reference count per key
// checks that a release is raised exactly when the last GPU's request is
// accepted and carries that key, that no request is accepted when it could
// not be (full table with a new key, or a completing request while a port
// refuses the broadcast), and that at most one request is accepted per
// cycle.  Releases are back-pressured at random.  The test counts releases,
// full-table stalls and back-pressure stalls, and fails if any never occurs.
module tb_group_sync_table;
  import cais_pkg::*;
  localparam int NP = 4, NG = 4, ENT = 4, NKEY = 40;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] sync_valid, sync_ready, rel_ready;
  pkt_t sync_pkt [NP];
  logic rel_valid, ev_release;
  logic [GROUP_W:0] rel_key;

  group_sync_table #(.N_PORTS(NP), .N_GPU(NG), .ENTRIES(ENT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [GROUP_W:0] keys [NKEY];
  int pos [NP];
  int cnt [NKEY];
  int n_rel = 0, n_full = 0, n_bp = 0;
  bit acc [NP];

  function automatic int key_idx(input logic [GROUP_W:0] k);
    for (int i = 0; i < NKEY; i++) if (keys[i] == k) return i;
    return -1;
  endfunction

  function automatic int open_groups();
    int n = 0;
    for (int i = 0; i < NKEY; i++) if (cnt[i] > 0 && cnt[i] < NG) n++;
    return n;
  endfunction

  initial begin
    for (int i = 0; i < NKEY; i++) begin
      keys[i] = {1'(i % 2), GROUP_W'(16'h100 + 7 * i)};
      cnt[i] = 0;
    end
    for (int p = 0; p < NP; p++) begin pos[p] = 0; sync_pkt[p] = '0; acc[p] = 0; end
    sync_valid = '0; rel_ready = '1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 5000; cyc++) begin
      bit done;
      @(negedge clk);
      for (int p = 0; p < NP; p++) begin
        // port 0 is slow, port 3 fast
        if (!sync_valid[p] || acc[p]) begin
          sync_valid[p] = pos[p] < NKEY && ($urandom_range(0, 9) < 1 + 3 * p);
          sync_pkt[p] = '0;
          sync_pkt[p].ptype = PKT_SYNC_REQ;
          sync_pkt[p].src = GPU_ID_W'(p);
          if (pos[p] < NKEY) sync_pkt[p].addr = ADDR_W'(keys[pos[p]]);
        end
      end
      rel_ready = ($urandom_range(0, 3) == 0) ? NP'($urandom) : '1;
      #1;
      begin
        int nacc, acc_k;
        bit completing;
        nacc = 0; acc_k = -1;
        for (int p = 0; p < NP; p++) acc[p] = sync_valid[p] && sync_ready[p];
        for (int p = 0; p < NP; p++) if (acc[p]) begin
          nacc++; acc_k = key_idx(sync_key(sync_pkt[p]));
        end
        check(nacc <= 1, "more than one sync request accepted");
        completing = (acc_k >= 0) && (cnt[acc_k] == NG - 1);
        check(ev_release == completing, "release not exactly at the last request");
        if (ev_release) check(rel_key == keys[acc_k], "release carries the wrong key");
        if (nacc == 0 && |sync_valid) begin
          bit full_block;
          full_block = open_groups() == ENT;
          if (full_block) n_full++;
          if (!(&rel_ready) && rel_valid) n_bp++;
          check(full_block || (rel_valid && !(&rel_ready)), "request refused without reason");
        end
        @(posedge clk);
        for (int p = 0; p < NP; p++) if (acc[p]) pos[p]++;
        if (acc_k >= 0) cnt[acc_k]++;
        if (completing) n_rel++;
      end
      done = 1;
      for (int p = 0; p < NP; p++) if (pos[p] < NKEY) done = 0;
      if (done) break;
    end
    for (int i = 0; i < NKEY; i++) check(cnt[i] == NG, $sformatf("key %0d incomplete", i));
    check(n_rel == NKEY, $sformatf("%0d releases, expected %0d", n_rel, NKEY));
    check(n_full > 0, "table never full");
    check(n_bp > 0, "release never back-pressured");
    $display("releases=%0d full_stalls=%0d release_backpressure=%0d", n_rel, n_full, n_bp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
