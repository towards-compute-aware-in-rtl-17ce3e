// tb_cais_switch: end-to-end test of one CAIS switch with four GPU models.
//
// Each port of the switch is wired to a behavioural GPU (tb/gpu_model.sv)
// that is both a home memory and a requester.  The GPUs synchronise their
// TB groups through the switch's Group Sync Table, gather NL lines from
// every other GPU with ld.cais (plus some plain loads and stores), meet at
// a second sync, and reduce NL lines into every other GPU with red.cais;
// GPU 1 holds back half of its contributions so that partial sums wait in
// the switch.  Small tables (6 rows) and a short timeout force LRU, deferred
// and timeout evictions.  Checked: every load answered once with the right
// data, every home's reduction lines equal the sum of all contributions,
// both syncs released, fewer load requests reach the homes than were
// issued (merging works), and every merge mechanism occurred.
module tb_cais_switch;
  import cais_pkg::*;
  localparam int N = 4, NL = 12, TO = 150;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] rx_valid, rx_ready, tx_valid, tx_ready;
  pkt_t rx_pkt [N], tx_pkt [N];
  merge_ev_t ev [N];
  logic [15:0] occupancy [N];
  logic ev_release;
  logic start = 0, check_now = 0;
  logic [N-1:0] done;
  int errors [N], n_ld_issued [N], n_ld_ok [N], n_home_ld [N], n_home_red [N], n_sync [N];

  cais_switch #(.N_PORTS(N), .N_GPU(N), .NUM_VC(8), .VC_DEPTH(4), .ENTRIES(6),
                .TIMEOUT(TO), .GST_ENTRIES(4)) dut (
    .clk, .rst_n, .rx_valid, .rx_ready, .rx_pkt, .tx_valid, .tx_ready, .tx_pkt,
    .rt_cfg_we (1'b0), .rt_cfg_gpu ('0), .rt_cfg_port ('0),
    .ev, .occupancy, .ev_release
  );

  for (genvar g = 0; g < N; g++) begin : g_gpu
    logic               s_ready = 1'b0, n_valid = 1'b0;
    logic [GROUP_W-1:0] n_group = '0;
    sync_phase_e        n_phase = SYNC_PRE_LAUNCH;
    logic [15:0]        n_meta = '0;
    gpu_model #(.ME(g), .N_GPU(N), .NL(NL), .GAP(6), .LAT(60), .LATE_GPU(1),
                .LATE_CYC(600), .SYNC_MODE(0)) u_gpu (
      .clk, .rst_n, .start, .check_now,
      .tx_valid (rx_valid[g]), .tx_ready (rx_ready[g]), .tx_pkt (rx_pkt[g]),
      .rx_valid (tx_valid[g]), .rx_ready (tx_ready[g]), .rx_pkt (tx_pkt[g]),
      .sync_valid (), .sync_ready (s_ready), .sync_group (), .sync_phase (), .sync_meta (),
      .notify_valid (n_valid), .notify_ready (), .notify_group (n_group),
      .notify_phase (n_phase), .notify_meta (n_meta),
      .done (done[g]), .errors (errors[g]), .n_ld_issued (n_ld_issued[g]),
      .n_ld_ok (n_ld_ok[g]), .n_home_ld (n_home_ld[g]), .n_home_red (n_home_red[g]),
      .n_sync (n_sync[g])
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    for (int g = 0; g < N; g++)
      $display("  gpu %0d: done=%0b loads %0d/%0d syncs %0d errors %0d", g, done[g],
               n_ld_ok[g], n_ld_issued[g], n_sync[g], errors[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // event counters
  localparam int NEV = 13;
  int evc [NEV];
  string evn [NEV] = '{"ld_alloc", "ld_hit_wait", "ld_hit_ready", "ld_fill", "ld_release",
                       "red_alloc", "red_merge", "red_release", "evict_lru", "evict_timeout",
                       "evict_defer", "bypass", "sync_release"};
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < N; p++) begin
      evc[0] += ev[p].ld_alloc;    evc[1] += ev[p].ld_hit_wait;  evc[2] += ev[p].ld_hit_ready;
      evc[3] += ev[p].ld_fill;     evc[4] += ev[p].ld_release;   evc[5] += ev[p].red_alloc;
      evc[6] += ev[p].red_merge;   evc[7] += ev[p].red_release;  evc[8] += ev[p].evict_lru;
      evc[9] += ev[p].evict_timeout; evc[10] += ev[p].evict_defer; evc[11] += ev[p].bypass;
    end
    evc[12] += ev_release;
  end

  initial begin
    int issued, home_ld, red_pk;
    for (int e = 0; e < NEV; e++) evc[e] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    start = 1;
    wait (&done);
    repeat (TO * 3 + 200) @(posedge clk);
    @(negedge clk) check_now = 1;
    @(negedge clk) check_now = 0;
    repeat (2) @(posedge clk);
    issued = 0; home_ld = 0; red_pk = 0;
    for (int g = 0; g < N; g++) begin
      check(errors[g] == 0, $sformatf("gpu %0d reported %0d errors", g, errors[g]));
      check(n_ld_ok[g] == n_ld_issued[g] && n_ld_issued[g] == (N - 1) * NL, $sformatf("gpu %0d loads", g));
      check(n_sync[g] == 2, $sformatf("gpu %0d syncs", g));
      check(occupancy[g] == 0, $sformatf("port %0d table not empty at the end", g));
      issued += n_ld_issued[g]; home_ld += n_home_ld[g]; red_pk += n_home_red[g];
    end
    check(home_ld < issued, "no load traffic saved");
    check(red_pk < N * (N - 1) * NL, "no reduction traffic saved");
    for (int e = 0; e < NEV; e++) begin
      $display("  %-14s %0d", evn[e], evc[e]);
      check(evc[e] > 0, $sformatf("mechanism %s never happened", evn[e]));
    end
    check(evc[12] == 2, "expected two group releases");
    $display("loads issued %0d, reaching homes %0d; reduction packets %0d of %0d at homes",
             issued, home_ld, red_pk, N * (N - 1) * NL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
