// tb_cais_system_full: the whole CAIS system at its default size, eight
// GPUs and four switches with 320-row merge tables, 256-deep VCs and a
// 4096-cycle timeout, taken through one tensor-parallel step.
//
// Eight behavioural GPUs (tb/gpu_model.sv) each run a pre-launch TB-group
// sync, an AllGather-style ld.cais phase over NL lines of every other GPU, a
// pre-access sync and a ReduceScatter-style red.cais phase (GPU 2 holds back
// half of its contributions).  With 320 rows per port the tables never fill,
// so LRU and deferred evictions are not expected here (the reduced-size
// system test covers them); the test checks the data of every load, the
// exact reduction sums at every home, both syncs, traffic saved by merging,
// merging in every switch, empty tables at the end after the timeout has
// flushed leftover sessions, and that loads, fills, releases, reduction
// merges, timeouts and group releases all occurred.
module tb_cais_system_full;
  import cais_pkg::*;
  localparam int N = 8, NS = 4, NL = 4, TO = 4096;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [N-1:0] gpu_tx_valid, gpu_tx_ready, gpu_rx_valid, gpu_rx_ready;
  pkt_t gpu_tx_pkt [N], gpu_rx_pkt [N];
  logic [N-1:0] s_valid, s_ready, n_valid, n_ready;
  logic [GROUP_W-1:0] s_group [N], n_group [N];
  sync_phase_e s_phase [N], n_phase [N];
  logic [15:0] s_meta [N], n_meta [N];
  merge_ev_t ev [NS][N];
  logic [15:0] occupancy [NS][N];
  logic [NS-1:0] ev_release;
  logic start = 0, check_now = 0;
  logic [N-1:0] done;
  int errors [N], n_ld_issued [N], n_ld_ok [N], n_home_ld [N], n_home_red [N], n_sync [N];

  cais_system dut (
    .clk, .rst_n,
    .gpu_tx_valid, .gpu_tx_ready, .gpu_tx_pkt, .gpu_rx_valid, .gpu_rx_ready, .gpu_rx_pkt,
    .sched_sync_valid (s_valid), .sched_sync_ready (s_ready), .sched_sync_group (s_group),
    .sched_sync_phase (s_phase), .sched_sync_meta (s_meta),
    .sched_notify_valid (n_valid), .sched_notify_ready (n_ready), .sched_notify_group (n_group),
    .sched_notify_phase (n_phase), .sched_notify_meta (n_meta),
    .rt_cfg_we ('0), .rt_cfg_gpu ('0), .rt_cfg_port ('0),
    .ev, .occupancy, .ev_release
  );

  for (genvar g = 0; g < N; g++) begin : g_gpu
    gpu_model #(.ME(g), .N_GPU(N), .NL(NL), .GAP(6), .LAT(60), .LATE_GPU(2),
                .LATE_CYC(200), .SYNC_MODE(1)) u_gpu (
      .clk, .rst_n, .start, .check_now,
      .tx_valid (gpu_tx_valid[g]), .tx_ready (gpu_tx_ready[g]), .tx_pkt (gpu_tx_pkt[g]),
      .rx_valid (gpu_rx_valid[g]), .rx_ready (gpu_rx_ready[g]), .rx_pkt (gpu_rx_pkt[g]),
      .sync_valid (s_valid[g]), .sync_ready (s_ready[g]), .sync_group (s_group[g]),
      .sync_phase (s_phase[g]), .sync_meta (s_meta[g]),
      .notify_valid (n_valid[g]), .notify_ready (n_ready[g]), .notify_group (n_group[g]),
      .notify_phase (n_phase[g]), .notify_meta (n_meta[g]),
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
    repeat (60000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    for (int g = 0; g < N; g++)
      $display("  gpu %0d: done=%0b loads %0d/%0d syncs %0d errors %0d", g, done[g],
               n_ld_ok[g], n_ld_issued[g], n_sync[g], errors[g]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int NEV = 13;
  int evc [NEV];
  int merged_sw [NS];
  string evn [NEV] = '{"ld_alloc", "ld_hit_wait", "ld_hit_ready", "ld_fill", "ld_release",
                       "red_alloc", "red_merge", "red_release", "evict_lru", "evict_timeout",
                       "evict_defer", "bypass", "sync_release"};
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < NS; s++) begin
      for (int p = 0; p < N; p++) begin
        evc[0] += ev[s][p].ld_alloc;    evc[1] += ev[s][p].ld_hit_wait;  evc[2] += ev[s][p].ld_hit_ready;
        evc[3] += ev[s][p].ld_fill;     evc[4] += ev[s][p].ld_release;   evc[5] += ev[s][p].red_alloc;
        evc[6] += ev[s][p].red_merge;   evc[7] += ev[s][p].red_release;  evc[8] += ev[s][p].evict_lru;
        evc[9] += ev[s][p].evict_timeout; evc[10] += ev[s][p].evict_defer; evc[11] += ev[s][p].bypass;
        merged_sw[s] += int'(ev[s][p].ld_hit_wait) + int'(ev[s][p].ld_hit_ready) + int'(ev[s][p].red_merge);
      end
      evc[12] += ev_release[s];
    end
  end

  initial begin
    int issued, home_ld, red_pk, cyc0;
    for (int e = 0; e < NEV; e++) evc[e] = 0;
    for (int s = 0; s < NS; s++) merged_sw[s] = 0;
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
      for (int s = 0; s < NS; s++) check(occupancy[s][g] == 0, $sformatf("switch %0d port %0d table not empty", s, g));
      issued += n_ld_issued[g]; home_ld += n_home_ld[g]; red_pk += n_home_red[g];
    end
    check(home_ld < issued, "no load traffic saved");
    check(red_pk < N * (N - 1) * NL, "no reduction traffic saved");
    for (int s = 0; s < NS; s++) check(merged_sw[s] > 0, $sformatf("switch %0d never merged", s));
    for (int e = 0; e < NEV; e++) begin
      $display("  %-14s %0d", evn[e], evc[e]);
      if (e != 8 && e != 10 && e != 11)
        check(evc[e] > 0, $sformatf("mechanism %s never happened", evn[e]));
    end
    check(evc[12] == 2, "expected two group releases");
    $display("loads issued %0d, reaching homes %0d; reduction packets %0d of %0d at homes",
             issued, home_ld, red_pk, N * (N - 1) * NL);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
