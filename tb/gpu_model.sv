// gpu_model: behavioural model of one GPU and its memory, used by the
// switch and system testbenches.  Not synthesizable.
//
// As a home GPU it owns the lines whose top address bits equal ME: it
// answers every load request addressed to it (with a random latency, the
// CAIS flag echoed, the data a fixed function of GPU, line and lane) and
// adds every reduction packet it receives into its reduction lines.  As a
// requester it runs one tensor-parallel step after `start`:
//   1. a pre-launch TB-group sync (group 1);
//   2. an AllGather-style phase: ld.cais of NL lines of every other GPU, in
//      random order with random gaps; every eighth load is an ordinary
//      (non-CAIS) load and every sixteenth step also issues a plain store;
//   3. a pre-access TB-group sync (group 2);
//   4. a ReduceScatter-style phase: red.cais of NL reduction lines of every
//      other GPU, in random order; GPU LATE_GPU holds back half of them for
//      LATE_CYC cycles, so the switch sees incomplete sums.
// Each load response is checked against the expected data and must arrive
// exactly once.  On `check_now` the home compares its reduction lines with
// the sum of all other GPUs' contributions.  Data values are small integers
// held as FP32 so every sum is exact in any order.
//
// SYNC_MODE 0 sends sync packets itself and waits for the release packet
// (switch-level tests); SYNC_MODE 1 uses the synchronizer's sync / notify
// ports (system tests).  Address layout: {home GPU[47:45], region[44],
// line[43:7], offset[6:0]}; region 0 holds load data, region 1 reduction
// lines.
module gpu_model
  import cais_pkg::*;
#(
  parameter int ME        = 0,
  parameter int N_GPU     = 4,
  parameter int NL        = 8,
  parameter int GAP       = 4,
  parameter int LAT       = 40,
  parameter int LATE_GPU  = 0,
  parameter int LATE_CYC  = 0,
  parameter int SYNC_MODE = 0,
  parameter int META_W    = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  logic check_now,
  output logic tx_valid,
  input  logic tx_ready,
  output pkt_t tx_pkt,
  input  logic rx_valid,
  output logic rx_ready,
  input  pkt_t rx_pkt,
  output logic                sync_valid,
  input  logic                sync_ready,
  output logic [GROUP_W-1:0]  sync_group,
  output sync_phase_e         sync_phase,
  output logic [META_W-1:0]   sync_meta,
  input  logic                notify_valid,
  output logic                notify_ready,
  input  logic [GROUP_W-1:0]  notify_group,
  input  sync_phase_e         notify_phase,
  input  logic [META_W-1:0]   notify_meta,
  output logic done,
  output int   errors,
  output int   n_ld_issued,
  output int   n_ld_ok,
  output int   n_home_ld,
  output int   n_home_red,
  output int   n_sync
);
  // ---- FP32 helpers for small non-negative integers ----
  function automatic logic [31:0] i2f(input int v);
    int e;
    if (v <= 0) return 32'h0;
    e = 0;
    for (int b = 0; b < 24; b++) if (v >> b != 0) e = b;
    return {1'b0, 8'(127 + e), 23'((v << (23 - e)) & 32'h7fffff)};
  endfunction
  function automatic int f2i(input logic [31:0] f);
    int e;
    if (f[30:23] == 0) return 0;
    e = int'(f[30:23]) - 127;
    return int'({1'b1, f[22:0]}) >> (23 - e);
  endfunction

  function automatic int ld_val(input int h, input int i, input int k);
    return (h * 97 + i * 13 + k) % 2000 + 1;
  endfunction
  function automatic int red_val(input int s, input int h, input int i, input int k);
    return (s + 1) * (k + 1) + i + h;
  endfunction
  function automatic logic [ADDR_W-1:0] mk_addr(input int h, input bit red, input int i);
    return {3'(h), red, 37'(i), 7'h0};
  endfunction

  // ---- transmit queue, presented at the falling edge ----
  pkt_t txq [$];
  typedef struct { int due; pkt_t p; } pend_t;
  pend_t pendq [$];
  int cyc = 0;

  // ---- requester bookkeeping ----
  int ld_h [1024], ld_i [1024];
  bit ld_out [1024], ld_done [1024];
  int red_acc [NL][LANES];
  bit rel_seen [logic [GROUP_W:0]];
  int n_stores = 0;

  always @(negedge clk) begin
    cyc++;
    for (int j = 0; j < pendq.size(); j++) if (pendq[j].due <= cyc) begin
      txq.push_back(pendq[j].p);
      pendq.delete(j);
      break;
    end
    tx_valid = rst_n && txq.size() > 0;
    if (txq.size() > 0) tx_pkt = txq[0];
    rx_ready = $urandom_range(0, 7) != 0;
    notify_ready = $urandom_range(0, 3) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (tx_valid && tx_ready) void'(txq.pop_front());
    if (notify_valid && notify_ready) begin
      rel_seen[{notify_phase, notify_group}] = 1;
      if (notify_meta != META_W'(ME)) begin errors++; $display("gpu%0d: notify metadata", ME); end
    end
    if (rx_valid && rx_ready) begin
      pkt_t p;
      p = rx_pkt;
      case (p.ptype)
        PKT_LD_REQ: begin
          pkt_t r;
          if (int'(p.addr[47:45]) != ME || p.dst != 3'(ME)) begin
            errors++; $display("gpu%0d: load request for another home", ME);
          end
          r = p;
          r.ptype = PKT_LD_RESP;
          r.src = 3'(ME);
          r.dst = p.src;
          for (int k = 0; k < LANES; k++) r.data[32*k +: 32] = i2f(ld_val(ME, int'(p.addr[43:7]), k));
          pendq.push_back('{due: cyc + $urandom_range(2, LAT), p: r});
          n_home_ld++;
        end
        PKT_LD_RESP: begin
          int t;
          t = int'(p.tag);
          if (p.dst != 3'(ME) || !ld_out[t] || ld_done[t] || p.addr != mk_addr(ld_h[t], 0, ld_i[t])) begin
            errors++; $display("gpu%0d: unexpected load response tag %0d", ME, t);
          end else begin
            automatic bit ok = 1;
            for (int k = 0; k < LANES; k++)
              if (p.data[32*k +: 32] != i2f(ld_val(ld_h[t], ld_i[t], k))) ok = 0;
            if (!ok) begin errors++; $display("gpu%0d: wrong load data tag %0d", ME, t); end
            ld_done[t] = 1;
            n_ld_ok++;
          end
        end
        PKT_RED_REQ: begin
          int i;
          i = int'(p.addr[43:7]);
          if (int'(p.addr[47:45]) != ME || !p.addr[44] || i >= NL) begin
            errors++; $display("gpu%0d: stray reduction", ME);
          end else
            for (int k = 0; k < LANES; k++) red_acc[i][k] += f2i(p.data[32*k +: 32]);
          n_home_red++;
        end
        PKT_ST_REQ:   n_stores++;
        PKT_SYNC_REL: rel_seen[sync_key(p)] = 1;
        default: begin errors++; $display("gpu%0d: unexpected packet type", ME); end
      endcase
    end
  end

  task automatic do_sync(input int group, input sync_phase_e ph);
    logic [GROUP_W:0] key;
    key = {ph, GROUP_W'(group)};
    if (SYNC_MODE == 0) begin
      pkt_t s;
      s = '0;
      s.ptype = PKT_SYNC_REQ; s.src = 3'(ME); s.dst = 3'(ME);
      s.addr = ADDR_W'(key);
      txq.push_back(s);
    end else begin
      sync_valid = 1; sync_group = GROUP_W'(group); sync_phase = ph; sync_meta = META_W'(ME);
      do @(posedge clk); while (!sync_ready);
      #1 sync_valid = 0;
    end
    while (!rel_seen.exists(key)) @(negedge clk);
    rel_seen.delete(key);
    n_sync++;
  endtask

  task automatic send(input pkt_t p);
    while (txq.size() > 4) @(negedge clk);
    txq.push_back(p);
  endtask

  initial begin
    int order [$];
    int n;
    done = 0; errors = 0; n_ld_issued = 0; n_ld_ok = 0; n_home_ld = 0; n_home_red = 0; n_sync = 0;
    tx_valid = 0; tx_pkt = '0; rx_ready = 0; notify_ready = 0;
    sync_valid = 0; sync_group = '0; sync_phase = SYNC_PRE_LAUNCH; sync_meta = '0;
    for (int t = 0; t < 1024; t++) begin ld_out[t] = 0; ld_done[t] = 0; ld_h[t] = 0; ld_i[t] = 0; end
    for (int i = 0; i < NL; i++) for (int k = 0; k < LANES; k++) red_acc[i][k] = 0;
    wait (rst_n && start);
    @(negedge clk);
    do_sync(1, SYNC_PRE_LAUNCH);
    // AllGather-style loads
    n = 0;
    for (int h = 0; h < N_GPU; h++) if (h != ME) for (int i = 0; i < NL; i++) begin
      ld_h[n] = h; ld_i[n] = i; order.push_back(n); n++;
    end
    order.shuffle();
    foreach (order[j]) begin
      pkt_t p;
      int t;
      t = order[j];
      p = '0;
      p.ptype = PKT_LD_REQ; p.cais = (t % 8) != 7;
      p.src = 3'(ME); p.dst = 3'(ld_h[t]); p.tag = TAG_W'(t);
      p.addr = mk_addr(ld_h[t], 0, ld_i[t]);
      ld_out[t] = 1;
      send(p);
      n_ld_issued++;
      if (j % 16 == 5) begin
        p = '0;
        p.ptype = PKT_ST_REQ; p.src = 3'(ME); p.dst = 3'(ld_h[t]);
        p.addr = mk_addr(ld_h[t], 0, NL + ME);
        send(p);
      end
      repeat ($urandom_range(0, GAP)) @(negedge clk);
    end
    while (n_ld_ok < n_ld_issued) @(negedge clk);
    do_sync(2, SYNC_PRE_ACCESS);
    // ReduceScatter-style reductions
    order.delete();
    n = 0;
    for (int h = 0; h < N_GPU; h++) if (h != ME) for (int i = 0; i < NL; i++) begin
      order.push_back(h * NL + i);
    end
    order.shuffle();
    for (int pass = 0; pass < 2; pass++) begin
      if (pass == 1 && ME == LATE_GPU) repeat (LATE_CYC) @(negedge clk);
      foreach (order[j]) if ((ME != LATE_GPU) ? pass == 0 : (j % 2) == pass) begin
        pkt_t p;
        int h, i;
        h = order[j] / NL; i = order[j] % NL;
        p = '0;
        p.ptype = PKT_RED_REQ; p.cais = 1'b1;
        p.src = 3'(ME); p.dst = 3'(h);
        p.addr = mk_addr(h, 1, i);
        for (int k = 0; k < LANES; k++) p.data[32*k +: 32] = i2f(red_val(ME, h, i, k));
        send(p);
        repeat ($urandom_range(0, GAP)) @(negedge clk);
      end
    end
    while (txq.size() > 0) @(negedge clk);
    done = 1;
  end

  // final check of the home's reduction lines
  always @(posedge clk) if (check_now) begin
    for (int i = 0; i < NL; i++) for (int k = 0; k < LANES; k++) begin
      int exp;
      exp = 0;
      for (int s = 0; s < N_GPU; s++) if (s != ME) exp += red_val(s, ME, i, k);
      if (red_acc[i][k] != exp) begin
        errors++;
        if (errors < 10) $display("gpu%0d: reduction line %0d lane %0d = %0d, expected %0d", ME, i, k, red_acc[i][k], exp);
      end
    end
  end
endmodule
