// tb_merge_unit: self-checking test of one switch port's merge unit.
//
// The unit sits in front of home GPU 7; GPUs 0..6 send it ld.cais and
// red.cais requests in random order.  A model of the home GPU answers
// forwarded loads after a random delay (as CAIS responses, or as plain
// responses for requests that bypassed the unit) and accumulates every
// reduction it receives.  The test checks that
//   - every load request gets exactly one response, with the line's data,
//     the requester's tag, and the right destination;
//   - each line is read from the home GPU once while its session is open;
//   - each reduction line reaches the home GPU as one correct FP32 sum;
//   - with a small table, LRU eviction sends partial sums, a timeout flushes
//     the rest, and the home memory still ends with the full sums;
//   - a full table of Load-Wait sessions defers eviction and lets the new
//     request bypass, and deferred sessions are released after their fill.
// Event counts for every mechanism are checked to be non-zero.
module tb_merge_unit;
  import cais_pkg::*;

  localparam int N_GPU   = 8;
  localparam int ENTRIES = 16;
  localparam int TIMEOUT = 300;
  localparam int HOME    = 7;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_in_valid, req_in_ready, resp_in_valid, resp_in_ready;
  logic egress_out_valid, egress_out_ready, route_out_valid, route_out_ready;
  pkt_t req_in, resp_in, egress_out, route_out;
  merge_ev_t ev;
  logic [15:0] occupancy;

  merge_unit #(.N_GPU(N_GPU), .ENTRIES(ENTRIES), .TIMEOUT(TIMEOUT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t: %s", $time, msg);
    end
  endtask

  // ---------------- helpers ----------------
  function automatic logic [ADDR_W-1:0] line_addr(input int k);
    return {3'(HOME), 38'(k + 256), 7'd0};
  endfunction
  function automatic int line_idx(input logic [ADDR_W-1:0] a);
    return int'(a[LINE_OFS_W +: 38]) - 256;
  endfunction
  function automatic logic [DATA_W-1:0] line_data(input int k);
    logic [DATA_W-1:0] d;
    for (int i = 0; i < DATA_W / 32; i++) d[32*i +: 32] = 32'(k * 1000003 + i * 7919);
    return d;
  endfunction
  // small non-negative integer -> FP32 (exact below 2^24)
  function automatic logic [31:0] i2f(input int v);
    int e;
    logic [31:0] m;
    if (v == 0) return 32'd0;
    e = 0;
    while ((v >> e) > 1) e++;
    m = 32'(v) << (23 - e);
    return {1'b0, 8'(e + 127), m[22:0]};
  endfunction
  function automatic int f2i(input logic [31:0] f);
    if (f[30:0] == 0) return 0;
    return int'({1'b1, f[22:0]}) >>> (23 - (int'(f[30:23]) - 127));
  endfunction
  function automatic int red_val(input int k, input int r, input int lane);
    return (r + 1) * (k + 1) + lane;
  endfunction

  // ---------------- request driver ----------------
  pkt_t reqq[$];
  always @(negedge clk) begin
    if (reqq.size() > 0 && ($urandom_range(0, 3) != 0 || req_in_valid)) begin
      req_in_valid <= 1'b1;
      req_in       <= reqq[0];
    end else begin
      req_in_valid <= 1'b0;
    end
  end
  always @(posedge clk) if (rst_n && req_in_valid && req_in_ready) void'(reqq.pop_front());

  function automatic pkt_t mk_ld(input int k, input int r);
    pkt_t p;
    p = '0;
    p.ptype = PKT_LD_REQ; p.cais = 1'b1; p.src = 3'(r); p.dst = 3'(HOME);
    p.tag = 10'(k * 8 + r); p.addr = line_addr(k);
    return p;
  endfunction
  function automatic pkt_t mk_red(input int k, input int r);
    pkt_t p;
    p = '0;
    p.ptype = PKT_RED_REQ; p.cais = 1'b1; p.src = 3'(r); p.dst = 3'(HOME);
    p.tag = 10'(r); p.addr = line_addr(k);
    for (int i = 0; i < DATA_W / 32; i++) p.data[32*i +: 32] = i2f(red_val(k, r, i));
    return p;
  endfunction

  // ---------------- home GPU model ----------------
  typedef struct { pkt_t p; int due; } pend_t;
  pend_t home_q[$];
  int    cyc = 0;
  bit    home_hold = 0;                  // withhold load responses
  int    home_ld_reads [int];            // loads served per line
  int    mem_sum [int][32];              // accumulated reductions
  int    red_pkts [int];
  int    got [int][8];                   // responses per (line, requester)
  int    direct_resp = 0;

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && egress_out_valid && egress_out_ready) begin
      automatic int k = line_idx(egress_out.addr);
      check(egress_out.dst == 3'(HOME), "egress packet not for home GPU");
      if (egress_out.ptype == PKT_LD_REQ) begin
        automatic pend_t e;
        e.p = egress_out; e.due = cyc + int'($urandom_range(3, 25));
        home_q.push_back(e);
        if (egress_out.cais) home_ld_reads[k] = home_ld_reads.exists(k) ? home_ld_reads[k] + 1 : 1;
      end else if (egress_out.ptype == PKT_RED_REQ) begin
        check(!egress_out.cais, "sum leaves with CAIS flag set");
        red_pkts[k] = red_pkts.exists(k) ? red_pkts[k] + 1 : 1;
        for (int i = 0; i < 32; i++) mem_sum[k][i] += f2i(egress_out.data[32*i +: 32]);
      end else begin
        check(0, "unexpected egress packet type");
      end
    end
  end

  // responses: CAIS ones go back through the unit, plain ones straight to
  // the requester (as the port would route them)
  always @(negedge clk) begin
    resp_in_valid <= 1'b0;
    if (!home_hold && home_q.size() > 0 && home_q[0].due <= cyc) begin
      if (home_q[0].p.cais) begin
        automatic pkt_t r = home_q[0].p;
        r.ptype = PKT_LD_RESP; r.dst = home_q[0].p.src; r.src = 3'(HOME);
        r.data  = line_data(line_idx(r.addr));
        resp_in_valid <= 1'b1;
        resp_in       <= r;
      end
    end
  end
  always @(posedge clk) begin
    if (rst_n && home_q.size() > 0) begin
      if (resp_in_valid && resp_in_ready) void'(home_q.pop_front());
      else if (!home_hold && !home_q[0].p.cais && home_q[0].due <= cyc) begin
        automatic int k = line_idx(home_q[0].p.addr);
        got[k][home_q[0].p.src] += 1;
        direct_resp++;
        void'(home_q.pop_front());
      end
    end
  end

  // ---------------- response monitor ----------------
  always @(negedge clk) route_out_ready <= ($urandom_range(0, 4) != 0);
  always @(negedge clk) egress_out_ready <= ($urandom_range(0, 4) != 0);

  always @(posedge clk) begin
    if (rst_n && route_out_valid && route_out_ready) begin
      automatic int k = line_idx(route_out.addr);
      check(route_out.ptype == PKT_LD_RESP, "route_out not a load response");
      check(route_out.data == line_data(k), $sformatf("wrong data line %0d", k));
      check(route_out.tag == 10'(k * 8 + route_out.dst), "wrong tag");
      check(!route_out.cais, "response leaves with CAIS flag");
      got[k][route_out.dst] += 1;
    end
  end

  // ---------------- event counters ----------------
  int n_alloc, n_hit_wait, n_hit_ready, n_fill, n_rel, n_red_alloc, n_red_merge,
      n_red_rel, n_lru, n_to, n_defer, n_bypass;
  always @(posedge clk) if (rst_n) begin
    n_alloc += ev.ld_alloc;  n_hit_wait += ev.ld_hit_wait; n_hit_ready += ev.ld_hit_ready;
    n_fill  += ev.ld_fill;   n_rel += ev.ld_release;       n_red_alloc += ev.red_alloc;
    n_red_merge += ev.red_merge; n_red_rel += ev.red_release; n_lru += ev.evict_lru;
    n_to += ev.evict_timeout; n_defer += ev.evict_defer;   n_bypass += ev.bypass;
  end

  // ---------------- watchdog ----------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wait_idle(input int extra);
    int quiet = 0;
    while (quiet < extra) begin
      @(posedge clk);
      if (reqq.size() == 0 && home_q.size() == 0 && !req_in_valid) quiet++;
      else quiet = 0;
    end
  endtask

  // shuffle helper
  task automatic push_shuffled(ref pkt_t v[$]);
    while (v.size() > 0) begin
      automatic int j = $urandom_range(0, v.size() - 1);
      reqq.push_back(v[j]);
      v.delete(j);
    end
  endtask

  initial begin
    pkt_t v[$];
    int lat_start;
    req_in_valid = 0; resp_in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // ---- phase 1: load merging, 12 lines, no eviction ----
    for (int k = 0; k < 12; k++)
      for (int r = 0; r < N_GPU - 1; r++) v.push_back(mk_ld(k, r));
    push_shuffled(v);
    wait_idle(40);
    for (int k = 0; k < 12; k++) begin
      check(home_ld_reads.exists(k) && home_ld_reads[k] == 1,
            $sformatf("line %0d read %0d times from home", k,
                      home_ld_reads.exists(k) ? home_ld_reads[k] : 0));
      for (int r = 0; r < N_GPU - 1; r++)
        check(got[k][r] == 1, $sformatf("line %0d gpu %0d got %0d responses", k, r, got[k][r]));
    end
    check(occupancy == 0, "sessions left open after phase 1");

    // ---- phase 2: reduction merging, 12 lines ----
    for (int k = 20; k < 32; k++)
      for (int r = 0; r < N_GPU - 1; r++) v.push_back(mk_red(k, r));
    push_shuffled(v);
    wait_idle(20);
    for (int k = 20; k < 32; k++) begin
      check(red_pkts.exists(k) && red_pkts[k] == 1, $sformatf("line %0d: %0d sums", k,
            red_pkts.exists(k) ? red_pkts[k] : 0));
      for (int i = 0; i < 32; i++) begin
        automatic int s = 0;
        for (int r = 0; r < N_GPU - 1; r++) s += red_val(k, r, i);
        check(mem_sum[k][i] == s, $sformatf("line %0d lane %0d sum %0d != %0d", k, i, mem_sum[k][i], s));
      end
    end

    // ---- phase 3: 24 partial reduction lines in a 16-entry table ----
    for (int k = 40; k < 64; k++)
      for (int r = 0; r < 3; r++) v.push_back(mk_red(k, r));
    push_shuffled(v);
    wait_idle(TIMEOUT + 50);
    for (int k = 40; k < 64; k++)
      for (int i = 0; i < 32; i++) begin
        automatic int s = 0;
        for (int r = 0; r < 3; r++) s += red_val(k, r, i);
        check(mem_sum[k][i] == s, $sformatf("evicted line %0d lane %0d sum %0d != %0d", k, i, mem_sum[k][i], s));
      end
    check(occupancy == 0, "timeout did not flush the table");

    // ---- phase 4: Load-Wait table full -> deferred eviction and bypass ----
    home_hold = 1;
    for (int k = 70; k < 70 + ENTRIES; k++) v.push_back(mk_ld(k, 0));
    for (int k = 70; k < 70 + ENTRIES; k++) v.push_back(mk_ld(k, 1));
    push_shuffled(v);
    reqq.push_back(mk_ld(90, 2));          // finds the table full of Load-Wait
    repeat (200) @(posedge clk);
    check(occupancy == ENTRIES, "table not full of Load-Wait sessions");
    home_hold = 0;
    wait_idle(TIMEOUT + 50);
    for (int k = 70; k < 70 + ENTRIES; k++)
      for (int r = 0; r < 2; r++)
        check(got[k][r] == 1, $sformatf("line %0d gpu %0d got %0d responses", k, r, got[k][r]));
    check(got[90][2] == 1, "bypassed load not answered");

    // ---- phase 5: a Load-Ready hit is answered in the same cycle ----
    reqq.push_back(mk_ld(100, 0));
    wait_idle(5);
    @(negedge clk);
    wait (reqq.size() == 0);
    route_out_ready = 1;
    reqq.push_back(mk_ld(100, 1));
    lat_start = cyc;
    @(posedge clk iff (route_out_valid && route_out_ready));
    check(cyc - lat_start <= 2, $sformatf("Load-Ready hit took %0d cycles", cyc - lat_start));
    wait_idle(TIMEOUT + 50);

    // ---- every mechanism seen ----
    check(n_alloc > 0,     "no load session opened");
    check(n_hit_wait > 0,  "no request stored in Load-Wait");
    check(n_hit_ready > 0, "no Load-Ready hit");
    check(n_fill > 0,      "no fill");
    check(n_rel > 0,       "no load release");
    check(n_red_alloc > 0 && n_red_merge > 0 && n_red_rel > 0, "reduction path not exercised");
    check(n_lru > 0,       "no LRU eviction");
    check(n_to > 0,        "no timeout eviction");
    check(n_defer > 0,     "no deferred eviction");
    check(n_bypass > 0,    "no bypass");
    $display("events: alloc=%0d hit_wait=%0d hit_ready=%0d fill=%0d rel=%0d red_alloc=%0d red_merge=%0d red_rel=%0d lru=%0d timeout=%0d defer=%0d bypass=%0d direct=%0d",
             n_alloc, n_hit_wait, n_hit_ready, n_fill, n_rel, n_red_alloc, n_red_merge,
             n_red_rel, n_lru, n_to, n_defer, n_bypass, direct_resp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
