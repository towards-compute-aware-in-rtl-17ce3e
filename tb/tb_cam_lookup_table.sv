// tb_cam_lookup_table: self-checking test of the CAM Lookup Table.
//
// Against a reference model kept in the testbench (an array of valid bits,
// keys and last-access cycles), it checks associative hits and misses on
// {address, load}, the first free entry, the LRU victim after touches, the
// timeout report after TIMEOUT idle cycles and that pinned entries are never
// reported for timeout.
module tb_cam_lookup_table;
  import cais_pkg::*;
  localparam int ENTRIES = 8;
  localparam int TIMEOUT = 40;
  localparam int KEY_W   = LINE_W + 1;
  localparam int IDX_W   = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [KEY_W-1:0] search_key, rd_key, alloc_key;
  logic hit, free_valid, lru_valid, to_valid, alloc_en, free_en, touch_en;
  logic [IDX_W-1:0] hit_idx, free_idx, lru_idx, to_idx, rd_idx, alloc_idx, free_idx_w, touch_idx;
  logic [ENTRIES-1:0] pin_vec;
  logic [15:0] occupancy;

  cam_lookup_table #(.ENTRIES(ENTRIES), .TIMEOUT(TIMEOUT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  // reference model
  bit              m_valid [ENTRIES];
  logic [KEY_W-1:0] m_key [ENTRIES];
  int              m_last [ENTRIES];
  int              cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic idle();
    alloc_en = 0; free_en = 0; touch_en = 0;
  endtask

  task automatic do_alloc(input logic [KEY_W-1:0] k);
    @(negedge clk);
    idle();
    check(free_valid, "no free entry");
    alloc_en = 1; alloc_idx = free_idx; alloc_key = k;
    m_valid[free_idx] = 1; m_key[free_idx] = k; m_last[free_idx] = cyc;
    @(posedge clk); #1 idle();
  endtask

  task automatic probe(input logic [KEY_W-1:0] k);
    int exp_i;
    bit exp_h;
    @(negedge clk);
    search_key = k;
    #1;
    exp_h = 0; exp_i = 0;
    for (int i = 0; i < ENTRIES; i++) if (m_valid[i] && m_key[i] == k && !exp_h) begin exp_h = 1; exp_i = i; end
    check(hit == exp_h, $sformatf("hit=%0d expected %0d", hit, exp_h));
    if (exp_h) check(hit_idx == IDX_W'(exp_i), "wrong hit index");
  endtask

  function automatic logic [KEY_W-1:0] key(input int a, input bit ld);
    return {LINE_W'(a * 977 + 5), ld};
  endfunction

  initial begin
    int exp_lru, oldest;
    idle(); pin_vec = '0; search_key = '0; rd_idx = '0;
    for (int i = 0; i < ENTRIES; i++) m_valid[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // fill with 8 keys: loads and reductions of the same addresses differ
    for (int a = 0; a < 4; a++) begin do_alloc(key(a, 1)); do_alloc(key(a, 0)); end
    @(negedge clk);
    check(!free_valid, "table should be full");
    check(occupancy == 16'(ENTRIES), "occupancy");
    for (int a = 0; a < 6; a++) begin probe(key(a, 1)); probe(key(a, 0)); end
    // read port
    for (int i = 0; i < ENTRIES; i++) begin
      @(negedge clk); rd_idx = IDX_W'(i); #1;
      check(rd_key == m_key[i], "rd_key");
    end
    // touch all but entry 3, entry 3 becomes LRU
    for (int i = 0; i < ENTRIES; i++) if (i != 3) begin
      @(negedge clk); idle(); touch_en = 1; touch_idx = IDX_W'(i); m_last[i] = cyc;
      @(posedge clk); #1 idle();
    end
    @(negedge clk);
    check(lru_valid && lru_idx == 3, $sformatf("lru=%0d expected 3", lru_idx));
    // free entries 3 and 5, first free must be 3
    @(negedge clk); free_en = 1; free_idx_w = 3; m_valid[3] = 0;
    @(posedge clk); #1 idle();
    @(negedge clk); free_en = 1; free_idx_w = 5; m_valid[5] = 0;
    @(posedge clk); #1 idle();
    @(negedge clk);
    check(free_valid && free_idx == 3, "first free entry");
    probe(key(1, 1)); probe(key(2, 0));
    // LRU now: oldest last-access among valid
    @(negedge clk);
    oldest = 1 << 30; exp_lru = 0;
    for (int i = 0; i < ENTRIES; i++) if (m_valid[i] && m_last[i] < oldest) begin oldest = m_last[i]; exp_lru = i; end
    check(lru_idx == IDX_W'(exp_lru), $sformatf("lru=%0d expected %0d", lru_idx, exp_lru));
    // timeout: pin all but entry 6, wait until it is reported
    pin_vec = '1; pin_vec[6] = 1'b0;
    check(!to_valid, "early timeout");
    begin
      int waited = 0;
      while (!to_valid && waited < 3 * TIMEOUT) begin @(negedge clk); waited++; end
      check(to_valid && to_idx == 6, "timeout of entry 6");
      check(cyc - m_last[6] >= TIMEOUT && cyc - m_last[6] <= TIMEOUT + 2,
            $sformatf("timeout after %0d cycles, expected %0d", cyc - m_last[6], TIMEOUT));
    end
    // touching resets the timer
    @(negedge clk); touch_en = 1; touch_idx = 6; m_last[6] = cyc;
    @(posedge clk); #1 idle();
    @(negedge clk);
    check(!to_valid, "touch did not restart the timer");
    pin_vec = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
