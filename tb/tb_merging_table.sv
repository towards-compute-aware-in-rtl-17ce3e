// tb_merging_table: self-checking test of the Merging Table.
//
// Writes random rows (status, count, 128 B content, deferred bit), reads
// them back against a reference copy, and checks the Load-Wait vector.
module tb_merging_table;
  import cais_pkg::*;
  localparam int ENTRIES = 20;
  localparam int IDX_W = 5;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [IDX_W-1:0] rd_idx, wr_idx;
  merge_status_e rd_status, wr_status;
  logic [3:0] rd_count, wr_count;
  logic [DATA_W-1:0] rd_content, wr_content;
  logic rd_pend, wr_pend, wr_en;
  logic [ENTRIES-1:0] lw_vec;

  merging_table #(.ENTRIES(ENTRIES), .CNT_W(4)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  merge_status_e     m_st [ENTRIES];
  logic [3:0]        m_cnt [ENTRIES];
  logic [DATA_W-1:0] m_dat [ENTRIES];
  bit                m_written [ENTRIES];
  logic              m_pend [ENTRIES];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; rd_idx = 0; wr_idx = 0;
    for (int i = 0; i < ENTRIES; i++) m_written[i] = 0;
    repeat (2) @(posedge clk);
    #1;
    // after reset: Reduction, count 0, no Load-Wait
    check(lw_vec == '0, "lw_vec after reset");
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      @(negedge clk);
      wr_en = $urandom_range(0, 1);
      wr_idx = IDX_W'($urandom_range(0, ENTRIES - 1));
      wr_status = merge_status_e'($urandom_range(0, 2));
      wr_count = 4'($urandom);
      wr_pend = 1'($urandom);
      for (int w = 0; w < DATA_W / 32; w++) wr_content[32*w +: 32] = $urandom;
      if (wr_en) begin
        m_st[wr_idx] = wr_status; m_cnt[wr_idx] = wr_count; m_dat[wr_idx] = wr_content;
        m_pend[wr_idx] = wr_pend; m_written[wr_idx] = 1;
      end
      @(posedge clk); #1 wr_en = 0;
      rd_idx = IDX_W'($urandom_range(0, ENTRIES - 1));
      #1;
      if (m_written[rd_idx]) begin
        check(rd_status == m_st[rd_idx], "status");
        check(rd_count == m_cnt[rd_idx], "count");
        check(rd_content == m_dat[rd_idx], "content");
        check(rd_pend == m_pend[rd_idx], "pend");
      end
      for (int i = 0; i < ENTRIES; i++)
        if (m_written[i]) check(lw_vec[i] == (m_st[i] == ST_LOAD_WAIT), "lw_vec");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
