// tb_routing_table: self-checking test of the routing table: identity map
// after reset, then random reconfigurations checked on every lookup port
// against a reference array.
module tb_routing_table;
  import cais_pkg::*;
  localparam int N_PORTS = 8;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [GPU_ID_W-1:0] dst [N_PORTS];
  logic [2:0] oport [N_PORTS];
  logic cfg_we;
  logic [GPU_ID_W-1:0] cfg_gpu;
  logic [2:0] cfg_port;

  routing_table #(.N_PORTS(N_PORTS), .N_GPU(8)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask
  logic [2:0] m [8];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg_we = 0; cfg_gpu = 0; cfg_port = 0;
    for (int g = 0; g < 8; g++) m[g] = 3'(g);
    for (int p = 0; p < N_PORTS; p++) dst[p] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      for (int p = 0; p < N_PORTS; p++) dst[p] = GPU_ID_W'($urandom);
      #1;
      for (int p = 0; p < N_PORTS; p++) check(oport[p] == m[dst[p]], $sformatf("port %0d lookup", p));
      if (it > 20) begin
        cfg_we = 1'($urandom_range(0, 1)); cfg_gpu = GPU_ID_W'($urandom); cfg_port = 3'($urandom);
        if (cfg_we) m[cfg_gpu] = cfg_port;
      end
      @(posedge clk); #1 cfg_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
