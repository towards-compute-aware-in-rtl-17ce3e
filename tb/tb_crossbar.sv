// tb_crossbar: self-checking test of the packet crossbar.  Random head
// packets and random selections; every output must carry exactly the packet
// of the selected input port and VC, and its valid must follow the grant.
module tb_crossbar;
  import cais_pkg::*;
  localparam int N = 4, V = 3;
  pkt_t in_pkt [N][V];
  logic [N-1:0] sel_valid, out_valid;
  logic [1:0] sel_src [N], sel_vc [N];
  pkt_t out_pkt [N];
  crossbar #(.N_PORTS(N), .NUM_VC(V)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL @%0t: %s", $time, msg); end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 2000; it++) begin
      for (int p = 0; p < N; p++)
        for (int v = 0; v < V; v++) begin
          in_pkt[p][v] = '0;
          in_pkt[p][v].tag = TAG_W'(p * V + v);
          in_pkt[p][v].addr = {$urandom, $urandom};
          in_pkt[p][v].data[31:0] = $urandom;
          in_pkt[p][v].data[DATA_W-1 -: 32] = $urandom;
        end
      sel_valid = N'($urandom);
      for (int o = 0; o < N; o++) begin sel_src[o] = 2'($urandom); sel_vc[o] = 2'($urandom_range(0, V - 1)); end
      #10;
      for (int o = 0; o < N; o++) begin
        check(out_valid[o] == sel_valid[o], "valid");
        check(out_pkt[o] == in_pkt[sel_src[o]][sel_vc[o]], $sformatf("output %0d packet", o));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
