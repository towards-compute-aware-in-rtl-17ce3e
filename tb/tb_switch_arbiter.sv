// tb_switch_arbiter: self-checking test of the separable round-robin
// crossbar allocator.
//
// Every cycle the grants are checked against the request pattern: a popped
// VC must hold a packet its output has room for, each output carries at most
// one packet and each input sends at most one, every valid output names the
// VC that was popped, and a lone requester is always served.  Two directed
// phases check fairness: all inputs contending for one output are served in
// turn (N grants each in N*N cycles), and the VCs of one input sharing the
// input's single crossbar slot are served in turn.
module tb_switch_arbiter;
  localparam int N = 4, V = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [V-1:0] head_valid [N];
  logic [1:0]   head_oport [N][V];
  logic [V-1:0] out_ready [N];
  logic [N-1:0] out_valid;
  logic [V-1:0] pop [N];
  logic [1:0]   out_src [N], out_vc [N];

  switch_arbiter #(.N_PORTS(N), .NUM_VC(V)) dut (.*);

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

  task automatic check_grants();
    int npop, nval, nreq_in;
    int lone;
    npop = 0; nval = 0; nreq_in = 0; lone = -1;
    for (int p = 0; p < N; p++) begin
      bit any_elig;
      any_elig = 0;
      check($onehot0(pop[p]), "more than one VC popped on an input");
      for (int v = 0; v < V; v++) begin
        if (head_valid[p][v] && out_ready[head_oport[p][v]][v]) any_elig = 1;
        if (pop[p][v]) begin
          npop++;
          check(head_valid[p][v], "pop of an empty VC");
          check(out_ready[head_oport[p][v]][v], "pop towards an output with no room for this VC");
          check(out_valid[head_oport[p][v]] && out_src[head_oport[p][v]] == 2'(p)
                && out_vc[head_oport[p][v]] == 2'(v), "pop not matched by output select");
        end
      end
      if (any_elig) begin nreq_in++; lone = p; end
    end
    for (int o = 0; o < N; o++) if (out_valid[o]) begin
      nval++;
      check(pop[out_src[o]][out_vc[o]], "output names a VC that is not popped");
      check(head_oport[out_src[o]][out_vc[o]] == 2'(o), "output carries a packet for another port");
    end
    check(npop == nval, "pops and outputs differ");
    if (nreq_in == 1) check(npop == 1, "lone requester not served");
  endtask

  int cnt [N];
  initial begin
    for (int p = 0; p < N; p++) begin head_valid[p] = '0; for (int v = 0; v < V; v++) head_oport[p][v] = 0; end
    for (int o = 0; o < N; o++) out_ready[o] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // random traffic
    for (int it = 0; it < 4000; it++) begin
      @(negedge clk);
      for (int p = 0; p < N; p++)
        for (int v = 0; v < V; v++) begin
          head_valid[p][v] = 1'($urandom_range(0, 1));
          head_oport[p][v] = 2'($urandom);
        end
      for (int o = 0; o < N; o++) out_ready[o] = V'($urandom);
      if (it % 7 == 0) for (int p = 1; p < N; p++) head_valid[p] = '0;
      #1 check_grants();
    end
    // fairness among inputs for one output
    @(negedge clk);
    for (int p = 0; p < N; p++) begin head_valid[p] = 3'b001; head_oport[p][0] = 2'd2; cnt[p] = 0; end
    for (int o = 0; o < N; o++) out_ready[o] = '1;
    for (int it = 0; it < N * N; it++) begin
      #1 check_grants();
      for (int p = 0; p < N; p++) if (pop[p][0]) cnt[p]++;
      @(negedge clk);
    end
    for (int p = 0; p < N; p++) check(cnt[p] == N, $sformatf("input %0d got %0d of %0d grants", p, cnt[p], N));
    // fairness among the VCs of one input
    for (int p = 0; p < N; p++) head_valid[p] = '0;
    head_valid[1] = '1;
    for (int v = 0; v < V; v++) begin head_oport[1][v] = 2'(v); cnt[v] = 0; end
    for (int it = 0; it < V * 5; it++) begin
      #1 check_grants();
      for (int v = 0; v < V; v++) if (pop[1][v]) cnt[v]++;
      @(negedge clk);
    end
    for (int v = 0; v < V; v++) check(cnt[v] == 5, $sformatf("vc %0d got %0d of 5 grants", v, cnt[v]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
