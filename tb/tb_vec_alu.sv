// tb_vec_alu: self-checking test of the merge unit's FP32 vector ALU.
//
// Drives random FP32 operand vectors whose exponents are close enough that
// the double-precision sum of two floats is exact, so rounding that double to
// single precision gives the correctly rounded FP32 sum: the reference.
// Also checks exact cancellation, zeros, infinities, NaN and flush-to-zero
// of subnormal inputs, lane by lane.
module tb_vec_alu;
  import cais_pkg::*;
  logic [DATA_W-1:0] acc, pkt, sum;
  int checks = 0, failures = 0;

  vec_alu dut (.acc, .pkt, .sum);

  function automatic logic [31:0] rnd_f(input int emin, input int emax);
    logic [31:0] f;
    f[31]    = 1'($urandom_range(0, 1));
    f[30:23] = 8'($urandom_range(emin, emax));
    f[22:0]  = 23'($urandom);
    return f;
  endfunction

  // float bits -> real, exact (normal numbers only)
  function automatic real f2r(input logic [31:0] f);
    logic [10:0] e;
    e = 11'(int'(f[30:23]) - 127 + 1023);
    return $bitstoreal({f[31], e, f[22:0], 29'd0});
  endfunction

  // real -> float bits, round to nearest even, via the double's bit pattern
  function automatic logic [31:0] r2f(input real r);
    logic [63:0] d;
    logic [23:0] m;
    logic [28:0] rest;
    int          e;
    d = $realtobits(r);
    if (d[62:0] == 63'd0) return {d[63], 31'd0};
    e    = int'(d[62:52]) - 1023 + 127;
    m    = {1'b0, d[51:29]};
    rest = d[28:0];
    if (rest > 29'h1000_0000 || (rest == 29'h1000_0000 && m[0])) m = m + 24'd1;
    if (m[23]) begin m = '0; e = e + 1; end
    return {d[63], 8'(e), m[22:0]};
  endfunction

  function automatic logic [31:0] ref_add(input logic [31:0] a, input logic [31:0] b);
    return r2f(f2r(a) + f2r(b));
  endfunction

  task automatic check_lane(input int i, input logic [31:0] exp_v);
    checks++;
    if (sum[32*i +: 32] !== exp_v) begin
      failures++;
      if (failures < 10)
        $display("FAIL lane %0d: %h + %h = %h, expected %h", i,
                 acc[32*i +: 32], pkt[32*i +: 32], sum[32*i +: 32], exp_v);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 400; it++) begin
      for (int i = 0; i < LANES; i++) begin
        acc[32*i +: 32] = rnd_f(115, 140);
        pkt[32*i +: 32] = rnd_f(115, 140);
      end
      #1;
      for (int i = 0; i < LANES; i++) check_lane(i, ref_add(acc[32*i +: 32], pkt[32*i +: 32]));
    end
    // special values, one per lane
    for (int i = 0; i < LANES; i++) begin
      acc[32*i +: 32] = rnd_f(100, 150);
      pkt[32*i +: 32] = acc[32*i +: 32] ^ 32'h8000_0000;   // x + (-x)
    end
    acc[31:0] = 32'h3f80_0000; pkt[31:0] = 32'h4000_0000;   // 1 + 2 = 3
    acc[63:32] = 32'h7f80_0000; pkt[63:32] = 32'h3f80_0000; // inf + 1
    acc[95:64] = 32'h7f80_0000; pkt[95:64] = 32'hff80_0000; // inf - inf
    acc[127:96] = 32'h0000_0001; pkt[127:96] = 32'h3f80_0000; // subnormal + 1
    acc[159:128] = 32'h7f7f_ffff; pkt[159:128] = 32'h7f7f_ffff; // overflow
    acc[191:160] = 32'h3f80_0000; pkt[191:160] = 32'h3380_0000; // 1 + 2^-24 tie -> 1
    acc[223:192] = 32'h3f80_0001; pkt[223:192] = 32'h3380_0000; // tie -> even up
    #1;
    check_lane(0, 32'h4040_0000);
    check_lane(1, 32'h7f80_0000);
    check_lane(2, 32'h7fc0_0000);
    check_lane(3, 32'h3f80_0000);
    check_lane(4, 32'h7f80_0000);
    check_lane(5, 32'h3f80_0000);
    check_lane(6, 32'h3f80_0002);
    for (int i = 7; i < LANES; i++) check_lane(i, 32'h0000_0000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
