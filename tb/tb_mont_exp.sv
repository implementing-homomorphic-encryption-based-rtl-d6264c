// tb_mont_exp: self-checking test of the Montgomery exponentiator.
//
// 64-bit Paillier key (reduced from 256; the unit is width-generic).  Random
// bases in Montgomery form (a = b R mod N^2) raised to random exponents of
// random length, including length 0, all-ones and the full key-length
// exponents N and lambda, are checked against a plain square-and-multiply
// reference: a^e in Montgomery form must equal (b^e) R mod N^2.  Single
// multiplications on all three moduli are checked too, and every operation's
// latency is compared with 1 + len*(w+3) (exponentiation) or w+4
// (multiplication) cycles.
module tb_mont_exp;
  import paillier_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KB    = 64;
  localparam int unsigned WORDS = words_for_key(KB);
  localparam int unsigned OPW   = opw_for_key(KB);
  localparam int unsigned LW    = $clog2(KB + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  op_t op = OP_MULT;
  mod_sel_t sel = MOD_N2;
  logic [OPW-1:0] a = '0, b = '0, res, one_n2;
  logic [KB-1:0] e = '0;
  logic [LW-1:0] e_len = '0;
  logic [NUM_MODS-1:0][OPW-1:0] mods;
  logic [NUM_MODS-1:0][15:0] mp;

  mont_exp #(.KEY_BITS(KB)) dut (.clk, .rst_n, .start, .op, .mod_sel(sel), .a, .b,
    .e, .e_len, .one_n2, .mods, .mprime(mp), .busy, .done, .result(res));

  int checks = 0, failures = 0;
  key_t k;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run(op_t o, mod_sel_t s, big_t xa, big_t xb, big_t xe, int len, output int cyc);
    @(negedge clk);
    op = o; sel = s; a = OPW'(xa); b = OPW'(xb); e = KB'(xe); e_len = LW'(len);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  task automatic exp_case(big_t plain_base, big_t ex, int len);
    big_t am, want, ee;
    int cyc;
    ee = ex & ((big_t'(1) << len) - 1);
    am = to_mont(k, plain_base);
    run(OP_EXP, MOD_N2, am, 0, ex, len, cyc);
    want = to_mont(k, powmod(plain_base, ee, k.n2));
    check(big_t'(res) < 2 * k.n2, "power below 2N^2");
    check(big_t'(res) % k.n2 == want, $sformatf("power, len %0d", len));
    check(cyc == 1 + len * (WORDS + 3), $sformatf("exp latency %0d for len %0d", cyc, len));
  endtask

  initial begin
    k = make_key(big_t'(64'heeeacbe3), big_t'(64'heb2cd31f), OPW);
    mods[MOD_N2] = OPW'(k.n2); mods[MOD_N2P2] = OPW'(k.n2p2); mods[MOD_N] = OPW'(k.n);
    mp[MOD_N2] = k.mp_n2; mp[MOD_N2P2] = k.mp_n2p2; mp[MOD_N] = k.mp_n;
    one_n2 = OPW'(k.one_n2);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    exp_case(rand_below(k.n2), 0, 0);
    exp_case(rand_below(k.n2), 1, 1);
    exp_case(rand_below(k.n2), 32'hffff_ffff, 32);
    exp_case(rand_below(k.n2), k.n, KB);
    exp_case(rand_below(k.n2), k.lambda, KB);
    for (int i = 0; i < 12; i++) begin
      int len;
      len = 1 + ($urandom % KB);
      exp_case(rand_below(k.n2), rand_below(big_t'(1) << 64), len);
    end
    for (int i = 0; i < 12; i++) begin
      mod_sel_t s;
      big_t m, xa, xb;
      int cyc;
      s = mod_sel_t'(i % 3);
      m = (s == MOD_N2) ? k.n2 : (s == MOD_N2P2) ? k.n2p2 : k.n;
      xa = rand_below(2 * m); xb = rand_below(2 * m);
      run(OP_MULT, s, xa, xb, 0, 0, cyc);
      check(mulmod(big_t'(res), k.r % m, m) == mulmod(xa, xb, m), "single multiplication");
      check(cyc == WORDS + 4, $sformatf("mult latency %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
