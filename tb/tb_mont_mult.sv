// tb_mont_mult: self-checking test of the Montgomery multiplier.
//
// Uses a 64-bit Paillier key (reduced from 256 to keep the run short; the
// arithmetic is width-generic).  For random X, Y < 2M on each of the three
// moduli it checks that result < 2M, that result * R == X * Y (mod M)
// computed with plain division, and that done arrives exactly w+2 cycles
// after start.  A multiplication by 1 must give a fully reduced value.
module tb_mont_mult;
  import paillier_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KB    = 64;
  localparam int unsigned WORDS = words_for_key(KB);
  localparam int unsigned OPW   = opw_for_key(KB);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  mod_sel_t sel = MOD_N2;
  logic [OPW-1:0] x = '0, y = '0, res;
  logic [NUM_MODS-1:0][OPW-1:0] mods;
  logic [NUM_MODS-1:0][15:0] mp;

  mont_mult #(.KEY_BITS(KB)) dut (.clk, .rst_n, .start, .mod_sel(sel), .x, .y,
    .mods, .mprime(mp), .busy, .done, .result(res));

  int checks = 0, failures = 0;
  key_t k;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic one(mod_sel_t s, big_t a, big_t b);
    big_t m, got;
    int cyc = 0;
    m = (s == MOD_N2) ? k.n2 : (s == MOD_N2P2) ? k.n2p2 : k.n;
    @(negedge clk);
    x = OPW'(a); y = OPW'(b); sel = s; start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    got = big_t'(res);
    check(cyc == WORDS + 2, $sformatf("latency %0d, expected %0d", cyc, WORDS + 2));
    check(got < 2 * m, "result below 2M");
    check(mulmod(got, k.r % m, m) == mulmod(a, b, m),
          $sformatf("T*R == X*Y mod M (sel %0d)", s));
  endtask

  initial begin
    k = make_key(big_t'(64'heeeacbe3), big_t'(64'heb2cd31f), OPW);
    mods[MOD_N2] = OPW'(k.n2); mods[MOD_N2P2] = OPW'(k.n2p2); mods[MOD_N] = OPW'(k.n);
    mp[MOD_N2] = k.mp_n2; mp[MOD_N2P2] = k.mp_n2p2; mp[MOD_N] = k.mp_n;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 40; i++) begin
      mod_sel_t s;
      big_t m;
      s = mod_sel_t'(i % 3);
      m = (s == MOD_N2) ? k.n2 : (s == MOD_N2P2) ? k.n2p2 : k.n;
      one(s, rand_below(2 * m), rand_below(2 * m));
    end
    // Edge operands: 2M-1 squared, and conversion out of Montgomery form.
    one(MOD_N2, 2 * k.n2 - 1, 2 * k.n2 - 1);
    begin
      big_t a;
      a = rand_below(2 * k.n2);
      one(MOD_N2, a, 1);
      check(big_t'(res) < k.n2 || a % k.n2 == 0, "multiplication by 1 fully reduces");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
