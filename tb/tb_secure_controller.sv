// tb_secure_controller: self-checking test of the encrypted dynamic controller.
//
// 64-bit Paillier key, NX = 4, NY = 3, NU = 1, n' = 32, m = 7 (key length
// reduced from 256 to keep the run short).  Random coefficient matrices
// drive the controller with freshly encrypted plant outputs and setpoints;
// a plaintext model of the same law in Z_N (x' = A x + B[k](s - y),
// u = C x, e = s + (2^n' - 1) y) predicts every decrypted control output
// exactly, and the decrypted internal state after every step.  A first run
// uses reset period T = 3 (reset steps and the k-dependent scaling of B), a
// second T = 0 (no reset).  The control-output latency and the busy time of
// a full step are checked against their cycle counts.
module tb_secure_controller;
  import paillier_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KB = 64, NX = 4, NY = 3, NU = 1, NP = 32, MF = 7, TW = 16;
  localparam int unsigned WORDS = words_for_key(KB);
  localparam int unsigned OPW   = opw_for_key(KB);
  localparam int E_C = 2 + NP * (WORDS + 3);
  localparam int M_C = WORDS + 5;
  localparam int U_LAT = 1 + NU * (NX * E_C + (NX - 1) * M_C);
  localparam int STEP_LAT = U_LAT + NY * (E_C + M_C) + NX * ((NX + NY) * E_C + (NX + NY - 1) * M_C);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [NUM_MODS-1:0][OPW-1:0] mods;
  logic [NUM_MODS-1:0][15:0] mprime;
  logic [OPW-1:0] one_n2;
  logic [NX-1:0][NX-1:0][NP-1:0] a_hat;
  logic [NX-1:0][NY-1:0][NP-1:0] b_hat;
  logic [NU-1:0][NX-1:0][NP-1:0] c_hat;
  logic [TW-1:0] t_period = '0;
  logic [NY-1:0][OPW-1:0] sct = '0, yct = '0;
  logic yct_valid = 1'b0, uct_valid, state_reset, busy;
  logic [NU-1:0][OPW-1:0] uct;
  logic [TW-1:0] k_mod;

  secure_controller #(.KEY_BITS(KB), .NX(NX), .NY(NY), .NU(NU), .NPRIME(NP), .MFRAC(MF), .TW(TW))
    dut (.*);

  int checks = 0, failures = 0, resets_seen = 0;
  key_t k;
  big_t xs[NX];
  int kk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic step(int tper);
    big_t y[NY], s[NY], e[NY], xn[NX], u;
    int cyc, busy_cyc;
    bit rst_step;
    for (int j = 0; j < NY; j++) begin
      y[j] = big_t'($urandom);
      s[j] = big_t'($urandom);
      yct[j] = OPW'(to_mont(k, encrypt(k, y[j], rand_below(k.n))));
      sct[j] = OPW'(to_mont(k, encrypt(k, s[j], rand_below(k.n))));
      e[j] = (s[j] + mulmod(big_t'(32'hffff_ffff), y[j], k.n)) % k.n;
    end
    u = 0;
    for (int j = 0; j < NX; j++) u = (u + mulmod(big_t'(c_hat[0][j]), xs[j], k.n)) % k.n;
    rst_step = (tper != 0) && ((kk + 1) % tper == 0);
    for (int i = 0; i < NX; i++) begin
      xn[i] = 0;
      for (int j = 0; j < NX; j++) xn[i] = (xn[i] + mulmod(big_t'(a_hat[i][j]), xs[j], k.n)) % k.n;
      for (int j = 0; j < NY; j++) begin
        big_t bk;
        bk = (big_t'(b_hat[i][j]) << (MF * (tper == 0 ? 0 : kk % tper))) & big_t'(32'hffff_ffff);
        xn[i] = (xn[i] + mulmod(bk, e[j], k.n)) % k.n;
      end
      if (rst_step) xn[i] = 0;
    end
    @(negedge clk);
    yct_valid = 1'b1;
    @(negedge clk);
    yct_valid = 1'b0;
    cyc = 1;
    while (!uct_valid) begin
      @(negedge clk); cyc++;
      if (state_reset) resets_seen++;
    end
    check(decrypt_mont(k, big_t'(uct[0])) == u, $sformatf("control output, k=%0d", kk));
    check(cyc == U_LAT, $sformatf("output latency %0d, expected %0d", cyc, U_LAT));
    busy_cyc = cyc;
    while (busy) begin
      @(negedge clk); busy_cyc++;
      if (state_reset) resets_seen++;
    end
    if (!rst_step)
      check(busy_cyc == STEP_LAT, $sformatf("step time %0d, expected %0d", busy_cyc, STEP_LAT));
    for (int i = 0; i < NX; i++) begin
      big_t got;
      got = dut.x_zero_q ? 0 : decrypt_mont(k, big_t'(dut.x_q[i]));
      check(got == xn[i], $sformatf("state %0d, k=%0d", i, kk));
      xs[i] = xn[i];
    end
    check(rst_step == dut.x_zero_q, "reset step flag");
    kk++;
  endtask

  initial begin
    k = make_key(big_t'(64'heeeacbe3), big_t'(64'heb2cd31f), OPW);
    mods[MOD_N2] = OPW'(k.n2); mods[MOD_N2P2] = OPW'(k.n2p2); mods[MOD_N] = OPW'(k.n);
    mprime[MOD_N2] = k.mp_n2; mprime[MOD_N2P2] = k.mp_n2p2; mprime[MOD_N] = k.mp_n;
    one_n2 = OPW'(k.one_n2);
    for (int i = 0; i < NX; i++) begin
      for (int j = 0; j < NX; j++) a_hat[i][j] = $urandom;
      for (int j = 0; j < NY; j++) b_hat[i][j] = $urandom;
    end
    for (int j = 0; j < NX; j++) c_hat[0][j] = $urandom;
    a_hat[0][1] = 0;               // a zero coefficient: E(0) contribution
    for (int i = 0; i < NX; i++) xs[i] = 0;
    kk = 0;
    t_period = 3;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (7) step(3);
    check(resets_seen == 2, $sformatf("two reset steps seen (%0d)", resets_seen));
    t_period = 0;
    repeat (3) step(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
