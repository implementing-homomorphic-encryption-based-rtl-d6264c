// tb_encrypted_control_top: end-to-end test of the encrypted feedback loop at
// the default sizes (256-bit key, NX = 4, NY = 3, NU = 1, n' = 32, m = 7).
//
// The testbench plays plant, random number source and setpoint encryptor.
// Key constants are derived from two fixed 128-bit primes by plain wide
// integer arithmetic.  The controller has the structure of the paper's
// pendulum controller (a delay-line state: B = 2^7 [I; 0], only row 4 of A
// non-zero) with coefficients rounded by this testbench.  The plant is a toy
// integrator driven by the decrypted input, closing the loop.  A plaintext
// model of the law in Z_N predicts every decrypted control input exactly.
// Phase 1 runs with T = 0 (no reset, constant B: the experiment's mode),
// phase 2 with T = 3 (resets and k-dependent B).  Counted mechanisms: r^N
// computed while the controller works, reset steps, steps with a scaled
// B[k], and the deterministic latency from sample to control input.
module tb_encrypted_control_top;
  import paillier_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KB = DEFAULT_KEY_BITS, NX = 4, NY = 3, NU = 1, NP = 32, MF = 7, TW = 16;
  localparam int unsigned OPW = opw_for_key(KB);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [KB-1:0] n_key, lambda;
  logic [NUM_MODS-1:0][OPW-1:0] mods;
  logic [NUM_MODS-1:0][15:0] mprime;
  logic [OPW-1:0] one_n2, r2_n2, nr_n2, ninv_r2, mu_r2;
  logic [NX-1:0][NX-1:0][NP-1:0] a_hat = '0;
  logic [NX-1:0][NY-1:0][NP-1:0] b_hat = '0;
  logic [NU-1:0][NX-1:0][NP-1:0] c_hat = '0;
  logic [TW-1:0] t_period = '0;
  logic [NY-1:0][OPW-1:0] sct = '0;
  logic rnd_valid = 1'b0, rnd_ready, sample_valid = 1'b0, sample_ready, u_valid;
  logic [NY-1:0][KB-1:0] rnd = '0;
  logic [NY-1:0][NP-1:0] y_hat = '0;
  logic [NU-1:0][NP-1:0] u_hat;
  logic plant_busy, ctrl_busy, state_reset;
  logic [TW-1:0] k_mod;

  encrypted_control_top dut (.*);

  int checks = 0, failures = 0;
  int n_overlap = 0, n_reset = 0, n_scaled = 0, n_nores = 0;
  int lat_first = -1;
  key_t k;
  big_t xs[NX], s[NY];
  int kk;
  int signed plant_pos = 100;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Random source: always offers fresh r values.
  always @(negedge clk) begin
    if (rnd_valid && rnd_ready) rnd_valid <= 1'b0;
    if (!rnd_valid) begin
      for (int i = 0; i < NY; i++) rnd[i] <= KB'(rand_below(k.n));
      rnd_valid <= 1'b1;
    end
  end

  // r^N being computed while the controller is busy.
  logic overlap_q = 1'b0;
  always @(posedge clk) begin
    if (dut.u_plant_if.phase_q == 2'd1 && ctrl_busy && !overlap_q) n_overlap++;
    overlap_q <= (dut.u_plant_if.phase_q == 2'd1 && ctrl_busy);
  end

  task automatic step(int tper);
    big_t y[NY], e[NY], xn[NX], u;
    int cyc;
    bit rst_step;
    for (int j = 0; j < NY; j++) y[j] = big_t'(NP'(plant_pos * (j + 1)));
    for (int j = 0; j < NY; j++) e[j] = (s[j] + mulmod(big_t'(32'hffff_ffff), y[j], k.n)) % k.n;
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
    if (tper != 0 && kk % tper != 0) n_scaled++;
    if (tper == 0) n_nores++;
    // Wait for the previous period to finish and r^N to be ready.
    while (ctrl_busy || !sample_ready || !dut.u_plant_if.z_valid_q) @(negedge clk);
    for (int j = 0; j < NY; j++) y_hat[j] = NP'(y[j]);
    sample_valid = 1'b1;
    @(negedge clk);
    sample_valid = 1'b0;
    cyc = 1;
    while (!u_valid) begin
      @(negedge clk); cyc++;
      if (state_reset) n_reset++;
      if (cyc > 2000000) break;
    end
    check(u_hat[0] == NP'(u), $sformatf("control input k=%0d: got %0h want %0h", kk, u_hat[0], NP'(u)));
    if (lat_first < 0) lat_first = cyc;
    else check(cyc == lat_first, $sformatf("latency %0d differs from %0d", cyc, lat_first));
    $display("step %0d: u = %0d, sample-to-actuation latency %0d cycles", kk, $signed(u_hat[0]), cyc);
    plant_pos = plant_pos + ($signed(u_hat[0]) >>> 8) % 50;
    for (int i = 0; i < NX; i++) xs[i] = xn[i];
    kk++;
  endtask

  initial begin
    k = make_key(big_t'(128'hee5f950c0ce5af69430b91ed2954ba5d),
                 big_t'(128'hf3308ce500eb4e1128b88073065b8c35), OPW);
    n_key = KB'(k.n); lambda = KB'(k.lambda);
    mods[MOD_N2] = OPW'(k.n2); mods[MOD_N2P2] = OPW'(k.n2p2); mods[MOD_N] = OPW'(k.n);
    mprime[MOD_N2] = k.mp_n2; mprime[MOD_N2P2] = k.mp_n2p2; mprime[MOD_N] = k.mp_n;
    one_n2 = OPW'(k.one_n2); r2_n2 = OPW'(k.r2_n2); nr_n2 = OPW'(k.nr_n2);
    ninv_r2 = OPW'(k.ninv_r2); mu_r2 = OPW'(k.mu_r2);
    // Pendulum-structured controller (coefficients mod 2^32).
    for (int j = 0; j < NY; j++) b_hat[j][j] = 32'd128;
    a_hat[3][0] = 32'd64;  a_hat[3][2] = 32'd80;
    c_hat[0][0] = -32'sd64; c_hat[0][2] = -32'sd84; c_hat[0][3] = 32'd1;
    s[0] = 0; s[1] = 30; s[2] = 1024;
    for (int j = 0; j < NY; j++) sct[j] = OPW'(to_mont(k, encrypt(k, s[j], rand_below(k.n))));
    for (int i = 0; i < NX; i++) xs[i] = 0;
    kk = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    t_period = 0;
    repeat (4) step(0);
    // Switch to a resetting controller; the state restarts from E(0).
    while (ctrl_busy) @(negedge clk);
    t_period = 3;
    kk = 0;  // k mod T restarts: with T = 0 it stayed 0
    repeat (4) step(3);
    check(n_overlap > 0, $sformatf("r^N overlapped the controller %0d times", n_overlap));
    check(n_reset > 0, $sformatf("reset steps: %0d", n_reset));
    check(n_scaled > 0, $sformatf("steps with scaled B[k]: %0d", n_scaled));
    check(n_nores > 0, $sformatf("steps without reset: %0d", n_nores));
    $display("mechanisms: r^N overlap %0d, resets %0d, scaled B %0d, no-reset steps %0d",
             n_overlap, n_reset, n_scaled, n_nores);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
