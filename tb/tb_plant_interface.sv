// tb_plant_interface: self-checking test of encryption, r^N and decryption.
//
// 64-bit Paillier key, NY = 3 outputs, NU = 1 input (key length reduced from
// 256 to keep the run short).  The reference is textbook Paillier on plain
// wide integers.  For each sample the ciphertexts must equal, exactly, the
// Montgomery form of E(y_i) = (1 + N y_i) r'^N mod N^2 with r' = r_i R^-1,
// and must decrypt to y_i.  Ciphertexts of random plaintexts in Z_N, including
// ones above 2^n', must decrypt to the plaintext mod 2^n'.  The decryption
// latency is checked against the cycle count of its operation sequence, and
// a decryption that arrives while r^N is being computed must wait for it.
module tb_plant_interface;
  import paillier_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned KB = 64, NY = 3, NU = 1, NP = 32;
  localparam int unsigned WORDS = words_for_key(KB);
  localparam int unsigned OPW   = opw_for_key(KB);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic [KB-1:0] n_key, lambda;
  logic [NUM_MODS-1:0][OPW-1:0] mods;
  logic [NUM_MODS-1:0][15:0] mprime;
  logic [OPW-1:0] one_n2, r2_n2, nr_n2, ninv_r2, mu_r2;
  logic rnd_valid = 1'b0, rnd_ready, sample_valid = 1'b0, sample_ready;
  logic [NY-1:0][KB-1:0] rnd = '0;
  logic [NY-1:0][NP-1:0] y_hat = '0;
  logic yct_valid, uct_valid = 1'b0, u_valid, busy;
  logic [NY-1:0][OPW-1:0] yct;
  logic [NU-1:0][OPW-1:0] uct = '0;
  logic [NU-1:0][NP-1:0] u_hat;

  plant_interface #(.KEY_BITS(KB), .NY(NY), .NU(NU), .NPRIME(NP)) dut (.*);

  int checks = 0, failures = 0;
  key_t k;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Expected decryption latency, uct_valid cycle to u_valid cycle.
  localparam int DEC_LAT = 3 + (1 + KB * (WORDS + 3)) + 5 * (WORDS + 4) + 5;

  task automatic encrypt_round();
    big_t r[NY];
    big_t y[NY];
    for (int i = 0; i < NY; i++) begin
      r[i] = rand_below(k.n);
      y[i] = big_t'($urandom);
      rnd[i] = KB'(r[i]);
      y_hat[i] = NP'(y[i]);
    end
    @(negedge clk);
    rnd_valid = 1'b1;
    #1;
    while (!rnd_ready) begin @(negedge clk); #1; end
    @(negedge clk);
    rnd_valid = 1'b0;
    sample_valid = 1'b1;
    @(negedge clk);
    sample_valid = 1'b0;
    while (!yct_valid) @(negedge clk);
    for (int i = 0; i < NY; i++) begin
      big_t rp, want;
      rp = mulmod(r[i], k.rinv_n2, k.n2);
      want = to_mont(k, encrypt(k, y[i], rp));
      check(big_t'(yct[i]) < 2 * k.n2, "ciphertext below 2N^2");
      check(big_t'(yct[i]) % k.n2 == want, $sformatf("ciphertext %0d exact", i));
      check(decrypt_mont(k, big_t'(yct[i])) == y[i], $sformatf("ciphertext %0d decrypts", i));
    end
  endtask

  task automatic decrypt_round(big_t u, bit check_lat);
    int cyc;
    @(negedge clk);
    uct[0] = OPW'(to_mont(k, encrypt(k, u, rand_below(k.n))));
    uct_valid = 1'b1;
    @(negedge clk);
    uct_valid = 1'b0;
    cyc = 1;
    while (!u_valid) begin @(negedge clk); cyc++; end
    check(u_hat[0] == NP'(u), $sformatf("decrypt %0h got %0h", u, u_hat[0]));
    if (check_lat) check(cyc == DEC_LAT, $sformatf("decrypt latency %0d, expected %0d", cyc, DEC_LAT));
  endtask

  initial begin
    k = make_key(big_t'(64'heeeacbe3), big_t'(64'heb2cd31f), OPW);
    n_key = KB'(k.n); lambda = KB'(k.lambda);
    mods[MOD_N2] = OPW'(k.n2); mods[MOD_N2P2] = OPW'(k.n2p2); mods[MOD_N] = OPW'(k.n);
    mprime[MOD_N2] = k.mp_n2; mprime[MOD_N2P2] = k.mp_n2p2; mprime[MOD_N] = k.mp_n;
    one_n2 = OPW'(k.one_n2); r2_n2 = OPW'(k.r2_n2); nr_n2 = OPW'(k.nr_n2);
    ninv_r2 = OPW'(k.ninv_r2); mu_r2 = OPW'(k.mu_r2);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // r^N for the next sample is only taken once the previous u is back.
    for (int i = 0; i < 3; i++) begin
      encrypt_round();
      repeat (20) @(negedge clk);
      check(!rnd_ready, "r^N waits for the outstanding decryption");
      decrypt_round(rand_below(k.n), 1'b1);
    end
    decrypt_round(0, 1'b1);
    decrypt_round(big_t'(32'hffff_ffff), 1'b1);
    decrypt_round(k.n - 1, 1'b1);
    for (int i = 0; i < 4; i++) decrypt_round(rand_below(k.n), 1'b1);
    // A decryption arriving during an r^N computation waits for it.
    begin
      int cyc;
      big_t u;
      u = rand_below(k.n);
      @(negedge clk);
      rnd_valid = 1'b1;
      #1;
      while (!rnd_ready) begin @(negedge clk); #1; end
      @(negedge clk);
      rnd_valid = 1'b0;
      uct[0] = OPW'(to_mont(k, encrypt(k, u, 5)));
      uct_valid = 1'b1;
      @(negedge clk);
      uct_valid = 1'b0;
      cyc = 1;
      while (!u_valid) begin @(negedge clk); cyc++; end
      check(u_hat[0] == NP'(u), "decrypt after r^N");
      check(cyc > DEC_LAT, "decryption waited for r^N");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
