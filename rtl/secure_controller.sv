// secure_controller: linear dynamic controller evaluated on Paillier
// ciphertexts, with periodic state reset.
//
// The plaintext law is  x[k+1] = A x[k] + B (s[k] - y[k])   ((k+1) mod T != 0)
//                       x[k+1] = 0                          ((k+1) mod T == 0)
//                       u[k]   = C x[k]
// on fixed-point values mapped into Z_2^n'.  On ciphertexts in Montgomery
// form, a sum is a Montgomery product mod N^2 and a product with a plaintext
// coefficient is a Montgomery exponentiation with that coefficient as
// exponent.  For each arriving vector of encrypted plant outputs the control
// unit runs, on one mont_exp:
//   1. u_i = prod_j MontExp(x_j, C_ij)                      (control output)
//   2. e_j = MontMult(MontExp(y_j, 2^n' - 1), s_j)          (error s - y)
//   3. x'_i = prod_j MontExp(x_j, A_ij) * prod_j MontExp(e_j, B_ij[k])
// or, on a reset step, x' = R mod N^2 (the Montgomery form of E(0) with
// r = 1), and then commits x <- x'.  B_ij[k] = 2^((k mod T) m) B_ij[0] mod 2^n'
// with B_ij[0] = 2^m B_ij given on b_hat.  t_period = 0 means no reset and a
// constant B (the paper's pendulum controller, whose state is only a delay
// line).  The base multiplexer of the exponentiator (sensor ciphertext,
// encrypted setpoint or controller state) is the "select" of the paper's
// controller; the state registers x_q are its controller-state feedback.
//
// Follows the paper: the operation sequences of the control-output and
// state-update algorithms, the reset to E(0), the coefficient scaling.  This
// design's choices: strictly sequential evaluation on a single exponentiator
// (the experiment's configuration), the control output computed first so it
// leaves as soon as possible (it depends on x[k] only), the products summed
// as a running product rather than a tree, and the initial state E(0) after
// reset.  The state-update algorithm writes its exponentiation base as x'_j;
// the old state x_j is used here, as the control law requires.
//
// Interface: yct_valid delivers NY encrypted plant outputs (Montgomery form);
// sct holds the NY encrypted setpoints and is read during step 2.  uct_valid
// pulses with the NU encrypted control inputs.  A new yct_valid must not come
// while busy (asserted).  Coefficients are n'-bit exponents.
// Timing, with E = 2 + n'(w+3) and M = w+5 cycles per exponentiation and per
// multiplication including issue: uct_valid follows yct_valid after
// 1 + NU(NX E + (NX-1) M) cycles; the whole step takes a further
// NY(E + M) + NX((NX+NY) E + (NX+NY-1) M) cycles unless it is a reset step.
module secure_controller
  import paillier_pkg::*;
#(
  parameter int unsigned KEY_BITS = DEFAULT_KEY_BITS,
  parameter int unsigned NX       = 4,
  parameter int unsigned NY       = 3,
  parameter int unsigned NU       = 1,
  parameter int unsigned NPRIME   = DEFAULT_NPRIME,
  parameter int unsigned MFRAC    = DEFAULT_MFRAC,
  parameter int unsigned TW       = 16,
  localparam int unsigned OPW     = opw_for_key(KEY_BITS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic [NUM_MODS-1:0][OPW-1:0]       mods,
  input  logic [NUM_MODS-1:0][WORD_BITS-1:0] mprime,
  input  logic [OPW-1:0]                     one_n2,    // R mod N^2 = E(0)
  input  logic [NX-1:0][NX-1:0][NPRIME-1:0]  a_hat,
  input  logic [NX-1:0][NY-1:0][NPRIME-1:0]  b_hat,     // B[0] = 2^m B
  input  logic [NU-1:0][NX-1:0][NPRIME-1:0]  c_hat,
  input  logic [TW-1:0]                      t_period,  // T, 0 = never reset
  input  logic [NY-1:0][OPW-1:0]             sct,
  input  logic                               yct_valid,
  input  logic [NY-1:0][OPW-1:0]             yct,
  output logic                               uct_valid,
  output logic [NU-1:0][OPW-1:0]             uct,
  output logic                               state_reset, // pulse: reset step taken
  output logic [TW-1:0]                      k_mod,       // k mod T
  output logic                               busy
);

  typedef enum logic [1:0] {C_IDLE, C_U, C_E, C_X} phase_t;
  localparam int unsigned JN = NX + NY;
  localparam int unsigned JW = $clog2(JN + 1);
  localparam int unsigned LW = $clog2(NPRIME + 1);

  phase_t        phase_q;
  logic [JW-1:0] i_q, j_q;
  logic          sub_q;     // 0: exponentiation, 1: accumulate product
  logic          wait_q;

  logic [NY-1:0][OPW-1:0] y_q;
  logic [NY-1:0][OPW-1:0] e_q;
  logic [NX-1:0][OPW-1:0] x_q, xn_q;
  logic                   x_zero_q;   // state is E(0)
  logic [OPW-1:0]         acc_q, t_q;
  logic [TW-1:0]          k_q;

  logic reset_step;
  assign reset_step = (t_period != '0) && (k_q + 1'b1 == t_period);

  // B[k] = B[0] * 2^((k mod T) m) mod 2^n'; with T = 0, B is constant.
  logic [NX-1:0][NY-1:0][NPRIME-1:0] b_k;
  logic [TW-1:0] k_eff;
  assign k_eff = (t_period == '0) ? '0 : k_q;
  always_comb begin
    for (int i = 0; i < NX; i++)
      for (int j = 0; j < NY; j++)
        b_k[i][j] = NPRIME'({b_hat[i][j]} << (MFRAC * k_eff));
  end

  // Exponentiator task.
  logic            x_start, x_busy, x_done;
  op_t             x_op;
  mod_sel_t        x_sel;
  logic [OPW-1:0]  x_a, x_b, x_res;
  logic [NPRIME-1:0] x_e;

  // Operand select: controller state, sensor ciphertext or error.
  logic [OPW-1:0] state_j;
  always_comb begin
    state_j = '0;
    for (int j = 0; j < NX; j++)
      if (j_q == JW'(j)) state_j = x_zero_q ? one_n2 : x_q[j];
  end

  always_comb begin
    x_sel = MOD_N2;
    x_b   = acc_q;
    x_a   = t_q;
    x_e   = '0;
    x_op  = sub_q ? OP_MULT : OP_EXP;
    unique case (phase_q)
      C_U: if (!sub_q) begin
        x_a = state_j;
        x_e = c_hat[i_q][j_q];
      end
      C_E: if (!sub_q) begin
        x_a = y_q[j_q];
        x_e = '1;                        // 2^n' - 1, i.e. -1 in Z_2^n'
      end else begin
        x_b = sct[j_q];
      end
      C_X: if (!sub_q) begin
        if (j_q < JW'(NX)) begin
          x_a = state_j;
          x_e = a_hat[i_q][j_q];
        end else begin
          x_a = e_q[j_q - JW'(NX)];
          x_e = b_k[i_q][j_q - JW'(NX)];
        end
      end
      default: ;
    endcase
  end

  assign x_start = (phase_q != C_IDLE) && !wait_q;

  mont_exp #(.KEY_BITS(KEY_BITS), .EXP_W(NPRIME)) u_exp (
    .clk, .rst_n, .start(x_start), .op(x_op), .mod_sel(x_sel), .a(x_a), .b(x_b),
    .e(x_e), .e_len(LW'(NPRIME)), .one_n2, .mods, .mprime,
    .busy(x_busy), .done(x_done), .result(x_res)
  );

  // Result of one exponentiation or product, folded into the running product.
  logic [OPW-1:0] folded;
  assign folded = (sub_q || j_q == '0) ? x_res : acc_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q     <= C_IDLE;
      i_q         <= '0;
      j_q         <= '0;
      sub_q       <= 1'b0;
      wait_q      <= 1'b0;
      y_q         <= '0;
      e_q         <= '0;
      x_q         <= '0;
      xn_q        <= '0;
      x_zero_q    <= 1'b1;
      acc_q       <= '0;
      t_q         <= '0;
      k_q         <= '0;
      uct         <= '0;
      uct_valid   <= 1'b0;
      state_reset <= 1'b0;
    end else begin
      uct_valid   <= 1'b0;
      state_reset <= 1'b0;
      if (phase_q == C_IDLE && yct_valid) begin
        y_q     <= yct;
        phase_q <= C_U;
        i_q     <= '0;
        j_q     <= '0;
        sub_q   <= 1'b0;
      end
      if (x_start) wait_q <= 1'b1;
      if (x_done && wait_q) begin
        wait_q <= 1'b0;
        unique case (phase_q)
          // Sum-of-products phases: exponentiate, then multiply into acc.
          C_U, C_X: begin
            logic last_j;
            last_j = (j_q == JW'((phase_q == C_U ? NX : JN) - 1));
            if (!sub_q && j_q != '0) begin
              t_q   <= x_res;
              sub_q <= 1'b1;
            end else begin
              acc_q <= folded;
              sub_q <= 1'b0;
              if (!last_j) j_q <= j_q + 1'b1;
              else begin
                j_q <= '0;
                if (phase_q == C_U) begin
                  uct[i_q] <= folded;
                  if (i_q == JW'(NU - 1)) begin
                    uct_valid <= 1'b1;
                    i_q       <= '0;
                    if (reset_step) begin
                      // Controller reset: x[k+1] = E(0).
                      phase_q     <= C_IDLE;
                      x_zero_q    <= 1'b1;
                      k_q         <= '0;
                      state_reset <= 1'b1;
                    end else phase_q <= C_E;
                  end else i_q <= i_q + 1'b1;
                end else begin
                  xn_q[i_q] <= folded;
                  if (i_q == JW'(NX - 1)) begin
                    // Commit x[k+1] (row NX-1 written directly).
                    for (int i = 0; i < NX - 1; i++) x_q[i] <= xn_q[i];
                    x_q[NX-1] <= folded;
                    x_zero_q  <= 1'b0;
                    k_q       <= (t_period == '0) ? '0 : k_q + 1'b1;
                    phase_q   <= C_IDLE;
                    i_q       <= '0;
                  end else i_q <= i_q + 1'b1;
                end
              end
            end
          end
          C_E: begin
            if (!sub_q) begin
              t_q   <= x_res;
              sub_q <= 1'b1;
            end else begin
              e_q[j_q] <= x_res;
              sub_q    <= 1'b0;
              if (j_q == JW'(NY - 1)) begin
                j_q     <= '0;
                i_q     <= '0;
                phase_q <= C_X;
              end else j_q <= j_q + 1'b1;
            end
          end
          default: ;
        endcase
      end
    end
  end

  assign k_mod = k_q;
  assign busy  = (phase_q != C_IDLE);

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      !(yct_valid && phase_q != C_IDLE)) else $error("secure_controller: sample while busy");

endmodule
