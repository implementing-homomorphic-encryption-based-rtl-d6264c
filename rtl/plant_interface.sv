// plant_interface: Paillier encryption of plant outputs and decryption of
// control inputs, on one shared multiplication-and-exponentiation resource.
//
// Three task sequences are run by the digital engine control unit (the FSM
// below), each as a chain of mont_exp operations whose operands are key
// constants, inputs, or the previous result:
//   RAND (r^N):  z_i = MontExp(r_i, N).  r_i is used as if it were already in
//                Montgomery form, which gives a uniformly random r'^N in
//                Montgomery form without a conversion step.
//   ENC  :       v = MontMult(N R, y_i)          = N y_i        (mod N^2)
//                v = MontMult(v + 1, R^2)        = (1 + N y_i) R
//                c_i = MontMult(z_i, v)          = E(y_i) R     (Montgomery form)
//   DEC  :       t = MontExp(c_i, lambda); t = MontMult(t, 1)        (mod N^2)
//                t = MontMult(t - 1, N^-1 R^2); t = MontMult(t, 1)    (mod N^2+2)
//                t = MontMult(t, mu R^2); t = MontMult(t, 1)          (mod N)
//                u_i = t mod 2^n'
// The division (t-1)/N of Paillier's L function is done exactly as a
// multiplication by N^-1 modulo N^2+2, which is odd, coprime with N and above
// (t-1)/N.  These sequences follow the paper's algorithms.  This design's
// choices: the vector entries are processed one after another on the single
// exponentiator (as in the experiment), a pending decryption is served first,
// then a pending encryption whose r^N is ready, and the r^N values for the
// next sample are computed once the current sample's control input has been
// decrypted (or before the first sample), so that this long exponentiation
// overlaps the controller's state update and never delays a decryption.
//
// Interface: sample_valid/sample_ready accept the quantised plant outputs
// y_hat; rnd_valid/rnd_ready accept NY random values r in Z_N; yct_valid
// pulses with the ciphertexts yct (Montgomery form, < 2 N^2) for the network.
// uct_valid delivers ciphertext control inputs (Montgomery form); u_valid
// pulses with the decrypted u_hat in Z_2^n'.  uct_valid and sample_valid
// must not arrive again before the previous one is taken (asserted).
// Timing: RAND takes NY*(1+K(w+3)) cycles, ENC 3*NY*(w+4), DEC
// NU*(1+K(w+3) + 5(w+4)) plus a few cycles of sequencing.
module plant_interface
  import paillier_pkg::*;
#(
  parameter int unsigned KEY_BITS = DEFAULT_KEY_BITS,
  parameter int unsigned NY       = 3,
  parameter int unsigned NU       = 1,
  parameter int unsigned NPRIME   = DEFAULT_NPRIME,
  localparam int unsigned OPW     = opw_for_key(KEY_BITS),
  localparam int unsigned LW      = $clog2(KEY_BITS + 1)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // key constants
  input  logic [KEY_BITS-1:0]                n_key,     // N (as exponent)
  input  logic [KEY_BITS-1:0]                lambda,
  input  logic [NUM_MODS-1:0][OPW-1:0]       mods,
  input  logic [NUM_MODS-1:0][WORD_BITS-1:0] mprime,
  input  logic [OPW-1:0]                     one_n2,    // R mod N^2
  input  logic [OPW-1:0]                     r2_n2,     // R^2 mod N^2
  input  logic [OPW-1:0]                     nr_n2,     // N R mod N^2
  input  logic [OPW-1:0]                     ninv_r2,   // N^-1 R^2 mod (N^2+2)
  input  logic [OPW-1:0]                     mu_r2,     // mu R^2 mod N
  // random numbers
  input  logic                               rnd_valid,
  input  logic [NY-1:0][KEY_BITS-1:0]        rnd,
  output logic                               rnd_ready,
  // plant outputs to encrypt
  input  logic                               sample_valid,
  input  logic [NY-1:0][NPRIME-1:0]          y_hat,
  output logic                               sample_ready,
  output logic                               yct_valid,
  output logic [NY-1:0][OPW-1:0]             yct,
  // control inputs to decrypt
  input  logic                               uct_valid,
  input  logic [NU-1:0][OPW-1:0]             uct,
  output logic                               u_valid,
  output logic [NU-1:0][NPRIME-1:0]          u_hat,
  output logic                               busy
);

  typedef enum logic [1:0] {P_IDLE, P_RAND, P_ENC, P_DEC} phase_t;
  localparam int unsigned IW = $clog2((NY > NU ? NY : NU) + 1);

  phase_t   phase_q;
  logic [IW-1:0] idx_q;
  logic [2:0]    step_q;
  logic          wait_q;

  logic [NY-1:0][KEY_BITS-1:0] rnd_q;
  logic [NY-1:0][OPW-1:0]      z_q;
  logic                        z_valid_q;
  logic [NY-1:0][NPRIME-1:0]   y_q;
  logic                        y_pend_q;
  logic [NU-1:0][OPW-1:0]      uct_q;
  logic                        u_pend_q;
  logic                        u_out_q;  // a sample is encrypted, its u not yet back
  logic [OPW-1:0]              t_q;      // running intermediate value

  // Task to the exponentiator.
  logic            x_start, x_busy, x_done;
  op_t             x_op;
  mod_sel_t        x_sel;
  logic [OPW-1:0]  x_a, x_b, x_res;
  logic [KEY_BITS-1:0] x_e;
  logic [LW-1:0]   x_len;

  mont_exp #(.KEY_BITS(KEY_BITS)) u_exp (
    .clk, .rst_n, .start(x_start), .op(x_op), .mod_sel(x_sel), .a(x_a), .b(x_b),
    .e(x_e), .e_len(x_len), .one_n2, .mods, .mprime,
    .busy(x_busy), .done(x_done), .result(x_res)
  );

  localparam logic [OPW-1:0] ONE = OPW'(1);

  always_comb begin
    x_op  = OP_MULT;
    x_sel = MOD_N2;
    x_a   = '0;
    x_b   = ONE;
    x_e   = '0;
    x_len = '0;
    unique case (phase_q)
      P_RAND: begin
        x_op  = OP_EXP;
        x_a   = OPW'(rnd_q[idx_q]);
        x_e   = n_key;
        x_len = LW'(KEY_BITS);
      end
      P_ENC: unique case (step_q)
        3'd0:    begin x_a = nr_n2;    x_b = OPW'(y_q[idx_q]); end
        3'd1:    begin x_a = t_q + ONE; x_b = r2_n2;           end
        default: begin x_a = z_q[idx_q]; x_b = t_q;            end
      endcase
      P_DEC: unique case (step_q)
        3'd0:    begin x_op = OP_EXP; x_a = uct_q[idx_q]; x_e = lambda; x_len = LW'(KEY_BITS); end
        3'd1:    begin x_sel = MOD_N2;   x_a = t_q;       x_b = ONE;     end
        3'd2:    begin x_sel = MOD_N2P2; x_a = t_q - ONE; x_b = ninv_r2; end
        3'd3:    begin x_sel = MOD_N2P2; x_a = t_q;       x_b = ONE;     end
        3'd4:    begin x_sel = MOD_N;    x_a = t_q;       x_b = mu_r2;   end
        default: begin x_sel = MOD_N;    x_a = t_q;       x_b = ONE;     end
      endcase
      default: ;
    endcase
  end

  assign x_start = (phase_q != P_IDLE) && !wait_q;

  // Scheduling of the idle unit: decryption, then encryption, then r^N.
  logic go_dec, go_enc, go_rand;
  assign go_dec  = (phase_q == P_IDLE) && u_pend_q;
  assign go_enc  = (phase_q == P_IDLE) && !u_pend_q && y_pend_q && z_valid_q;
  assign go_rand = (phase_q == P_IDLE) && !u_pend_q && !(y_pend_q && z_valid_q)
                   && !z_valid_q && !u_out_q && rnd_valid;

  assign rnd_ready    = go_rand;
  assign sample_ready = !y_pend_q;
  assign busy         = (phase_q != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q   <= P_IDLE;
      idx_q     <= '0;
      step_q    <= '0;
      wait_q    <= 1'b0;
      rnd_q     <= '0;
      z_q       <= '0;
      z_valid_q <= 1'b0;
      y_q       <= '0;
      y_pend_q  <= 1'b0;
      uct_q     <= '0;
      u_pend_q  <= 1'b0;
      u_out_q   <= 1'b0;
      t_q       <= '0;
      yct       <= '0;
      yct_valid <= 1'b0;
      u_hat     <= '0;
      u_valid   <= 1'b0;
    end else begin
      yct_valid <= 1'b0;
      u_valid   <= 1'b0;
      if (sample_valid && !y_pend_q) begin
        y_q      <= y_hat;
        y_pend_q <= 1'b1;
      end
      if (uct_valid && !u_pend_q) begin
        uct_q    <= uct;
        u_pend_q <= 1'b1;
      end

      if (go_dec)       begin phase_q <= P_DEC;  idx_q <= '0; step_q <= '0; end
      else if (go_enc)  begin phase_q <= P_ENC;  idx_q <= '0; step_q <= '0; end
      else if (go_rand) begin phase_q <= P_RAND; idx_q <= '0; step_q <= '0; rnd_q <= rnd; end

      if (x_start) wait_q <= 1'b1;
      if (x_done && wait_q) begin
        wait_q <= 1'b0;
        t_q    <= x_res;
        unique case (phase_q)
          P_RAND: begin
            z_q[idx_q] <= x_res;
            if (idx_q == IW'(NY - 1)) begin
              phase_q   <= P_IDLE;
              z_valid_q <= 1'b1;
            end else idx_q <= idx_q + 1'b1;
          end
          P_ENC: begin
            if (step_q == 3'd2) begin
              yct[idx_q] <= x_res;
              step_q     <= '0;
              if (idx_q == IW'(NY - 1)) begin
                phase_q   <= P_IDLE;
                yct_valid <= 1'b1;
                u_out_q   <= 1'b1;
                y_pend_q  <= 1'b0;
                z_valid_q <= 1'b0;
              end else idx_q <= idx_q + 1'b1;
            end else step_q <= step_q + 1'b1;
          end
          P_DEC: begin
            if (step_q == 3'd5) begin
              u_hat[idx_q] <= x_res[NPRIME-1:0];
              step_q       <= '0;
              if (idx_q == IW'(NU - 1)) begin
                phase_q  <= P_IDLE;
                u_valid  <= 1'b1;
                u_out_q  <= 1'b0;
                u_pend_q <= 1'b0;
              end else idx_q <= idx_q + 1'b1;
            end else step_q <= step_q + 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

  a_no_sample_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      !(sample_valid && y_pend_q)) else $error("plant_interface: sample overrun");
  a_no_uct_overrun: assert property (@(posedge clk) disable iff (!rst_n)
      !(uct_valid && u_pend_q)) else $error("plant_interface: control ciphertext overrun");

endmodule
