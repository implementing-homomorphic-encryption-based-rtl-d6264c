// mont_exp: Montgomery exponentiator and multiplication resource.
//
// Right-to-left binary exponentiation, P = B^E (mod N^2) with B and P in
// Montgomery form, using two Montgomery multipliers that run side by side:
// in every iteration the first squares the base (B <- B*B) while the second
// forms P*B; a multiplexer driven by the low bit of the exponent shift
// register then keeps either that product or the old power in the power
// register.  Both products are computed in every iteration whatever the
// exponent bit, so the latency depends only on the exponent length, not on
// its value.  P starts at R mod N^2, the Montgomery form of 1.  This
// arrangement (two multipliers, power memory, exponent shift register, the
// multiplexer on the power path) follows the paper's exponentiator; the
// exponent length input, the start/done handshake and the cycle schedule
// are this design's choices.
//
// The same unit also performs single Montgomery multiplications (op =
// OP_MULT) on its second multiplier, with any of the three moduli, so that a
// plant interface or controller needs only this one arithmetic resource.
//
// Interface and timing: pulse start for one cycle with op, mod_sel, a, b,
// e and e_len valid (captured then).
//   OP_EXP : result = a^e (Montgomery form, mod N^2, result < 2 N^2), using
//            the low e_len bits of e; done pulses 1 + e_len*(w+3) cycles
//            after the start cycle (w+3 per exponent bit: one issue cycle
//            and w+2 for the two parallel products).  mod_sel, b ignored.
//   OP_MULT: result = a*b*R^-1 mod M(mod_sel), < 2M; done pulses w+4 cycles
//            after the start cycle.
// result stays valid until the next start.  busy is high from the cycle after
// start until done.
module mont_exp
  import paillier_pkg::*;
#(
  parameter int unsigned KEY_BITS = DEFAULT_KEY_BITS,
  parameter int unsigned EXP_W    = KEY_BITS,
  localparam int unsigned OPW     = opw_for_key(KEY_BITS),
  localparam int unsigned LW      = $clog2(EXP_W + 1)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  op_t                                op,
  input  mod_sel_t                           mod_sel,
  input  logic [OPW-1:0]                     a,
  input  logic [OPW-1:0]                     b,
  input  logic [EXP_W-1:0]                   e,
  input  logic [LW-1:0]                      e_len,
  input  logic [OPW-1:0]                     one_n2,   // R mod N^2
  input  logic [NUM_MODS-1:0][OPW-1:0]       mods,
  input  logic [NUM_MODS-1:0][WORD_BITS-1:0] mprime,
  output logic                               busy,
  output logic                               done,
  output logic [OPW-1:0]                     result
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT} state_t;

  state_t          state_q;
  op_t             op_q;
  mod_sel_t        sel_q;
  logic [OPW-1:0]  base_q;    // B (squared each iteration), or X for OP_MULT
  logic [OPW-1:0]  pow_q;     // memory: power, or Y for OP_MULT
  logic [EXP_W-1:0] exp_q;    // shift register: exponent
  logic [LW-1:0]   left_q;    // exponent bits still to scan

  logic            m_start;
  logic            m1_busy, m1_done, m2_busy, m2_done;
  logic [OPW-1:0]  m1_res, m2_res;

  assign m_start = (state_q == S_ISSUE);

  // Squaring multiplier: only used by exponentiations.
  mont_mult #(.KEY_BITS(KEY_BITS)) u_mult_sq (
    .clk, .rst_n,
    .start  (m_start && op_q == OP_EXP),
    .mod_sel(MOD_N2),
    .x      (base_q),
    .y      (base_q),
    .mods, .mprime,
    .busy   (m1_busy),
    .done   (m1_done),
    .result (m1_res)
  );

  // Power multiplier: P*B during exponentiation, X*Y for OP_MULT.
  mont_mult #(.KEY_BITS(KEY_BITS)) u_mult_pw (
    .clk, .rst_n,
    .start  (m_start),
    .mod_sel(op_q == OP_EXP ? MOD_N2 : sel_q),
    .x      (op_q == OP_EXP ? pow_q : base_q),
    .y      (op_q == OP_EXP ? base_q : pow_q),
    .mods, .mprime,
    .busy   (m2_busy),
    .done   (m2_done),
    .result (m2_res)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      op_q    <= OP_MULT;
      sel_q   <= MOD_N2;
      base_q  <= '0;
      pow_q   <= '0;
      exp_q   <= '0;
      left_q  <= '0;
      done    <= 1'b0;
      result  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state_q)
        S_IDLE: if (start) begin
          op_q   <= op;
          sel_q  <= mod_sel;
          base_q <= a;
          exp_q  <= e;
          left_q <= e_len;
          if (op == OP_EXP) begin
            pow_q <= one_n2;
            if (e_len == '0) begin
              result <= one_n2;
              done   <= 1'b1;
            end else begin
              state_q <= S_ISSUE;
            end
          end else begin
            pow_q   <= b;
            state_q <= S_ISSUE;
          end
        end
        S_ISSUE: state_q <= S_WAIT;
        S_WAIT: if (m2_done) begin
          if (op_q == OP_MULT) begin
            result  <= m2_res;
            done    <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            base_q <= m1_res;
            // Multiplexer on the power path, selected by the exponent bit.
            pow_q  <= exp_q[0] ? m2_res : pow_q;
            exp_q  <= exp_q >> 1;
            left_q <= left_q - 1'b1;
            if (left_q == LW'(1)) begin
              result  <= exp_q[0] ? m2_res : pow_q;
              done    <= 1'b1;
              state_q <= S_IDLE;
            end else begin
              state_q <= S_ISSUE;
            end
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy = (state_q != S_IDLE);

  // The two multipliers work in lock step during an exponentiation.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
      (state_q == S_WAIT && op_q == OP_EXP) |-> (m1_done == m2_done))
    else $error("mont_exp: multipliers out of step");
  a_len: assert property (@(posedge clk) disable iff (!rst_n)
      (start && state_q == S_IDLE && op == OP_EXP) |-> (e_len <= LW'(EXP_W)))
    else $error("mont_exp: exponent length above EXP_W");

endmodule
