// mont_mult: word-serial Montgomery multiplier, modified CIOS method.
//
// Computes T with T = X * Y * R^-1 (mod M) and T < 2M, for X, Y < 2M, where
// R = 2^(16(w+1)).  One 16-bit word of Y is consumed per clock cycle, so the
// whole X is multiplied by a 16-bit word in each cycle (the multiplier count
// grows linearly with the key length):
//     Z = X * y_i ;  m = ((T + Z) mod 2^16) * M' mod 2^16 ;  T = (T + Z + m M) / 2^16
// After w+1 words the result is ready.  There is no final conditional
// subtraction: the result may still contain one extra M, which the caller
// removes with a final Montgomery multiplication by 1.  The loop and the
// absence of the subtraction follow the paper; the one-word-per-cycle
// schedule and the handshake are this design's choice.
//
// The modulus is one of three values (N^2, N^2+2, N), given on mods[] with
// their M' = -M^-1 mod 2^16 on mprime[], chosen per operation by mod_sel.
//
// Interface and timing: pulse start for one cycle with x, y and mod_sel valid
// (they are captured then).  busy is high while the loop runs; done pulses
// for one cycle exactly w+2 cycles after the start cycle (one load cycle and
// w+1 word iterations), with result valid
// from then until the next start.  A start while busy is ignored.
module mont_mult
  import paillier_pkg::*;
#(
  parameter int unsigned KEY_BITS = DEFAULT_KEY_BITS,
  localparam int unsigned WORDS   = words_for_key(KEY_BITS),
  localparam int unsigned OPW     = opw_for_key(KEY_BITS)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           start,
  input  mod_sel_t                       mod_sel,
  input  logic [OPW-1:0]                 x,
  input  logic [OPW-1:0]                 y,
  input  logic [NUM_MODS-1:0][OPW-1:0]   mods,
  input  logic [NUM_MODS-1:0][WORD_BITS-1:0] mprime,
  output logic                           busy,
  output logic                           done,
  output logic [OPW-1:0]                 result
);

  localparam int unsigned CW = $clog2(WORDS + 2);

  logic [OPW-1:0]       x_q, y_q, m_q;
  logic [WORD_BITS-1:0] mp_q;
  logic [OPW-1:0]       t_q;
  logic [CW-1:0]        cnt_q;

  // One CIOS iteration.
  logic [OPW+WORD_BITS-1:0]   z;
  logic [WORD_BITS-1:0]       mq;
  logic [OPW+WORD_BITS+1:0]   sum;
  logic [WORD_BITS-1:0]       low;

  always_comb begin
    z   = x_q * y_q[WORD_BITS-1:0];
    low = t_q[WORD_BITS-1:0] + z[WORD_BITS-1:0];
    mq  = WORD_BITS'(low * mp_q);
    sum = (OPW+WORD_BITS+2)'(t_q) + (OPW+WORD_BITS+2)'(z) + (OPW+WORD_BITS+2)'(m_q * mq);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy  <= 1'b0;
      done  <= 1'b0;
      x_q   <= '0;
      y_q   <= '0;
      m_q   <= '0;
      mp_q  <= '0;
      t_q   <= '0;
      cnt_q <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy  <= 1'b1;
          x_q   <= x;
          y_q   <= y;
          m_q   <= mods[mod_sel];
          mp_q  <= mprime[mod_sel];
          t_q   <= '0;
          cnt_q <= '0;
        end
      end else begin
        t_q   <= OPW'(sum >> WORD_BITS);
        y_q   <= y_q >> WORD_BITS;
        cnt_q <= cnt_q + 1'b1;
        if (cnt_q == CW'(WORDS)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  assign result = t_q;

  // The result is only meaningful if the operands obey X, Y < 2M.
  a_no_start_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
      !(start && busy)) else $error("mont_mult: start while busy");

endmodule
