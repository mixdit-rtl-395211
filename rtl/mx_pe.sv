// mx_pe -- precision-flexible MX processing element.
//
// The PE has four 4-bit unsigned multipliers. In narrow mode (both operands
// MX6) each multiplier takes one element pair, so a beat is a 4-element dot
// product and a 16-element group takes 4 beats. In wide mode (MX6 x MX9 or
// MX9 x MX9) the four multipliers form one 8-bit multiplier: with a = aH:aL and
// w = wH:wL (4-bit halves of the zero-extended 7-bit mantissas)
//   s1 = (aH*wH << 4) + aH*wL,  s2 = (aL*wH << 4) + aL*wL,  a*w = (s1 << 4) + s2,
// which is the shift/multiplexer/adder tree of the paper's PE figure: the
// multiplexers choose the shifted partial products in wide mode and the plain
// ones in narrow mode. A group then takes 16 beats (one element per beat).
// The figure prints the shifts as ">>"; here the more significant partial
// product is shifted left, the exact integer equivalent, so no bit is lost.
//
// Each product is also scaled by the two 1-bit microexponents: it is shifted
// left by 2 - mu_a - mu_w, and its sign is the XOR of the two signs. These
// sign and microexponent steps, and everything below, are this design's own.
//
// Accumulation. Beats of one group are summed as integers (gsum). On the last
// beat of a group the group sum, whose scale is
//   2^(Ea + Ew - 254 - 2 - (Ma-1) - (Mw-1)),
// is added into the floating accumulator acc (mixdit_pkg::acc_add). 'clear'
// zeroes acc. The array is output stationary: a_in/w_in are registered and
// forwarded to the right/lower neighbour one cycle later.
//
// Drain. 'cap' copies acc into out_q; 'shift' loads out_q from out_in (the PE
// above), so a column of PEs forms a shift register towards the O buffer.
//
// Timing: one beat per cycle, no stalls; acc is updated in the cycle after
// the last beat of a group is presented.
module mx_pe
  import mixdit_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  input  pe_beat_t a_in,
  input  pe_beat_t w_in,
  output pe_beat_t a_out,
  output pe_beat_t w_out,
  input  logic     cap,
  input  logic     shift,
  input  acc_t     out_in,
  output acc_t     out_q,
  output acc_t     acc_q
);

  logic [3:0]                  mul_a [LANES];
  logic [3:0]                  mul_w [LANES];
  logic [7:0]                  prod  [LANES];
  logic [7:0]                  a8, w8;
  logic [11:0]                 s1, s2;
  logic [15:0]                 p8;
  logic signed [TERM_W-1:0]    term;
  logic signed [GSUM_W-1:0]    gsum_q, gsum_new;
  logic signed [ACC_EXP_W-1:0] gexp;
  acc_t                        acc;

  // Operand selection for the four 4-bit multipliers.
  always_comb begin
    a8 = {1'b0, a_in.mag[0]};
    w8 = {1'b0, w_in.mag[0]};
    for (int l = 0; l < LANES; l++) begin
      mul_a[l] = a_in.mag[l][3:0];
      mul_w[l] = w_in.mag[l][3:0];
    end
    if (a_in.wide) begin
      mul_a[0] = a8[7:4]; mul_w[0] = w8[7:4];
      mul_a[1] = a8[7:4]; mul_w[1] = w8[3:0];
      mul_a[2] = a8[3:0]; mul_w[2] = w8[7:4];
      mul_a[3] = a8[3:0]; mul_w[3] = w8[3:0];
    end
  end

  // The 4-bit multipliers.
  always_comb
    for (int l = 0; l < LANES; l++)
      prod[l] = mul_a[l] * mul_w[l];

  // Shift / multiplex / add tree and the sign and microexponent step.
  always_comb begin
    logic signed [TERM_W-1:0] t;
    s1 = (12'(prod[0]) << 4) + 12'(prod[1]);
    s2 = (12'(prod[2]) << 4) + 12'(prod[3]);
    p8 = (16'(s1) << 4) + 16'(s2);
    term = '0;
    if (a_in.wide) begin
      t = TERM_W'(p8) <<< (2 - int'(a_in.mu[0]) - int'(w_in.mu[0]));
      term = (a_in.sign[0] ^ w_in.sign[0]) ? -t : t;
    end else begin
      for (int l = 0; l < LANES; l++) begin
        t = TERM_W'(prod[l]) <<< (2 - int'(a_in.mu[l]) - int'(w_in.mu[l]));
        term += (a_in.sign[l] ^ w_in.sign[l]) ? -t : t;
      end
    end
  end

  assign gsum_new = (a_in.first ? GSUM_W'(0) : gsum_q) + GSUM_W'(term);
  assign gexp = ACC_EXP_W'(int'(a_in.exp) + int'(w_in.exp) - 2 * EXP_BIAS - 2
                           - (mant_bits(a_in.prec) - 1) - (mant_bits(w_in.prec) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out  <= '0;
      w_out  <= '0;
      gsum_q <= '0;
      acc    <= '0;
      out_q  <= '0;
    end else begin
      a_out <= a_in;
      w_out <= w_in;
      if (a_in.valid) gsum_q <= gsum_new;
      if (clear)
        acc <= '0;
      else if (a_in.valid && a_in.last)
        acc <= acc_add(acc, ACC_W'(gsum_new), gexp);
      if (cap)        out_q <= acc;
      else if (shift) out_q <= out_in;
    end
  end

  assign acc_q = acc;

  // Both operands of a beat must agree on framing and mode.
  a_beat_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    a_in.valid == w_in.valid && (!a_in.valid ||
      (a_in.first == w_in.first && a_in.last == w_in.last && a_in.wide == w_in.wide)));

endmodule
