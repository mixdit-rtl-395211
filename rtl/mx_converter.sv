// mx_converter -- combinational conversion of 16 binary32 values into one MX
// group (MX6 or MX9).
//
// The shared exponent is the largest binary32 exponent field in the group. A
// 2-element subgroup whose largest exponent is below the shared exponent gets
// microexponent 1 (one extra power of two of resolution), otherwise 0. Each
// element keeps its sign; its mantissa is the top M bits (M = 4 for MX6, 7
// for MX9) of its 24-bit significand, shifted right by (shared exponent - mu -
// own exponent) and truncated, so that the element value is
// mant * 2^(exp - 127 - mu - (M-1)) as defined in mixdit_pkg. Small values in
// a group with a large one lose their low bits: the inlier truncation the
// paper illustrates. Zero and denormal inputs become zero; an exponent field
// of 255 is treated as an ordinary exponent.
//
// The paper gives the field widths, group and subgroup sizes, and that the
// converter is purely combinational; the choice of shared exponent and
// microexponent and the truncation rounding are this design's.
module mx_converter
  import mixdit_pkg::*;
(
  input  logic [31:0] vals [GROUP],
  input  mx_prec_e    prec,
  output mx_group_t   grp
);

  logic [7:0] e      [GROUP];
  logic [7:0] sub_e  [NSUB];
  logic [7:0] emax;

  always_comb begin
    emax = '0;
    for (int i = 0; i < GROUP; i++) begin
      e[i] = vals[i][30:23];
      if (e[i] > emax) emax = e[i];
    end
    for (int s = 0; s < NSUB; s++)
      sub_e[s] = (e[2*s] > e[2*s+1]) ? e[2*s] : e[2*s+1];
  end

  always_comb begin
    logic [23:0] sig;
    logic [6:0]  top;
    int          sh;
    grp      = '0;
    grp.prec = prec;
    grp.exp  = emax;
    for (int s = 0; s < NSUB; s++)
      grp.mu[s] = (sub_e[s] < emax);
    for (int i = 0; i < GROUP; i++) begin
      sig = {1'b1, vals[i][22:0]};
      top = (prec == MX9) ? sig[23:17] : 7'(sig[23:20]);
      sh  = int'(emax) - int'(grp.mu[i/SUBGROUP]) - int'(e[i]);
      grp.sign[i] = vals[i][31];
      if (e[i] == 0 || sh >= MANT_W)
        grp.mant[i] = '0;
      else
        grp.mant[i] = top >> sh;
    end
  end

endmodule
