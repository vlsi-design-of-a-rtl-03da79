// cmac: complex multiply-accumulate unit, one per matrix row in an MVU block.
//
// Each cycle with en=1 the register takes acc_in + a*b, or acc_in + conj(a)*b
// when conj_a is set; with clr=1 acc_in is replaced by zero, which starts a
// new sum.  The accumulator input is a port so that the MVU block can feed
// either the unit's own register (H x, column by column) or the neighbouring
// row's register (H^H r with post-shifted accumulators, Cannon's scheme).
// a is an H entry (HF fraction bits), b a vector entry (VF fraction bits);
// the result has CF = HF+VF fraction bits.  One cycle latency, no rounding.
// The MAC itself is the published design's; the widths are this design's.
module cmac
  import nope_pkg::*;
(
  input  logic clk,
  input  logic en,
  input  logic clr,
  input  logic conj_a,
  input  h_t   a,
  input  v_t   b,
  input  acc_t acc_in,
  output acc_t acc_q
);

  logic signed [HW+VW-1:0] p_rr, p_ii, p_ri, p_ir;
  logic signed [CW-1:0]    prod_re, prod_im;
  acc_t                    base;

  always_comb begin
    p_rr = a.re * b.re;
    p_ii = a.im * b.im;
    p_ri = a.re * b.im;
    p_ir = a.im * b.re;
    if (conj_a) begin
      // (ar - j ai)(br + j bi)
      prod_re = CW'(p_rr) + CW'(p_ii);
      prod_im = CW'(p_ri) - CW'(p_ir);
    end else begin
      prod_re = CW'(p_rr) - CW'(p_ii);
      prod_im = CW'(p_ri) + CW'(p_ir);
    end
    base = clr ? '0 : acc_in;
  end

  always_ff @(posedge clk) begin
    if (en) begin
      acc_q.re <= base.re + prod_re;
      acc_q.im <= base.im + prod_im;
    end
  end

endmodule
