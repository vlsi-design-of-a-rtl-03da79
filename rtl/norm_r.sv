// norm_r: NormR, the squared-norm unit of one MVU block.
//
// While the MVU block runs H^H r, the residual entries it holds are fed here
// one per cycle (r_in).  Two weighted square MACs with weight 1 accumulate
// Re{r}^2 and Im{r}^2; nrm is their sum, ||r_m||^2 of the block, with
// NF = 2*VF fraction bits.  clr starts a new norm with the current entry,
// en enables accumulation; nrm is valid the cycle after the last entry.
// The published design names NormR and places it in the MVU; feeding it
// sequentially during the H^H r steps is this design's choice.
module norm_r
  import nope_pkg::*;
(
  input  logic          clk,
  input  logic          en,
  input  logic          clr,
  input  v_t            r_in,
  output logic [NW-1:0] nrm
);

  logic [NW-2:0] acc_re, acc_im;

  wsq_mac #(.AIW(VW), .WIW(1), .OW(NW-1)) u_re (
    .clk, .en, .clr, .a(r_in.re), .w(1'b1), .acc_q(acc_re)
  );
  wsq_mac #(.AIW(VW), .WIW(1), .OW(NW-1)) u_im (
    .clk, .en, .clr, .a(r_in.im), .w(1'b1), .acc_q(acc_im)
  );

  assign nrm = NW'(acc_re) + NW'(acc_im);

endmodule
