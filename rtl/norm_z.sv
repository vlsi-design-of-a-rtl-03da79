// norm_z: NormZ of the estimation unit.  Accumulates, one UE per cycle,
//   v_zRe = sum_u d_u^2 Re{z_u}^2,  v_zIm = sum_u d_u^2 Im{z_u}^2
// with two weighted square MACs (real and imaginary part), i.e. lines 8 and 9
// of the robust NOPE iteration, in U cycles.  It also sums d_u^2, from which
// the estimation unit forms <d^2>.  clr marks the first UE of a new sum, en
// enables accumulation; results are valid the cycle after the last UE.
// Formats: v_z with SF = 2*VF+DF fraction bits, d2_sum with DF.
// The two-MAC structure is the published design's; accumulating sum d^2 here
// (rather than precomputing <d^2> outside) is this design's choice.
module norm_z
  import nope_pkg::*;
(
  input  logic            clk,
  input  logic            en,
  input  logic            clr,
  input  v_t              z_in,
  input  logic [DW-1:0]   d2_in,
  output logic [SW-1:0]   vz_re,
  output logic [SW-1:0]   vz_im,
  output logic [DW+7:0]   d2_sum
);

  wsq_mac #(.AIW(VW), .WIW(DW), .OW(SW)) u_re (
    .clk, .en, .clr, .a(z_in.re), .w(d2_in), .acc_q(vz_re)
  );
  wsq_mac #(.AIW(VW), .WIW(DW), .OW(SW)) u_im (
    .clk, .en, .clr, .a(z_in.im), .w(d2_in), .acc_q(vz_im)
  );

  always_ff @(posedge clk) begin
    if (en) d2_sum <= (clr ? '0 : d2_sum) + (DW+8)'(d2_in);
  end

endmodule
