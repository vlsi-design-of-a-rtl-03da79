// mean_var_est: mean/variance estimation of the estimation unit (lines 10-16
// of the robust NOPE iteration).  From ||r||^2, the weighted norms v_zRe and
// v_zIm and sum_u d_u^2 it computes, with v_r = (beta/2)||r||^2:
//   K = (v_r <d^2>)^-1                                  (LUT/Newton recip.)
//   alpha_u,Re = w/(1+w) = 1 - (1+w)^-1,  w = K d_u^2 (v_zRe - v_r)
//   alpha_u,Im likewise,  x_u = alpha_u,Re Re{z_u} + j alpha_u,Im Im{z_u}
//   <alpha> = (1/U) sum_u (alpha_u,Re + alpha_u,Im)      (Onsager constant)
//   rho_u   = (2B/beta) K <d^2> d_u^2                   (post-eq. SNR)
// Timing, counted from the cycle in which start is high:
//   cycle 0        v_r, <d^2>, K, and v_z - v_r (clamped at 0) are registered
//   cycle 1        q = K (v_z - v_r) for Re and Im, and K <d^2>
//   cycles 2..U+1  UE u = cycle-2: ue_idx = u selects z_u and d_u^2 (driven by
//                  the caller combinationally); x_u and rho_u are registered
//                  and x_valid/x_idx flag them the next cycle
//   cycle U+2      x_valid for the last UE
//   cycle U+3      done: alpha_mean = <alpha> driven combinationally
// Inputs must be stable from start to done.  The per-UE sequential schedule,
// the real/imag pair of units and the (1+w)^-1 form with a single Newton step
// are the published design's.  Clamping a negative v_z - v_r to zero (alpha
// = 0), computing K (v_z - v_r) once per iteration instead of per UE, and all
// formats are this design's choices.  B = 4U is assumed (beta = 1/4).
module mean_var_est
  import nope_pkg::*;
#(
  parameter int U = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [NW-1:0]        rnorm,
  input  logic [SW-1:0]        vz_re,
  input  logic [SW-1:0]        vz_im,
  input  logic [DW+7:0]        d2_sum,
  output logic [$clog2(U)-1:0] ue_idx,
  input  v_t                   z_u,
  input  logic [DW-1:0]        d2_u,
  output logic                 x_valid,
  output logic [$clog2(U)-1:0] x_idx,
  output v_t                   x_u,
  output logic [SW-1:0]        rho_u,
  output logic                 done,
  output logic [AW-1:0]        alpha_mean
);

  localparam int UW  = $clog2(U);
  localparam int LEN = U + 4;
  localparam int CNW = $clog2(LEN);
  localparam int RHO_SHIFT = $clog2(2 * NBLK * NBLK * U);  // 2B/beta = 2 B^2/U

  logic [CNW-1:0]      cnt, c;
  logic                active, act;
  logic [SW-1:0]       vr, den, k_inv, k_q, dre_q, dim_q, qre_q, qim_q, kd_q;
  logic [SW-1:0]       d2mean_s, d2mean_q;
  logic [SW-1:0]       w_re, w_im, opw_re, opw_im;
  logic [AF:0]         inv_re, inv_im;
  logic [AW-1:0]       a_re, a_im;
  logic [AW+UW-1:0]    asum;

  assign act = start | active;
  assign c   = start ? '0 : cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
    end else if (act) begin
      if (c == CNW'(LEN - 1)) begin
        active <= 1'b0;
        cnt    <= '0;
      end else begin
        active <= 1'b1;
        cnt    <= c + 1'b1;
      end
    end
  end

  // cycle 0: v_r, <d^2>, K
  always_comb begin
    vr       = sat_s((128'(rnorm) << (SF - NF)) >> BETA_HALF_SHIFT);
    d2mean_s = SW'(d2_sum >> UW);                    // DF fraction bits
    den      = sat_s((128'(vr) * 128'(d2mean_s)) >> DF);
  end

  recip_nr #(.IW(SW), .IF(SF), .OW(SW), .OF(SF)) u_rk (.a(den), .y(k_inv));

  // per UE: w, (1+w)^-1, alpha
  assign ue_idx = UW'(c - CNW'(2));
  always_comb begin
    w_re   = sat_s((128'(qre_q) * 128'(d2_u)) >> DF);
    w_im   = sat_s((128'(qim_q) * 128'(d2_u)) >> DF);
    opw_re = sat_s(128'(w_re) + (128'(1) << SF));
    opw_im = sat_s(128'(w_im) + (128'(1) << SF));
  end

  recip_nr #(.IW(SW), .IF(SF), .OW(AF+1), .OF(AF)) u_rre (.a(opw_re), .y(inv_re));
  recip_nr #(.IW(SW), .IF(SF), .OW(AF+1), .OF(AF)) u_rim (.a(opw_im), .y(inv_im));

  assign a_re = AW'(1 << AF) - AW'(inv_re);
  assign a_im = AW'(1 << AF) - AW'(inv_im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_valid <= 1'b0;
      x_idx   <= '0;
    end else begin
      x_valid <= act && c >= CNW'(2) && c < CNW'(U + 2);
      x_idx   <= ue_idx;
    end
  end

  // datapath registers (no reset needed: every value is written before use)
  always_ff @(posedge clk) begin
    if (act && c == '0) begin
      k_q      <= k_inv;
      d2mean_q <= d2mean_s;
      dre_q    <= (vz_re > vr) ? vz_re - vr : '0;
      dim_q    <= (vz_im > vr) ? vz_im - vr : '0;
      asum     <= '0;
    end
    if (act && c == CNW'(1)) begin
      qre_q <= sat_s((128'(dre_q) * 128'(k_q)) >> SF);
      qim_q <= sat_s((128'(dim_q) * 128'(k_q)) >> SF);
      kd_q  <= sat_s((128'(k_q) * 128'(d2mean_q)) >> DF);
    end
    if (act && c >= CNW'(2) && c < CNW'(U + 2)) begin
      x_u.re <= sat_v((80'(z_u.re) * 80'($signed({1'b0, a_re}))) >>> AF);
      x_u.im <= sat_v((80'(z_u.im) * 80'($signed({1'b0, a_im}))) >>> AF);
      rho_u  <= sat_s(((128'(kd_q) * 128'(d2_u)) << RHO_SHIFT) >> DF);
      asum   <= asum + (AW+UW)'(a_re) + (AW+UW)'(a_im);
    end
  end

  assign done       = act && c == CNW'(LEN - 1);
  assign alpha_mean = AW'(asum >> UW);

endmodule
