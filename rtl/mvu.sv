// mvu: matrix-vector unit.  Computes, for one problem slot per phase,
//   r = y - H x + (beta/2) <alpha> r_prev,   ||r||^2,   z = x + d^-2 o (H^H r)
// (lines 5-7 of the robust NOPE iteration) for a B x U channel with B = 4U.
//
// H is split into four U x U row blocks, each handled by an mvu_block (MVU-1
// to MVU-4).  A phase takes phase_len(U) = 2U+4 cycles counted from the
// cycle in which start is high:
//   cycle 0            load x into the pre-shift registers
//   cycles 1..U        H x, one column per cycle
//   cycle U+1          residual update in all blocks
//   cycles U+2..2U+1   H^H r, one step per cycle, NormR in parallel
//   cycle 2U+2         accumulation 1: MVU-1 -> MVU-2, MVU-4 -> MVU-3
//   cycle 2U+3         accumulation 2: MVU-2 -> MVU-3, z = x + d^-2 o sum
// In the last cycle out_valid is high and z and rnorm are driven
// combinationally, to be captured by the MVU->EU pipeline register.  With
// first = 1 (iteration 1) x and <alpha> are taken as zero, so r = y.
// x and alpha_mean must stay stable for the whole phase.
// The four-block split, the 16-cycle matrix-vector steps and the two-cycle
// accumulation order are the published design's; the cycle of the residual
// update, the load ports and the single-cycle z scaling are this design's.
// Each block's r_out port (its shift register after the residual update) is
// not needed here and is left open, so lint reports an empty pin.
module mvu
  import nope_pkg::*;
#(
  parameter int U  = 16,
  parameter int NS = NSLOT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // loading: one column of H (all B rows) and d_u^-2 per cycle, y at once
  input  logic                  ld_h_en,
  input  logic [$clog2(NS)-1:0] ld_slot,
  input  logic [$clog2(U)-1:0]  ld_col,
  input  h_t                    ld_hcol [NBLK*U],
  input  logic [DW-1:0]         ld_dinv2,
  input  logic                  ld_y_en,
  input  y_t                    ld_y    [NBLK*U],
  // phase control
  input  logic                  start,
  input  logic [$clog2(NS)-1:0] slot,
  input  logic                  first,
  input  v_t                    x       [U],
  input  logic [AW-1:0]         alpha_mean,
  // results
  output logic                  busy,
  output logic                  out_valid,
  output v_t                    z       [U],
  output logic [NW-1:0]         rnorm
);

  localparam int PH = phase_len(U);
  localparam int KW = $clog2(U);
  localparam int CW2 = CW + 2;

  logic [$clog2(PH)-1:0]   cnt, c;
  logic                    active, act;
  logic [$clog2(NS)-1:0]   slot_q, sl;
  logic                    first_q, fst;
  mvu_op_e                 op;
  logic [KW-1:0]           k;
  logic [DW-1:0]           dinv2 [NS][U];
  v_t                      xin   [U];
  logic [AW-1:0]           ain;
  acc_t                    hhr   [NBLK][U];
  logic [NW-1:0]           rn    [NBLK];
  logic signed [CW2-1:0]   s2_re [U], s2_im [U], s3_re [U], s3_im [U];
  logic [NW-1:0]           n2, n3;

  // sequencing: start marks cycle 0
  assign act = start | active;
  assign c   = start ? '0 : cnt;
  assign sl  = start ? slot : slot_q;
  assign fst = start ? first : first_q;
  assign busy = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active  <= 1'b0;
      cnt     <= '0;
      slot_q  <= '0;
      first_q <= 1'b0;
    end else if (act) begin
      slot_q  <= sl;
      first_q <= fst;
      if (c == ($clog2(PH))'(PH - 1)) begin
        active <= 1'b0;
        cnt    <= '0;
      end else begin
        active <= 1'b1;
        cnt    <= c + 1'b1;
      end
    end
  end

  always_comb begin
    op = OP_IDLE;
    k  = '0;
    if (act) begin
      if (c == 0) op = OP_LOADX;
      else if (int'(c) <= U) begin
        op = OP_HX;
        k  = KW'(c - 1);
      end else if (int'(c) == U + 1) op = OP_RES;
      else if (int'(c) <= 2 * U + 1) begin
        op = OP_HHR;
        k  = KW'(int'(c) - U - 2);
      end
    end
  end

  for (genvar u = 0; u < U; u++) begin : g_xin
    assign xin[u] = fst ? '0 : x[u];
  end
  assign ain = fst ? '0 : alpha_mean;

  always_ff @(posedge clk) begin
    if (ld_h_en) dinv2[ld_slot][ld_col] <= ld_dinv2;
  end

  for (genvar m = 0; m < NBLK; m++) begin : g_blk
    h_t ld_hcol_m [U];
    y_t ld_y_m    [U];
    for (genvar i = 0; i < U; i++) begin : g_sl
      assign ld_hcol_m[i] = ld_hcol[m * U + i];
      assign ld_y_m[i]    = ld_y[m * U + i];
    end
    mvu_block #(.N(U), .NS(NS)) u_blk (
      .clk,
      .ld_h_en, .ld_slot, .ld_col,
      .ld_hcol   (ld_hcol_m),
      .ld_y_en,
      .ld_y      (ld_y_m),
      .op, .k,
      .slot      (sl),
      .x         (xin),
      .alpha_mean(ain),
      .hhr       (hhr[m]),
      .rnorm     (rn[m]),
      .r_out     ()
    );
  end

  // accumulation cycle 1: MVU-1 and MVU-4 pass to MVU-2 and MVU-3
  always_ff @(posedge clk) begin
    if (act && c == ($clog2(PH))'(2 * U + 2)) begin
      for (int j = 0; j < U; j++) begin
        s2_re[j] <= CW2'(hhr[1][j].re) + CW2'(hhr[0][j].re);
        s2_im[j] <= CW2'(hhr[1][j].im) + CW2'(hhr[0][j].im);
        s3_re[j] <= CW2'(hhr[2][j].re) + CW2'(hhr[3][j].re);
        s3_im[j] <= CW2'(hhr[2][j].im) + CW2'(hhr[3][j].im);
      end
      n2 <= rn[1] + rn[0];
      n3 <= rn[2] + rn[3];
    end
  end

  // accumulation cycle 2: MVU-2 passes to MVU-3; z = x + d^-2 o (H^H r)
  always_comb begin
    for (int j = 0; j < U; j++) begin
      logic signed [79:0] sre, sim, dv;
      dv  = 80'($signed({1'b0, dinv2[sl][j]}));
      sre = 80'(s3_re[j]) + 80'(s2_re[j]);
      sim = 80'(s3_im[j]) + 80'(s2_im[j]);
      z[j].re = sat_v(80'(xin[j].re) + ((dv * sre) >>> (DF + CF - VF)));
      z[j].im = sat_v(80'(xin[j].im) + ((dv * sim) >>> (DF + CF - VF)));
    end
  end
  assign rnorm     = n3 + n2;
  assign out_valid = act && c == ($clog2(PH))'(2 * U + 3);

endmodule
