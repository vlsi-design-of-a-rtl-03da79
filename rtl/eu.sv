// eu: estimation unit.  For the problem slot it is given in a phase, it turns
// the MVU's z and ||r||^2 into the next posterior mean x, the Onsager constant
// <alpha> and the post-equalization SNRs rho (lines 8-16 of the robust NOPE
// iteration).
//
// Timing, counted from the cycle in which start is high:
//   cycles 0..U-1     NormZ: z_u and d_u^2 of UE u = cycle enter the two MACs
//   cycles U..2U+3    mean/variance estimation (mean_var_est), one UE per
//                     cycle; x[] and rho[] are written entry by entry
//   cycle 2U+3        out_valid: x[], rho[] complete, alpha_mean driven
// That is 2U+4 cycles, the same phase length as the MVU's.
// z and rnorm must stay stable for the whole phase.  d_u^2 is kept per slot;
// it is written one UE at a time through ld_d_en.
// NormZ over 16 cycles followed by the sequential per-UE estimation is the
// published design's; the d^2 storage and the control are this design's.
module eu
  import nope_pkg::*;
#(
  parameter int U  = 16,
  parameter int NS = NSLOT
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // loading of d_u^2
  input  logic                  ld_d_en,
  input  logic [$clog2(NS)-1:0] ld_slot,
  input  logic [$clog2(U)-1:0]  ld_col,
  input  logic [DW-1:0]         ld_d2,
  // phase control and inputs
  input  logic                  start,
  input  logic [$clog2(NS)-1:0] slot,
  input  v_t                    z     [U],
  input  logic [NW-1:0]         rnorm,
  // results
  output logic                  busy,
  output logic                  out_valid,
  output v_t                    x     [U],
  output logic [AW-1:0]         alpha_mean,
  output logic [SW-1:0]         rho   [U]
);

  localparam int UW  = $clog2(U);
  localparam int LEN = 2 * U + 4;
  localparam int CNW = $clog2(LEN);

  logic [CNW-1:0]        cnt, c;
  logic                  active, act;
  logic [$clog2(NS)-1:0] slot_q, sl;
  logic [DW-1:0]         d2mem [NS][U];
  logic [UW-1:0]         nz_idx, ue_idx, x_idx;
  logic                  nz_en;
  logic [SW-1:0]         vz_re, vz_im, rho_u;
  logic [DW+7:0]         d2_sum;
  logic                  x_valid;
  v_t                    x_u;

  assign act  = start | active;
  assign c    = start ? '0 : cnt;
  assign sl   = start ? slot : slot_q;
  assign busy = act;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0;
      cnt    <= '0;
      slot_q <= '0;
    end else if (act) begin
      slot_q <= sl;
      if (c == CNW'(LEN - 1)) begin
        active <= 1'b0;
        cnt    <= '0;
      end else begin
        active <= 1'b1;
        cnt    <= c + 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (ld_d_en) d2mem[ld_slot][ld_col] <= ld_d2;
  end

  assign nz_en  = act && c < CNW'(U);
  assign nz_idx = UW'(c);

  norm_z u_nz (
    .clk,
    .en    (nz_en),
    .clr   (c == '0),
    .z_in  (z[nz_idx]),
    .d2_in (d2mem[sl][nz_idx]),
    .vz_re,
    .vz_im,
    .d2_sum
  );

  mean_var_est #(.U(U)) u_mve (
    .clk,
    .rst_n,
    .start     (act && c == CNW'(U)),
    .rnorm,
    .vz_re,
    .vz_im,
    .d2_sum,
    .ue_idx,
    .z_u       (z[ue_idx]),
    .d2_u      (d2mem[sl][ue_idx]),
    .x_valid,
    .x_idx,
    .x_u,
    .rho_u,
    .done      (out_valid),
    .alpha_mean
  );

  always_ff @(posedge clk) begin
    if (x_valid) begin
      x[x_idx]   <= x_u;
      rho[x_idx] <= rho_u;
    end
  end

endmodule
