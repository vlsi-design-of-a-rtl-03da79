// nope_top: robust NOPE (nonparametric equalizer) for a B x U massive MU-MIMO
// uplink, default B = 64 receive antennas and U = 16 users.
//
// The equalizer estimates x from y = H x + n without knowing the signal or
// noise power.  Each iteration has two halves of equal length (PHASE =
// 2U+4 cycles): the matrix-vector unit (mvu) forms the residual r, ||r||^2 and
// z = x + d^-2 o H^H r; the estimation unit (eu) derives from z and ||r||^2 the
// next estimate x, the Onsager constant <alpha> and the per-user SNR rho.  Two
// registers carry z, ||r||^2 from MVU to EU and x, <alpha> back.  Two
// independent problems (slots 0 and 1) are interleaved so that both units are
// busy in every phase; nope_ctrl schedules them.
//
// Interface:
//   loading (slot must be ready): ld_h_en writes column ld_col of H (all B
//   rows, ld_hcol) together with d_u^2 (ld_d2) and d_u^-2 (ld_dinv2) of that
//   user; ld_y_en writes the whole receive vector y.  d^2 and d^-2 are
//   computed outside (column-gain preprocessing).
//   start/start_slot/tmax: start tmax iterations on a loaded slot.
//   z_valid/z_slot/z: final equalizer output z^tmax (one cycle pulse, z held
//   until the next result).  rho_valid/rho_slot/rho: post-equalization SNRs of
//   the last iteration, one phase later.
// A problem takes 2*tmax phases; with both slots busy one result leaves every
// tmax phases on average.  The MVU/EU split, the pipeline registers and the
// interleaving follow the published architecture; the load/start interface
// and all widths other than those of H and y are this design's.  B must be
// 4U (the MVU has four U x U blocks).
// Reset (rst_n) is asynchronous and active low and clears control state only.
// The interface assertions below use rst_n in disable iff, which is why lint
// reports rst_n as both synchronous and asynchronous; no logic samples it
// synchronously.
module nope_top
  import nope_pkg::*;
#(
  parameter int U  = 16,
  parameter int B  = 64,
  parameter int TW = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // loading
  input  logic                 ld_h_en,
  input  logic                 ld_slot,
  input  logic [$clog2(U)-1:0] ld_col,
  input  h_t                   ld_hcol [B],
  input  logic [DW-1:0]        ld_d2,
  input  logic [DW-1:0]        ld_dinv2,
  input  logic                 ld_y_en,
  input  y_t                   ld_y    [B],
  // control
  input  logic                 start,
  input  logic                 start_slot,
  input  logic [TW-1:0]        tmax,
  output logic [1:0]           ready,
  // results
  output logic                 z_valid,
  output logic                 z_slot,
  output v_t                   z       [U],
  output logic                 rho_valid,
  output logic                 rho_slot,
  output logic [SW-1:0]        rho     [U]
);

  localparam int PHASE = phase_len(U);

  initial assert (B == NBLK * U) else $error("nope_top: B must equal 4*U");

  logic          phase_first, phase_last;
  logic          mvu_start, mvu_act, mvu_slot, mvu_first, mvu_last;
  logic          eu_start, eu_act, eu_slot, eu_last;
  logic [1:0]    slot_done;
  logic          mvu_busy, mvu_valid, eu_busy, eu_valid;
  v_t            mvu_z    [U];
  logic [NW-1:0] mvu_rnorm;
  v_t            eu_x     [U];
  logic [AW-1:0] eu_alpha;
  logic [SW-1:0] eu_rho   [U];

  // pipeline registers between the units
  v_t            pz_z     [U];    // MVU -> EU
  logic [NW-1:0] pz_rnorm;
  v_t            px_x     [U];    // EU -> MVU
  logic [AW-1:0] px_alpha;

  nope_ctrl #(.PHASE(PHASE), .TW(TW)) u_ctrl (
    .clk, .rst_n,
    .start, .start_slot, .tmax,
    .ready,
    .phase_first, .phase_last,
    .mvu_start, .mvu_act, .mvu_slot, .mvu_first, .mvu_last,
    .eu_start, .eu_act, .eu_slot, .eu_last,
    .slot_done
  );

  mvu #(.U(U), .NS(NSLOT)) u_mvu (
    .clk, .rst_n,
    .ld_h_en, .ld_slot, .ld_col, .ld_hcol, .ld_dinv2, .ld_y_en, .ld_y,
    .start     (mvu_start),
    .slot      (mvu_slot),
    .first     (mvu_first),
    .x         (px_x),
    .alpha_mean(px_alpha),
    .busy      (mvu_busy),
    .out_valid (mvu_valid),
    .z         (mvu_z),
    .rnorm     (mvu_rnorm)
  );

  eu #(.U(U), .NS(NSLOT)) u_eu (
    .clk, .rst_n,
    .ld_d_en   (ld_h_en),
    .ld_slot, .ld_col,
    .ld_d2,
    .start     (eu_start),
    .slot      (eu_slot),
    .z         (pz_z),
    .rnorm     (pz_rnorm),
    .busy      (eu_busy),
    .out_valid (eu_valid),
    .x         (eu_x),
    .alpha_mean(eu_alpha),
    .rho       (eu_rho)
  );

  always_ff @(posedge clk) begin
    if (mvu_valid) begin
      pz_z     <= mvu_z;
      pz_rnorm <= mvu_rnorm;
    end
    if (eu_valid) begin
      px_x     <= eu_x;
      px_alpha <= eu_alpha;
    end
    if (mvu_valid && mvu_last) z   <= mvu_z;
    if (eu_valid && eu_last)   rho <= eu_rho;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      z_valid   <= 1'b0;
      z_slot    <= 1'b0;
      rho_valid <= 1'b0;
      rho_slot  <= 1'b0;
    end else begin
      z_valid   <= mvu_valid && mvu_last;
      rho_valid <= eu_valid && eu_last;
      if (mvu_valid && mvu_last) z_slot <= mvu_slot;
      if (eu_valid && eu_last)   rho_slot <= eu_slot;
    end
  end

  // the units finish exactly at the end of their phase
  a_mvu_phase: assert property (@(posedge clk) disable iff (!rst_n)
    mvu_valid |-> phase_last);
  a_eu_phase: assert property (@(posedge clk) disable iff (!rst_n)
    eu_valid |-> phase_last);
  // a slot is loaded only while it is idle
  a_load_idle: assert property (@(posedge clk) disable iff (!rst_n)
    (ld_h_en || ld_y_en) |-> ready[ld_slot]);

endmodule
