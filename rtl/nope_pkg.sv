// nope_pkg: number formats, shared types and helper functions of the NOPE
// (nonparametric equalizer) datapath.
//
// All arithmetic is two's-complement fixed point.  The formats of H (sign plus
// 10 fraction bits, entries globally scaled below 1) and of y (6 integer bits,
// sign included, plus 4 fraction bits) follow the published design.  Every
// other width below is a choice of this implementation, picked to leave
// headroom for a 64 x 16 system:
//   x, r, z          : 16 bit, 8 fraction bits
//   d^2, d^-2        : 16 bit unsigned, 8 fraction bits
//   MAC accumulators : 36 bit, 18 fraction bits (product of H and a vector)
//   ||r||^2          : 40 bit unsigned, 16 fraction bits
//   EU scalars       : 56 bit unsigned, 24 fraction bits (v_r, v_z, K, rho)
//   alpha, <alpha>   : 18 bit unsigned, 16 fraction bits
// Narrowing uses truncation (arithmetic shift right) and saturation.
package nope_pkg;

  localparam int HW = 11;  // H: sign + 10 fraction bits
  localparam int HF = 10;
  localparam int YW = 10;  // y: 6 integer (incl. sign) + 4 fraction bits
  localparam int YF = 4;
  localparam int VW = 16;  // x, r, z
  localparam int VF = 8;
  localparam int DW = 16;  // d^2 and d^-2, unsigned
  localparam int DF = 8;
  localparam int CW = 36;  // complex MAC accumulator
  localparam int CF = HF + VF;
  localparam int NW = 40;  // squared residual norm, unsigned
  localparam int NF = 2 * VF;
  localparam int SW = 56;  // estimation-unit scalars, unsigned
  localparam int SF = 24;
  localparam int AW = 18;  // alpha and <alpha>, unsigned, range [0,2)
  localparam int AF = 16;

  // Two independent problems are interleaved between the MVU and the EU.
  localparam int NSLOT = 2;

  // H is split into NBLK row blocks of U x U, one MVU block each (B = NBLK*U).
  // With beta = U/B, the factor beta/2 of the residual update is a right
  // shift by log2(2*NBLK).
  localparam int NBLK = 4;
  localparam int BETA_HALF_SHIFT = $clog2(2 * NBLK);

  // Operation of an MVU block in the current cycle.
  typedef enum logic [2:0] {
    OP_IDLE,   // hold
    OP_LOADX,  // load x into the pre-shift register
    OP_HX,     // one column step of H x, pre-shift register rotates
    OP_RES,    // residual update r = y - Hx + (beta/2)<alpha> r
    OP_HHR     // one step of H^H r, accumulators post-shift
  } mvu_op_e;

  typedef struct packed {
    logic signed [HW-1:0] re;
    logic signed [HW-1:0] im;
  } h_t;

  typedef struct packed {
    logic signed [YW-1:0] re;
    logic signed [YW-1:0] im;
  } y_t;

  typedef struct packed {
    logic signed [VW-1:0] re;
    logic signed [VW-1:0] im;
  } v_t;

  typedef struct packed {
    logic signed [CW-1:0] re;
    logic signed [CW-1:0] im;
  } acc_t;

  // Length of one MVU phase for U x U blocks: load x, U steps of H x, the
  // residual update, U steps of H^H r, two accumulation cycles.  The EU is
  // given the same number of cycles.
  function automatic int phase_len(input int u);
    return 2 * u + 4;
  endfunction

  // Saturate a wide signed value to a VW-bit vector entry.
  function automatic logic signed [VW-1:0] sat_v(input logic signed [79:0] a);
    logic signed [79:0] hi, lo;
    hi = 80'sd1 <<< (VW - 1);
    lo = -hi;
    hi = hi - 80'sd1;
    if (a > hi) return hi[VW-1:0];
    if (a < lo) return lo[VW-1:0];
    return a[VW-1:0];
  endfunction

  // Saturate a wide unsigned value to an SW-bit EU scalar.
  function automatic logic [SW-1:0] sat_s(input logic [127:0] a);
    if (a[127:SW] != '0) return '1;
    return a[SW-1:0];
  endfunction

endpackage
