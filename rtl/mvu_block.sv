// mvu_block: MVU-m, one N x N row block A of the channel matrix H with N
// complex MAC units (one per row), following Cannon's algorithm.
//
// Storage: lane i (row i of A) keeps its own N-word memory; word k of lane i
// holds A[i][(i+k) mod N], i.e. every row is cyclically shifted by its index,
// so in every cycle all lanes read the same word k without contention.  One
// memory set per problem slot (NS slots).  A column u of A is written in one
// cycle: lane i stores it at word (u-i) mod N.  N must be a power of two.
//
// A x (op OP_LOADX then N x OP_HX, k = 0..N-1): the pre-shift register xs is
// loaded with x; in step k lane i multiplies A[i][(i+k)] by xs[i] = x[i+k] and
// accumulates into its own register, and xs rotates by one.
// Residual (OP_RES): r_i = y_i - (A x)_i + (beta/2)<alpha> r_i(old); the new r
// is stored for the slot and loaded into xs.
// A^H r (N x OP_HHR, k = 0..N-1): xs stays put; lane i multiplies
// conj(A[i][(i+k)]) by r_i and adds it to the partial sum taken over from lane
// i+1 (post-shift), so lane i holds output (i+k) after step k and output j
// ends in lane j-1, which hhr[] undoes.  NormR accumulates |r_i|^2 of entry k
// in step k.  hhr and rnorm are valid the cycle after the last OP_HHR step.
// The storage scheme, the pre/post-shift and the 16-cycle steps are the
// published design's; the op encoding, the slot memories and the residual
// datapath placement are this design's.
module mvu_block
  import nope_pkg::*;
#(
  parameter int N  = 16,
  parameter int NS = NSLOT
) (
  input  logic                    clk,
  // loading
  input  logic                    ld_h_en,
  input  logic [$clog2(NS)-1:0]   ld_slot,
  input  logic [$clog2(N)-1:0]    ld_col,
  input  h_t                      ld_hcol [N],
  input  logic                    ld_y_en,
  input  y_t                      ld_y    [N],
  // operation
  input  mvu_op_e                 op,
  input  logic [$clog2(N)-1:0]    k,
  input  logic [$clog2(NS)-1:0]   slot,
  input  v_t                      x       [N],
  input  logic [AW-1:0]           alpha_mean,
  // results
  output acc_t                    hhr     [N],
  output logic [NW-1:0]           rnorm,
  output v_t                      r_out   [N]
);

  localparam int KW = $clog2(N);

  h_t   hmem [NS][N][N];   // [slot][word][lane]
  y_t   ymem [NS][N];
  v_t   rmem [NS][N];
  v_t   xs   [N];          // pre-shift register
  acc_t acc_q [N];
  acc_t acc_in [N];
  v_t   r_new [N];

  initial assert (N == (1 << KW)) else $error("mvu_block: N must be a power of two");

  // column write: lane i takes column u at word (u - i) mod N
  always_ff @(posedge clk) begin
    if (ld_h_en)
      for (int i = 0; i < N; i++) hmem[ld_slot][ld_col - KW'(i)][i] <= ld_hcol[i];
    if (ld_y_en)
      for (int i = 0; i < N; i++) ymem[ld_slot][i] <= ld_y[i];
  end

  // residual update
  always_comb begin
    for (int i = 0; i < N; i++) begin
      logic signed [79:0] yv, hx, on_re, on_im;
      yv = 80'(ymem[slot][i].re) <<< (VF - YF);
      hx = 80'(acc_q[i].re) >>> (CF - VF);
      on_re = (80'($signed({1'b0, alpha_mean})) * 80'(rmem[slot][i].re)) >>> (AF + BETA_HALF_SHIFT);
      r_new[i].re = sat_v(yv - hx + on_re);
      yv = 80'(ymem[slot][i].im) <<< (VF - YF);
      hx = 80'(acc_q[i].im) >>> (CF - VF);
      on_im = (80'($signed({1'b0, alpha_mean})) * 80'(rmem[slot][i].im)) >>> (AF + BETA_HALF_SHIFT);
      r_new[i].im = sat_v(yv - hx + on_im);
    end
  end

  // pre-shift register and residual storage
  always_ff @(posedge clk) begin
    unique case (op)
      OP_LOADX: xs <= x;
      OP_HX:    for (int i = 0; i < N; i++) xs[i] <= xs[(i + 1) % N];
      OP_RES: begin
        xs <= r_new;
        rmem[slot] <= r_new;
      end
      default: ;
    endcase
  end

  // MAC lanes with post-shift accumulator exchange
  for (genvar i = 0; i < N; i++) begin : g_lane
    assign acc_in[i] = (op == OP_HHR) ? acc_q[(i + 1) % N] : acc_q[i];
    cmac u_mac (
      .clk,
      .en    (op == OP_HX || op == OP_HHR),
      .clr   (k == '0),
      .conj_a(op == OP_HHR),
      .a     (hmem[slot][k][i]),
      .b     (xs[i]),
      .acc_in(acc_in[i]),
      .acc_q (acc_q[i])
    );
    assign hhr[i] = acc_q[(i + 1) % N];
  end

  norm_r u_normr (
    .clk,
    .en  (op == OP_HHR),
    .clr (k == '0),
    .r_in(xs[k]),
    .nrm (rnorm)
  );

  assign r_out = xs;

endmodule
