// wsq_mac: real weighted square-accumulate unit, acc <= acc + w * a^2.
//
// Used with w = 1 for the residual norm (NormR) and with w = d_u^2 for the
// weighted norms of Re{z} and Im{z} (NormZ).  a is signed (AIW bits), w
// unsigned (WIW bits), the accumulator unsigned (OW bits) and never wraps in
// the intended use.  clr starts a new sum with the current product; en
// enables the update.  One cycle latency.  The published design names two
// such MACs per norm (real and imaginary part); the widths are this design's.
module wsq_mac #(
  parameter int AIW = 16,
  parameter int WIW = 16,
  parameter int OW  = 56
) (
  input  logic                  clk,
  input  logic                  en,
  input  logic                  clr,
  input  logic signed [AIW-1:0] a,
  input  logic        [WIW-1:0] w,
  output logic        [OW-1:0]  acc_q
);

  logic signed [2*AIW-1:0] sq_s;
  logic [2*AIW+WIW-1:0]    prod;

  always_comb begin
    sq_s = a * a;
    prod = $unsigned(sq_s) * w;
  end

  always_ff @(posedge clk) begin
    if (en) acc_q <= (clr ? '0 : acc_q) + OW'(prod);
  end

endmodule
