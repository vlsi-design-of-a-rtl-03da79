// norm_z_tb: self-checking test of NormZ.  Random z vectors and gains d^2 are
// fed one UE per cycle for U = 16 UEs; the weighted norms of Re{z} and Im{z}
// and the sum of d^2 are compared with integer sums.  An idle cycle between
// vectors must not disturb the results.
module norm_z_tb;
  import nope_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          en, clr;
  v_t            z_in;
  logic [DW-1:0] d2_in;
  logic [SW-1:0] vz_re, vz_im;
  logic [DW+7:0] d2_sum;
  int checks = 0, failures = 0;

  norm_z dut (.*);

  initial begin
    #500000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input longint got, input longint expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 12) $display("%s: got %0d exp %0d", what, got, expv);
    end
  endtask

  initial begin
    en = 0; clr = 0; z_in = '0; d2_in = '0;
    @(negedge clk);
    for (int s = 0; s < 100; s++) begin
      longint er, ei, ed;
      er = 0; ei = 0; ed = 0;
      for (int u = 0; u < 16; u++) begin
        longint zr, zi;
        z_in.re = VW'($urandom); z_in.im = VW'($urandom);
        d2_in = DW'($urandom);
        zr = z_in.re; zi = z_in.im;
        er += zr * zr * longint'(d2_in);
        ei += zi * zi * longint'(d2_in);
        ed += longint'(d2_in);
        en = 1; clr = (u == 0);
        @(negedge clk);
      end
      en = 0;
      @(negedge clk);
      chk(longint'(vz_re), er, "vz_re");
      chk(longint'(vz_im), ei, "vz_im");
      chk(longint'(d2_sum), ed, "d2_sum");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
