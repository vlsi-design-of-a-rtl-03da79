// eu_tb: self-checking test of the estimation unit (U = 16, two slots).
// d^2 is loaded for both slots; then random z vectors and residual norms are
// processed alternately on both slots.  x, <alpha> and rho are compared with a
// real-valued model of lines 8-16 of the robust NOPE iteration (within a few
// LSBs plus 0.2%), and out_valid must come exactly 2U+3 cycles after start
// (16 cycles NormZ, 16 cycles per-UE estimation, plus setup), only once.
module eu_tb;
  import nope_pkg::*;
  localparam int U = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          rst_n, ld_d_en, start;
  logic [0:0]    ld_slot, slot;
  logic [3:0]    ld_col;
  logic [DW-1:0] ld_d2;
  v_t            z [U];
  logic [NW-1:0] rnorm;
  logic          busy, out_valid;
  v_t            x [U];
  logic [AW-1:0] alpha_mean;
  logic [SW-1:0] rho [U];

  longint dv [2][U];
  int checks = 0, failures = 0;

  eu #(.U(U)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic near(input real got, input real expv, input real tol, input string what);
    real e;
    e = got - expv;
    if (e < 0) e = -e;
    checks++;
    if (e > tol) begin
      failures++;
      if (failures < 12) $display("%s: got %f exp %f", what, got, expv);
    end
  endtask

  initial begin
    rst_n = 0; ld_d_en = 0; start = 0; ld_slot = 0; slot = 0; ld_col = 0; ld_d2 = 0; rnorm = 0;
    foreach (z[u]) z[u] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 2; s++)
      for (int u = 0; u < U; u++) begin
        ld_d_en = 1; ld_slot = 1'(s); ld_col = 4'(u);
        ld_d2 = DW'(64 + $urandom % 960);
        dv[s][u] = ld_d2;
        @(negedge clk);
      end
    ld_d_en = 0;
    for (int p = 0; p < 40; p++) begin
      int s, cyc;
      longint sre, sim, sd;
      real vr, vzr, vzi, d2m, kk, dr, di, asum, w, ar, ai;
      s = p % 2;
      sre = 0; sim = 0; sd = 0;
      for (int u = 0; u < U; u++) begin
        z[u].re = VW'($signed($urandom) >>> 21);
        z[u].im = VW'($signed($urandom) >>> 21);
        sre += longint'(z[u].re) * longint'(z[u].re) * dv[s][u];
        sim += longint'(z[u].im) * longint'(z[u].im) * dv[s][u];
        sd  += dv[s][u];
      end
      vzr = real'(sre) / 16777216.0;
      vzi = real'(sim) / 16777216.0;
      vr  = (vzr + vzi) / 4.0 / (1.0 + real'($urandom % 40));
      rnorm = NW'(longint'(vr * 8.0 * 65536.0));
      vr  = real'(rnorm) / 65536.0 / 8.0;
      d2m = real'(sd >> 4) / 256.0;
      kk  = 1.0 / (vr * d2m);
      dr  = (vzr > vr) ? vzr - vr : 0.0;
      di  = (vzi > vr) ? vzi - vr : 0.0;
      slot = 1'(s);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!out_valid && cyc < 200) begin @(negedge clk); cyc++; end
      near(real'(cyc), real'(2 * U + 3), 0.1, "out_valid cycle");
      asum = 0;
      for (int u = 0; u < U; u++) begin
        real dd;
        dd = real'(dv[s][u]) / 256.0;
        w  = kk * dd * dr; ar = w / (1.0 + w);
        w  = kk * dd * di; ai = w / (1.0 + w);
        asum += ar + ai;
        near(real'(x[u].re) / 256.0, ar * real'(z[u].re) / 256.0, 0.01 + 0.002 * real'(z[u].re < 0 ? -z[u].re : z[u].re) / 256.0, "x.re");
        near(real'(x[u].im) / 256.0, ai * real'(z[u].im) / 256.0, 0.01 + 0.002 * real'(z[u].im < 0 ? -z[u].im : z[u].im) / 256.0, "x.im");
        near(real'(rho[u]) / 16777216.0, 512.0 * kk * d2m * dd, 0.002 * 512.0 * kk * d2m * dd + 1e-6, "rho");
      end
      near(real'(alpha_mean) / 65536.0, asum / U, 0.002, "alpha_mean");
      @(negedge clk);
      near(real'(out_valid), 0.0, 0.1, "single out_valid");
      near(real'(busy), 0.0, 0.1, "idle after phase");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
