// mean_var_est_tb: self-checking test of the mean/variance estimation
// (U = 16).  For random problems (z, d^2, ||r||^2) the testbench computes in
// real arithmetic v_r = ||r||^2/8, K = 1/(v_r <d^2>), alpha = w/(1+w) with
// w = K d^2 max(v_z - v_r, 0), x = alpha z, <alpha> and rho = 512 K <d^2> d^2,
// and compares the unit's fixed-point results within a few LSBs plus 0.1%.
// It checks the schedule: UE u leaves in cycle u+3 after start and done comes
// in cycle U+3.  Cases with v_z < v_r (alpha clamped to 0) are included.
module mean_var_est_tb;
  import nope_pkg::*;
  localparam int U = 16;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          rst_n, start;
  logic [NW-1:0] rnorm;
  logic [SW-1:0] vz_re, vz_im;
  logic [DW+7:0] d2_sum;
  logic [3:0]    ue_idx, x_idx;
  v_t            z_u;
  logic [DW-1:0] d2_u;
  logic          x_valid, done;
  v_t            x_u;
  logic [SW-1:0] rho_u;
  logic [AW-1:0] alpha_mean;

  v_t            zv [U];
  logic [DW-1:0] dv [U];
  int checks = 0, failures = 0, clamped = 0;

  assign z_u  = zv[ue_idx];
  assign d2_u = dv[ue_idx];

  mean_var_est #(.U(U)) dut (.*);

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
    rst_n = 0; start = 0; rnorm = 0; vz_re = 0; vz_im = 0; d2_sum = 0;
    foreach (zv[u]) zv[u] = '0;
    foreach (dv[u]) dv[u] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int p = 0; p < 60; p++) begin
      real vr, d2m, kk, vzr, vzi, dr, di, ar, ai, asum;
      longint sre, sim, sd;
      int cyc;
      sre = 0; sim = 0; sd = 0;
      for (int u = 0; u < U; u++) begin
        zv[u].re = VW'($signed($urandom) >>> 22);
        // every 4th problem: tiny imaginary parts, as for BPSK
        zv[u].im = (p % 4 == 3) ? VW'($signed($urandom) >>> 29) : VW'($signed($urandom) >>> 22);
        dv[u] = DW'(64 + $urandom % 960);
        sre += longint'(zv[u].re) * longint'(zv[u].re) * longint'(dv[u]);
        sim += longint'(zv[u].im) * longint'(zv[u].im) * longint'(dv[u]);
        sd  += longint'(dv[u]);
      end
      vz_re  = SW'(sre);
      vz_im  = SW'(sim);
      d2_sum = (DW+8)'(sd);
      vzr = real'(sre) / 16777216.0;
      vzi = real'(sim) / 16777216.0;
      // v_r between 1/64 and 1/2 of the per-entry z energy level
      vr  = (vzr + vzi) / 2.0 / (2.0 + real'($urandom % 60));
      rnorm = NW'(longint'(vr * 8.0 * 65536.0));
      vr  = real'(rnorm) / 65536.0 / 8.0;
      d2m = real'(sd >> 4) / 256.0;
      kk  = 1.0 / (vr * d2m);
      dr  = (vzr > vr) ? vzr - vr : 0.0;
      di  = (vzi > vr) ? vzi - vr : 0.0;
      if (dr == 0.0 || di == 0.0) clamped++;
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      asum = 0;
      for (int u = 0; u < U; u++) begin
        real w;
        while (!x_valid && cyc < 100) begin @(negedge clk); cyc++; end
        near(real'(cyc), real'(u + 3), 0.1, "x_valid cycle");
        near(real'(x_idx), real'(u), 0.1, "x_idx");
        w  = kk * (real'(dv[u]) / 256.0) * dr;
        ar = w / (1.0 + w);
        w  = kk * (real'(dv[u]) / 256.0) * di;
        ai = w / (1.0 + w);
        asum += ar + ai;
        near(real'(x_u.re) / 256.0, ar * real'(zv[u].re) / 256.0,
             2.0 / 256.0 + 0.001 * real'(zv[u].re < 0 ? -zv[u].re : zv[u].re) / 256.0, "x.re");
        near(real'(x_u.im) / 256.0, ai * real'(zv[u].im) / 256.0,
             2.0 / 256.0 + 0.001 * real'(zv[u].im < 0 ? -zv[u].im : zv[u].im) / 256.0, "x.im");
        near(real'(rho_u) / 16777216.0, 512.0 * kk * d2m * real'(dv[u]) / 256.0,
             0.002 * 512.0 * kk * d2m * real'(dv[u]) / 256.0 + 1e-6, "rho");
        @(negedge clk); cyc++;
      end
      while (!done && cyc < 100) begin @(negedge clk); cyc++; end
      near(real'(cyc), real'(U + 3), 0.1, "done cycle");
      near(real'(alpha_mean) / 65536.0, asum / U, 0.002, "alpha_mean");
    end
    if (clamped == 0) begin
      failures++;
      $display("no clamped case exercised");
    end
    $display("clamped cases: %0d", clamped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
