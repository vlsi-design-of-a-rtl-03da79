// nope_top_tb: end-to-end test of the NOPE equalizer at its default size
// (B = 64 antennas, U = 16 users, two interleaved problem slots).
//
// Each round generates, per slot, a Rayleigh-fading channel with per-user
// large-scale gains, transmit symbols (BPSK, 16-QAM or 256-QAM) and complex
// Gaussian noise; quantizes H to Q1.10 and y to 6.4 bits; computes the
// column gains d^2 and d^-2 (the preprocessing that lies outside the
// equalizer) and loads everything.  Both slots are started together, so the
// MVU and EU work on different problems in the same phase.  The results are
// compared with a floating-point model of the robust NOPE iteration run on
// the same quantized inputs: z within 0.06 + 3% and rho within 5%; the
// hard decisions of z must equal the transmitted symbols.  Latency is checked:
// z_valid is high exactly (2 tmax - 1) phases after the cycle of the slot's
// first MVU start, i.e. in the first cycle after its last MVU phase, and
// rho_valid one phase later.  Mechanisms counted (each must occur): interleaved
// phases (MVU and EU busy at once), first-iteration phases (x = 0), clamped
// variance estimates (alpha = 0, BPSK imaginary part), slot reload while the
// other slot runs, and results of both slots.
module nope_top_tb;
  import nope_pkg::*;
  localparam int U = 16;
  localparam int B = 64;
  localparam int PHASE = 2 * U + 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 rst_n;
  logic                 ld_h_en, ld_slot, ld_y_en, start, start_slot;
  logic [3:0]           ld_col, tmax;
  h_t                   ld_hcol [B];
  logic [DW-1:0]        ld_d2, ld_dinv2;
  y_t                   ld_y    [B];
  logic [1:0]           ready;
  logic                 z_valid, z_slot, rho_valid, rho_slot;
  v_t                   z       [U];
  logic [SW-1:0]        rho     [U];

  nope_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // per slot problem data (real values of the quantized inputs)
  real Hr [2][B][U], Hi [2][B][U], yr [2][B], yi [2][B], d2 [2][U], di2 [2][U];
  real sr [2][U], si [2][U];
  int  tm [2];
  real zr_ref [2][U], zi_ref [2][U], rho_ref [2][U];
  // results
  v_t            z_got   [2][U];
  logic [SW-1:0] rho_got [2][U];
  longint        z_cyc [2], rho_cyc [2], first_mvu_cyc [2];
  int            got_z [2], got_rho [2];
  // mechanism counters
  int n_interleaved = 0, n_first = 0, n_clamp = 0, n_reload = 0, n_results = 0;

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  function automatic real qnt(input real v, input int fb, input int wb);
    real s, mx;
    s  = real'(longint'(1) << fb);
    mx = real'((longint'(1) << (wb - 1)) - 1);
    v  = v * s;
    v  = (v >= 0.0) ? real'(longint'(v + 0.5)) : -real'(longint'(-v + 0.5));
    if (v > mx) v = mx;
    if (v < -mx - 1.0) v = -mx - 1.0;
    return v / s;
  endfunction

  // symbol levels: BPSK (mod 1) +-1; 16-QAM (mod 4) {+-1,+-3}/2; 256-QAM (mod 8) {+-1..+-15}/4
  function automatic real level(input int m, input int idx);
    case (m)
      1: return (idx % 2) ? 1.0 : -1.0;
      4: return real'(2 * (idx % 4) - 3) / 2.0;
      default: return real'(2 * (idx % 16) - 15) / 4.0;
    endcase
  endfunction

  function automatic real decide(input int m, input real v);
    real best, bd, d;
    int n;
    n = (m == 1) ? 2 : (m == 4) ? 4 : 16;
    best = level(m, 0); bd = 1e9;
    for (int i = 0; i < n; i++) begin
      d = v - level(m, i);
      if (d < 0) d = -d;
      if (d < bd) begin bd = d; best = level(m, i); end
    end
    return best;
  endfunction

  task automatic make_problem(input int s, input int m, input real snr_db, input bit nonuni);
    real g [U], n0, es, p;
    es = 0.0;
    for (int u = 0; u < U; u++) begin
      g[u] = nonuni ? 0.6 + 1.0 * real'($urandom % 1000) / 1000.0 : 1.0;
      sr[s][u] = level(m, int'($urandom % 16));
      si[s][u] = (m == 1) ? 0.0 : level(m, int'($urandom % 16));
    end
    for (int b = 0; b < B; b++)
      for (int u = 0; u < U; u++) begin
        Hr[s][b][u] = qnt(g[u] * gauss() / $sqrt(2.0 * B), HF, HW);
        Hi[s][b][u] = qnt(g[u] * gauss() / $sqrt(2.0 * B), HF, HW);
      end
    p = 0.0;
    for (int b = 0; b < B; b++) begin
      real ar, ai;
      ar = 0; ai = 0;
      for (int u = 0; u < U; u++) begin
        ar += Hr[s][b][u] * sr[s][u] - Hi[s][b][u] * si[s][u];
        ai += Hr[s][b][u] * si[s][u] + Hi[s][b][u] * sr[s][u];
      end
      yr[s][b] = ar; yi[s][b] = ai;
      p += ar * ar + ai * ai;
    end
    n0 = p / B / $pow(10.0, snr_db / 10.0);
    for (int b = 0; b < B; b++) begin
      yr[s][b] = qnt(yr[s][b] + $sqrt(n0 / 2.0) * gauss(), YF, YW);
      yi[s][b] = qnt(yi[s][b] + $sqrt(n0 / 2.0) * gauss(), YF, YW);
    end
    for (int u = 0; u < U; u++) begin
      real a;
      a = 0;
      for (int b = 0; b < B; b++) a += Hr[s][b][u] * Hr[s][b][u] + Hi[s][b][u] * Hi[s][b][u];
      d2[s][u]  = qnt(a, DF, DW + 1);
      di2[s][u] = qnt(1.0 / d2[s][u], DF, DW + 1);
    end
  endtask

  // floating-point robust NOPE on the quantized inputs
  task automatic reference(input int s);
    real xr [U], xi [U], rr [B], ri [B], rpr [B], rpi [B], am, vr, vzr, vzi, d2m, kk;
    am = 0.0;
    for (int u = 0; u < U; u++) begin xr[u] = 0; xi[u] = 0; end
    for (int b = 0; b < B; b++) begin rpr[b] = 0; rpi[b] = 0; end
    d2m = 0;
    for (int u = 0; u < U; u++) d2m += d2[s][u] / U;
    for (int t = 1; t <= tm[s]; t++) begin
      vr = 0;
      for (int b = 0; b < B; b++) begin
        real ar, ai;
        ar = 0; ai = 0;
        for (int u = 0; u < U; u++) begin
          ar += Hr[s][b][u] * xr[u] - Hi[s][b][u] * xi[u];
          ai += Hr[s][b][u] * xi[u] + Hi[s][b][u] * xr[u];
        end
        rr[b] = yr[s][b] - ar + am / 8.0 * rpr[b];
        ri[b] = yi[s][b] - ai + am / 8.0 * rpi[b];
        vr += (rr[b] * rr[b] + ri[b] * ri[b]) / 8.0;
      end
      vzr = 0; vzi = 0;
      for (int u = 0; u < U; u++) begin
        real ar, ai;
        ar = 0; ai = 0;
        for (int b = 0; b < B; b++) begin
          ar += Hr[s][b][u] * rr[b] + Hi[s][b][u] * ri[b];
          ai += Hr[s][b][u] * ri[b] - Hi[s][b][u] * rr[b];
        end
        zr_ref[s][u] = xr[u] + di2[s][u] * ar;
        zi_ref[s][u] = xi[u] + di2[s][u] * ai;
        vzr += d2[s][u] * zr_ref[s][u] * zr_ref[s][u];
        vzi += d2[s][u] * zi_ref[s][u] * zi_ref[s][u];
      end
      kk = 1.0 / (vr * d2m);
      am = 0;
      for (int u = 0; u < U; u++) begin
        real w, ar, ai;
        w  = kk * d2[s][u] * ((vzr > vr) ? vzr - vr : 0.0); ar = w / (1.0 + w);
        w  = kk * d2[s][u] * ((vzi > vr) ? vzi - vr : 0.0); ai = w / (1.0 + w);
        xr[u] = ar * zr_ref[s][u];
        xi[u] = ai * zi_ref[s][u];
        am += (ar + ai) / U;
        rho_ref[s][u] = 2.0 * B * 4.0 * kk * d2m * d2[s][u];
      end
      for (int b = 0; b < B; b++) begin rpr[b] = rr[b]; rpi[b] = ri[b]; end
    end
  endtask

  task automatic load(input int s);
    while (!ready[s]) @(negedge clk);
    if (!ready[1 - s]) n_reload++;
    for (int u = 0; u < U; u++) begin
      for (int b = 0; b < B; b++) begin
        ld_hcol[b].re = HW'(longint'(Hr[s][b][u] * 1024.0));
        ld_hcol[b].im = HW'(longint'(Hi[s][b][u] * 1024.0));
      end
      ld_d2    = DW'(longint'(d2[s][u] * 256.0));
      ld_dinv2 = DW'(longint'(di2[s][u] * 256.0));
      ld_col = 4'(u); ld_slot = 1'(s); ld_h_en = 1;
      @(negedge clk);
    end
    ld_h_en = 0;
    for (int b = 0; b < B; b++) begin
      ld_y[b].re = YW'(longint'(yr[s][b] * 16.0));
      ld_y[b].im = YW'(longint'(yi[s][b] * 16.0));
    end
    ld_y_en = 1; ld_slot = 1'(s);
    @(negedge clk);
    ld_y_en = 0;
  endtask

  task automatic go(input int s);
    start = 1; start_slot = 1'(s); tmax = 4'(tm[s]);
    got_z[s] = 0; got_rho[s] = 0; first_mvu_cyc[s] = -1;
    @(negedge clk);
    start = 0;
  endtask

  task automatic check_slot(input int s, input int m, input string name);
    int sym_err, z_bad, r_bad;
    sym_err = 0; z_bad = 0; r_bad = 0;
    for (int u = 0; u < U; u++) begin
      real zr, zi, er, ei, rh;
      zr = real'(z_got[s][u].re) / 256.0;
      zi = real'(z_got[s][u].im) / 256.0;
      er = zr - zr_ref[s][u]; if (er < 0) er = -er;
      ei = zi - zi_ref[s][u]; if (ei < 0) ei = -ei;
      if (er > 0.06 + 0.03 * (zr_ref[s][u] < 0 ? -zr_ref[s][u] : zr_ref[s][u])) z_bad++;
      if (ei > 0.06 + 0.03 * (zi_ref[s][u] < 0 ? -zi_ref[s][u] : zi_ref[s][u])) z_bad++;
      if (decide(m, zr) != sr[s][u]) sym_err++;
      if (m != 1 && decide(m, zi) != si[s][u]) sym_err++;
      rh = real'(rho_got[s][u]) / 16777216.0;
      er = rh - rho_ref[s][u]; if (er < 0) er = -er;
      if (er > 0.05 * rho_ref[s][u]) r_bad++;
      if (u == 0)
        $display("%s slot %0d: z0 = (%f,%f) ref (%f,%f) sent (%f,%f), rho0 = %f (ref %f)", name, s,
                 zr, zi, zr_ref[s][u], zi_ref[s][u], sr[s][u], si[s][u], rh, rho_ref[s][u]);
    end
    chk(got_z[s] == 1 && got_rho[s] == 1, $sformatf("%s: one z and one rho result", name));
    chk(z_bad == 0, $sformatf("%s: %0d z entries off the reference", name, z_bad));
    chk(r_bad == 0, $sformatf("%s: %0d rho entries off the reference", name, r_bad));
    chk(sym_err == 0, $sformatf("%s: %0d symbol errors", name, sym_err));
    chk(z_cyc[s] - first_mvu_cyc[s] == longint'((2 * tm[s] - 1) * PHASE),
        $sformatf("%s: z latency %0d", name, z_cyc[s] - first_mvu_cyc[s]));
    chk(rho_cyc[s] - z_cyc[s] == PHASE, $sformatf("%s: rho after z %0d", name, rho_cyc[s] - z_cyc[s]));
  endtask

  // result capture and mechanism counters
  always @(posedge clk) begin
    if (rst_n) begin
      if (z_valid) begin
        z_got[z_slot] <= z;
        z_cyc[z_slot] <= cyc;
        got_z[z_slot] <= got_z[z_slot] + 1;
        n_results++;
      end
      if (rho_valid) begin
        rho_got[rho_slot] <= rho;
        rho_cyc[rho_slot] <= cyc;
        got_rho[rho_slot] <= got_rho[rho_slot] + 1;
      end
      if (dut.u_ctrl.mvu_start && dut.u_ctrl.eu_start) n_interleaved++;
      if (dut.u_ctrl.mvu_start && dut.u_ctrl.mvu_first) begin
        n_first++;
        if (first_mvu_cyc[dut.u_ctrl.mvu_slot] < 0) first_mvu_cyc[dut.u_ctrl.mvu_slot] <= cyc;
      end
      // alpha clamped to zero: v_z - v_r <= 0 for the real or imaginary part
      if (dut.u_eu.u_mve.act && dut.u_eu.u_mve.c == 1 &&
          (dut.u_eu.u_mve.dre_q == '0 || dut.u_eu.u_mve.dim_q == '0)) n_clamp++;
    end
  end

  task automatic round(input int m0, input int t0, input real snr0, input bit nu0,
                       input int m1, input int t1, input real snr1, input bit nu1,
                       input string name0, input string name1);
    tm[0] = t0; tm[1] = t1;
    make_problem(0, m0, snr0, nu0);
    make_problem(1, m1, snr1, nu1);
    reference(0);
    reference(1);
    load(0);
    load(1);
    go(0);
    go(1);
    while (got_rho[0] == 0 || got_rho[1] == 0) @(negedge clk);
    repeat (2) @(negedge clk);
    check_slot(0, m0, name0);
    check_slot(1, m1, name1);
  endtask

  initial begin
    rst_n = 0; ld_h_en = 0; ld_y_en = 0; start = 0; start_slot = 0; tmax = 0;
    ld_slot = 0; ld_col = 0; ld_d2 = 0; ld_dinv2 = 0;
    foreach (ld_hcol[b]) ld_hcol[b] = '0;
    foreach (ld_y[b]) ld_y[b] = '0;
    got_z = '{0, 0}; got_rho = '{0, 0};
    first_mvu_cyc = '{-1, -1};
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    round(4, 5, 30.0, 1'b1, 1, 5, 15.0, 1'b1, "16-QAM t=5", "BPSK t=5");
    round(8, 7, 40.0, 1'b0, 4, 7, 30.0, 1'b1, "256-QAM t=7", "16-QAM t=7");
    // slot 0 is reloaded and restarted while slot 1 is still running
    tm[1] = 7;
    make_problem(1, 4, 30.0, 1'b1);
    reference(1);
    load(1);
    go(1);
    tm[0] = 3;
    make_problem(0, 1, 15.0, 1'b0);
    reference(0);
    repeat (PHASE * 3) @(negedge clk);
    load(0);
    go(0);
    while (got_rho[0] == 0 || got_rho[1] == 0) @(negedge clk);
    repeat (2) @(negedge clk);
    check_slot(1, 4, "16-QAM t=7 (overlapped)");
    check_slot(0, 1, "BPSK t=3 (reloaded)");

    $display("interleaved phases %0d, first iterations %0d, clamped estimates %0d, reloads %0d, results %0d",
             n_interleaved, n_first, n_clamp, n_reload, n_results);
    chk(n_interleaved > 0, "interleaving never happened");
    chk(n_first == 6, "first-iteration phases");
    chk(n_clamp > 0, "no clamped variance estimate");
    chk(n_reload > 0, "no reload during a run");
    chk(n_results == 6, "number of z results");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
