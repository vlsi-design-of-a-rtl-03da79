// mvu_tb: self-checking test of the matrix-vector unit (B = 64, U = 16).
// Two slots are loaded with random H, y and d^-2.  Several phases are run per
// slot (the first with first = 1, i.e. x = 0 and <alpha> = 0); for each, z and
// ||r||^2 are compared with an integer model that forms r = y - Hx +
// <alpha> r/8 row by row and z = x + d^-2 (H^H r) with the full 64-row sum.
// The phase length is checked too: out_valid must come exactly 2U+3 cycles
// after start (16 cycles H x, 16 cycles H^H r, 2 accumulation cycles, plus
// the x load and the residual update), and only once.
module mvu_tb;
  import nope_pkg::*;
  localparam int U = 16;
  localparam int B = 64;
  localparam int NS = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic            rst_n;
  logic            ld_h_en, ld_y_en, start, first;
  logic [0:0]      ld_slot, slot;
  logic [3:0]      ld_col;
  h_t              ld_hcol [B];
  logic [DW-1:0]   ld_dinv2;
  y_t              ld_y    [B];
  v_t              x       [U];
  logic [AW-1:0]   alpha_mean;
  logic            busy, out_valid;
  v_t              z       [U];
  logic [NW-1:0]   rnorm;

  int checks = 0, failures = 0;
  longint Hr [NS][B][U], Hi [NS][B][U], yr [NS][B], yi [NS][B], dv [NS][U];
  longint rr [NS][B], ri [NS][B];

  mvu #(.U(U), .NS(NS)) dut (.*);

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint sat16(input longint v);
    if (v > 32767) return 32767;
    if (v < -32768) return -32768;
    return v;
  endfunction

  task automatic chk(input longint got, input longint expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 12) $display("%s: got %0d exp %0d", what, got, expv);
    end
  endtask

  initial begin
    rst_n = 0; ld_h_en = 0; ld_y_en = 0; start = 0; first = 0; slot = 0;
    ld_slot = 0; ld_col = 0; ld_dinv2 = 0; alpha_mean = 0;
    foreach (x[i]) x[i] = '0;
    foreach (ld_hcol[i]) ld_hcol[i] = '0;
    foreach (ld_y[i]) ld_y[i] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < NS; s++) begin
      for (int u = 0; u < U; u++) begin
        for (int b = 0; b < B; b++) begin
          // entries of about CN(0, 1/B) scale, Q1.10
          ld_hcol[b].re = HW'($signed($urandom) >>> 24);
          ld_hcol[b].im = HW'($signed($urandom) >>> 24);
          Hr[s][b][u] = ld_hcol[b].re; Hi[s][b][u] = ld_hcol[b].im;
        end
        ld_dinv2 = DW'(128 + $urandom % 512);
        dv[s][u] = ld_dinv2;
        ld_h_en = 1; ld_slot = 1'(s); ld_col = 4'(u);
        @(negedge clk);
      end
      ld_h_en = 0;
      for (int b = 0; b < B; b++) begin
        ld_y[b].re = YW'($urandom); ld_y[b].im = YW'($urandom);
        yr[s][b] = ld_y[b].re; yi[s][b] = ld_y[b].im;
      end
      ld_y_en = 1;
      @(negedge clk);
      ld_y_en = 0;
    end

    for (int it = 0; it < 3; it++) begin
      for (int s = 0; s < NS; s++) begin
        longint xr [U], xi [U], hxr, hxi, sr, si, nrm, am;
        int lat;
        slot = 1'(s);
        first = (it == 0);
        alpha_mean = AW'($urandom % (2 << AF));
        for (int u = 0; u < U; u++) begin
          x[u].re = VW'($signed($urandom) >>> 20);
          x[u].im = VW'($signed($urandom) >>> 20);
          xr[u] = first ? 0 : x[u].re; xi[u] = first ? 0 : x[u].im;
        end
        am = first ? 0 : alpha_mean;
        // model
        nrm = 0;
        for (int b = 0; b < B; b++) begin
          hxr = 0; hxi = 0;
          for (int u = 0; u < U; u++) begin
            hxr += Hr[s][b][u] * xr[u] - Hi[s][b][u] * xi[u];
            hxi += Hr[s][b][u] * xi[u] + Hi[s][b][u] * xr[u];
          end
          rr[s][b] = sat16(yr[s][b] * 16 - (hxr >>> (CF - VF)) + ((am * rr[s][b]) >>> (AF + 3)));
          ri[s][b] = sat16(yi[s][b] * 16 - (hxi >>> (CF - VF)) + ((am * ri[s][b]) >>> (AF + 3)));
          nrm += rr[s][b] * rr[s][b] + ri[s][b] * ri[s][b];
        end
        start = 1;
        @(negedge clk);
        start = 0;
        lat = 1;
        while (!out_valid && lat < 200) begin
          @(negedge clk);
          lat++;
        end
        // after each negedge the unit is in cycle lat, counted from start (cycle 0)
        chk(lat, 2 * U + 3, "out_valid cycle");
        for (int u = 0; u < U; u++) begin
          sr = 0; si = 0;
          for (int b = 0; b < B; b++) begin
            sr += Hr[s][b][u] * rr[s][b] + Hi[s][b][u] * ri[s][b];
            si += Hr[s][b][u] * ri[s][b] - Hi[s][b][u] * rr[s][b];
          end
          chk(z[u].re, sat16(xr[u] + ((dv[s][u] * sr) >>> (DF + CF - VF))), "z.re");
          chk(z[u].im, sat16(xi[u] + ((dv[s][u] * si) >>> (DF + CF - VF))), "z.im");
        end
        chk(longint'(rnorm), nrm, "rnorm");
        @(negedge clk);
        chk(out_valid, 0, "single out_valid");
        chk(busy, 0, "idle after phase");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
