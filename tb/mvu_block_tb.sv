// mvu_block_tb: self-checking test of one Cannon MVU block (N = 16).
// Two slots are loaded column by column with random H blocks and y vectors.
// For each slot and two iterations the testbench drives the op sequence
// LOADX, N x HX, RES, N x HHR and then compares, against a direct
// row/column integer model: the new residual r = y - (A x) + <alpha> r/8,
// A^H r entry by entry, and ||r||^2.  It also checks that the H x part takes
// exactly N steps (the op sequence is N HX steps and the result is complete).
module mvu_block_tb;
  import nope_pkg::*;
  localparam int N = 16;
  localparam int NS = 2;

  logic clk = 0;
  always #5 clk = ~clk;

  logic            ld_h_en, ld_y_en;
  logic [0:0]      ld_slot, slot;
  logic [3:0]      ld_col, k;
  h_t              ld_hcol [N];
  y_t              ld_y    [N];
  mvu_op_e         op;
  v_t              x       [N];
  logic [AW-1:0]   alpha_mean;
  acc_t            hhr     [N];
  logic [NW-1:0]   rnorm;
  v_t              r_out   [N];

  int checks = 0, failures = 0;
  longint Ar [NS][N][N], Ai [NS][N][N], yr [NS][N], yi [NS][N];
  longint rr [NS][N], ri [NS][N];

  mvu_block #(.N(N), .NS(NS)) dut (.*);

  initial begin
    #2000000;
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

  function automatic longint asr(input longint v, input int s);
    return v >>> s;
  endfunction

  task automatic chk(input longint got, input longint expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 12) $display("%s: got %0d exp %0d", what, got, expv);
    end
  endtask

  initial begin
    ld_h_en = 0; ld_y_en = 0; ld_slot = 0; slot = 0; ld_col = 0; k = 0;
    op = OP_IDLE; alpha_mean = 0;
    foreach (x[i]) x[i] = '0;
    foreach (ld_hcol[i]) ld_hcol[i] = '0;
    foreach (ld_y[i]) ld_y[i] = '0;
    @(negedge clk);
    // load both slots
    for (int s = 0; s < NS; s++) begin
      for (int u = 0; u < N; u++) begin
        for (int i = 0; i < N; i++) begin
          ld_hcol[i].re = HW'($urandom); ld_hcol[i].im = HW'($urandom);
          Ar[s][i][u] = ld_hcol[i].re; Ai[s][i][u] = ld_hcol[i].im;
        end
        ld_h_en = 1; ld_slot = 1'(s); ld_col = 4'(u);
        @(negedge clk);
      end
      ld_h_en = 0;
      for (int i = 0; i < N; i++) begin
        ld_y[i].re = YW'($urandom); ld_y[i].im = YW'($urandom);
        yr[s][i] = ld_y[i].re; yi[s][i] = ld_y[i].im;
      end
      ld_y_en = 1;
      @(negedge clk);
      ld_y_en = 0;
    end
    foreach (rr[s, i]) begin rr[s][i] = 0; ri[s][i] = 0; end

    for (int it = 0; it < 3; it++) begin
      for (int s = 0; s < NS; s++) begin
        longint xr [N], xi [N], hxr, hxi, onr, oni, nr, ni, nrm;
        int am;
        slot = 1'(s);
        am = (it == 0) ? 0 : int'($urandom % (2 << AF));
        alpha_mean = AW'(am);
        for (int i = 0; i < N; i++) begin
          // moderate amplitudes, occasionally large ones to reach saturation
          int sh = (it == 2 && i == 3) ? 0 : 4;
          x[i].re = VW'($signed($urandom) >>> (16 + sh));
          x[i].im = VW'($signed($urandom) >>> (16 + sh));
          xr[i] = x[i].re; xi[i] = x[i].im;
        end
        op = OP_LOADX; @(negedge clk);
        for (int kk = 0; kk < N; kk++) begin
          op = OP_HX; k = 4'(kk); @(negedge clk);
        end
        op = OP_RES; k = 0; @(negedge clk);
        // model: residual
        for (int i = 0; i < N; i++) begin
          hxr = 0; hxi = 0;
          for (int j = 0; j < N; j++) begin
            hxr += Ar[s][i][j] * xr[j] - Ai[s][i][j] * xi[j];
            hxi += Ar[s][i][j] * xi[j] + Ai[s][i][j] * xr[j];
          end
          onr = asr(longint'(am) * rr[s][i], AF + 3);
          oni = asr(longint'(am) * ri[s][i], AF + 3);
          rr[s][i] = sat16(yr[s][i] * 16 - asr(hxr, CF - VF) + onr);
          ri[s][i] = sat16(yi[s][i] * 16 - asr(hxi, CF - VF) + oni);
          chk(r_out[i].re, rr[s][i], "r.re");
          chk(r_out[i].im, ri[s][i], "r.im");
        end
        for (int kk = 0; kk < N; kk++) begin
          op = OP_HHR; k = 4'(kk); @(negedge clk);
        end
        op = OP_IDLE;
        nrm = 0;
        for (int j = 0; j < N; j++) begin
          nr = 0; ni = 0;
          for (int i = 0; i < N; i++) begin
            nr += Ar[s][i][j] * rr[s][i] + Ai[s][i][j] * ri[s][i];
            ni += Ar[s][i][j] * ri[s][i] - Ai[s][i][j] * rr[s][i];
          end
          chk(hhr[j].re, nr, "hhr.re");
          chk(hhr[j].im, ni, "hhr.im");
          nrm += rr[s][j] * rr[s][j] + ri[s][j] * ri[s][j];
        end
        chk(longint'(rnorm), nrm, "rnorm");
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
