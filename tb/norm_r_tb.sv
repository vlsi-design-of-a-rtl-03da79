// norm_r_tb: self-checking test of NormR.  Sequences of 16 random residual
// entries are fed one per cycle; after each sequence the squared norm is
// compared with sum(Re^2 + Im^2) computed in the testbench.
module norm_r_tb;
  import nope_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;

  logic          en, clr;
  v_t            r_in;
  logic [NW-1:0] nrm;
  int   checks = 0, failures = 0;

  norm_r dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 0; r_in = '0;
    @(negedge clk);
    for (int s = 0; s < 200; s++) begin
      longint expv;
      expv = 0;
      for (int i = 0; i < 16; i++) begin
        longint re, im;
        r_in.re = (s == 3) ? -16'sd32768 : VW'($urandom);
        r_in.im = (s == 3) ? -16'sd32768 : VW'($urandom);
        re = r_in.re; im = r_in.im;
        expv += re * re + im * im;
        en  = 1;
        clr = (i == 0);
        @(negedge clk);
      end
      en = 0;
      // an idle cycle must not change the result
      @(negedge clk);
      checks++;
      if (longint'(nrm) != expv) begin
        failures++;
        if (failures < 10) $display("mismatch s=%0d got %0d exp %0d", s, nrm, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
