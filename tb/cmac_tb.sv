// cmac_tb: self-checking test of the complex MAC.  Random H entries and
// vector entries are accumulated over runs of random length, with and
// without conjugation and with the accumulator input taken either from the
// unit's own register or from an external value; every cycle the register is
// compared with an integer model.
module cmac_tb;
  import nope_pkg::*;

  logic clk = 0;
  always #5 clk = ~clk;

  logic en, clr, conj_a;
  h_t   a;
  v_t   b;
  acc_t acc_in, acc_q;
  int   checks = 0, failures = 0;
  longint exp_re, exp_im;

  cmac dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 1; conj_a = 0; a = '0; b = '0; acc_in = '0;
    exp_re = 0; exp_im = 0;
    repeat (2) @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      longint ar, ai, br, bi, base_re, base_im, pr, pi;
      logic ext;
      a.re = HW'($urandom); a.im = HW'($urandom);
      b.re = VW'($urandom); b.im = VW'($urandom);
      en     = ($urandom % 8) != 0;
      clr    = ($urandom % 10) == 0 || n == 0;
      conj_a = $urandom % 2;
      ext    = $urandom % 4 == 0;
      acc_in.re = ext ? CW'(longint'($signed($urandom)) * 3) : acc_q.re;
      acc_in.im = ext ? CW'(longint'($signed($urandom)) * 5) : acc_q.im;
      ar = a.re; ai = a.im; br = b.re; bi = b.im;
      if (conj_a) begin pr = ar*br + ai*bi; pi = ar*bi - ai*br; end
      else        begin pr = ar*br - ai*bi; pi = ar*bi + ai*br; end
      base_re = clr ? 0 : longint'(acc_in.re);
      base_im = clr ? 0 : longint'(acc_in.im);
      if (en) begin
        exp_re = base_re + pr;
        exp_im = base_im + pi;
      end
      @(negedge clk);
      if (n > 0) begin
        checks++;
        if (longint'(acc_q.re) != exp_re || longint'(acc_q.im) != exp_im) begin
          failures++;
          if (failures < 10) $display("mismatch n=%0d got (%0d,%0d) exp (%0d,%0d)", n,
                                      acc_q.re, acc_q.im, exp_re, exp_im);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
