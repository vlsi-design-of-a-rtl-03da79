// wsq_mac_tb: self-checking test of the weighted square MAC: random signed
// inputs and unsigned weights accumulated over random runs, compared with an
// integer model every cycle (including full-scale negative inputs).
module wsq_mac_tb;
  logic clk = 0;
  always #5 clk = ~clk;

  logic               en, clr;
  logic signed [15:0] a;
  logic        [15:0] w;
  logic        [55:0] acc_q;
  int   checks = 0, failures = 0;
  longint unsigned expv;

  wsq_mac #(.AIW(16), .WIW(16), .OW(56)) dut (.*);

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; clr = 0; a = 0; w = 0; expv = 0;
    @(negedge clk);
    for (int n = 0; n < 2000; n++) begin
      longint av;
      a   = (n % 97 == 5) ? -16'sd32768 : 16'($urandom);
      w   = 16'($urandom);
      en  = ($urandom % 8) != 0 || n == 0;
      clr = ($urandom % 17) == 0 || n == 0;
      av  = a;
      if (en) expv = (clr ? 0 : expv) + longint'(av * av) * longint'(w);
      @(negedge clk);
      checks++;
      if (longint'(acc_q) != expv) begin
        failures++;
        if (failures < 10) $display("mismatch n=%0d got %0d exp %0d", n, acc_q, expv);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
