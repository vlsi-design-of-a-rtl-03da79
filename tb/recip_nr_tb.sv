// recip_nr_tb: self-checking test of the LUT + Newton-Raphson reciprocal in
// the two configurations used by the estimation unit: a wide fixed-point
// reciprocal (SF in, SF out) over many octaves, and 1/(1+w) for w >= 0 with a
// 16-fraction-bit result.  The result is compared with 1/a computed in real
// arithmetic; the relative error must stay below 2^-13 plus half an output
// LSB.  Zero input and overflow must saturate to all ones.
module recip_nr_tb;
  logic [55:0] a1, y1, a2;
  logic [16:0] y2;
  int checks = 0, failures = 0;

  recip_nr #(.IW(56), .IF(24), .OW(56), .OF(24)) dut1 (.a(a1), .y(y1));
  recip_nr #(.IW(56), .IF(24), .OW(17), .OF(16)) dut2 (.a(a2), .y(y2));

  task automatic check(input real got, input real expv, input real lsb, input string what);
    real err;
    err = got - expv;
    if (err < 0) err = -err;
    checks++;
    if (err > expv / 8192.0 + lsb) begin
      failures++;
      if (failures < 10) $display("%s: got %g exp %g", what, got, expv);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a2 = 56'd1 << 24;
    a1 = 56'd1 << 24;
    #1;
    // wide reciprocal: inputs spread over 2^-8 .. 2^20
    for (int n = 0; n < 3000; n++) begin
      int e;
      real av;
      e  = 16 + ($urandom % 29);
      a1 = (56'(1) << e) | (56'({$urandom, $urandom}) & ((56'(1) << e) - 1));
      #1;
      av = real'(a1) / 16777216.0;
      check(real'(y1) / 16777216.0, 1.0 / av, 1.0 / 16777216.0, "wide");
    end
    // 1/(1+w), w >= 0
    for (int n = 0; n < 3000; n++) begin
      real av;
      a2 = (56'd1 << 24) + (56'({$urandom, $urandom}) >> ($urandom % 40 + 16));
      #1;
      av = real'(a2) / 16777216.0;
      check(real'(y2) / 65536.0, 1.0 / av, 1.0 / 65536.0, "alpha");
    end
    // powers of two (Newton-Raphson approaches 1/m from below)
    a2 = 56'd1 << 24; #1;
    check(real'(y2) / 65536.0, 1.0, 1.0 / 65536.0, "1/1");
    a1 = 56'd1 << 26; #1;
    check(real'(y1) / 16777216.0, 0.25, 1.0 / 16777216.0, "1/4");
    // saturation
    a1 = '0; #1;
    checks++; if (y1 != '1) begin failures++; $display("1/0 = %h", y1); end
    a1 = 56'd1; #1;   // 1/2^-24 = 2^24 needs 48 bits: fits
    check(real'(y1) / 16777216.0, 16777216.0, 1.0, "1/lsb");
    a2 = 56'd1 << 10; #1;   // 1/2^-14 does not fit 17 bits
    checks++; if (y2 != '1) begin failures++; $display("sat = %h", y2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
