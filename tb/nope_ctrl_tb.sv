// nope_ctrl_tb: self-checking test of the interleaving controller with a short
// phase (PHASE = 6).  A behavioural reference keeps, per slot, the list of
// expected unit phases: after a start the slot waits for its MVU turn, then
// alternates MVU, EU, ... for 2*tmax phases and becomes ready again.  The
// testbench checks every phase: which slot each unit serves, start pulses
// only in the first cycle, first/last flags, done pulses (first cycle of the
// phase after the last EU phase) and ready.  Both
// slots are run concurrently with different tmax, and again back to back.
module nope_ctrl_tb;
  localparam int PHASE = 6;
  logic clk = 0;
  always #5 clk = ~clk;

  logic       rst_n, start, start_slot;
  logic [3:0] tmax;
  logic [1:0] ready, slot_done;
  logic phase_first, phase_last, mvu_start, mvu_act, mvu_slot, mvu_first, mvu_last;
  logic eu_start, eu_act, eu_slot, eu_last;
  int checks = 0, failures = 0;
  int phase_no = 0;
  // reference: per slot, state (0 idle, 1 pending, 2 mvu, 3 eu), iteration, tmax
  int rs [2], rt [2], rtm [2], jd [2];
  int mvu_phases = 0, eu_phases = 0, both_busy = 0, done_cnt = 0;

  nope_ctrl #(.PHASE(PHASE), .TW(4)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input int got, input int expv, input string what);
    checks++;
    if (got != expv) begin
      failures++;
      if (failures < 12) $display("phase %0d %s: got %0d exp %0d", phase_no, what, got, expv);
    end
  endtask

  task automatic req(input int s, input int tm);
    start = 1; start_slot = 1'(s); tmax = 4'(tm);
    @(negedge clk);
    start = 0;
    rs[s] = 1; rtm[s] = tm;
  endtask

  // reference model of the phase boundary (parity p of the next phase)
  task automatic boundary(input int p);
    for (int s = 0; s < 2; s++) begin
      if (s == p) begin
        if (rs[s] == 1) begin rs[s] = 2; rt[s] = 1; end
        else if (rs[s] == 3) begin
          if (rt[s] >= rtm[s]) begin rs[s] = 0; jd[s] = 1; done_cnt++; end
          else begin rs[s] = 2; rt[s]++; end
        end
      end else if (rs[s] == 2) rs[s] = 3;
    end
  endtask

  initial begin
    rst_n = 0; start = 0; start_slot = 0; tmax = 0;
    rs = '{0, 0}; rt = '{0, 0}; rtm = '{0, 0}; jd = '{0, 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // now in cycle 0 of phase 0 (parity 0)
    fork
      begin
        @(negedge clk);
        req(1, 3);
        req(0, 2);
      end
      begin
        for (int ph = 0; ph < 40; ph++) begin
          int par;
          par = ph % 2;
          phase_no = ph;
          for (int cyc = 0; cyc < PHASE; cyc++) begin
            chk(phase_first, cyc == 0, "phase_first");
            chk(phase_last, cyc == PHASE - 1, "phase_last");
            chk(mvu_slot, par, "mvu_slot");
            chk(eu_slot, 1 - par, "eu_slot");
            if (cyc == PHASE - 1) begin
              chk(mvu_act, rs[par] == 2, "mvu_act");
              chk(eu_act, rs[1-par] == 3, "eu_act");
              if (rs[par] == 2) begin
                chk(mvu_first, rt[par] == 1, "mvu_first");
                chk(mvu_last, rt[par] == rtm[par], "mvu_last");
                mvu_phases++;
                if (rs[1-par] == 3) both_busy++;
              end
              if (rs[1-par] == 3) begin
                chk(eu_last, rt[1-par] == rtm[1-par], "eu_last");
                eu_phases++;
              end
              chk(ready[0], rs[0] == 0, "ready0");
              chk(ready[1], rs[1] == 0, "ready1");
            end
            chk(mvu_start, cyc == 0 && rs[par] == 2, "mvu_start");
            chk(eu_start, cyc == 0 && rs[1-par] == 3, "eu_start");
            if (cyc == PHASE - 1) boundary(1 - par);
            @(negedge clk);
            if (cyc == PHASE - 1) begin
              for (int s = 0; s < 2; s++) begin
                chk(slot_done[s], jd[s], "slot_done");
                jd[s] = 0;
              end
            end
            // restart slot 0 when it has finished once (back-to-back run)
            if (ph == 12 && cyc == 2 && rs[0] == 0) req(0, 4);
            if (ph == 12 && cyc == 2) cyc++;
          end
        end
      end
    join
    // 2*2 + 2*3 + 2*4 = 18 unit phases per unit type / 2 each
    chk(mvu_phases, 2 + 3 + 4, "MVU phases");
    chk(eu_phases, 2 + 3 + 4, "EU phases");
    if (both_busy == 0) begin failures++; $display("interleaving never happened"); end
    chk(done_cnt, 3, "problems finished");
    $display("mvu phases %0d, eu phases %0d, both units busy %0d", mvu_phases, eu_phases, both_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
