// nope_ctrl: iteration controller with coarse-grained pipeline interleaving.
//
// Time is divided into phases of PHASE cycles.  In every phase the MVU works
// on one problem slot and the EU on the other; the roles swap each phase
// (parity par: MVU serves slot par, EU serves slot !par).  A slot runs
//   MVU(1), EU(1), MVU(2), EU(2), ..., MVU(tmax), EU(tmax)
// so a problem takes 2*tmax phases and two problems are in flight at once.
// Per slot state: IDLE (ready for loading), PEND (start accepted, waiting for
// its MVU turn), MVU, EU.  All transitions happen at the phase boundary.
// Outputs valid during the whole phase: *_act, *_slot, *_first, *_last; the
// start pulses are high in the first cycle of a phase only.  A start request
// (start, start_slot, tmax >= 1) is accepted only for an IDLE slot.
// Splitting each iteration into an MVU and an EU phase of equal length and
// interleaving two problems is the published design's; the slot states, the
// start protocol and the run-time tmax input are this design's.
// Reset is asynchronous and active low; the assertion at the end also uses
// rst_n (disable iff), which is why lint reports rst_n as both synchronous
// and asynchronous.  No logic samples rst_n synchronously.
module nope_ctrl #(
  parameter int PHASE = 36,
  parameter int TW    = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic          start_slot,
  input  logic [TW-1:0] tmax,
  output logic [1:0]    ready,
  output logic          phase_first,
  output logic          phase_last,
  output logic          mvu_start,
  output logic          mvu_act,
  output logic          mvu_slot,
  output logic          mvu_first,
  output logic          mvu_last,
  output logic          eu_start,
  output logic          eu_act,
  output logic          eu_slot,
  output logic          eu_last,
  output logic [1:0]    slot_done
);

  typedef enum logic [1:0] {S_IDLE, S_PEND, S_MVU, S_EU} slot_st_e;

  localparam int PW = $clog2(PHASE);

  logic [PW-1:0] pc;
  logic          par;
  slot_st_e      st   [2];
  logic [TW-1:0] t    [2];
  logic [TW-1:0] tmx  [2];

  assign phase_first = pc == '0;
  assign phase_last  = pc == PW'(PHASE - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pc  <= '0;
      par <= 1'b0;
      for (int s = 0; s < 2; s++) begin
        st[s]  <= S_IDLE;
        t[s]   <= '0;
        tmx[s] <= '0;
      end
      slot_done <= '0;
    end else begin
      slot_done <= '0;
      if (start && st[start_slot] == S_IDLE) begin
        st[start_slot]  <= S_PEND;
        tmx[start_slot] <= tmax;
      end
      if (phase_last) begin
        pc  <= '0;
        par <= ~par;
        for (int s = 0; s < 2; s++) begin
          if (1'(s) == ~par) begin
            // next phase is this slot's MVU turn
            if (st[s] == S_PEND) begin
              st[s] <= S_MVU;
              t[s]  <= TW'(1);
            end else if (st[s] == S_EU) begin
              if (t[s] >= tmx[s]) begin
                st[s]        <= S_IDLE;
                slot_done[s] <= 1'b1;
              end else begin
                st[s] <= S_MVU;
                t[s]  <= t[s] + 1'b1;
              end
            end
          end else if (st[s] == S_MVU) begin
            st[s] <= S_EU;
          end
        end
      end else begin
        pc <= pc + 1'b1;
      end
    end
  end

  assign mvu_slot  = par;
  assign mvu_act   = st[par] == S_MVU;
  assign mvu_first = t[par] == TW'(1);
  assign mvu_last  = t[par] >= tmx[par];
  assign mvu_start = mvu_act && phase_first;
  assign eu_slot   = ~par;
  assign eu_act    = st[~par] == S_EU;
  assign eu_last   = t[~par] >= tmx[~par];
  assign eu_start  = eu_act && phase_first;

  for (genvar s = 0; s < 2; s++) begin : g_rdy
    assign ready[s] = st[s] == S_IDLE;
  end

  // a start request must name an idle slot and at least one iteration
  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> (st[start_slot] == S_IDLE && tmax != '0));

endmodule
