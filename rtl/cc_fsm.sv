// cc_fsm: switch-independent congestion control driven by received PFC frames.
//
// Instead of pausing the flow on a PFC frame, the sending rate is lowered and
// then recovered, so the switch queue stays in use. Six phases, a..f of the
// paper's state diagram:
//   a STABLE     steady running. PFC -> b. After t4 without PFC -> e.
//   b PFC_RESP   on entry TR := CR, CR := CR/2, t1 restarts. Each further PFC
//                halves CR again and restarts t1. t1 expires -> c.
//   c FAST_REC   every t3 without PFC: CR := (CR+TR)/2; after the 5th speed-up -> a.
//                PFC -> d.
//   d FR_PFC     on entry TR := 7/8 CR, CR := 3/4 CR, t1 restarts. Each further
//                PFC: CR := 3/4 CR, t1 restarts. t1 expires -> c.
//   e INC_EXPL   every t5 without PFC: CR += 1 Gbps. PFC: undo one step -> f.
//   f INC_GUESS  t6 without PFC -> a. PFC: TR := CR, CR := CR/2 -> b.
// A PFC frame arriving within t2 of the last one acted on is a duplicate and is
// ignored in every phase. All of this, and t1..t6 (50, 10, 11, 200, 40, 20 us)
// and the 1 Gbps step, are the paper's. The clock-cycle conversion (250 MHz core
// clock), the ceiling at the line rate, the floor MIN_RATE, the rounding down of
// the fractions and the treatment of the duplicate window as global are this
// design's choices.
//
// Interface: pfc (one-cycle pulse per received PFC frame), init_rate (rate taken
// at reset, Mb/s), rate (current rate CR in Mb/s, to the token bucket), phase.
module cc_fsm #(
  parameter int unsigned RATE_W    = 20,
  parameter int unsigned LINE_RATE = 100000,  // Mb/s, 100 GbE
  parameter int unsigned STEP      = 1000,    // Mb/s, increment exploration step
  parameter int unsigned MIN_RATE  = 1000,    // Mb/s
  parameter int unsigned SPEEDUPS  = 5,
  parameter int unsigned T1 = 12500,          // 50 us at 250 MHz
  parameter int unsigned T2 = 2500,           // 10 us
  parameter int unsigned T3 = 2750,           // 11 us
  parameter int unsigned T4 = 50000,          // 200 us
  parameter int unsigned T5 = 10000,          // 40 us
  parameter int unsigned T6 = 5000            // 20 us
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              pfc,
  input  logic [RATE_W-1:0] init_rate,
  output logic [RATE_W-1:0] rate,
  output logic [RATE_W-1:0] target_rate,
  output logic [2:0]        phase,
  output logic              pfc_accepted,
  output logic              pfc_duplicate
);
  typedef enum logic [2:0] {
    ST_A_STABLE   = 3'd0,
    ST_B_PFC_RESP = 3'd1,
    ST_C_FAST_REC = 3'd2,
    ST_D_FR_PFC   = 3'd3,
    ST_E_INC_EXPL = 3'd4,
    ST_F_INC_GUESS= 3'd5
  } cc_state_e;

  localparam int unsigned TW = 32;

  cc_state_e         state;
  logic [RATE_W-1:0] cr, tr;
  logic [TW-1:0]     timer;       // phase timer (t1, t3, t4, t5, t6)
  logic [TW-1:0]     dup_timer;   // time since last accepted PFC, saturating at T2
  logic [2:0]        speedups;

  assign rate          = cr;
  assign target_rate   = tr;
  assign phase         = state;
  assign pfc_duplicate = pfc && (dup_timer < TW'(T2));
  assign pfc_accepted  = pfc && !pfc_duplicate;

  function automatic logic [RATE_W-1:0] floor_rate(input logic [RATE_W+2:0] r);
    if (r < (RATE_W+3)'(MIN_RATE)) return RATE_W'(MIN_RATE);
    return r[RATE_W-1:0];
  endfunction

  logic [RATE_W+2:0] cr_x;
  assign cr_x = {3'b000, cr};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_A_STABLE;
      cr        <= init_rate;
      tr        <= init_rate;
      timer     <= '0;
      dup_timer <= TW'(T2);
      speedups  <= '0;
    end else begin
      timer <= timer + 1'b1;
      if (dup_timer < TW'(T2)) dup_timer <= dup_timer + 1'b1;
      if (pfc_accepted) dup_timer <= '0;

      unique case (state)
        ST_A_STABLE: begin
          if (pfc_accepted) begin
            tr    <= cr;
            cr    <= floor_rate(cr_x >> 1);
            timer <= '0;
            state <= ST_B_PFC_RESP;
          end else if (timer >= TW'(T4 - 1)) begin
            timer <= '0;
            state <= ST_E_INC_EXPL;
          end
        end
        ST_B_PFC_RESP: begin
          if (pfc_accepted) begin
            cr    <= floor_rate(cr_x >> 1);
            timer <= '0;
          end else if (timer >= TW'(T1 - 1)) begin
            timer    <= '0;
            speedups <= '0;
            state    <= ST_C_FAST_REC;
          end
        end
        ST_C_FAST_REC: begin
          if (pfc_accepted) begin
            tr    <= floor_rate((cr_x * 7) >> 3);
            cr    <= floor_rate((cr_x * 3) >> 2);
            timer <= '0;
            state <= ST_D_FR_PFC;
          end else if (timer >= TW'(T3 - 1)) begin
            timer    <= '0;
            cr       <= floor_rate((cr_x + {3'b000, tr}) >> 1);
            speedups <= speedups + 1'b1;
            if (speedups == 3'(SPEEDUPS - 1)) state <= ST_A_STABLE;
          end
        end
        ST_D_FR_PFC: begin
          if (pfc_accepted) begin
            cr    <= floor_rate((cr_x * 3) >> 2);
            timer <= '0;
          end else if (timer >= TW'(T1 - 1)) begin
            timer    <= '0;
            speedups <= '0;
            state    <= ST_C_FAST_REC;
          end
        end
        ST_E_INC_EXPL: begin
          if (pfc_accepted) begin
            cr    <= floor_rate(cr_x - (RATE_W+3)'(STEP));
            timer <= '0;
            state <= ST_F_INC_GUESS;
          end else if (timer >= TW'(T5 - 1)) begin
            timer <= '0;
            if (cr_x + (RATE_W+3)'(STEP) <= (RATE_W+3)'(LINE_RATE))
              cr <= cr + RATE_W'(STEP);
            else
              cr <= RATE_W'(LINE_RATE);
          end
        end
        ST_F_INC_GUESS: begin
          if (pfc_accepted) begin
            tr    <= cr;
            cr    <= floor_rate(cr_x >> 1);
            timer <= '0;
            state <= ST_B_PFC_RESP;
          end else if (timer >= TW'(T6 - 1)) begin
            timer <= '0;
            state <= ST_A_STABLE;
          end
        end
        default: state <= ST_A_STABLE;
      endcase
    end
  end

endmodule
