// tas_scheduler: time-aware frame queue scheduler of one port.
//
// What it does. The scheduler decides from which TX queue the port may start
// its next frame. With CTRL.enable clear it is the plain round-robin
// scheduler over all queues. With it set, it walks a schedule table that
// software loads through the SCR and TQCR registers:
//   * entry i (SCR[i]) names time-aware queue q = TAQ_BASE + SCR[i];
//   * that queue owns the port for TQCR[SCR[i]] microseconds (its timeslot);
//     no other queue may transmit in that time, and if q is empty the port
//     stays idle for the whole slot (the time-aware priority is enforced);
//   * in the last GUARD_US microseconds of a slot no frame may start, so a
//     frame is never cut by the switch to the next queue (the guardband);
//   * after entry NSLOTS-1 the walk loops back to entry 0. If the window
//     CYCLE_US is longer than the sum of the slots, the rest of the window is
//     free time in which the queues outside the time-aware group are served
//     round-robin (again with the guardband before the window ends).
// The loop, the per-queue duration in microseconds, the guardband, the idle
// slot of an empty queue and round-robin in free time follow the paper. The
// guardband being a microsecond register, its use in free time, the window
// register and the skipping of zero-length entries are this design's choices.
//
// How. A small state machine (RR / LOAD / SLOT / FREE) holds the entry index,
// the microseconds left in the slot and the microseconds since the window
// began; all three move on the 1 us pulse from the PTP clock. LOAD takes one
// clock to fetch the next entry, skipping entries whose TQCR is zero.
// Round-robin picks the first eligible queue after the last one served.
//
// Interface and timing. grant_valid/grant_queue are combinational from the
// registered state and q_nonempty; a grant is taken when grant_ready is high
// in the same cycle (the transmit engine is idle), and the scheduler only
// decides the start of frames. status: [31:30] phase (0 RR, 1 LOAD, 2 SLOT,
// 3 FREE), [29] guardband active, [23:16] entry index, [15:0] microseconds
// left in the slot (or elapsed in the window outside a slot).
module tas_scheduler
  import tas_pkg::*;
#(
  parameter int unsigned NUM_TXQ   = NUM_TXQ_DEF,
  parameter int unsigned NUM_TAQ   = NUM_TAQ_DEF,
  parameter int unsigned NUM_SLOTS = NUM_SLOTS_DEF,
  localparam int unsigned QW = $clog2(NUM_TXQ),
  localparam int unsigned TW = $clog2(NUM_TAQ),
  localparam int unsigned SW = $clog2(NUM_SLOTS)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               us_tick,
  // configuration (from the register file)
  input  logic               cfg_en,
  input  logic [SW:0]        cfg_nslots,
  input  logic [US_W-1:0]    cfg_cycle_us,
  input  logic [US_W-1:0]    cfg_guard_us,
  input  logic [QW-1:0]      cfg_taq_base,
  input  logic [TW-1:0]      cfg_scr  [NUM_SLOTS],
  input  logic [US_W-1:0]    cfg_tqcr [NUM_TAQ],
  // queues and transmit engine
  input  logic [NUM_TXQ-1:0] q_nonempty,
  output logic               grant_valid,
  output logic [QW-1:0]      grant_queue,
  input  logic               grant_ready,
  // observation
  output logic               slot_start,   // pulse: a timeslot begins
  output logic               in_guard,
  output logic [1:0]         phase,
  output logic [31:0]        status
);

  typedef enum logic [1:0] {PH_RR = 2'd0, PH_LOAD = 2'd1, PH_SLOT = 2'd2, PH_FREE = 2'd3} phase_e;

  phase_e          phase_q;
  logic [SW:0]     idx_q;       // schedule entry index (one bit wider than needed)
  logic [US_W-1:0] rem_q;       // microseconds left in the slot
  logic [US_W-1:0] elapsed_q;   // microseconds since the window began
  logic [QW-1:0]   rr_ptr_q;    // last queue served round-robin

  // ---- entry lookup -------------------------------------------------------
  logic [TW-1:0]   cur_taq;
  logic [US_W-1:0] cur_dur;
  logic [QW-1:0]   slot_queue;
  logic            idx_in_list;

  always_comb begin
    idx_in_list = (idx_q < cfg_nslots) && (idx_q < (SW+1)'(NUM_SLOTS));
    cur_taq     = idx_in_list ? cfg_scr[idx_q[SW-1:0]] : '0;
    cur_dur     = cfg_tqcr[cur_taq];
    slot_queue  = cfg_taq_base + QW'(cur_taq);
  end

  // ---- which queues belong to the time-aware group --------------------------
  logic [NUM_TXQ-1:0] ta_mask;
  always_comb begin
    for (int q = 0; q < NUM_TXQ; q++) begin
      logic [QW-1:0] off;
      off = QW'(q) - cfg_taq_base;
      ta_mask[q] = ({1'b0, off} < (QW+1)'(NUM_TAQ));
    end
  end

  // ---- guardband --------------------------------------------------------------
  logic [US_W-1:0] free_left;
  always_comb begin
    free_left = (cfg_cycle_us > elapsed_q) ? cfg_cycle_us - elapsed_q : '0;
    case (phase_q)
      PH_SLOT: in_guard = (rem_q <= cfg_guard_us);
      PH_FREE: in_guard = (free_left <= cfg_guard_us);
      default: in_guard = 1'b0;
    endcase
  end

  // ---- round-robin pick -------------------------------------------------------
  logic [NUM_TXQ-1:0] rr_mask;
  logic               rr_found;
  logic [QW-1:0]      rr_pick;

  always_comb begin
    rr_mask  = (phase_q == PH_FREE) ? (q_nonempty & ~ta_mask) : q_nonempty;
    rr_found = 1'b0;
    rr_pick  = '0;
    for (int i = 1; i <= NUM_TXQ; i++) begin
      int unsigned idx;
      idx = int'(rr_ptr_q) + i;
      if (idx >= NUM_TXQ) idx = idx - NUM_TXQ;
      if (!rr_found && rr_mask[idx]) begin
        rr_found = 1'b1;
        rr_pick  = QW'(idx);
      end
    end
  end

  // ---- grant ----------------------------------------------------------------
  always_comb begin
    grant_valid = 1'b0;
    grant_queue = '0;
    case (phase_q)
      PH_RR: begin
        grant_valid = rr_found;
        grant_queue = rr_pick;
      end
      PH_SLOT: begin
        grant_valid = q_nonempty[slot_queue] && !in_guard;
        grant_queue = slot_queue;
      end
      PH_FREE: begin
        grant_valid = rr_found && !in_guard;
        grant_queue = rr_pick;
      end
      default: ;
    endcase
  end

  // ---- state ------------------------------------------------------------------
  logic [US_W-1:0] elapsed_nx;
  assign elapsed_nx = elapsed_q + US_W'(us_tick);

  always_ff @(posedge clk) begin
    if (rst) begin
      phase_q    <= PH_RR;
      idx_q      <= '0;
      rem_q      <= '0;
      elapsed_q  <= '0;
      rr_ptr_q   <= QW'(NUM_TXQ - 1);
      slot_start <= 1'b0;
    end else begin
      slot_start <= 1'b0;
      if (grant_valid && grant_ready && phase_q != PH_SLOT) rr_ptr_q <= rr_pick;

      if (!cfg_en) begin
        phase_q   <= PH_RR;
        idx_q     <= '0;
        elapsed_q <= '0;
      end else begin
        case (phase_q)
          PH_RR: begin
            // schedule switched on: start a window at entry 0
            phase_q   <= PH_LOAD;
            idx_q     <= '0;
            elapsed_q <= '0;
          end
          PH_LOAD: begin
            elapsed_q <= elapsed_nx;
            if (!idx_in_list) begin
              if (elapsed_nx < cfg_cycle_us) begin
                phase_q <= PH_FREE;
              end else begin
                idx_q     <= '0;
                elapsed_q <= '0;
              end
            end else if (cur_dur == '0) begin
              idx_q <= idx_q + 1'b1;
            end else begin
              rem_q      <= cur_dur;
              phase_q    <= PH_SLOT;
              slot_start <= 1'b1;
            end
          end
          PH_SLOT: begin
            elapsed_q <= elapsed_nx;
            if (us_tick) begin
              if (rem_q <= 1) begin
                idx_q   <= idx_q + 1'b1;
                phase_q <= PH_LOAD;
              end else begin
                rem_q <= rem_q - 1'b1;
              end
            end
          end
          PH_FREE: begin
            elapsed_q <= elapsed_nx;
            if (elapsed_nx >= cfg_cycle_us) begin
              idx_q     <= '0;
              elapsed_q <= '0;
              phase_q   <= PH_LOAD;
            end
          end
        endcase
      end
    end
  end

  assign phase  = phase_q;
  assign status = {phase_q, in_guard, 5'd0, 8'(idx_q),
                   (phase_q == PH_SLOT) ? 16'(rem_q) : 16'(elapsed_q)};

  // A time-aware slot only ever grants its own queue.
  a_slot_owner: assert property (@(posedge clk) disable iff (rst)
      (phase_q == PH_SLOT && grant_valid) |-> (grant_queue == slot_queue));
  // In free time no queue of the time-aware group is granted.
  a_free_not_ta: assert property (@(posedge clk) disable iff (rst)
      (phase_q == PH_FREE && grant_valid) |-> !ta_mask[grant_queue]);

endmodule
