// tx_insert: puts a frame pointer into a TX queue chosen by its priority.
//
// The host hands over a frame pointer together with the frame's traffic
// priority (0..7). Each priority owns a range of consecutive TX queues,
// programmed through PRIO_MAP (first queue, number of queues); within its
// range a priority's pointers are spread over the queues in round-robin
// order, one queue per pointer. With one queue per priority (the 1:1
// mapping used with the time-aware group) the priority simply names the
// queue. Inserting pointers into queues by priority and choosing among a
// priority's queues round-robin follow the paper's description of the TX
// side; the range encoding and the strict rotation (a full queue holds the
// next pointer back rather than being skipped, so the order per queue is
// fixed) are this design's choices.
//
// Interface and timing. s_valid/s_ready with s_prio and s_desc: a pointer is
// taken when both are high. push_* goes straight to the TX queue bank
// (combinational, s_ready = push_ready); the round-robin position of the
// priority moves on at the clock edge that takes the pointer.
module tx_insert
  import tas_pkg::*;
#(
  parameter int unsigned NUM_TXQ = NUM_TXQ_DEF,
  localparam int unsigned QW = $clog2(NUM_TXQ),
  localparam int unsigned PW = $clog2(NUM_PRIO)
) (
  input  logic          clk,
  input  logic          rst,
  // host side
  input  logic          s_valid,
  output logic          s_ready,
  input  logic [PW-1:0] s_prio,
  input  desc_t         s_desc,
  // priority map (from the register file)
  input  logic [QW-1:0] cfg_prio_base [NUM_PRIO],
  input  logic [QW:0]   cfg_prio_cnt  [NUM_PRIO],
  // TX queue bank push port
  output logic          push_valid,
  input  logic          push_ready,
  output logic [QW-1:0] push_q,
  output desc_t         push_desc
);

  logic [QW:0] off_q [NUM_PRIO];   // position inside the priority's range
  logic [QW:0] cnt, off_cur, off_nx;

  // A position beyond the range (the count was lowered while in use) starts
  // again at the first queue.
  always_comb begin
    cnt        = (cfg_prio_cnt[s_prio] == '0) ? (QW+1)'(1) : cfg_prio_cnt[s_prio];
    off_cur    = (off_q[s_prio] >= cnt) ? '0 : off_q[s_prio];
    off_nx     = off_cur + 1'b1;
    push_valid = s_valid;
    push_q     = cfg_prio_base[s_prio] + QW'(off_cur);
    push_desc  = s_desc;
    s_ready    = push_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int p = 0; p < NUM_PRIO; p++) off_q[p] <= '0;
    end else if (s_valid && push_ready) begin
      off_q[s_prio] <= (off_nx >= cnt) ? '0 : off_nx;
    end
  end

endmodule
