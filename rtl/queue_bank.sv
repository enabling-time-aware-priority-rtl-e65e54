// queue_bank: a bank of independent frame-pointer FIFOs.
//
// A NIC keeps many queues so that flows do not block one another; each entry
// is only a pointer to a frame in host memory plus its length, never the
// frame itself. The bank is used twice per port: as the TX queues (the host
// pushes a pointer into the queue chosen by its traffic priority, the
// transmit engine pops the head of the queue picked by the scheduler) and as
// the RX queues (the receive engine pushes, the host pops).
//
// How. All queues share one array of NUM_Q*DEPTH entries; queue q owns rows
// q*DEPTH .. q*DEPTH+DEPTH-1 and has its own head, tail and fill count.
// Keeping pointers in on-chip FIFOs (instead of descriptor rings in host
// memory) and the depth are this design's simplifications.
//
// Interface and timing. push is a valid/ready handshake (ready = the chosen
// queue is not full). pop_desc shows the head of queue pop_q combinationally
// and pop_en removes it at the clock edge; popping an empty queue is ignored.
// A push and a pop in the same cycle may target the same queue. nonempty is
// registered state (count != 0).
module queue_bank
  import tas_pkg::*;
#(
  parameter int unsigned NUM_Q = NUM_TXQ_DEF,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned QW = $clog2(NUM_Q),
  localparam int unsigned DW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             push_valid,
  output logic             push_ready,
  input  logic [QW-1:0]    push_q,
  input  desc_t            push_desc,
  input  logic             pop_en,
  input  logic [QW-1:0]    pop_q,
  output desc_t            pop_desc,
  output logic [NUM_Q-1:0] nonempty,
  output logic [NUM_Q-1:0] full
);

  desc_t        mem   [NUM_Q*DEPTH];
  logic [DW-1:0] head [NUM_Q];
  logic [DW-1:0] tail [NUM_Q];
  logic [DW:0]   count[NUM_Q];

  logic do_push, do_pop;

  always_comb begin
    for (int q = 0; q < NUM_Q; q++) begin
      nonempty[q] = (count[q] != '0);
      full[q]     = (count[q] == (DW+1)'(DEPTH));
    end
  end

  assign push_ready = !full[push_q];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_en && nonempty[pop_q];
  assign pop_desc   = mem[int'(pop_q) * DEPTH + int'(head[pop_q])];

  always_ff @(posedge clk) begin
    if (do_push) mem[int'(push_q) * DEPTH + int'(tail[push_q])] <= push_desc;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int q = 0; q < NUM_Q; q++) begin
        head[q]  <= '0;
        tail[q]  <= '0;
        count[q] <= '0;
      end
    end else begin
      if (do_push) tail[push_q] <= tail[push_q] + 1'b1;
      if (do_pop)  head[pop_q]  <= head[pop_q] + 1'b1;
      for (int q = 0; q < NUM_Q; q++) begin
        case ({do_push && push_q == QW'(q), do_pop && pop_q == QW'(q)})
          2'b10:   count[q] <= count[q] + 1'b1;
          2'b01:   count[q] <= count[q] - 1'b1;
          default: ;
        endcase
      end
    end
  end

endmodule
