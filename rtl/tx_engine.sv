// tx_engine: pops a frame pointer and copies the frame from memory to the port.
//
// When the scheduler grants a queue and the engine is idle, the engine pops
// that queue's head pointer (address, length), reads the frame from host
// memory one 64-bit word at a time and streams it towards the CRC+timestamp
// stage and the serializer. Read responses land in a small TX buffer (a
// FIFO of BUF_WORDS words); a read is only issued while the words in flight
// plus the words buffered leave room, so responses never need back-pressure.
// One frame is handled at a time, which is what lets the scheduler's
// guardband reason about the frame in progress.
//
// Interface and timing. grant_ready is high exactly when the engine is idle;
// the pop happens in the cycle of the grant. rd_req_* is a valid/ready
// request port with byte addresses; rd_rsp_valid/rd_rsp_data return the words
// in request order after any latency. m_axis_* is AXI-Stream: tkeep marks the
// valid bytes of the last beat (contiguous from byte 0), tlast the last beat.
// Frame buffers are assumed 8-byte aligned; a length of 0 is sent as one full
// word. The buffer size and these rules are this design's own choices.
module tx_engine
  import tas_pkg::*;
#(
  parameter int unsigned NUM_TXQ   = NUM_TXQ_DEF,
  parameter int unsigned BUF_WORDS = 8,
  localparam int unsigned QW = $clog2(NUM_TXQ),
  localparam int unsigned BW = $clog2(BUF_WORDS)
) (
  input  logic              clk,
  input  logic              rst,
  // scheduler
  input  logic              grant_valid,
  input  logic [QW-1:0]     grant_queue,
  output logic              grant_ready,
  // TX queue bank
  output logic              pop_en,
  output logic [QW-1:0]     pop_q,
  input  desc_t             pop_desc,
  // memory read port
  output logic              rd_req_valid,
  output logic [ADDR_W-1:0] rd_req_addr,
  input  logic              rd_req_ready,
  input  logic              rd_rsp_valid,
  input  logic [DATA_W-1:0] rd_rsp_data,
  // frame stream
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic [KEEP_W-1:0] m_axis_tkeep,
  output logic              m_axis_tlast,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  // observation
  output logic              busy,
  output logic [QW-1:0]     cur_queue
);

  localparam int unsigned WCW = LEN_W - 2;  // word counter width

  logic              busy_q;
  logic [ADDR_W-1:0] addr_q;
  logic [WCW-1:0]    req_left_q;   // words still to request
  logic [WCW-1:0]    out_left_q;   // words still to send
  logic [2:0]        tail_bytes_q; // len mod 8
  logic [QW-1:0]     queue_q;
  logic [BW:0]       inflight_q;   // requests without a response yet

  // TX buffer
  logic [DATA_W-1:0] buf_mem [BUF_WORDS];
  logic [BW-1:0]     wr_ptr_q, rd_ptr_q;
  logic [BW:0]       cnt_q;

  logic start, req_fire, out_fire;
  logic [WCW-1:0] nwords;

  assign grant_ready = !busy_q;
  assign start       = grant_valid && grant_ready;
  assign pop_en      = start;
  assign pop_q       = grant_queue;
  assign nwords      = (pop_desc.len == '0) ? WCW'(1) : WCW'((pop_desc.len + 16'd7) >> 3);

  assign rd_req_valid = busy_q && (req_left_q != '0) &&
                        ((inflight_q + cnt_q) < (BW+1)'(BUF_WORDS));
  assign rd_req_addr  = addr_q;
  assign req_fire     = rd_req_valid && rd_req_ready;

  assign m_axis_tvalid = (cnt_q != '0);
  assign m_axis_tdata  = buf_mem[rd_ptr_q];
  assign m_axis_tlast  = (out_left_q == WCW'(1));
  always_comb begin
    m_axis_tkeep = '1;
    if (m_axis_tlast && tail_bytes_q != 3'd0)
      m_axis_tkeep = KEEP_W'((1 << tail_bytes_q) - 1);
  end
  assign out_fire = m_axis_tvalid && m_axis_tready;

  always_ff @(posedge clk) begin
    if (rd_rsp_valid) buf_mem[wr_ptr_q] <= rd_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q       <= 1'b0;
      addr_q       <= '0;
      req_left_q   <= '0;
      out_left_q   <= '0;
      tail_bytes_q <= '0;
      queue_q      <= '0;
      inflight_q   <= '0;
      wr_ptr_q     <= '0;
      rd_ptr_q     <= '0;
      cnt_q        <= '0;
    end else begin
      if (start) begin
        busy_q       <= 1'b1;
        addr_q       <= {pop_desc.addr[ADDR_W-1:3], 3'b000};
        req_left_q   <= nwords;
        out_left_q   <= nwords;
        tail_bytes_q <= pop_desc.len[2:0];
        queue_q      <= grant_queue;
      end else if (req_fire) begin
        addr_q     <= addr_q + ADDR_W'(KEEP_W);
        req_left_q <= req_left_q - 1'b1;
      end
      case ({req_fire, rd_rsp_valid})
        2'b10:   inflight_q <= inflight_q + 1'b1;
        2'b01:   inflight_q <= inflight_q - 1'b1;
        default: ;
      endcase
      if (rd_rsp_valid) wr_ptr_q <= wr_ptr_q + 1'b1;
      if (out_fire) begin
        rd_ptr_q   <= rd_ptr_q + 1'b1;
        out_left_q <= out_left_q - 1'b1;
        if (m_axis_tlast) busy_q <= 1'b0;
      end
      case ({rd_rsp_valid, out_fire})
        2'b10:   cnt_q <= cnt_q + 1'b1;
        2'b01:   cnt_q <= cnt_q - 1'b1;
        default: ;
      endcase
    end
  end

  assign busy      = busy_q;
  assign cur_queue = queue_q;

  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
      rd_rsp_valid |-> (cnt_q < (BW+1)'(BUF_WORDS) || out_fire));

endmodule
