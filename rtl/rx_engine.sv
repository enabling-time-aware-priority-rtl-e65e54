// rx_engine: copies received frames to host memory and queues their pointers.
//
// For every frame committed by the RX buffer the engine takes a free host
// buffer (addresses handed over in advance by the driver), writes the frame
// into it word by word through the memory write port, appends one 64-bit
// word holding the arrival timestamp ({seconds[33:0], nanoseconds[29:0]})
// right after the frame's last word, pushes the pointer (address, length)
// into an RX queue and pulses that queue's interrupt line. Copying the frame
// to memory, pushing its pointer into a FIFO and raising an interrupt
// follow the paper; choosing the RX queue round-robin, the free-buffer FIFO,
// where the timestamp goes and one interrupt per frame are this design's
// choices. A host buffer must hold the frame, its FCS and the 8-byte
// timestamp.
//
// Interface and timing. free_*: valid/ready push of free buffer addresses
// (8-byte aligned). wr_*: valid/ready write requests of one word each.
// rxq_push_*: valid/ready push into the RX queue bank. irq[q] pulses for one
// clock when a pointer enters queue q. One frame is in flight at a time; a
// frame of W words takes W+3 clocks when memory is always ready.
module rx_engine
  import tas_pkg::*;
#(
  parameter int unsigned NUM_RXQ    = 4,
  parameter int unsigned FREE_DEPTH = 16,
  localparam int unsigned RQW = (NUM_RXQ > 1) ? $clog2(NUM_RXQ) : 1,
  localparam int unsigned FW  = $clog2(FREE_DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  // from rx_frame_buffer
  input  logic               info_valid,
  input  logic [LEN_W-1:0]   info_len,
  input  logic [LEN_W-1:0]   info_words,
  input  logic [47:0]        info_ts_sec,
  input  logic [29:0]        info_ts_ns,
  output logic               info_ready,
  input  logic [DATA_W-1:0]  rd_data,
  output logic               rd_en,
  // free buffers from the driver
  input  logic               free_valid,
  input  logic [ADDR_W-1:0]  free_addr,
  output logic               free_ready,
  // memory write port
  output logic               wr_valid,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [DATA_W-1:0]  wr_data,
  output logic [KEEP_W-1:0]  wr_strb,
  input  logic               wr_ready,
  // RX queue bank
  output logic               rxq_push_valid,
  output logic [RQW-1:0]     rxq_push_q,
  output desc_t              rxq_push_desc,
  input  logic               rxq_push_ready,
  output logic [NUM_RXQ-1:0] irq
);

  typedef enum logic [1:0] {S_IDLE, S_DATA, S_TS, S_PUSH} state_e;

  state_e            state_q;
  logic [ADDR_W-1:0] base_q, addr_q;
  logic [LEN_W-1:0]  len_q, words_q;
  logic [63:0]       ts_q;
  logic [RQW-1:0]    sel_q;

  // free-buffer FIFO
  logic [ADDR_W-1:0] free_mem [FREE_DEPTH];
  logic [FW:0]       fwr_q, frd_q;
  logic              free_empty, take;

  assign free_empty = (fwr_q == frd_q);
  assign free_ready = (fwr_q - frd_q) != (FW+1)'(FREE_DEPTH);
  assign take       = (state_q == S_IDLE) && info_valid && !free_empty;
  assign info_ready = take;

  always_ff @(posedge clk) begin
    if (free_valid && free_ready) free_mem[fwr_q[FW-1:0]] <= free_addr;
  end

  always_comb begin
    wr_valid       = 1'b0;
    wr_addr        = addr_q;
    wr_data        = rd_data;
    wr_strb        = '1;
    rd_en          = 1'b0;
    rxq_push_valid = 1'b0;
    case (state_q)
      S_DATA: begin
        wr_valid = 1'b1;
        rd_en    = wr_ready;
      end
      S_TS: begin
        wr_valid = 1'b1;
        wr_data  = ts_q;
      end
      S_PUSH: rxq_push_valid = 1'b1;
      default: ;
    endcase
  end

  assign rxq_push_q    = sel_q;
  assign rxq_push_desc = '{addr: base_q, len: len_q};

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_IDLE;
      base_q  <= '0;
      addr_q  <= '0;
      len_q   <= '0;
      words_q <= '0;
      ts_q    <= '0;
      sel_q   <= '0;
      fwr_q   <= '0;
      frd_q   <= '0;
      irq     <= '0;
    end else begin
      irq <= '0;
      if (free_valid && free_ready) fwr_q <= fwr_q + 1'b1;
      case (state_q)
        S_IDLE: if (take) begin
          base_q  <= free_mem[frd_q[FW-1:0]];
          addr_q  <= {free_mem[frd_q[FW-1:0]][ADDR_W-1:3], 3'b000};
          frd_q   <= frd_q + 1'b1;
          len_q   <= info_len;
          words_q <= info_words;
          ts_q    <= {info_ts_sec[33:0], info_ts_ns};
          state_q <= S_DATA;
        end
        S_DATA: if (wr_ready) begin
          addr_q  <= addr_q + ADDR_W'(KEEP_W);
          words_q <= words_q - 1'b1;
          if (words_q == LEN_W'(1)) state_q <= S_TS;
        end
        S_TS: if (wr_ready) state_q <= S_PUSH;
        S_PUSH: if (rxq_push_ready) begin
          irq[sel_q] <= 1'b1;
          sel_q      <= (sel_q == RQW'(NUM_RXQ - 1)) ? '0 : sel_q + 1'b1;
          state_q    <= S_IDLE;
        end
      endcase
    end
  end

  logic unused;
  assign unused = ^info_ts_sec[47:34];

endmodule
