// rx_frame_buffer: RX buffer with CRC check, drop and arrival timestamp.
//
// Frames arriving from the deserializer are written into a circular buffer
// while a CRC-32 runs over every byte, FCS included. At the last beat the
// CRC register must hold the Ethernet residue (0xDEBB20E3); if it does, the
// frame is committed: its length, word count and arrival time go into a
// small frame-info FIFO for the receive engine. If it does not, the frame is
// dropped by moving the write pointer back to where the frame began, so a
// bad frame never becomes visible. A frame that finds the buffer (or the
// info FIFO) full is dropped the same way. Checking the CRC, dropping bad
// frames and timestamping good ones follow the paper; the residue method,
// buffer size and overflow rule are this design's choices.
//
// Interface and timing. s_axis_* has no ready: a MAC cannot hold off the
// line. The reported length excludes the 4 FCS bytes, which stay in the
// buffer and are counted in info_words. The consumer pops info (info_ready)
// and reads the frame's words with rd_en; rd_data is the word at the read
// pointer (combinational read), rd_en moves to the next. drop_crc and
// drop_ovf pulse once per dropped frame, one clock after its last beat.
module rx_frame_buffer
  import tas_pkg::*;
#(
  parameter int unsigned BUF_WORDS  = 512,
  parameter int unsigned INFO_DEPTH = 16,
  localparam int unsigned AW = $clog2(BUF_WORDS),
  localparam int unsigned IW = $clog2(INFO_DEPTH)
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic [KEEP_W-1:0] s_axis_tkeep,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tvalid,
  input  logic [47:0]       tod_sec,
  input  logic [29:0]       tod_ns,
  // committed frames
  output logic              info_valid,
  output logic [LEN_W-1:0]  info_len,
  output logic [LEN_W-1:0]  info_words,
  output logic [47:0]       info_ts_sec,
  output logic [29:0]       info_ts_ns,
  input  logic              info_ready,
  output logic [DATA_W-1:0] rd_data,
  input  logic              rd_en,
  // events
  output logic              drop_crc,
  output logic              drop_ovf
);

  typedef struct packed {
    logic [LEN_W-1:0] len;
    logic [LEN_W-1:0] words;
    logic [47:0]      sec;
    logic [29:0]      ns;
  } info_t;

  logic [DATA_W-1:0] mem [BUF_WORDS];
  logic [AW:0]       wr_ptr_q, start_ptr_q, rd_ptr_q;
  logic              in_frame_q, ovf_q;
  logic [31:0]       crc_q;
  logic [LEN_W-1:0]  bytes_q;
  logic [47:0]       ts_sec_q;
  logic [29:0]       ts_ns_q;

  info_t             info_mem [INFO_DEPTH];
  logic [IW:0]       iwr_q, ird_q;

  logic              buf_full, info_full, do_write;
  logic [31:0]       crc_nx;
  logic [LEN_W-1:0]  bytes_nx;
  logic [AW:0]       wr_ptr_nx, frame_words;
  logic              good;

  assign buf_full  = (wr_ptr_q - rd_ptr_q) == (AW+1)'(BUF_WORDS);
  assign info_full = (iwr_q - ird_q) == (IW+1)'(INFO_DEPTH);
  assign do_write  = s_axis_tvalid && !ovf_q && !buf_full;
  assign crc_nx    = crc32_beat(in_frame_q ? crc_q : 32'hFFFF_FFFF, s_axis_tdata, s_axis_tkeep);
  assign bytes_nx  = (in_frame_q ? bytes_q : '0) + LEN_W'(keep_bytes(s_axis_tkeep));
  assign wr_ptr_nx = wr_ptr_q + (AW+1)'(do_write);
  assign frame_words = wr_ptr_nx - start_ptr_q;  // modulo the pointer width
  assign good      = (crc_nx == CRC_RESIDUE) && !ovf_q && !buf_full && !info_full &&
                     (bytes_nx > LEN_W'(4));

  always_ff @(posedge clk) begin
    if (do_write) mem[wr_ptr_q[AW-1:0]] <= s_axis_tdata;
    if (s_axis_tvalid && s_axis_tlast && good)
      info_mem[iwr_q[IW-1:0]] <= '{len: bytes_nx - LEN_W'(4),
                                   words: LEN_W'(frame_words),
                                   sec: in_frame_q ? ts_sec_q : tod_sec,
                                   ns: in_frame_q ? ts_ns_q : tod_ns};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_ptr_q    <= '0;
      start_ptr_q <= '0;
      rd_ptr_q    <= '0;
      in_frame_q  <= 1'b0;
      ovf_q       <= 1'b0;
      crc_q       <= '1;
      bytes_q     <= '0;
      ts_sec_q    <= '0;
      ts_ns_q     <= '0;
      iwr_q       <= '0;
      ird_q       <= '0;
      drop_crc    <= 1'b0;
      drop_ovf    <= 1'b0;
    end else begin
      drop_crc <= 1'b0;
      drop_ovf <= 1'b0;
      if (rd_en) rd_ptr_q <= rd_ptr_q + 1'b1;
      if (info_valid && info_ready) ird_q <= ird_q + 1'b1;
      if (s_axis_tvalid) begin
        if (!in_frame_q) begin
          ts_sec_q <= tod_sec;
          ts_ns_q  <= tod_ns;
        end
        crc_q   <= crc_nx;
        bytes_q <= bytes_nx;
        if (s_axis_tlast) begin
          in_frame_q <= 1'b0;
          ovf_q      <= 1'b0;
          if (good) begin
            wr_ptr_q    <= wr_ptr_nx;
            start_ptr_q <= wr_ptr_nx;
            iwr_q       <= iwr_q + 1'b1;
          end else begin
            wr_ptr_q <= start_ptr_q;
            if (ovf_q || buf_full || info_full) drop_ovf <= 1'b1;
            else                                drop_crc <= 1'b1;
          end
        end else begin
          in_frame_q <= 1'b1;
          wr_ptr_q   <= wr_ptr_nx;
          if (!do_write) ovf_q <= 1'b1;
        end
      end
    end
  end

  info_t head;
  assign head        = info_mem[ird_q[IW-1:0]];
  assign info_valid  = (iwr_q != ird_q);
  assign info_len    = head.len;
  assign info_words  = head.words;
  assign info_ts_sec = head.sec;
  assign info_ts_ns  = head.ns;
  assign rd_data     = mem[rd_ptr_q[AW-1:0]];

endmodule
