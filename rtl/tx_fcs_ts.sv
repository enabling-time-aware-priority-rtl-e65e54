// tx_fcs_ts: appends the Ethernet FCS and timestamps each outgoing frame.
//
// The TX buffer's "CRC+TS" stage: every frame from the transmit engine
// leaves with its IEEE 802.3 CRC-32 frame check sequence appended, and the
// PTP time at which its first beat was handed on is reported, so software
// can see when a frame was actually sent. Both tasks are named by the paper;
// the CRC polynomial is the Ethernet one and the timestamp point (first beat
// leaving this stage) is this design's choice.
//
// How. A running CRC register is updated with the valid bytes of every beat
// (tas_pkg::crc32_beat). On the last beat the four FCS bytes are placed right
// after the last data byte: if the beat has at most four data bytes they fit
// in the same beat, otherwise the beat goes out full and one extra beat
// carries the rest of the FCS, during which the input is held off.
//
// Interface and timing. AXI-Stream in and out, 64-bit, keep contiguous from
// byte 0; the output is combinational from the input except during the extra
// beat. ts_valid pulses one clock after a frame's first beat is accepted by
// the output, with ts_sec/ts_ns the time of that beat.
module tx_fcs_ts
  import tas_pkg::*;
(
  input  logic              clk,
  input  logic              rst,
  input  logic [DATA_W-1:0] s_axis_tdata,
  input  logic [KEEP_W-1:0] s_axis_tkeep,
  input  logic              s_axis_tlast,
  input  logic              s_axis_tvalid,
  output logic              s_axis_tready,
  output logic [DATA_W-1:0] m_axis_tdata,
  output logic [KEEP_W-1:0] m_axis_tkeep,
  output logic              m_axis_tlast,
  output logic              m_axis_tvalid,
  input  logic              m_axis_tready,
  input  logic [47:0]       tod_sec,
  input  logic [29:0]       tod_ns,
  output logic              ts_valid,
  output logic [47:0]       ts_sec,
  output logic [29:0]       ts_ns
);

  logic [31:0]       crc_q;
  logic              first_q;
  logic              extra_q;
  logic [31:0]       extra_data_q;
  logic [3:0]        extra_keep_q;

  logic [31:0]       crc_nx, fcs;
  logic [3:0]        k;
  logic [95:0]       wide;
  logic [DATA_W-1:0] data_masked;
  logic              in_fire;

  always_comb begin
    for (int i = 0; i < KEEP_W; i++)
      data_masked[8*i +: 8] = s_axis_tkeep[i] ? s_axis_tdata[8*i +: 8] : 8'h00;
    crc_nx = crc32_beat(first_q ? 32'hFFFF_FFFF : crc_q, s_axis_tdata, s_axis_tkeep);
    fcs    = ~crc_nx;
    k      = keep_bytes(s_axis_tkeep);
    wide   = {32'd0, data_masked} | ({64'd0, fcs} << (8 * k));
  end

  always_comb begin
    s_axis_tready = m_axis_tready && !extra_q;
    if (extra_q) begin
      m_axis_tvalid = 1'b1;
      m_axis_tdata  = {32'd0, extra_data_q};
      m_axis_tkeep  = {4'd0, extra_keep_q};
      m_axis_tlast  = 1'b1;
    end else begin
      m_axis_tvalid = s_axis_tvalid;
      m_axis_tdata  = s_axis_tlast ? wide[63:0] : s_axis_tdata;
      m_axis_tkeep  = s_axis_tkeep;
      m_axis_tlast  = 1'b0;
      if (s_axis_tlast) begin
        if (k <= 4'd4) begin
          m_axis_tkeep = KEEP_W'((1 << (k + 4'd4)) - 1);
          m_axis_tlast = 1'b1;
        end else begin
          m_axis_tkeep = '1;
        end
      end
    end
  end

  assign in_fire = s_axis_tvalid && s_axis_tready;

  always_ff @(posedge clk) begin
    if (rst) begin
      crc_q        <= '1;
      first_q      <= 1'b1;
      extra_q      <= 1'b0;
      extra_data_q <= '0;
      extra_keep_q <= '0;
      ts_valid     <= 1'b0;
      ts_sec       <= '0;
      ts_ns        <= '0;
    end else begin
      ts_valid <= 1'b0;
      if (extra_q && m_axis_tready) extra_q <= 1'b0;
      if (in_fire) begin
        crc_q   <= crc_nx;
        first_q <= s_axis_tlast;
        if (first_q) begin
          ts_valid <= 1'b1;
          ts_sec   <= tod_sec;
          ts_ns    <= tod_ns;
        end
        if (s_axis_tlast && k > 4'd4) begin
          extra_q      <= 1'b1;
          extra_data_q <= wide[95:64];
          extra_keep_q <= 4'((1 << (k - 4'd4)) - 1);
        end
      end
    end
  end

endmodule
