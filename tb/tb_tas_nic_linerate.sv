// tb_tas_nic_linerate: all four ports at full rate with 1500-byte frames.
//
// The NIC core at its default parameters sends 1500-byte frames from one TX
// queue per port on all four ports at once, with host memory and the
// serializer always ready (read latency 4 clocks). Every port is looped back
// into its RX side, and the host keeps free buffers and pops received
// pointers at once. The test measures the bytes each port puts on the wire
// over 60 us and requires at least 9.5 Gb/s of frame bytes (FCS included) per port at the
// intended 156.25 MHz clock (8 bytes per clock is 10 Gb/s). The engine needs
// W+6 clocks for a frame of W words, so 1500-byte frames (188 words) should
// give 1500 / 194 bytes per clock, 9.66 Gb/s. It also checks every frame's
// FCS, that every frame comes back through RX intact, and that nothing is
// dropped.
module tb_tas_nic_linerate;
  import tas_pkg::*;

  localparam int P = 4, QW = 5, RQW = 2, NRQ = 4, LAT = 4, FLEN = 1500;

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic [15:0] s_axil_awaddr = 0, s_axil_araddr = 0;
  logic        s_axil_awvalid = 0, s_axil_awready, s_axil_wvalid = 0, s_axil_wready;
  logic [31:0] s_axil_wdata = 0, s_axil_rdata;
  logic [3:0]  s_axil_wstrb = 0;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready = 0, s_axil_arvalid = 0, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready = 0;

  logic              txq_push_valid [P], txq_push_ready [P];
  logic [2:0]        txq_push_prio [P];
  desc_t             txq_push_desc [P];
  logic              rd_req_valid [P], rd_req_ready [P], rd_rsp_valid [P];
  logic [ADDR_W-1:0] rd_req_addr [P];
  logic [DATA_W-1:0] rd_rsp_data [P];
  logic [DATA_W-1:0] tx_axis_tdata [P];
  logic [KEEP_W-1:0] tx_axis_tkeep [P];
  logic              tx_axis_tlast [P], tx_axis_tvalid [P], tx_axis_tready [P];
  logic              tx_ts_valid [P];
  logic [47:0]       tx_ts_sec [P];
  logic [29:0]       tx_ts_ns [P];
  logic [QW-1:0]     tx_queue [P];
  logic [DATA_W-1:0] rx_axis_tdata [P];
  logic [KEEP_W-1:0] rx_axis_tkeep [P];
  logic              rx_axis_tlast [P], rx_axis_tvalid [P];
  logic              free_valid [P], free_ready [P];
  logic [ADDR_W-1:0] free_addr [P];
  logic              wr_valid [P], wr_ready [P];
  logic [ADDR_W-1:0] wr_addr [P];
  logic [DATA_W-1:0] wr_data [P];
  logic [KEEP_W-1:0] wr_strb [P];
  logic              rxq_pop_en [P];
  logic [RQW-1:0]    rxq_pop_q [P];
  desc_t             rxq_pop_desc [P];
  logic [NRQ-1:0]    rxq_nonempty [P], irq [P];
  logic              slot_start [P], in_guard [P], rx_drop_crc [P], rx_drop_ovf [P];
  logic [1:0]        sched_phase [P];
  logic              us_tick;

  tas_nic dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL t=%0t %s", $time, what); end
  endtask

  int us_now = 0;
  always @(posedge clk) if (us_tick) us_now++;

  // host memory: frame k of port p is a pattern computed from (p, k, word)
  function automatic logic [63:0] tx_word(int p, int k, int w);
    return {8'(p), 8'(k), 16'(w), 32'(k * 32'h9E37_79B9 ^ w * 32'h85EB_CA6B)};
  endfunction
  logic [63:0] rxmem [int unsigned];

  longint cyc = 0;
  always @(posedge clk) cyc++;
  bit measuring = 0;
  longint meas_bytes [P];
  int frames_tx [P], frames_rx [P], drops = 0;

  for (genvar gp = 0; gp < P; gp++) begin : g_port
    int k_push = 0;
    logic [31:0] pend_a[$];
    longint      pend_t[$];
    logic [31:0] crc = 32'hFFFF_FFFF;
    int          nbytes = 0;
    logic [31:0] fcs_got;
    int          rxq_rr = 0;
    int          pool_k = 0;

    // TX pointers: one queue, frame k at address 0x1000_0000 + p<<24 + (k%32)<<11
    always @(posedge clk) begin
      if (rst) begin
        txq_push_valid[gp] <= 0; txq_push_prio[gp] <= 0; txq_push_desc[gp] <= '0;
      end else begin
        if (txq_push_valid[gp] && txq_push_ready[gp]) k_push++;
        txq_push_valid[gp] <= 1;
        txq_push_prio[gp] <= 3'(gp);   // priority p -> queue p after reset
        txq_push_desc[gp] <= '{addr: 32'h1000_0000 + (32'(gp) << 24) +
                                     (32'((k_push + ((txq_push_valid[gp] && txq_push_ready[gp]) ? 1 : 0)) % 32) << 11),
                               len: 16'(FLEN)};
      end
    end

    // memory reads: always ready, fixed latency
    always @(posedge clk) begin
      rd_req_ready[gp] <= !rst;
      if (rd_req_valid[gp] && rd_req_ready[gp]) begin
        pend_a.push_back(rd_req_addr[gp]);
        pend_t.push_back(cyc + LAT);
      end
      if (pend_t.size() != 0 && pend_t[0] <= cyc) begin
        logic [31:0] a;
        a = pend_a.pop_front();
        void'(pend_t.pop_front());
        rd_rsp_valid[gp] <= 1;
        // frame number modulo 32 is all the address holds; the pattern uses it
        rd_rsp_data[gp]  <= tx_word(gp, int'(a[15:11]), int'(a[10:3]));
      end else begin
        rd_rsp_valid[gp] <= 0;
        rd_rsp_data[gp]  <= '0;
      end
    end

    // wire: serializer always ready, looped back
    assign tx_axis_tready[gp] = !rst;
    assign rx_axis_tdata[gp]  = tx_axis_tdata[gp];
    assign rx_axis_tkeep[gp]  = tx_axis_tkeep[gp];
    assign rx_axis_tlast[gp]  = tx_axis_tlast[gp];
    assign rx_axis_tvalid[gp] = tx_axis_tvalid[gp] && tx_axis_tready[gp];

    // TX monitor: FCS and bytes on the wire
    always @(posedge clk) begin
      if (!rst && tx_axis_tvalid[gp] && tx_axis_tready[gp]) begin
        for (int b = 0; b < 8; b++) begin
          if (tx_axis_tkeep[gp][b]) begin
            if (nbytes < FLEN) crc = crc32_byte(crc, tx_axis_tdata[gp][8*b +: 8]);
            else fcs_got[8*(nbytes-FLEN) +: 8] = tx_axis_tdata[gp][8*b +: 8];
            nbytes++;
          end
        end
        if (measuring) meas_bytes[gp] += longint'(keep_bytes(tx_axis_tkeep[gp]));
        if (tx_axis_tlast[gp]) begin
          check(nbytes == FLEN + 4, "frame length on the wire");
          check(fcs_got == ~crc, "FCS");
          frames_tx[gp]++;
          crc = 32'hFFFF_FFFF;
          nbytes = 0;
        end
      end
    end

    // RX host: free buffers, memory writes, pops
    always @(posedge clk) begin
      if (rst) begin
        free_valid[gp] <= 0; free_addr[gp] <= 0; wr_ready[gp] <= 0;
        rxq_pop_en[gp] <= 0; rxq_pop_q[gp] <= 0;
      end else begin
        wr_ready[gp] <= 1;
        if (wr_valid[gp] && wr_ready[gp]) rxmem[wr_addr[gp] >> 3] = wr_data[gp];
        if (free_valid[gp] && free_ready[gp]) pool_k++;
        free_valid[gp] <= 1;
        free_addr[gp] <= 32'h2000_0000 + (32'(gp) << 24) +
                         (32'((pool_k + ((free_valid[gp] && free_ready[gp]) ? 1 : 0)) % 64) << 11);
        if (rx_drop_crc[gp] || rx_drop_ovf[gp]) drops++;
        if (rxq_pop_en[gp]) begin
          if (rxq_nonempty[gp][rxq_pop_q[gp]]) begin
            logic [31:0] a;
            logic [63:0] w0;
            int k;
            bit ok;
            a = rxq_pop_desc[gp].addr;
            check(rxq_pop_desc[gp].len == 16'(FLEN), "received length");
            w0 = rxmem.exists(a >> 3) ? rxmem[a >> 3] : '0;
            k = int'(w0[55:48]);
            ok = 1;
            for (int w = 0; w < FLEN / 8; w++)
              if (!rxmem.exists((a >> 3) + 32'(w)) || rxmem[(a >> 3) + 32'(w)] != tx_word(gp, k, w)) ok = 0;
            check(ok, "received frame content");
            frames_rx[gp]++;
          end
          rxq_pop_en[gp] <= 0;
        end else if (rxq_nonempty[gp] != 0) begin
          for (int i = 1; i <= NRQ; i++) begin
            if (!rxq_pop_en[gp] && rxq_nonempty[gp][(rxq_rr + i) % NRQ]) begin
              rxq_pop_en[gp] <= 1;
              rxq_pop_q[gp] <= RQW'((rxq_rr + i) % NRQ);
              rxq_rr = (rxq_rr + i) % NRQ;
            end
          end
        end
      end
    end
  end

  initial begin
    longint c0, c1;
    for (int p = 0; p < P; p++) begin meas_bytes[p] = 0; frames_tx[p] = 0; frames_rx[p] = 0; end
    repeat (5) @(posedge clk);
    rst <= 0;
    while (us_now < 10) @(posedge clk);
    measuring = 1;
    c0 = cyc;
    while (us_now < 70) @(posedge clk);
    measuring = 0;
    c1 = cyc;
    repeat (3000) @(posedge clk);
    for (int p = 0; p < P; p++) begin
      real gbps;
      // payload+FCS bytes per clock, scaled to 156.25 MHz
      gbps = meas_bytes[p] * 8.0 * 0.15625 / real'(c1 - c0);
      $display("port %0d: %0d frames sent, %0d received, %.2f Gb/s on the wire", p, frames_tx[p], frames_rx[p], gbps);
      check(gbps >= 9.5, $sformatf("port %0d rate %.2f Gb/s", p, gbps));
      check(frames_tx[p] > 50, "frames sent");
      check(frames_rx[p] >= frames_tx[p] - 2, "frames received");
    end
    check(drops == 0, "no RX drops at line rate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
