// tb_tas_nic: end-to-end test of the NIC core at its default size.
//
// The top is instantiated with its default parameters (4 ports, 32 TX
// queues, 8-queue time-aware group, 8 schedule entries). The testbench plays
// the host (pushes frame pointers, hands out free RX buffers, pops received
// pointers), host memory (read and write ports with random back-pressure and
// a fixed read latency) and the wire: every TX port is looped back into its
// own RX port. All configuration goes through the AXI4-Lite port.
//
//   port 0: the 90 % / 10 % experiment. Time-aware group starts at queue 20;
//           queue 20 owns 90 us of every 100 us window, queues 21 and 22 own
//           5 us each. Queues 20, 22 and 5 are kept full, queue 21 is left
//           empty. The port starts in plain round-robin and is switched to
//           the schedule at 20 us (mode switch), and back at the end.
//   port 1: group at queue 8; queue 8 for 20 us, queue 10 (always empty) for
//           10 us, window 50 us, so 20 us of free time for queues 3, 7, 20.
//           Every fifth frame is corrupted on the wire (CRC drop).
//   port 2: round-robin over queues 0, 1, 2, 31; free RX buffers are held
//           back between 150 us and 300 us so the RX buffer overflows.
//           Priority 0 is mapped to the three queues 0..2 (spread
//           round-robin), priority 1 to queue 31.
//   port 3: round-robin on queue 5 with heavy serializer stalls.
// On the other ports priority i is mapped to the i-th listed queue alone.
//
// Checked: every transmitted frame against the memory it came from, in
// per-queue order, with a correct FCS; every frame start and end on the
// scheduled ports against the slot owner (or the free-time rule), and that
// no frame spans a slot change; the byte share of queue 20 on port 0; every
// good frame delivered to host memory with FCS and timestamp and its pointer
// queued with an interrupt; bad frames dropped as CRC errors, overflowing
// frames dropped as overflow; TX timestamps one per frame and in order; the
// PTP clock through its registers. Each mechanism (stalls, back-pressure,
// full TX queue, mode switches, guardband, idle slot, free-time grants, FCS
// in an extra beat, CRC drop, overflow drop, interrupts, pointers spread
// over the queues of one priority) is counted and a
// mechanism that never happened is a failure.
module tb_tas_nic;
  import tas_pkg::*;

  localparam int P = 4, NQ = 32, QW = 5, RQW = 2, NRQ = 4;
  localparam int LAT = 4;  // memory read latency in clocks

  logic clk = 0, rst = 1;
  always #3.2 clk = ~clk;

  logic [15:0] s_axil_awaddr, s_axil_araddr;
  logic        s_axil_awvalid, s_axil_awready, s_axil_wvalid, s_axil_wready;
  logic [31:0] s_axil_wdata, s_axil_rdata;
  logic [3:0]  s_axil_wstrb;
  logic [1:0]  s_axil_bresp, s_axil_rresp;
  logic        s_axil_bvalid, s_axil_bready, s_axil_arvalid, s_axil_arready;
  logic        s_axil_rvalid, s_axil_rready;

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
    if (!ok) begin failures++; if (failures < 30) $display("FAIL t=%0t %s", $time, what); end
  endtask

  // ------------------------------------------------------------ time base
  int us_now = 0;
  always @(posedge clk) if (us_tick) us_now++;
  task automatic wait_us(input int t);
    while (us_now < t) @(posedge clk);
  endtask

  // ---------------------------------------------------------- host memory
  logic [63:0] mem [int unsigned];
  function automatic logic [63:0] mem_rd(input logic [31:0] a);
    return mem.exists(a >> 3) ? mem[a >> 3] : 64'h0;
  endfunction

  // ---------------------------------------------------------------- frames
  typedef byte unsigned bytes_t[$];
  int active_q [P][$];
  int seq [P][NQ];
  bytes_t txexp [P][NQ][$];       // frames pushed, per queue, in order
  bit     push_on = 0;
  // priority map as programmed: first queue and number of queues, and the
  // expected round-robin position inside each priority's range
  int pr_base [P][$], pr_cnt [P][$];
  int pr_off [P][8];
  int range_spread = 0;
  int     pushed = 0, push_full = 0;

  function automatic bytes_t make_frame(int p, int q, int s);
    bytes_t b;
    int len;
    len = 60 + $urandom % 453;     // 60 .. 512 bytes
    if (s % 7 == 3) len = 64 + 8 * ($urandom % 8) + 5;   // last beat over 4 bytes
    for (int i = 0; i < len; i++) b.push_back(8'($urandom));
    // tag in the first word: port, queue, sequence
    b[0] = 8'hA5; b[1] = 8'(p); b[2] = 8'(q); b[3] = 8'(s);
    b[4] = 8'(s >> 8); b[5] = 8'(s >> 16); b[6] = 8'h5A; b[7] = 8'h00;
    return b;
  endfunction

  function automatic logic [31:0] tx_buf(int p, int q, int s);
    return 32'h1000_0000 + (32'(p) << 24) + (32'(q) << 16) + (32'(s % 32) << 11);
  endfunction

  function automatic logic [31:0] fcs_of(bytes_t b);
    logic [31:0] c;
    c = 32'hFFFF_FFFF;
    foreach (b[i]) c = crc32_byte(c, b[i]);
    return ~c;
  endfunction

  // host: keep the active TX queues full
  int rr_push [P];
  bit have_prep [P][NQ];  // a frame is written to memory but not yet pushed
  for (genvar gp = 0; gp < P; gp++) begin : g_host_tx
    always @(posedge clk) begin
      if (rst) begin
        txq_push_valid[gp] <= 0;
      end else begin
        if (txq_push_valid[gp]) begin
          int q, pr;
          pr = txq_push_prio[gp];
          q = (pr_base[gp][pr] + pr_off[gp][pr]) % NQ;
          if (txq_push_ready[gp]) begin
            pushed++;
            if (pr_cnt[gp][pr] > 1) range_spread++;
            pr_off[gp][pr] = (pr_off[gp][pr] + 1) % pr_cnt[gp][pr];
            have_prep[gp][q] = 0;
            seq[gp][q]++;
          end else push_full++;
        end
        txq_push_valid[gp] <= 0;
        if (push_on && pr_base[gp].size() != 0) begin
          int q, s;
          bytes_t f;
          rr_push[gp] = (rr_push[gp] + 1) % pr_base[gp].size();
          q = (pr_base[gp][rr_push[gp]] + pr_off[gp][rr_push[gp]]) % NQ;
          s = seq[gp][q];
          if (!have_prep[gp][q]) begin
            logic [31:0] a;
            f = make_frame(gp, q, s);
            a = tx_buf(gp, q, s);
            for (int w = 0; w < (f.size() + 7) / 8; w++) begin
              logic [63:0] d;
              d = '0;
              for (int k = 0; k < 8; k++) if (8 * w + k < f.size()) d[8*k +: 8] = f[8*w+k];
              mem[(a >> 3) + 32'(w)] = d;
            end
            txexp[gp][q].push_back(f);
            have_prep[gp][q] = 1;
          end
          txq_push_valid[gp] <= 1;
          txq_push_prio[gp] <= 3'(rr_push[gp]);
          txq_push_desc[gp] <= '{addr: tx_buf(gp, q, s), len: 16'(txexp[gp][q][$].size())};
        end
      end
    end
  end

  // ---------------------------------------------------- memory read ports
  int rd_bp = 0;
  for (genvar gp = 0; gp < P; gp++) begin : g_mem_rd
    logic [31:0] pend_a[$];
    longint      pend_t[$];
    longint      cyc = 0;
    always @(posedge clk) begin
      cyc++;
      if (rd_req_valid[gp] && rd_req_ready[gp]) begin
        pend_a.push_back(rd_req_addr[gp]);
        pend_t.push_back(cyc + LAT);
      end
      if (rd_req_valid[gp] && !rd_req_ready[gp]) rd_bp++;
      rd_req_ready[gp] <= rst ? 1'b0 : (($urandom % 8) != 0);
      if (pend_t.size() != 0 && pend_t[0] <= cyc) begin
        rd_rsp_valid[gp] <= 1;
        rd_rsp_data[gp]  <= mem_rd(pend_a.pop_front());
        void'(pend_t.pop_front());
      end else begin
        rd_rsp_valid[gp] <= 0;
        rd_rsp_data[gp]  <= '0;
      end
    end
  end

  // ------------------------------------------------- wire and TX monitor
  int tx_stall = 0, tx_frames = 0, spill_frames = 0, ts_count = 0;
  longint bytes_q [P][NQ];
  bit     corrupt_cur [P];
  int     beat_idx [P];
  int     frames_sent [P];
  typedef struct { bytes_t b; bit bad; } rxf_t;
  rxf_t   rx_last [P];
  bit     rx_last_v [P];
  bytes_t committed [P][longint];
  int     crc_drops = 0, ovf_drops = 0;
  logic [QW-1:0] slot_q [P];
  int     slot_cnt [P];
  bit     sched_on [P];
  int     guard_cnt = 0, idle_slot_clk = 0, free_frames = 0, slot_frames = 0;
  longint meas_bytes [NQ];
  bit     measuring = 0;

  // slot owner of the scheduled ports (for checking only)
  assign slot_q[0] = dut.g_port[0].u_sched.slot_queue;
  assign slot_q[1] = dut.g_port[1].u_sched.slot_queue;
  assign slot_q[2] = dut.g_port[2].u_sched.slot_queue;
  assign slot_q[3] = dut.g_port[3].u_sched.slot_queue;

  function automatic bit in_group(int p, int q);
    int base;
    base = (p == 0) ? 20 : 8;
    return ((q - base + NQ) % NQ) < 8;
  endfunction

  for (genvar gp = 0; gp < P; gp++) begin : g_wire
    logic [63:0] flip;
    assign flip = (corrupt_cur[gp] && beat_idx[gp] == 1) ? 64'h0000_0000_0004_0000 : 64'h0;
    assign rx_axis_tdata[gp]  = tx_axis_tdata[gp] ^ flip;
    assign rx_axis_tkeep[gp]  = tx_axis_tkeep[gp];
    assign rx_axis_tlast[gp]  = tx_axis_tlast[gp];
    assign rx_axis_tvalid[gp] = tx_axis_tvalid[gp] && tx_axis_tready[gp];

    bytes_t cur;
    int     start_slot, start_q;
    logic [77:0] last_ts = '0;

    always @(posedge clk) begin
      if (rst) begin
        tx_axis_tready[gp] <= 0;
      end else begin
        tx_axis_tready[gp] <= ($urandom % 100) >= ((gp == 3) ? 40 : 5);
        if (tx_axis_tvalid[gp] && !tx_axis_tready[gp]) tx_stall++;
        if (slot_start[gp]) slot_cnt[gp]++;
        if (gp < 2 && in_guard[gp]) guard_cnt++;
        if (gp == 1 && sched_phase[1] == 2'd2 && slot_q[1] == 5'd10) idle_slot_clk++;
        if (tx_ts_valid[gp]) begin
          ts_count++;
          check({tx_ts_sec[gp][47:0], tx_ts_ns[gp]} >= last_ts, "TX timestamps in order");
          last_ts = {tx_ts_sec[gp], tx_ts_ns[gp]};
        end
        // the frame whose last beat went in one clock ago: dropped or kept
        if (rx_last_v[gp]) begin
          rx_last_v[gp] = 0;
          if (rx_drop_ovf[gp]) ovf_drops++;
          else if (rx_drop_crc[gp]) begin
            crc_drops++;
            check(rx_last[gp].bad, "only corrupted frames fail the CRC");
          end else begin
            longint tag;
            check(!rx_last[gp].bad, "corrupted frame was kept");
            tag = 0;
            for (int k = 0; k < 8; k++) tag |= longint'(rx_last[gp].b[k]) << (8 * k);
            committed[gp][tag] = rx_last[gp].b;
          end
        end
        if (tx_axis_tvalid[gp] && tx_axis_tready[gp]) begin
          bit sched_chk;
          sched_chk = sched_on[gp] && sched_phase[gp] != 2'd0;
          if (beat_idx[gp] == 0) begin
            start_slot = slot_cnt[gp];
            start_q = tx_queue[gp];
            if (sched_chk) begin
              if (sched_phase[gp] == 2'd2) begin
                check(tx_queue[gp] == slot_q[gp], $sformatf("port %0d frame of queue %0d in slot of %0d", gp, tx_queue[gp], slot_q[gp]));
                slot_frames++;
              end else if (sched_phase[gp] == 2'd3) begin
                check(!in_group(gp, tx_queue[gp]), "free time serves only queues outside the group");
                free_frames++;
              end
            end
          end
          for (int k = 0; k < 8; k++) if (tx_axis_tkeep[gp][k]) cur.push_back(tx_axis_tdata[gp][8*k +: 8]);
          beat_idx[gp]++;
          if (tx_axis_tlast[gp]) begin
            bytes_t f, body;
            int q;
            logic [31:0] fcs;
            if (sched_chk) check(slot_cnt[gp] == start_slot, "frame spans a slot change");
            f = cur;
            cur.delete();
            tx_frames++;
            frames_sent[gp]++;
            check(f.size() >= 64, "frame size");
            body = f[0:f.size()-5];
            fcs = {f[f.size()-1], f[f.size()-2], f[f.size()-3], f[f.size()-4]};
            check(fcs == fcs_of(body), "FCS");
            if (body.size() % 8 > 4 || body.size() % 8 == 0) spill_frames++;
            q = body[2];
            check(body[0] == 8'hA5 && body[1] == 8'(gp) && q < NQ, "frame tag");
            check(q == start_q, "tx_queue names the frame's queue");
            if (q < NQ && txexp[gp][q].size() != 0) begin
              check(body == txexp[gp][q][0], $sformatf("frame content port %0d queue %0d", gp, q));
              void'(txexp[gp][q].pop_front());
            end else check(0, "unexpected frame");
            if (q < NQ) begin
              bytes_q[gp][q] += body.size();
              if (measuring && gp == 0) meas_bytes[q] += body.size();
            end
            rx_last[gp] = '{b: f, bad: corrupt_cur[gp]};
            rx_last_v[gp] = 1;
            beat_idx[gp] = 0;
            corrupt_cur[gp] = (gp == 1) && (frames_sent[gp] % 5 == 0);
          end
        end
      end
    end
  end

  // --------------------------------------------- RX host and memory writes
  int wr_bp = 0, irq_cnt = 0, delivered = 0;
  bit hold_free = 0;
  for (genvar gp = 0; gp < P; gp++) begin : g_host_rx
    logic [31:0] pool[$];
    int rr = 0;
    initial for (int k = 0; k < 40; k++) pool.push_back(32'h2000_0000 + (32'(gp) << 24) + (32'(k) << 11));
    always @(posedge clk) begin
      if (rst) begin
        free_valid[gp] <= 0; free_addr[gp] <= 0; wr_ready[gp] <= 0;
        rxq_pop_en[gp] <= 0; rxq_pop_q[gp] <= 0;
      end else begin
        // memory writes
        if (wr_valid[gp] && wr_ready[gp]) begin
          logic [63:0] d;
          d = mem_rd(wr_addr[gp]);
          for (int k = 0; k < 8; k++) if (wr_strb[gp][k]) d[8*k +: 8] = wr_data[gp][8*k +: 8];
          mem[wr_addr[gp] >> 3] = d;
        end
        if (wr_valid[gp] && !wr_ready[gp]) wr_bp++;
        wr_ready[gp] <= ($urandom % 6) != 0;
        for (int k = 0; k < NRQ; k++) if (irq[gp][k]) irq_cnt++;
        // free buffers
        if (free_valid[gp] && free_ready[gp]) void'(pool.pop_front());
        free_valid[gp] <= !(gp == 2 && hold_free) && pool.size() != 0;
        free_addr[gp]  <= (pool.size() != 0) ? pool[0] : 32'h0;
        // received pointers
        if (rxq_pop_en[gp]) begin
          if (rxq_nonempty[gp][rxq_pop_q[gp]]) begin
            logic [31:0] a;
            int len, words;
            longint tag;
            bytes_t got;
            a = rxq_pop_desc[gp].addr;
            len = rxq_pop_desc[gp].len;
            words = (len + 4 + 7) / 8;
            got.delete();
            for (int i = 0; i < len + 4; i++) got.push_back(mem_rd(a + 32'(i & ~7))[8*(i%8) +: 8]);
            tag = 0;
            for (int k = 0; k < 8; k++) tag |= longint'(got[k]) << (8 * k);
            if (committed[gp].exists(tag)) begin
              check(got == committed[gp][tag], "received frame in host memory");
              committed[gp].delete(tag);
            end else begin
              check(0, $sformatf("port %0d received an unknown frame %h len %0d", gp, tag, len));
              if (failures < 5) foreach (committed[gp][t]) $display("  known %h len %0d", t, committed[gp][t].size());
            end
            check(mem_rd(a + 32'(8 * words)) != 64'h0, "arrival timestamp written");
            delivered++;
            pool.push_back(a);
          end
          rxq_pop_en[gp] <= 0;
        end else begin
          for (int i = 1; i <= NRQ; i++) begin
            int k;
            k = (rr + i) % NRQ;
            if (!rxq_pop_en[gp] && rxq_nonempty[gp][k]) begin
              rxq_pop_en[gp] <= 1;
              rxq_pop_q[gp] <= RQW'(k);
              rr = k;
              break;
            end
          end
        end
      end
    end
  end

  // ------------------------------------------------------------- register bus
  task automatic axi_write(input logic [15:0] a, input logic [31:0] d);
    @(posedge clk);
    s_axil_awaddr <= a; s_axil_wdata <= d; s_axil_wstrb <= 4'hF;
    s_axil_awvalid <= 1; s_axil_wvalid <= 1; s_axil_bready <= 1;
    @(posedge clk iff s_axil_awready);
    s_axil_awvalid <= 0; s_axil_wvalid <= 0;
    @(posedge clk iff s_axil_bvalid);
    s_axil_bready <= 0;
  endtask

  task automatic axi_read(input logic [15:0] a, output logic [31:0] d);
    @(posedge clk);
    s_axil_araddr <= a; s_axil_arvalid <= 1; s_axil_rready <= 1;
    @(posedge clk iff s_axil_arready);
    s_axil_arvalid <= 0;
    @(posedge clk iff s_axil_rvalid);
    d = s_axil_rdata;
    s_axil_rready <= 0;
  endtask

  function automatic logic [15:0] ra(int p, logic [11:0] off);
    return {4'(p), off};
  endfunction

  // mode switches seen on the scheduled ports
  int to_sched = 0, to_rr = 0;
  logic [1:0] ph_prev [P];
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      if (!rst && ph_prev[p] == 2'd0 && sched_phase[p] != 2'd0) to_sched++;
      if (!rst && ph_prev[p] != 2'd0 && sched_phase[p] == 2'd0) to_rr++;
      ph_prev[p] = sched_phase[p];
    end
  end

  // ------------------------------------------------------------------ main
  initial begin
    logic [31:0] d, t0, t1;
    s_axil_awvalid = 0; s_axil_wvalid = 0; s_axil_bready = 0; s_axil_arvalid = 0; s_axil_rready = 0;
    s_axil_awaddr = 0; s_axil_wdata = 0; s_axil_wstrb = 0; s_axil_araddr = 0;
    for (int p = 0; p < P; p++) begin
      txq_push_valid[p] = 0; txq_push_prio[p] = 0; txq_push_desc[p] = '0;
      rd_req_ready[p] = 0; rd_rsp_valid[p] = 0; rd_rsp_data[p] = 0;
      tx_axis_tready[p] = 0; free_valid[p] = 0; free_addr[p] = 0; wr_ready[p] = 0;
      rxq_pop_en[p] = 0; rxq_pop_q[p] = 0; corrupt_cur[p] = 0; beat_idx[p] = 0;
      rx_last_v[p] = 0; slot_cnt[p] = 0; sched_on[p] = 0; frames_sent[p] = 0; ph_prev[p] = 0;
      rr_push[p] = 0;
      for (int r = 0; r < 8; r++) pr_off[p][r] = 0;
      for (int q = 0; q < NQ; q++) begin seq[p][q] = 0; have_prep[p][q] = 0; bytes_q[p][q] = 0; end
    end
    for (int q = 0; q < NQ; q++) meas_bytes[q] = 0;
    active_q[0] = '{20, 22, 5};
    active_q[1] = '{8, 3, 7, 20};
    active_q[2] = '{0, 1, 2, 31};
    active_q[3] = '{5};
    for (int p = 0; p < P; p++)
      foreach (active_q[p][i]) if (p != 2) begin
        pr_base[p].push_back(active_q[p][i]);
        pr_cnt[p].push_back(1);
      end
    pr_base[2] = '{0, 31};
    pr_cnt[2]  = '{3, 1};
    repeat (5) @(posedge clk);
    rst <= 0;

    // priority map: the identity after reset, then the mapping above
    repeat (2) @(posedge clk);
    axi_read(ra(2, REG_PRIO0 + 12), d);
    check(d == 32'h0000_0103, $sformatf("PRIO_MAP reset value %h", d));
    for (int p = 0; p < P; p++)
      foreach (pr_base[p][i]) axi_write(ra(p, REG_PRIO0 + 12'(4 * i)), 32'((pr_cnt[p][i] << 8) | pr_base[p][i]));
    axi_read(ra(2, REG_PRIO0), d);
    check(d == 32'h0000_0300, $sformatf("PRIO_MAP read back %h", d));
    push_on = 1;

    // PTP clock: nominal period, a phase step, and the time read back
    axi_write({PAGE_GLOBAL, REG_PTP_PERIOD}, PTP_PERIOD_DEF);
    axi_read({PAGE_GLOBAL, REG_PTP_NS}, t0);
    axi_write({PAGE_GLOBAL, REG_PTP_ADJ}, 32'd100_000);
    axi_read({PAGE_GLOBAL, REG_PTP_NS}, t1);
    check(t1 - t0 >= 100_000 && t1 - t0 < 100_200, $sformatf("PTP step %0d", t1 - t0));
    axi_read({PAGE_GLOBAL, REG_PTP_PERIOD}, d);
    check(d == PTP_PERIOD_DEF, "PTP period read back");

    // port 0: queue 20 for 90 us, 21 and 22 for 5 us each, window 100 us
    axi_write(ra(0, REG_TAQ_BASE), 20);
    axi_write(ra(0, REG_NSLOTS), 3);
    axi_write(ra(0, REG_CYCLE_US), 100);
    axi_write(ra(0, REG_GUARD_US), 1);
    axi_write(ra(0, REG_SCR0 + 0), 0);
    axi_write(ra(0, REG_SCR0 + 4), 1);
    axi_write(ra(0, REG_SCR0 + 8), 2);
    axi_write(ra(0, REG_TQCR0 + 0), 90);
    axi_write(ra(0, REG_TQCR0 + 4), 5);
    axi_write(ra(0, REG_TQCR0 + 8), 5);
    axi_read(ra(0, REG_TQCR0 + 0), d);
    check(d == 90, "TQCR read back");
    // port 1: queue 8 for 20 us, queue 10 for 10 us, window 50 us
    axi_write(ra(1, REG_TAQ_BASE), 8);
    axi_write(ra(1, REG_NSLOTS), 2);
    axi_write(ra(1, REG_CYCLE_US), 50);
    axi_write(ra(1, REG_GUARD_US), 1);
    axi_write(ra(1, REG_SCR0 + 0), 0);
    axi_write(ra(1, REG_SCR0 + 4), 2);
    axi_write(ra(1, REG_TQCR0 + 0), 20);
    axi_write(ra(1, REG_TQCR0 + 8), 10);
    axi_write(ra(1, REG_CTRL), 1);
    wait_us(us_now + 2);   // a frame started in round-robin may still be going out
    sched_on[1] = 1;

    // port 0 runs round-robin first, then switches to the schedule
    wait_us(20);
    axi_write(ra(0, REG_CTRL), 1);
    wait_us(us_now + 2);
    sched_on[0] = 1;
    wait_us(21);
    measuring = 1;
    fork
      begin wait_us(150); hold_free = 1; wait_us(300); hold_free = 0; end
      begin
        wait_us(521);
        axi_read(ra(0, REG_STATUS), d);
        check(d[31:30] == 2'd2 || d[31:30] == 2'd1, "status shows the schedule");
      end
    join
    measuring = 0;
    // back to round-robin, stop pushing and drain
    sched_on[0] = 0; sched_on[1] = 0;
    axi_write(ra(0, REG_CTRL), 0);
    axi_write(ra(1, REG_CTRL), 0);
    push_on = 0;
    wait_us(620);

    // ---------------------------------------------------------- final checks
    for (int p = 0; p < P; p++) begin
      for (int q = 0; q < NQ; q++) check(txexp[p][q].size() == int'(have_prep[p][q]),
                                           $sformatf("port %0d queue %0d not drained", p, q));
      check(committed[p].num() == 0, $sformatf("port %0d: %0d good frames not delivered", p, committed[p].num()));
    end
    check(bytes_q[1][10] == 0, "empty queue 10 sent nothing");
    check(range_spread > 30 && bytes_q[2][0] > 0 && bytes_q[2][1] > 0 && bytes_q[2][2] > 0,
          "priority 0 of port 2 spread over queues 0..2");
    begin
      real share, total;
      total = 0;
      for (int q = 0; q < NQ; q++) total += meas_bytes[q];
      share = meas_bytes[20] / total;
      $display("port 0 over 500 us: queue 20 %0d B, queue 22 %0d B, queue 5 %0d B, share of queue 20 %.3f",
               meas_bytes[20], meas_bytes[22], meas_bytes[5], share);
      // 89 us of every 100 us usable by queue 20, 4 us by queue 22, none by 5
      check(share > 0.90 && share < 0.97, "queue 20 byte share");
      check(meas_bytes[5] < 2048, "queue 5 outside the schedule");
      // queue 20 against the port's peak (8 bytes per clock)
      $display("queue 20 used %.3f of the port's peak", meas_bytes[20] / (500.0 * 156.25 * 8.0));
    end
    check(ts_count == tx_frames, "one TX timestamp per frame");
    check(irq_cnt == delivered, "one interrupt per delivered frame");
    // every mechanism must have happened
    check(tx_stall > 0, "serializer stall");
    check(rd_bp > 0, "memory read back-pressure");
    check(wr_bp > 0, "memory write back-pressure");
    check(push_full > 0, "full TX queue");
    check(to_sched >= 2, "switch to the schedule");
    check(to_rr >= 2, "switch back to round-robin");
    check(slot_cnt[0] > 10 && slot_cnt[1] > 10, "slot starts");
    check(guard_cnt > 0, "guardband");
    check(idle_slot_clk > 1000, "idle slot of an empty queue");
    check(free_frames > 10, "frames in free time");
    check(slot_frames > 100, "frames in slots");
    check(spill_frames > 10, "FCS in an extra beat");
    check(crc_drops > 10, "CRC drops");
    check(ovf_drops > 0, "overflow drops");
    check(delivered > 100, "frames delivered");
    check(irq_cnt > 0, "interrupts");
    check(range_spread > 0, "pointers spread over a priority's queues");
    $display("frames=%0d delivered=%0d crc_drop=%0d ovf_drop=%0d stall=%0d rd_bp=%0d wr_bp=%0d full=%0d",
             tx_frames, delivered, crc_drops, ovf_drops, tx_stall, rd_bp, wr_bp, push_full);
    $display("to_sched=%0d to_rr=%0d slots=%0d/%0d guard=%0d idle_slot=%0d free=%0d in_slot=%0d spill=%0d irq=%0d",
             to_sched, to_rr, slot_cnt[0], slot_cnt[1], guard_cnt, idle_slot_clk, free_frames, slot_frames,
             spill_frames, irq_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
