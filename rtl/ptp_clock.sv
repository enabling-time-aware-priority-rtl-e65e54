// ptp_clock: the node's PTP (IEEE 1588) hardware clock and microsecond pulse.
//
// The time-aware schedule runs on the node's reference time, which a PTP
// servo in software keeps aligned with the grandmaster. This module is the
// hardware side of that clock: a time of day (48-bit seconds, 30-bit
// nanoseconds, 16-bit fraction of a nanosecond) that advances by `period`
// nanoseconds on every clock. Software trims the rate by writing a new
// period (frequency correction) and corrects the phase by writing a signed
// nanosecond step (`adj_ns`). The paper enables such a clock but does not
// describe its insides; this is the simplest clock that a servo can drive.
//
// `us_tick` is a one-clock pulse each time a further 1000 ns of local time
// have passed. It follows the trimmed rate but ignores phase steps, so a
// step never shortens or lengthens a schedule slot by more than the step
// itself spreads over rate trims (this choice is this design's own).
//
// Timing: tod_* and us_tick are registered; a write of period or adj_ns takes
// effect on the next clock edge. Reset loads time 0 and the 6.4 ns period.
module ptp_clock
  import tas_pkg::*;
#(
  parameter logic [31:0] PERIOD_DEFAULT = PTP_PERIOD_DEF
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] period,     // ns per clock, 16.16 fixed point
  input  logic        period_wr,
  input  logic [31:0] adj_ns,     // signed step in ns, |step| < 1 s
  input  logic        adj_wr,
  output logic [47:0] tod_sec,
  output logic [29:0] tod_ns,
  output logic        us_tick
);

  localparam logic [29:0] NS_PER_S = 30'd1_000_000_000;

  logic [31:0] period_q;
  logic [15:0] frac_q;       // fraction of a nanosecond
  logic [31:0] us_acc_q;     // local ns since the last microsecond, 16.16

  // Nanoseconds and fraction after one period.
  logic [47:0] ns_sum;       // {ns, frac} + period, wide enough for no overflow
  logic signed [32:0] ns_next_s;

  always_comb begin
    ns_sum  = {2'b00, tod_ns, frac_q} + {16'd0, period_q};
    ns_next_s = $signed({2'b00, ns_sum[46:16]});
    if (adj_wr) ns_next_s = ns_next_s + $signed({adj_ns[31], adj_ns});
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      period_q <= PERIOD_DEFAULT;
      frac_q   <= '0;
      tod_ns   <= '0;
      tod_sec  <= '0;
      us_acc_q <= '0;
      us_tick  <= 1'b0;
    end else begin
      if (period_wr) period_q <= period;
      frac_q <= ns_sum[15:0];
      // Wrap the nanoseconds into the second, in either direction.
      if (ns_next_s < 0) begin
        tod_ns  <= 30'(ns_next_s + 33'(NS_PER_S));
        tod_sec <= tod_sec - 48'd1;
      end else if (ns_next_s >= 33'(NS_PER_S)) begin
        tod_ns  <= 30'(ns_next_s - 33'(NS_PER_S));
        tod_sec <= tod_sec + 48'd1;
      end else begin
        tod_ns  <= 30'(ns_next_s);
      end
      // Microsecond pulse from elapsed local time (1000 ns = 1000 << 16).
      if (us_acc_q + period_q >= 32'd1000 << 16) begin
        us_acc_q <= us_acc_q + period_q - (32'd1000 << 16);
        us_tick  <= 1'b1;
      end else begin
        us_acc_q <= us_acc_q + period_q;
        us_tick  <= 1'b0;
      end
    end
  end

  logic unused;
  assign unused = ns_sum[47];

endmodule
