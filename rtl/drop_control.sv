// drop_control: decides whether the buffer can last until congestion ends.
//
// A congestion notification (cong_flag, one-cycle pulse) carries the length of
// the congestion in time units (cong_per). It loads a countdown timer; while
// the timer is non-zero the device is congested. For every packet presented
// (data_valid) the block estimates how many packets will still arrive before
// the congestion is over,
//     packets = p_tp * (timer - 1),
// and raises no_space when the free buffer space, buffer_len - buffer_occ,
// is smaller than that. This is the source design's drop policy: the timer
// value after the algorithm's "timer <- timer - 1" step is the one multiplied,
// so in the last time unit of a congestion no drop is recommended.
//
// Time base (design choice): one time unit is TICK_CYCLES clock cycles, kept
// by a free-running counter. The timer counts down by one at the end of each
// time unit; the unit in which cong_flag arrives counts as the first unit of
// the congestion. A new cong_flag reloads the timer, also during congestion.
//
// Packet throughput (design choice): the block has no throughput input, so
// p_tp is measured as the number of data_valid cycles in the last complete
// time unit. Until one unit has passed after reset p_tp is 0 and nothing is
// flagged.
//
// Timing: no_space and congested are combinational in the cycle of the packet
// (cong_flag is honoured in its own cycle, using cong_per directly); the
// timer, throughput and tick counter are registers with active-low
// synchronous reset.
module drop_control #(
  parameter int unsigned CPER_W      = 32,    // Cong. Per. width, time units
  parameter int unsigned BUF_W       = 16,    // Buffer Len./Occ. width, packets
  parameter int unsigned TICK_CYCLES = 1024,  // clock cycles per time unit
  localparam int unsigned TP_W       = $clog2(TICK_CYCLES + 1),
  localparam int unsigned TICK_W     = (TICK_CYCLES > 1) ? $clog2(TICK_CYCLES) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cong_flag,   // Cong. Flag (c_start)
  input  logic [CPER_W-1:0] cong_per,    // Cong. Per. (c_time)
  input  logic              data_valid,  // Data Valid
  input  logic [BUF_W-1:0]  buffer_len,  // Buffer Len.
  input  logic [BUF_W-1:0]  buffer_occ,  // Buffer Occ.
  output logic              no_space,    // not enough space until congestion ends
  output logic              congested,   // congestion timer running
  output logic [TP_W-1:0]   p_tp         // measured packets per time unit
);

  logic [TICK_W-1:0] tick_cnt;
  logic              tick;
  logic [TP_W-1:0]   win_cnt;
  logic [CPER_W-1:0] timer;

  assign tick = (32'(tick_cnt) == TICK_CYCLES - 1);

  // Time base and throughput measurement.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      tick_cnt <= '0;
      win_cnt  <= '0;
      p_tp     <= '0;
    end else if (tick) begin
      tick_cnt <= '0;
      win_cnt  <= '0;
      p_tp     <= win_cnt + TP_W'(data_valid);
    end else begin
      tick_cnt <= tick_cnt + 1'b1;
      win_cnt  <= win_cnt + TP_W'(data_valid);
    end
  end

  // Congestion timer: load on notification, count down once per time unit.
  always_ff @(posedge clk) begin
    if (!rst_n)
      timer <= '0;
    else if (cong_flag)
      timer <= cong_per;
    else if (tick && timer != '0)
      timer <= timer - 1'b1;
  end

  // Drop decision for the packet presented this cycle.
  logic [CPER_W-1:0]      t_now;
  logic [CPER_W-1:0]      t_rem;
  logic [TP_W+CPER_W-1:0] packets;
  logic [BUF_W-1:0]       b_free;

  always_comb begin
    t_now     = cong_flag ? cong_per : timer;
    congested = (t_now != '0);
    t_rem     = congested ? t_now - 1'b1 : '0;
    packets   = (TP_W+CPER_W)'(p_tp) * (TP_W+CPER_W)'(t_rem);
    b_free    = (buffer_occ > buffer_len) ? '0 : buffer_len - buffer_occ;
    no_space  = data_valid && congested && ((TP_W+CPER_W)'(b_free) < packets);
  end

  // A recommendation is only ever given for a presented packet.
  a_no_space_needs_valid: assert property (@(posedge clk) disable iff (!rst_n)
    no_space |-> data_valid);

endmodule
