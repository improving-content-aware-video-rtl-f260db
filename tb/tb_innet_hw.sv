// tb_innet_hw: end-to-end run of the in-network module beside an emulated
// switch, at the module's default parameters.
//
// The testbench plays the packet-forwarding device of the evaluation setup:
// a 60-packet buffer, 60 packets arriving and 120 leaving per time unit, and
// no output at all while the link is congested. A time unit is the module's
// default of 1024 clock cycles. Arrivals are an H.265 stream with IRAP and
// non-IRAP picture units plus parameter sets, with a few H.264 and non-video
// packets mixed in.
//
// Two buffers are fed the same arrivals: a baseline that only drops when full
// (tail drop) and one that also obeys drop_packet. Each cycle drop_packet is
// compared with the policy worked out from the testbench's own schedule:
// remaining congestion units, 60 packets per unit and the buffer's free
// space. At the end the IRAP losses of the two buffers are compared, and
// every mechanism of the design must have occurred at least once:
// congestion start, drop recommendation, an IRAP packet kept while space was
// short, a parameter set kept while space was short, a reload of the timer
// during congestion, the no-drop last unit, a baseline overflow, and the
// buffer draining after congestion.
module tb_innet_hw;
  import innet_pkg::*;

  localparam int TICK   = 1024;   // default of innet_hw
  localparam int BUFLEN = 60;
  localparam int RATE_IN  = 60;
  localparam int RATE_OUT = 120;
  localparam int UNITS  = 60;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic [PROT_W-1:0] prot_id = '0;
  logic [5:0]  nal_type = '0;
  logic        cong_flag = 1'b0;
  logic [31:0] cong_per = '0;
  logic        data_valid = 1'b0;
  logic [15:0] buffer_len = 16'(BUFLEN);
  logic [15:0] buffer_occ = '0;
  logic        drop_packet, congested;
  logic [10:0] p_tp;

  always #5 clk = ~clk;

  innet_hw dut (
    .clk, .rst_n, .prot_id, .nal_type, .cong_flag, .cong_per, .data_valid,
    .buffer_len, .buffer_occ, .drop_packet, .congested, .p_tp
  );

  // Congestion schedule: start unit and length in units; the entry at unit
  // 20 arrives while the one from unit 17 is still running (reload).
  int sched_start[6] = '{3, 8, 17, 20, 33, 45};
  int sched_len[6]   = '{1, 2,  6,  4,  5, 12};

  // Events counted.
  int n_cong = 0, n_drop = 0, n_irap_kept = 0, n_meta_kept = 0;
  int n_reload = 0, n_last_unit = 0, n_overflow = 0, n_drained = 0;
  int irap_in = 0, irap_lost_base = 0, irap_lost_ext = 0;
  int nonirap_lost_base = 0, nonirap_lost_ext = 0;

  function automatic bit arrives(int pos, int rate);
    return ((pos + 1) * rate / TICK) > (pos * rate / TICK);
  endfunction

  initial begin
    int occ_b, occ_e, remain, pos, unit, free, need;
    bit arr, dep, cong_now, exp_drop, is_irap, is_non_irap, was_cong;
    int kind;
    occ_b = 0; occ_e = 0; remain = 0; was_cong = 0;
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    for (int cyc = 0; cyc < UNITS * TICK; cyc++) begin
      unit = cyc / TICK;
      pos  = cyc % TICK;

      // Congestion notification at the start of a scheduled unit.
      cong_flag = 1'b0;
      if (pos == 0) begin
        foreach (sched_start[i]) if (sched_start[i] == unit) begin
          cong_flag = 1'b1;
          cong_per  = 32'(sched_len[i]);
          if (remain > 0) n_reload++;
          remain = sched_len[i];
          n_cong++;
        end
      end
      cong_now = (remain > 0);

      // Next packet of the stream.
      arr = arrives(pos, RATE_IN);
      dep = !cong_now && arrives(pos, RATE_OUT);
      kind = $urandom_range(0, 99);
      is_irap = 0; is_non_irap = 0;
      if (kind < 20) begin
        prot_id = PROT_H265; nal_type = 6'($urandom_range(16, 21)); is_irap = 1;
      end else if (kind < 85) begin
        prot_id = PROT_H265; nal_type = 6'($urandom_range(0, 9)); is_non_irap = 1;
      end else if (kind < 90) begin
        prot_id = PROT_H265; nal_type = 6'($urandom_range(32, 34));      // VPS/SPS/PPS
      end else if (kind < 94) begin
        prot_id = PROT_H264; nal_type = 6'(1); is_non_irap = 1;
      end else if (kind < 97) begin
        prot_id = PROT_H264; nal_type = 6'(5); is_irap = 1;
      end else begin
        prot_id = PROT_NONE; nal_type = 6'($urandom_range(0, 63));
      end
      data_valid = arr;
      buffer_occ = 16'(occ_e);

      // Expected recommendation: after the first unit the measured rate is 60.
      free = BUFLEN - occ_e;
      need = (cong_now && unit > 0) ? RATE_IN * (remain - 1) : 0;
      exp_drop = arr && is_non_irap && cong_now && (free < need);

      #1;
      checks++;
      if (drop_packet !== exp_drop) begin
        failures++;
        if (failures < 10)
          $display("FAIL cyc=%0d unit=%0d drop=%0b exp=%0b occ=%0d remain=%0d p_tp=%0d",
                   cyc, unit, drop_packet, exp_drop, occ_e, remain, p_tp);
      end
      if (unit > 0) begin
        checks++;
        if (p_tp != 11'(RATE_IN)) begin
          failures++;
          if (failures < 10) $display("FAIL p_tp=%0d at unit %0d", p_tp, unit);
        end
      end

      // Event counting.
      if (drop_packet) n_drop++;
      if (arr && cong_now && free < need && is_irap) n_irap_kept++;
      if (arr && cong_now && free < need && !is_irap && !is_non_irap) n_meta_kept++;
      if (arr && cong_now && remain == 1 && occ_e >= BUFLEN - 1) n_last_unit++;
      if (is_irap && arr) irap_in++;

      // Buffers: departure first, then the arrival.
      if (dep && occ_b > 0) occ_b--;
      if (dep && occ_e > 0) occ_e--;
      if (arr) begin
        if (occ_b < BUFLEN) occ_b++;
        else begin
          n_overflow++;
          if (is_irap) irap_lost_base++; else if (is_non_irap) nonirap_lost_base++;
        end
        if (drop_packet) nonirap_lost_ext++;
        else if (occ_e < BUFLEN) occ_e++;
        else begin
          if (is_irap) irap_lost_ext++; else if (is_non_irap) nonirap_lost_ext++;
        end
      end

      // End of a time unit.
      if (pos == TICK - 1 && remain > 0) begin
        remain--;
        was_cong = 1;
      end
      if (was_cong && remain == 0 && occ_e == 0) begin
        n_drained++;
        was_cong = 0;
      end
      @(negedge clk);
    end

    $display("IRAP packets %0d: lost %0d baseline, %0d with drop recommendation",
             irap_in, irap_lost_base, irap_lost_ext);
    $display("non-IRAP lost %0d baseline, %0d with drop recommendation",
             nonirap_lost_base, nonirap_lost_ext);
    $display("events: congestion %0d reload %0d drop %0d irap_kept %0d meta_kept %0d last_unit %0d overflow %0d drained %0d",
             n_cong, n_reload, n_drop, n_irap_kept, n_meta_kept, n_last_unit, n_overflow, n_drained);
    checks++; if (irap_lost_ext > irap_lost_base) begin failures++; $display("FAIL more IRAP loss than baseline"); end
    checks++; if (irap_lost_base == 0 || irap_lost_ext >= irap_lost_base) begin
      failures++; $display("FAIL IRAP loss not reduced");
    end
    checks++; if (n_cong == 0)      begin failures++; $display("FAIL no congestion"); end
    checks++; if (n_reload == 0)    begin failures++; $display("FAIL no timer reload"); end
    checks++; if (n_drop == 0)      begin failures++; $display("FAIL no drop recommended"); end
    checks++; if (n_irap_kept == 0) begin failures++; $display("FAIL no IRAP protected"); end
    checks++; if (n_meta_kept == 0) begin failures++; $display("FAIL no parameter set protected"); end
    checks++; if (n_last_unit == 0) begin failures++; $display("FAIL last-unit case never seen"); end
    checks++; if (n_overflow == 0)  begin failures++; $display("FAIL baseline never overflowed"); end
    checks++; if (n_drained == 0)   begin failures++; $display("FAIL buffer never drained"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (UNITS * TICK + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
