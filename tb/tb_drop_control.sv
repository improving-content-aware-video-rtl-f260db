// tb_drop_control: cycle-by-cycle comparison of the drop controller with a
// reference model of the drop policy.
//
// The reference keeps its own time-unit counter, per-unit packet count and
// congestion countdown and evaluates "free space < throughput x (remaining
// time units - 1)" for each presented packet. Stimulus: a directed phase that
// checks the congestion length in clock cycles and the first-unit behaviour,
// then random packets, congestion notifications (including reloads during
// congestion) and buffer occupancies, some above the buffer length.
// Inputs are driven at the falling edge and outputs checked before the
// rising edge, so the checks also confirm the decision is given in the
// packet's own cycle.
module tb_drop_control;

  localparam int TICK = 8;
  localparam int CW   = 16;
  localparam int BW   = 8;
  localparam int TPW  = $clog2(TICK + 1);

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic cong_flag = 1'b0;
  logic [CW-1:0] cong_per = '0;
  logic data_valid = 1'b0;
  logic [BW-1:0] buffer_len = '0;
  logic [BW-1:0] buffer_occ = '0;
  logic no_space, congested;
  logic [TPW-1:0] p_tp;

  always #5 clk = ~clk;

  drop_control #(.CPER_W(CW), .BUF_W(BW), .TICK_CYCLES(TICK)) dut (
    .clk, .rst_n, .cong_flag, .cong_per, .data_valid,
    .buffer_len, .buffer_occ, .no_space, .congested, .p_tp
  );

  // Reference state.
  int r_pos;       // cycle within the time unit
  int r_count;     // packets seen so far in this unit
  int r_tp;        // packets in the last complete unit
  int r_timer;     // time units of congestion left, current one included

  int n_drop = 0, n_cong_cycles = 0;

  task automatic ref_reset();
    r_pos = 0; r_count = 0; r_tp = 0; r_timer = 0;
  endtask

  // Check the outputs for the inputs now applied, then advance the reference
  // across the coming rising edge.
  task automatic step_check();
    int t, free, need;
    bit e_cong, e_drop;
    #1;
    t      = cong_flag ? int'(cong_per) : r_timer;
    e_cong = (t > 0);
    free   = int'(buffer_len) - int'(buffer_occ);
    if (free < 0) free = 0;
    need   = e_cong ? r_tp * (t - 1) : 0;
    e_drop = data_valid && e_cong && (free < need);
    checks += 3;
    if (no_space !== e_drop) begin
      failures++;
      $display("FAIL t=%0t no_space=%0b exp=%0b (timer %0d tp %0d free %0d)",
               $time, no_space, e_drop, t, r_tp, free);
    end
    if (congested !== e_cong) begin
      failures++;
      $display("FAIL t=%0t congested=%0b exp=%0b", $time, congested, e_cong);
    end
    if (int'(p_tp) != r_tp) begin
      failures++;
      $display("FAIL t=%0t p_tp=%0d exp=%0d", $time, p_tp, r_tp);
    end
    if (e_drop) n_drop++;
    if (e_cong) n_cong_cycles++;
    // Advance the reference.
    r_count += int'(data_valid);
    if (cong_flag) r_timer = int'(cong_per);
    if (r_pos == TICK - 1) begin
      if (!cong_flag && r_timer > 0) r_timer--;
      r_tp = r_count; r_count = 0; r_pos = 0;
    end else begin
      r_pos++;
    end
  endtask

  initial begin
    int cong_cycles;
    ref_reset();
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1'b1;

    // Directed: one unit with 5 packets, then a 4-unit congestion starting at
    // a unit boundary. Congestion must last exactly 4 * TICK cycles.
    buffer_len = 8'd60;
    for (int c = 0; c < TICK; c++) begin
      data_valid = (c < 5);
      buffer_occ = 8'd50;
      step_check();
      @(negedge clk);
    end
    checks++;
    if (p_tp != 5) begin failures++; $display("FAIL p_tp after one unit = %0d", p_tp); end
    cong_cycles = 0;
    for (int c = 0; c < 6 * TICK; c++) begin
      cong_flag  = (c == 0);
      cong_per   = 16'd4;
      data_valid = (c % TICK) < 5;
      buffer_occ = 8'd50;   // free 10: drop while 5*(remaining) > 10
      if (congested || cong_flag) cong_cycles++;
      step_check();
      // With 4 units: remaining-1 = 3,2,1,0 -> need 15,10,5,0: drops only in
      // the first unit.
      @(negedge clk);
    end
    cong_flag = 1'b0;
    checks++;
    if (cong_cycles != 4 * TICK) begin
      failures++;
      $display("FAIL congestion lasted %0d cycles, expected %0d", cong_cycles, 4 * TICK);
    end

    // Random phase.
    for (int c = 0; c < 20000; c++) begin
      data_valid = ($urandom_range(0, 99) < 60);
      cong_flag  = ($urandom_range(0, 99) == 0);
      cong_per   = CW'($urandom_range(0, 12));
      buffer_len = BW'($urandom_range(0, 99) < 80 ? 60 : $urandom_range(0, 255));
      buffer_occ = BW'($urandom_range(0, 70));
      if ($urandom_range(0, 499) == 0) begin
        // occasional reset in the middle of operation
        rst_n = 1'b0;
        @(negedge clk);
        rst_n = 1'b1;
        ref_reset();
      end
      step_check();
      @(negedge clk);
    end
    checks++;
    if (n_drop == 0) begin failures++; $display("FAIL no drop was ever flagged"); end
    $display("flagged %0d packets, %0d congested cycles", n_drop, n_cong_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
