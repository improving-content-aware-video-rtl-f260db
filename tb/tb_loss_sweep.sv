// tb_loss_sweep: IRAP packet loss with and without the drop recommendation,
// swept over congestion levels, for two synthetic video stream shapes.
//
// The switch is emulated as in the evaluation setup: a 60-packet buffer, 60
// packets in and 120 out per time unit, no output while congested. The time
// unit is shortened to 128 clock cycles (the least that still lets 120
// packets leave at one per cycle). Congestion comes in periodic episodes of
// D out of every 20 time units, D swept from 2 to 11. With 60 packets in and
// a 60-packet buffer, an episode of D units loses 60 * (D - 1) packets, so the
// packet loss runs from 5 % to 50 % in 5 % steps.
//
// Streams are synthetic groups of pictures: 3 parameter-set packets, an IRAP
// picture of KI packets, then 15 non-IRAP pictures of KP packets each.
//   small pictures: KI = 6,  KP = 2   (a low-resolution stream)
//   large pictures: KI = 90, KP = 20  (an IRAP picture larger than the buffer)
// For every point the testbench checks that the buffer obeying drop_packet
// never loses more IRAP packets than the plain tail-drop buffer, and for
// each stream that it loses fewer in total. It prints one table row per
// point. Drop decisions themselves are checked cycle by cycle in
// tb_innet_hw; here only the outcome is judged.
module tb_loss_sweep;
  import innet_pkg::*;

  localparam int TICK     = 128;
  localparam int BUFLEN   = 60;
  localparam int RATE_IN  = 60;
  localparam int RATE_OUT = 120;
  localparam int PERIOD   = 20;
  localparam int EPISODES = 10;

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
  logic [7:0]  p_tp;

  always #5 clk = ~clk;

  innet_hw #(.TICK_CYCLES(TICK)) dut (
    .clk, .rst_n, .prot_id, .nal_type, .cong_flag, .cong_per, .data_valid,
    .buffer_len, .buffer_occ, .drop_packet, .congested, .p_tp
  );

  function automatic bit arrives(int pos, int rate);
    return ((pos + 1) * rate / TICK) > (pos * rate / TICK);
  endfunction

  // One sweep point; returns losses through the output arguments.
  task automatic run_point(input int ki, input int kp, input int d,
                           output int pk_in, output int lost_b, output int lost_e,
                           output int irap_in, output int irap_b, output int irap_e);
    int occ_b, occ_e, remain, pos, unit, pic, pkt_in_pic, pic_len;
    bit arr, dep, is_irap;
    occ_b = 0; occ_e = 0; remain = 0;
    pk_in = 0; lost_b = 0; lost_e = 0; irap_in = 0; irap_b = 0; irap_e = 0;
    pic = -1; pkt_in_pic = 0; pic_len = 3;   // start with the parameter sets
    rst_n = 1'b0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    // One unit of traffic before the first episode so the rate is measured.
    for (int cyc = 0; cyc < (1 + PERIOD * EPISODES) * TICK; cyc++) begin
      unit = cyc / TICK;
      pos  = cyc % TICK;
      cong_flag = 1'b0;
      if (pos == 0 && unit >= 1 && (unit - 1) % PERIOD == 0) begin
        cong_flag = 1'b1;
        cong_per  = 32'(d);
        remain    = d;
      end
      arr = arrives(pos, RATE_IN);
      dep = (remain == 0) && arrives(pos, RATE_OUT);
      // Stream position: pic -1 = parameter sets, 0 = IRAP, 1..15 = non-IRAP.
      is_irap = (pic == 0);
      prot_id = PROT_H265;
      nal_type = (pic < 0) ? 6'd33 : (pic == 0) ? 6'd19 : 6'd1;
      data_valid = arr;
      buffer_occ = 16'(occ_e);
      #1;
      if (dep && occ_b > 0) occ_b--;
      if (dep && occ_e > 0) occ_e--;
      if (arr) begin
        pk_in++;
        if (is_irap) irap_in++;
        if (occ_b < BUFLEN) occ_b++;
        else begin lost_b++; if (is_irap) irap_b++; end
        if (drop_packet) lost_e++;
        else if (occ_e < BUFLEN) occ_e++;
        else begin lost_e++; if (is_irap) irap_e++; end
        if (drop_packet && is_irap) begin
          failures++;
          $display("FAIL IRAP packet recommended for dropping");
        end
        pkt_in_pic++;
        if (pkt_in_pic == pic_len) begin
          pkt_in_pic = 0;
          pic = (pic == 15) ? -1 : pic + 1;
          pic_len = (pic < 0) ? 3 : (pic == 0) ? ki : kp;
        end
      end
      if (pos == TICK - 1 && remain > 0) remain--;
      @(negedge clk);
    end
  endtask

  initial begin
    int shapes_ki[2] = '{6, 90};
    int shapes_kp[2] = '{2, 20};
    int ds[10] = '{2, 3, 4, 5, 6, 7, 8, 9, 10, 11};
    foreach (shapes_ki[s]) begin
      int tot_b, tot_e;
      tot_b = 0; tot_e = 0;
      $display("stream KI=%0d KP=%0d", shapes_ki[s], shapes_kp[s]);
      $display("  cong%%  loss%%(base)  loss%%(ext)  IRAP loss%%(base)  IRAP loss%%(ext)");
      foreach (ds[i]) begin
        int pk_in, lost_b, lost_e, irap_in, irap_b, irap_e;
        run_point(shapes_ki[s], shapes_kp[s], ds[i],
                  pk_in, lost_b, lost_e, irap_in, irap_b, irap_e);
        $display("  %5.1f  %11.1f  %10.1f  %16.1f  %15.1f",
                 100.0 * ds[i] / PERIOD, 100.0 * lost_b / pk_in, 100.0 * lost_e / pk_in,
                 100.0 * irap_b / irap_in, 100.0 * irap_e / irap_in);
        checks++;
        if (irap_e > irap_b) begin
          failures++;
          $display("FAIL more IRAP loss with the recommendation at D=%0d", ds[i]);
        end
        checks++;
        if (lost_b == 0 && ds[i] > 1) begin
          failures++;
          $display("FAIL no loss at D=%0d", ds[i]);
        end
        tot_b += irap_b; tot_e += irap_e;
      end
      checks++;
      if (tot_e >= tot_b) begin
        failures++;
        $display("FAIL IRAP loss not reduced for stream %0d", s);
      end
      $display("  IRAP packets lost in total: %0d baseline, %0d with recommendation", tot_b, tot_e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * 10 * ((1 + PERIOD * EPISODES) * TICK + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
