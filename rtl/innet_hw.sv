// innet_hw: in-network hardware module for content-aware packet dropping.
//
// Sits beside a packet-forwarding device (a switch) and tells it, packet by
// packet, whether the packet should be dropped during network congestion so
// that packets carrying intra random access point (IRAP) pictures of a video
// stream survive. Two blocks work in parallel on the packet presented with
// data_valid:
//   content_identifier - is this a non-IRAP picture NAL unit? (Prot. ID,
//                        NAL Type)
//   drop_control       - is there too little buffer space left to last until
//                        the congestion ends? (Cong. Flag, Cong. Per., Data
//                        Valid, Buffer Len., Buffer Occ.)
// drop_packet is high when both answers are yes. It is a recommendation: the
// forwarding device decides whether to act on it.
//
// The structure, the signal set and the rule "drop when both are true" follow
// the source design; widths, the protocol code, the time base and the
// throughput measurement are this design's choices (see the two sub-blocks).
//
// Two status outputs, congested and p_tp, expose the drop controller's state
// for monitoring; the source interface has only Drop Packet.
//
// Timing: drop_packet is combinational in the cycle data_valid is high; the
// congestion timer and throughput counter are clocked by clk with active-low
// synchronous reset rst_n.
module innet_hw
  import innet_pkg::*;
#(
  parameter int unsigned NAL_W       = 6,
  parameter int unsigned CPER_W      = 32,
  parameter int unsigned BUF_W       = 16,
  parameter int unsigned TICK_CYCLES = 1024
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [PROT_W-1:0] prot_id,     // Prot. ID
  input  logic [NAL_W-1:0]  nal_type,    // NAL Type
  input  logic              cong_flag,   // Cong. Flag
  input  logic [CPER_W-1:0] cong_per,    // Cong. Per.
  input  logic              data_valid,  // Data Valid
  input  logic [BUF_W-1:0]  buffer_len,  // Buffer Len.
  input  logic [BUF_W-1:0]  buffer_occ,  // Buffer Occ.
  output logic              drop_packet, // Drop Packet
  // Status outputs, not part of the source interface (observability only).
  output logic              congested,   // congestion timer running
  output logic [$clog2(TICK_CYCLES+1)-1:0] p_tp  // measured packets per time unit
);

  logic non_irap;
  logic no_space;

  content_identifier #(.NAL_W(NAL_W)) u_content_identifier (
    .prot_id  (prot_id),
    .nal_type (nal_type),
    .non_irap (non_irap)
  );

  drop_control #(
    .CPER_W      (CPER_W),
    .BUF_W       (BUF_W),
    .TICK_CYCLES (TICK_CYCLES)
  ) u_drop_control (
    .clk        (clk),
    .rst_n      (rst_n),
    .cong_flag  (cong_flag),
    .cong_per   (cong_per),
    .data_valid (data_valid),
    .buffer_len (buffer_len),
    .buffer_occ (buffer_occ),
    .no_space   (no_space),
    .congested  (congested),
    .p_tp       (p_tp)
  );

  assign drop_packet = no_space && non_irap;

endmodule
