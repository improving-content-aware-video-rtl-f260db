// content_identifier: flags packets that carry a non-IRAP picture NAL unit.
//
// The forwarding device hands over the packet's protocol identifier (which
// video coding standard the payload uses) and the nal_unit_type field of its
// NAL header. The output non_irap is high for a picture (VCL) NAL unit that is
// not an intra random access point, i.e. a unit that may be dropped with less
// harm to the decoded video:
//   H.265/HEVC: types 0..15 and 24..31 (16..23 are IRAP)
//   H.264/AVC : types 1..4             (5 is IDR)
// Parameter sets, SEI and other non-picture units, and packets of unknown
// protocol, give non_irap = 0 so they are never recommended for dropping.
//
// The block's role and its two inputs follow the source design; the protocol
// code values and the decision to protect non-picture units are this
// design's own choices. NAL type numbers come from the two standards.
//
// Timing: purely combinational, no clock.
module content_identifier
  import innet_pkg::*;
#(
  parameter int unsigned NAL_W = 6   // H.265 field width; H.264 uses the low 5 bits
) (
  input  logic [PROT_W-1:0] prot_id,
  input  logic [NAL_W-1:0]  nal_type,
  output logic              non_irap
);

  logic [5:0] t265;
  logic [4:0] t264;

  always_comb begin
    t265 = 6'(nal_type);
    t264 = 5'(nal_type);
    unique case (prot_id)
      PROT_H265: non_irap = (int'(t265) <= HEVC_VCL_LAST) &&
                            !((int'(t265) >= HEVC_IRAP_FIRST) && (int'(t265) <= HEVC_IRAP_LAST));
      PROT_H264: non_irap = (int'(t264) >= AVC_SLICE_FIRST) && (int'(t264) < AVC_IDR);
      default:   non_irap = 1'b0;
    endcase
  end

endmodule
