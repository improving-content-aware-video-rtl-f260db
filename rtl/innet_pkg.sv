// innet_pkg: shared types and constants of the content-aware drop module.
//
// Holds the protocol identifier codes carried on the Prot. ID input and the
// NAL unit type numbers of H.264/AVC and H.265/HEVC that the content
// identifier needs. The protocol codes are this design's own choice; the NAL
// type numbers are those of the two video coding standards.
package innet_pkg;

  // Prot. ID codes (design choice: the source gives no encoding).
  localparam int unsigned PROT_W = 8;
  typedef enum logic [PROT_W-1:0] {
    PROT_NONE = 8'd0,   // not a video packet
    PROT_H264 = 8'd1,   // H.264/AVC NAL unit
    PROT_H265 = 8'd2    // H.265/HEVC NAL unit
  } prot_id_e;

  // H.265/HEVC nal_unit_type (6 bits). Types 0..31 are picture (VCL) units,
  // 16..23 of them IRAP (BLA, IDR, CRA and reserved IRAP types).
  localparam int unsigned HEVC_IRAP_FIRST = 16;
  localparam int unsigned HEVC_IRAP_LAST  = 23;
  localparam int unsigned HEVC_VCL_LAST   = 31;

  // H.264/AVC nal_unit_type (5 bits). 1..4 are non-IDR slices and slice data
  // partitions, 5 is an IDR slice; everything else is not picture data.
  localparam int unsigned AVC_SLICE_FIRST = 1;
  localparam int unsigned AVC_IDR         = 5;

endpackage
