// tb_content_identifier: exhaustive check of the non-IRAP classifier.
//
// Every NAL type 0..63 is applied under each protocol code (not video,
// H.264/AVC, H.265/HEVC and two unused codes). The expected answer is taken
// from explicit lists of the picture NAL unit types of each standard, written
// out here independently of the block's range comparisons.
module tb_content_identifier;
  import innet_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [PROT_W-1:0] prot_id;
  logic [5:0]        nal_type;
  logic              non_irap;

  content_identifier #(.NAL_W(6)) dut (
    .prot_id  (prot_id),
    .nal_type (nal_type),
    .non_irap (non_irap)
  );

  // H.265 non-IRAP picture types: TRAIL_N/R, TSA, STSA, RADL, RASL (0..9),
  // reserved sub-layer non-reference/reference (10..15), reserved VCL 24..31.
  function automatic bit exp_h265(int t);
    int non_irap_list[] = '{0,1,2,3,4,5,6,7,8,9,10,11,12,13,14,15,
                            24,25,26,27,28,29,30,31};
    foreach (non_irap_list[i]) if (non_irap_list[i] == t) return 1'b1;
    return 1'b0;
  endfunction

  // H.264 non-IDR picture types: slice (1) and data partitions A, B, C (2..4).
  // The field is 5 bits wide, so types 32..63 alias 0..31.
  function automatic bit exp_h264(int t);
    int u = t % 32;
    return (u == 1) || (u == 2) || (u == 3) || (u == 4);
  endfunction

  initial begin
    int protos[5] = '{0, 1, 2, 3, 255};
    foreach (protos[p]) begin
      for (int t = 0; t < 64; t++) begin
        bit exp;
        prot_id  = PROT_W'(protos[p]);
        nal_type = 6'(t);
        #1;
        case (protos[p])
          1:       exp = exp_h264(t);
          2:       exp = exp_h265(t);
          default: exp = 1'b0;
        endcase
        checks++;
        if (non_irap !== exp) begin
          failures++;
          $display("FAIL prot=%0d nal=%0d non_irap=%0b expected %0b",
                   protos[p], t, non_irap, exp);
        end
      end
    end
    // Spot checks of well-known types.
    prot_id = PROT_H265; nal_type = 6'd19; #1; checks++; if (non_irap) failures++;  // IDR_W_RADL
    prot_id = PROT_H265; nal_type = 6'd21; #1; checks++; if (non_irap) failures++;  // CRA
    prot_id = PROT_H265; nal_type = 6'd1;  #1; checks++; if (!non_irap) failures++; // TRAIL_R
    prot_id = PROT_H265; nal_type = 6'd33; #1; checks++; if (non_irap) failures++;  // SPS
    prot_id = PROT_H264; nal_type = 6'd5;  #1; checks++; if (non_irap) failures++;  // IDR
    prot_id = PROT_H264; nal_type = 6'd7;  #1; checks++; if (non_irap) failures++;  // SPS
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
