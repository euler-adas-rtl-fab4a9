// simd_lzc: SIMD leading-zero counter over a W-bit vector of four W/4-bit
// segments (pipeline stage 5, normalisation).
//
// Each segment has its own leading-one detector giving a valid bit (VM: the
// segment is not all zero) and a count (CM: leading zeros in the segment).
// Following the paper's merge tree, pairs of segments are combined by a
// multiplexer: the upper count if the upper segment is valid, otherwise the
// segment width plus the lower count, and the valid bits are ORed. The first
// level gives the 2-segment (P16) lanes, the second the full-width (P32)
// lane; the mode selects which level drives each lane output.
//
// Interface: din, mode; cnt[j] leading zeros of lane j (lane width when the
// lane is zero), valid[j] lane j is non-zero. Combinational.
module simd_lzc
  import euler_pkg::*;
#(
  parameter int W = 128,
  localparam int SEG = W / 4,
  localparam int CW  = $clog2(W) + 1
) (
  input  logic [W-1:0]  din,
  input  mode_e         mode,
  output logic [CW-1:0] cnt   [4],
  output logic [3:0]    valid
);

  logic [CW-1:0] cm0 [4];
  logic [3:0]    vm0;
  logic [CW-1:0] cm1 [2];
  logic [1:0]    vm1;
  logic [CW-1:0] cm2;
  logic          vm2;

  // Segment leading-one detectors.
  always_comb begin
    for (int s = 0; s < 4; s++) begin
      cm0[s] = CW'(SEG);
      vm0[s] = |din[SEG*s +: SEG];
      for (int b = 0; b < SEG; b++)
        if (din[SEG*s + b]) cm0[s] = CW'(SEG - 1 - b);
    end
  end

  // Merge tree.
  always_comb begin
    for (int k = 0; k < 2; k++) begin
      vm1[k] = vm0[2*k+1] | vm0[2*k];
      cm1[k] = vm0[2*k+1] ? cm0[2*k+1] : CW'(SEG) + cm0[2*k];
    end
    vm2 = vm1[1] | vm1[0];
    cm2 = vm1[1] ? cm1[1] : CW'(2*SEG) + cm1[0];
  end

  always_comb begin
    for (int j = 0; j < 4; j++) cnt[j] = '0;
    valid = '0;
    case (mode)
      MODE_P8: begin
        for (int j = 0; j < 4; j++) cnt[j] = cm0[j];
        valid = vm0;
      end
      MODE_P16: begin
        cnt[0] = cm1[0];
        cnt[1] = cm1[1];
        valid  = {2'b00, vm1};
      end
      default: begin
        cnt[0] = cm2;
        valid  = {3'b000, vm2};
      end
    endcase
  end

endmodule
