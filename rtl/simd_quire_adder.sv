// simd_quire_adder: lane-partitioned adder of the 128-bit quire
// (pipeline stage 4, quire accumulation).
//
// The W-bit operands are added in four W/4-bit segment adders. The carry out
// of one segment enters the next only when both belong to the same lane, so
// one adder gives four 32-bit, two 64-bit or one 128-bit two's-complement sum
// depending on the mode; reconfiguration changes only the lane partitioning,
// as the paper requires of its SIMD-configurable accumulation tree. The
// paper's figure of that tree (shift amounts i = 8, j = 16, k = 32 per mode)
// is not reproduced bit for bit; this segmented carry chain is this design's
// reading of its function.
//
// Interface: a, b, mode; sum (carries out of each lane are dropped, the quire
// keeps carry headroom instead). Combinational.
module simd_quire_adder
  import euler_pkg::*;
#(
  parameter int W = 128,
  localparam int SEG = W / 4
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  mode_e        mode,
  output logic [W-1:0] sum
);

  always_comb begin
    logic         carry;
    logic [SEG:0] s;
    int           ll;
    ll    = lane_log2(mode);
    carry = 1'b0;
    for (int k = 0; k < 4; k++) begin
      if ((k & ((1 << ll) - 1)) == 0) carry = 1'b0;
      s = {1'b0, a[SEG*k +: SEG]} + {1'b0, b[SEG*k +: SEG]} + (SEG+1)'(carry);
      sum[SEG*k +: SEG] = s[SEG-1:0];
      carry = s[SEG];
    end
  end

endmodule
