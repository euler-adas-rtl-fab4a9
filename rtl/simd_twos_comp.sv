// simd_twos_comp: lane-wise conditional two's complement of a W-bit SIMD
// vector cut into four W/4-bit segments.
//
// As in the paper's two's-complement circuit, every segment is XORed with the
// negate flag of the lane it belongs to and a per-segment incrementer adds the
// carry. A segment that starts a lane takes the lane's negate flag as carry
// in; the other segments take the carry out of the segment below. The mode
// therefore only steers the flag multiplexers and the carry chain. The paper
// draws the circuit for a 32-bit word with the lane sign bits (A7, A15, A31)
// as flags; here the flags are an input so the same block negates signed
// products (stage 3) and takes absolute values of quire lanes (stage 5, with
// the lane MSBs as flags).
//
// Interface: din, mode, neg[j] (negate lane j); dout. Combinational.
module simd_twos_comp
  import euler_pkg::*;
#(
  parameter int W = 128,
  localparam int SEG = W / 4
) (
  input  logic [W-1:0] din,
  input  mode_e        mode,
  input  logic [3:0]   neg,
  output logic [W-1:0] dout
);

  always_comb begin
    logic          carry;
    logic          flag;
    logic [SEG:0]  sum;
    int            ll;
    ll    = lane_log2(mode);
    carry = 1'b0;
    dout  = '0;
    for (int s = 0; s < 4; s++) begin
      flag = neg[s >> ll];
      if ((s & ((1 << ll) - 1)) == 0) carry = flag;
      sum = {1'b0, din[SEG*s +: SEG] ^ {SEG{flag}}} + (SEG+1)'(carry);
      dout[SEG*s +: SEG] = sum[SEG-1:0];
      carry = sum[SEG];
    end
  end

endmodule
