// simd_shifter: SIMD logarithmic barrel shifter (left shift) over a W-bit
// vector of four W/4-bit segments.
//
// Each of the log2(W) stages shifts by a power of two when the corresponding
// bit of the lane's shift amount is set. Bits that would cross a lane
// boundary are replaced by zeros, so the same shifter network serves four
// narrow lanes, two medium lanes or one full-width lane. The engine uses it
// to align products and addends to the quire (stage 3) and to normalise the
// accumulated quire lanes (stage 5). The paper names a SIMD logarithmic
// barrel shifter; the masking scheme is this design's choice.
//
// Interface: din, mode, shamt[j] shift of lane j (bits beyond the lane width
// give zero); dout. Combinational.
module simd_shifter
  import euler_pkg::*;
#(
  parameter int W = 128,
  localparam int SEG = W / 4,
  localparam int SW  = $clog2(W) + 1
) (
  input  logic [W-1:0]  din,
  input  mode_e         mode,
  input  logic [SW-1:0] shamt [4],
  output logic [W-1:0]  dout
);

  always_comb begin
    logic [W-1:0] cur, nxt;
    int ll, lane, base;
    ll  = lane_log2(mode);
    cur = din;
    for (int st = 0; st < SW; st++) begin
      for (int i = 0; i < W; i++) begin
        lane = (i / SEG) >> ll;
        base = lane * (SEG << ll);
        if (shamt[lane][st]) begin
          if (i - (1 << st) >= base) nxt[i] = cur[i - (1 << st)];
          else                       nxt[i] = 1'b0;
        end else begin
          nxt[i] = cur[i];
        end
      end
      cur = nxt;
    end
    dout = cur;
  end

endmodule
