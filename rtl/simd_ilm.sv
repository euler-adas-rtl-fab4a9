// simd_ilm: SIMD mantissa multiplier of the engine (pipeline stage 2).
// Multiplies four 6-bit (P8), two 13-bit (P16) or one 28-bit (P32)
// significand pairs with iterative logarithmic multipliers and operand
// truncation.
//
// Truncation keeps the T most significant bits of each significand, counted
// from its leading one (always at bit 5, 12 or 27 since decoded significands
// are normalised), and clears the rest; T = 0 disables it. The paper's
// defaults for the bounded variant L-21b are 3/6/12 ILM stages and 4/8/16
// retained bits for P8/P16/P32.
//
// Lane sharing follows the high-precision split: products are laid out on the
// diagonal of the 64-bit product word (lane j of width 2*LW at
// prod[2*LW*j +: 2*LW]), so a 32x32 product covers the whole word and
// narrower lanes occupy disjoint slices of it. Hardware is shared by running
// lane 0 of every mode on one 32-bit ILM, lane 1 of P8/P16 on one 16-bit ILM
// and lanes 2, 3 of P8 on two 8-bit ILMs; each core enables the stage count
// of the current mode. That partitioning is this design's choice: the paper
// names the split strategy but not how the ILM stages are shared.
//
// Interface: ma, mb significands in lane layout, mode; prod products.
// Purely combinational.
module simd_ilm
  import euler_pkg::*;
#(
  parameter int NS8  = 3,
  parameter int NS16 = 6,
  parameter int NS32 = 12,
  parameter int T8   = 4,
  parameter int T16  = 8,
  parameter int T32  = 16
) (
  input  logic [31:0] ma,
  input  logic [31:0] mb,
  input  mode_e       mode,
  output logic [63:0] prod
);

  localparam int NSA = (NS32 > NS16) ? ((NS32 > NS8) ? NS32 : NS8) : ((NS16 > NS8) ? NS16 : NS8);
  localparam int NSB = (NS16 > NS8) ? NS16 : NS8;

  // Clear the bits below the T retained ones of a significand whose leading
  // one is at bit FW.
  function automatic logic [31:0] trunc(logic [31:0] m, int fw, int t);
    logic [31:0] mask;
    if (t <= 0 || t > fw) return m;
    mask = ~((32'd1 << (fw + 1 - t)) - 32'd1);
    return m & mask;
  endfunction

  logic [31:0] ta, tb;          // truncated significands, lane layout
  logic [31:0] xa0, xb0;
  logic [15:0] xa1, xb1;
  logic [7:0]  xa2, xb2, xa3, xb3;
  logic [$clog2(NSA+1)-1:0] ns0;
  logic [$clog2(NSB+1)-1:0] ns1;
  logic [63:0] p0;
  logic [31:0] p1;
  logic [15:0] p2, p3;

  always_comb begin
    ta = '0;
    tb = '0;
    case (mode)
      MODE_P8:
        for (int j = 0; j < 4; j++) begin
          ta[8*j +: 8] = 8'(trunc(32'(ma[8*j +: 8]), 5, T8));
          tb[8*j +: 8] = 8'(trunc(32'(mb[8*j +: 8]), 5, T8));
        end
      MODE_P16:
        for (int j = 0; j < 2; j++) begin
          ta[16*j +: 16] = 16'(trunc(32'(ma[16*j +: 16]), 12, T16));
          tb[16*j +: 16] = 16'(trunc(32'(mb[16*j +: 16]), 12, T16));
        end
      default: begin
        ta = trunc(ma, 27, T32);
        tb = trunc(mb, 27, T32);
      end
    endcase

    // Route lanes onto the shared cores.
    xa1 = '0; xb1 = '0; xa2 = '0; xb2 = '0; xa3 = '0; xb3 = '0;
    case (mode)
      MODE_P8: begin
        xa0 = {24'd0, ta[7:0]};   xb0 = {24'd0, tb[7:0]};
        xa1 = {8'd0, ta[15:8]};   xb1 = {8'd0, tb[15:8]};
        xa2 = ta[23:16];          xb2 = tb[23:16];
        xa3 = ta[31:24];          xb3 = tb[31:24];
        ns0 = ($clog2(NSA+1))'(NS8);
        ns1 = ($clog2(NSB+1))'(NS8);
      end
      MODE_P16: begin
        xa0 = {16'd0, ta[15:0]};  xb0 = {16'd0, tb[15:0]};
        xa1 = ta[31:16];          xb1 = tb[31:16];
        ns0 = ($clog2(NSA+1))'(NS16);
        ns1 = ($clog2(NSB+1))'(NS16);
      end
      default: begin
        xa0 = ta;                 xb0 = tb;
        ns0 = ($clog2(NSA+1))'(NS32);
        ns1 = '0;
      end
    endcase
  end

  ilm_core #(.W(32), .NS(NSA)) u_core0 (.x(xa0), .y(xb0), .nstages(ns0), .p(p0));
  ilm_core #(.W(16), .NS(NSB)) u_core1 (.x(xa1), .y(xb1), .nstages(ns1), .p(p1));
  ilm_core #(.W(8),  .NS(NS8)) u_core2 (.x(xa2), .y(xb2), .nstages(($clog2(NS8+1))'(NS8)), .p(p2));
  ilm_core #(.W(8),  .NS(NS8)) u_core3 (.x(xa3), .y(xb3), .nstages(($clog2(NS8+1))'(NS8)), .p(p3));

  always_comb begin
    case (mode)
      MODE_P8:  prod = {p3, p2, p1[15:0], p0[15:0]};
      MODE_P16: prod = {p1, p0[31:0]};
      default:  prod = p0;
    endcase
  end

endmodule
