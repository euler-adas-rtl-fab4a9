// euler_nce: SIMD logarithmic bounded-Posit neural compute engine. One
// pipelined multiply-accumulate unit that treats a 32-bit operand word as
// four Posit-(8,0), two Posit-(16,1) or one Posit-(32,2) lanes.
//
// Per lane it computes either quire = a*b + c (op FMA) or
// quire = quire + a*b (op MAC), and returns the quire rounded to the lane's
// posit format. Products come from iterative logarithmic multipliers with
// operand truncation, so they are approximate; decoding, alignment,
// accumulation, rounding and encoding are exact.
//
// Pipeline (input register plus six stages, as in the paper's datapath
// figure):
//   S1 decode      three SIMD bounded-posit decoders (a, b, c)
//   S2 multiply    product sign (XOR), product scale (vector adder),
//                  SIMD ILM on the significands
//   S3 scale       products and addends are placed into their quire lane,
//                  made signed (SIMD two's complement) and shifted to the
//                  quire's fixed point by the SIMD barrel shifter
//   S4 accumulate  operand selection (c or the quire register, by op) and
//                  the lane-partitioned 128-bit quire adder; the quire
//                  register is updated here, so back-to-back MACs on the
//                  same lanes need no stall
//   S5 normalise   lane sign, SIMD two's complement to magnitude, SIMD
//                  leading-zero count, SIMD left shift, result scale
//   S6 encode      round-to-nearest-even and bounded-posit encoding
// A result leaves 7 clock cycles after its operands are presented; a new
// operand set is accepted every cycle.
//
// Quire: 128 bits shared by the lanes (4 x 32, 2 x 64 or 1 x 128 bits). Each
// lane is a two's-complement fixed-point number with QF fraction bits
// (14, 36, 80 at the default regime bounds; see euler_pkg for the formula).
// For P32 the 14 lowest bits of each 56-bit product are dropped so that the
// whole bounded range fits; with the default truncation to 16 bits those
// bits are always zero. The paper gives the 128-bit width but not the layout;
// the layout, the op encoding and the reading of the quire after a mode
// change (the lanes are simply reinterpreted) are this design's choices.
//
// NaR: a lane that sees a NaR operand returns NaR, and in MAC mode the NaR
// sticks in the quire lane until the next FMA on it. Reset clears the quire,
// the NaR flags and the valid bits.
//
// Interface: in_valid with in_mode, in_op and the three operand vectors;
// out_valid with out_mode, vec_res and out_nar (per lane NaR flag).
module euler_nce
  import euler_pkg::*;
#(
  parameter int R8   = 2,   // regime bound, Posit-8
  parameter int R16  = 3,   // regime bound, Posit-16
  parameter int R32  = 5,   // regime bound, Posit-32
  parameter int NS8  = 3,   // ILM stages, Posit-8
  parameter int NS16 = 6,   // ILM stages, Posit-16
  parameter int NS32 = 12,  // ILM stages, Posit-32
  parameter int T8   = 4,   // retained significand bits, Posit-8 (0: none)
  parameter int T16  = 8,   // retained significand bits, Posit-16
  parameter int T32  = 16   // retained significand bits, Posit-32
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  mode_e       in_mode,
  input  op_e         in_op,
  input  logic [31:0] vec_a,
  input  logic [31:0] vec_b,
  input  logic [31:0] vec_c,
  output logic        out_valid,
  output mode_e       out_mode,
  output logic [31:0] vec_res,
  output logic [3:0]  out_nar
);

  localparam int QW = 128;
  localparam int SW = $clog2(QW) + 1;

  // Per-mode quire constants.
  localparam int QF8   = qf_of(MODE_P8,  R8);
  localparam int QF16  = qf_of(MODE_P16, R16);
  localparam int QF32  = qf_of(MODE_P32, R32);
  localparam int PM8   = pmag_of(MODE_P8,  R8);
  localparam int PM16  = pmag_of(MODE_P16, R16);
  localparam int PM32  = pmag_of(MODE_P32, R32);
  localparam int D16   = qdrop_of(MODE_P16, R16);
  localparam int D8    = qdrop_of(MODE_P8,  R8);
  localparam int D32   = qdrop_of(MODE_P32, R32);

  function automatic int qf_m(mode_e m);
    case (m)
      MODE_P8:  return QF8;
      MODE_P16: return QF16;
      default:  return QF32;
    endcase
  endfunction

  function automatic int pm_m(mode_e m);
    case (m)
      MODE_P8:  return PM8;
      MODE_P16: return PM16;
      default:  return PM32;
    endcase
  endfunction

  function automatic int drop_m(mode_e m);
    case (m)
      MODE_P8:  return D8;
      MODE_P16: return D16;
      default:  return D32;
    endcase
  endfunction

  // ---------------------------------------------------------------- input
  logic        s0_valid;
  mode_e       s0_mode;
  op_e         s0_op;
  logic [31:0] s0_a, s0_b, s0_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s0_valid <= 1'b0;
      s0_mode  <= MODE_P8;
      s0_op    <= OP_FMA;
      s0_a     <= '0;
      s0_b     <= '0;
      s0_c     <= '0;
    end else begin
      s0_valid <= in_valid;
      s0_mode  <= in_mode;
      s0_op    <= in_op;
      s0_a     <= vec_a;
      s0_b     <= vec_b;
      s0_c     <= vec_c;
    end
  end

  // ------------------------------------------------------- S1: decode
  lane_info_t  d_a [4], d_b [4], d_c [4];
  logic [31:0] dm_a, dm_b, dm_c;

  simd_bposit_decoder #(.R8(R8), .R16(R16), .R32(R32)) u_dec_a (.word(s0_a), .mode(s0_mode), .info(d_a), .mant(dm_a));
  simd_bposit_decoder #(.R8(R8), .R16(R16), .R32(R32)) u_dec_b (.word(s0_b), .mode(s0_mode), .info(d_b), .mant(dm_b));
  simd_bposit_decoder #(.R8(R8), .R16(R16), .R32(R32)) u_dec_c (.word(s0_c), .mode(s0_mode), .info(d_c), .mant(dm_c));

  logic        s1_valid;
  mode_e       s1_mode;
  op_e         s1_op;
  lane_info_t  s1_a [4], s1_b [4], s1_c [4];
  logic [31:0] s1_ma, s1_mb, s1_mc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_mode  <= MODE_P8;
      s1_op    <= OP_FMA;
      for (int j = 0; j < 4; j++) begin
        s1_a[j] <= '0;
        s1_b[j] <= '0;
        s1_c[j] <= '0;
      end
      s1_ma <= '0;
      s1_mb <= '0;
      s1_mc <= '0;
    end else begin
      s1_valid <= s0_valid;
      s1_mode  <= s0_mode;
      s1_op    <= s0_op;
      s1_a     <= d_a;
      s1_b     <= d_b;
      s1_c     <= d_c;
      s1_ma    <= dm_a;
      s1_mb    <= dm_b;
      s1_mc    <= dm_c;
    end
  end

  // ----------------------------------------------------- S2: multiply
  lane_info_t  p_info [4];
  logic [63:0] p_mant;

  always_comb begin
    for (int j = 0; j < 4; j++) begin
      p_info[j].sign = s1_a[j].sign ^ s1_b[j].sign;                  // XOR sign calc.
      p_info[j].zero = s1_a[j].zero | s1_b[j].zero;
      p_info[j].nar  = s1_a[j].nar  | s1_b[j].nar;
      p_info[j].sf   = s1_a[j].sf + s1_b[j].sf;                      // vector adder
    end
  end

  simd_ilm #(.NS8(NS8), .NS16(NS16), .NS32(NS32), .T8(T8), .T16(T16), .T32(T32)) u_ilm (
    .ma(s1_ma), .mb(s1_mb), .mode(s1_mode), .prod(p_mant));

  logic        s2_valid;
  mode_e       s2_mode;
  op_e         s2_op;
  lane_info_t  s2_p [4], s2_c [4];
  logic [63:0] s2_mp;
  logic [31:0] s2_mc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s2_valid <= 1'b0;
      s2_mode  <= MODE_P8;
      s2_op    <= OP_FMA;
      for (int j = 0; j < 4; j++) begin
        s2_p[j] <= '0;
        s2_c[j] <= '0;
      end
      s2_mp <= '0;
      s2_mc <= '0;
    end else begin
      s2_valid <= s1_valid;
      s2_mode  <= s1_mode;
      s2_op    <= s1_op;
      s2_p     <= p_info;
      s2_c     <= s1_c;
      s2_mp    <= p_mant;
      s2_mc    <= s1_mc;
    end
  end

  // -------------------------------------------------------- S3: scale
  logic [QW-1:0] pl_raw, cl_raw;       // magnitudes in quire-lane layout
  logic [QW-1:0] pl_sgn, cl_sgn;       // signed
  logic [QW-1:0] q_prod, q_c;          // aligned to the quire fixed point
  logic [3:0]    p_neg, c_neg;
  logic [SW-1:0] p_sh [4], c_sh [4];

  always_comb begin
    int ll, lw, qwl, nl;
    logic [63:0] pm;
    logic [31:0] cm;
    pm  = '0;
    cm  = '0;
    ll  = lane_log2(s2_mode);
    nl  = lanes_of(s2_mode);
    lw  = 8 << ll;                     // operand lane width
    qwl = 32 << ll;                    // quire lane width
    pl_raw = '0;
    cl_raw = '0;
    p_neg  = '0;
    c_neg  = '0;
    for (int j = 0; j < 4; j++) begin
      p_sh[j] = '0;
      c_sh[j] = '0;
    end
    for (int j = 0; j < 4; j++) if (j < nl) begin
      pm = (s2_mp >> (2 * lw * j)) & ((64'd1 << (2 * lw)) - 64'd1);
      if (lw == 32) pm = s2_mp;
      cm = (s2_mc >> (lw * j)) & ((32'd1 << lw) - 32'd1);
      if (lw == 32) cm = s2_mc;
      if (!s2_p[j].zero && !s2_p[j].nar) begin
        pl_raw[qwl*j +: 32] = 32'(pm >> drop_m(s2_mode));
        if (qwl > 32) pl_raw[qwl*j + 32 +: 32] = 32'(pm >> (drop_m(s2_mode) + 32));
        p_neg[j] = s2_p[j].sign;
        p_sh[j]  = SW'(int'(s2_p[j].sf) + pm_m(s2_mode));                    // scaling (product)
      end
      if (!s2_c[j].zero && !s2_c[j].nar) begin
        cl_raw[qwl*j +: 32] = cm;
        c_neg[j] = s2_c[j].sign;
        c_sh[j]  = SW'(int'(s2_c[j].sf) - fw_of(s2_mode) + qf_m(s2_mode));  // scaling (addend)
      end
    end
  end

  simd_twos_comp #(.W(QW)) u_tc_p (.din(pl_raw), .mode(s2_mode), .neg(p_neg), .dout(pl_sgn));
  simd_twos_comp #(.W(QW)) u_tc_c (.din(cl_raw), .mode(s2_mode), .neg(c_neg), .dout(cl_sgn));
  simd_shifter   #(.W(QW)) u_sh_p (.din(pl_sgn), .mode(s2_mode), .shamt(p_sh), .dout(q_prod));
  simd_shifter   #(.W(QW)) u_sh_c (.din(cl_sgn), .mode(s2_mode), .shamt(c_sh), .dout(q_c));

  logic          s3_valid;
  mode_e         s3_mode;
  op_e           s3_op;
  logic [QW-1:0] s3_qp, s3_qc;
  logic [3:0]    s3_nar_p, s3_nar_c;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s3_valid <= 1'b0;
      s3_mode  <= MODE_P8;
      s3_op    <= OP_FMA;
      s3_qp    <= '0;
      s3_qc    <= '0;
      s3_nar_p <= '0;
      s3_nar_c <= '0;
    end else begin
      s3_valid <= s2_valid;
      s3_mode  <= s2_mode;
      s3_op    <= s2_op;
      s3_qp    <= q_prod;
      s3_qc    <= q_c;
      for (int j = 0; j < 4; j++) begin
        s3_nar_p[j] <= s2_p[j].nar;
        s3_nar_c[j] <= s2_c[j].nar;
      end
    end
  end

  // --------------------------------------------------- S4: accumulate
  logic [QW-1:0] quire;                // quire register (Q_r)
  logic [3:0]    quire_nar;
  logic [QW-1:0] q_add, q_res;
  logic [3:0]    nar_res;

  // Operand selection: the addend is c (FMA) or the quire register (MAC).
  assign q_add   = (s3_op == OP_FMA) ? s3_qc : quire;
  assign nar_res = s3_nar_p | ((s3_op == OP_FMA) ? s3_nar_c : quire_nar);

  simd_quire_adder #(.W(QW)) u_qadd (.a(s3_qp), .b(q_add), .mode(s3_mode), .sum(q_res));

  logic          s4_valid;
  mode_e         s4_mode;
  logic [3:0]    s4_nar;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      quire     <= '0;
      quire_nar <= '0;
      s4_valid  <= 1'b0;
      s4_mode   <= MODE_P8;
      s4_nar    <= '0;
    end else begin
      if (s3_valid) begin
        quire     <= q_res;
        quire_nar <= nar_res;
      end
      s4_valid <= s3_valid;
      s4_mode  <= s3_mode;
      s4_nar   <= nar_res;
    end
  end

  // ---------------------------------------------------- S5: normalise
  // The quire register holds the S4 result; stage 5 reads it directly.
  logic [3:0]      r_sign;
  logic [QW-1:0]   r_abs, r_norm;
  logic [SW-1:0]   r_lzc [4];
  logic [3:0]      r_nz;
  lane_info_t      r_info [4];

  always_comb begin
    int ll, qwl;
    ll  = lane_log2(s4_mode);
    qwl = 32 << ll;
    r_sign = '0;
    for (int j = 0; j < 4; j++) if (j < lanes_of(s4_mode)) r_sign[j] = quire[qwl*j + qwl - 1];
  end

  simd_twos_comp #(.W(QW)) u_tc_r  (.din(quire), .mode(s4_mode), .neg(r_sign), .dout(r_abs));
  simd_lzc       #(.W(QW)) u_lzc   (.din(r_abs), .mode(s4_mode), .cnt(r_lzc), .valid(r_nz));
  simd_shifter   #(.W(QW)) u_norm  (.din(r_abs), .mode(s4_mode), .shamt(r_lzc), .dout(r_norm));

  always_comb begin
    int qwl;
    qwl = 32 << lane_log2(s4_mode);
    for (int j = 0; j < 4; j++) begin
      r_info[j].sign = r_sign[j];
      r_info[j].zero = ~r_nz[j];
      r_info[j].nar  = s4_nar[j];
      // vector adder: sf = (lane MSB index - lzc) - QF
      r_info[j].sf   = SFW'(qwl - 1 - int'(r_lzc[j]) - qf_m(s4_mode));
    end
  end

  logic          s5_valid;
  mode_e         s5_mode;
  lane_info_t    s5_info [4];
  logic [QW-1:0] s5_norm;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s5_valid <= 1'b0;
      s5_mode  <= MODE_P8;
      for (int j = 0; j < 4; j++) s5_info[j] <= '0;
      s5_norm  <= '0;
    end else begin
      s5_valid <= s4_valid;
      s5_mode  <= s4_mode;
      s5_info  <= r_info;
      s5_norm  <= r_norm;
    end
  end

  // ------------------------------------------------------- S6: encode
  logic [7:0]  e8  [4];
  logic [15:0] e16 [2];
  logic [31:0] e32;

  for (genvar j = 0; j < 4; j++) begin : g_enc8
    bposit_encoder #(.N(8), .ES(0), .R(R8), .MW(32)) u_enc (
      .sign(s5_info[j].sign), .zero(s5_info[j].zero), .nar(s5_info[j].nar),
      .sf(s5_info[j].sf), .mant(s5_norm[32*j +: 32]), .p(e8[j]));
  end
  for (genvar j = 0; j < 2; j++) begin : g_enc16
    bposit_encoder #(.N(16), .ES(1), .R(R16), .MW(64)) u_enc (
      .sign(s5_info[j].sign), .zero(s5_info[j].zero), .nar(s5_info[j].nar),
      .sf(s5_info[j].sf), .mant(s5_norm[64*j +: 64]), .p(e16[j]));
  end
  bposit_encoder #(.N(32), .ES(2), .R(R32), .MW(128)) u_enc32 (
    .sign(s5_info[0].sign), .zero(s5_info[0].zero), .nar(s5_info[0].nar),
    .sf(s5_info[0].sf), .mant(s5_norm), .p(e32));

  logic [31:0] res;
  logic [3:0]  res_nar;

  always_comb begin
    res_nar = '0;
    case (s5_mode)
      MODE_P8: begin
        res = {e8[3], e8[2], e8[1], e8[0]};
        for (int j = 0; j < 4; j++) res_nar[j] = s5_info[j].nar;
      end
      MODE_P16: begin
        res = {e16[1], e16[0]};
        for (int j = 0; j < 2; j++) res_nar[j] = s5_info[j].nar;
      end
      default: begin
        res = e32;
        res_nar[0] = s5_info[0].nar;
      end
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mode  <= MODE_P8;
      vec_res   <= '0;
      out_nar   <= '0;
    end else begin
      out_valid <= s5_valid;
      out_mode  <= s5_mode;
      vec_res   <= res;
      out_nar   <= res_nar;
    end
  end

endmodule
