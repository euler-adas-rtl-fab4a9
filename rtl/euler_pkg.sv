// euler_pkg: shared types and lane-geometry helpers of the SIMD logarithmic
// bounded-Posit multiply-accumulate engine.
//
// The engine works on a 32-bit operand word that holds four Posit-(8,0)
// lanes, two Posit-(16,1) lanes or one Posit-(32,2) lane. Every internal
// vector (mantissas, products, the 128-bit quire) is cut into four equal
// segments, and the precision mode only decides how many segments form one
// lane: one segment per lane in P8 mode, two in P16 mode, four in P32 mode.
// The three formats and the lane counts are the paper's; the encoding of the
// mode and op fields and the fixed-point layout of the quire are this
// design's own choices.
package euler_pkg;

  // Precision mode. P8: 4 lanes, P16: 2 lanes, P32: 1 lane.
  typedef enum logic [1:0] {
    MODE_P8  = 2'b00,
    MODE_P16 = 2'b01,
    MODE_P32 = 2'b10
  } mode_e;

  // Operation. FMA: quire = a*b + c. MAC: quire = quire + a*b.
  typedef enum logic {
    OP_FMA = 1'b0,
    OP_MAC = 1'b1
  } op_e;

  // Width of the signed scale factors (2^sf) carried through the pipeline.
  localparam int SFW = 8;

  // Per-lane field bundle produced by the decoders.
  typedef struct packed {
    logic                  sign;
    logic                  zero;
    logic                  nar;
    logic signed [SFW-1:0] sf;
  } lane_info_t;

  // Number of lanes in a mode.
  function automatic int lanes_of(mode_e m);
    case (m)
      MODE_P8:  return 4;
      MODE_P16: return 2;
      default:  return 1;
    endcase
  endfunction

  // Segments per lane (log2): 0, 1 or 2.
  function automatic int lane_log2(mode_e m);
    case (m)
      MODE_P8:  return 0;
      MODE_P16: return 1;
      default:  return 2;
    endcase
  endfunction

  // Posit word width and exponent size of a mode.
  function automatic int n_of(mode_e m);
    case (m)
      MODE_P8:  return 8;
      MODE_P16: return 16;
      default:  return 32;
    endcase
  endfunction

  function automatic int es_of(mode_e m);
    case (m)
      MODE_P8:  return 0;
      MODE_P16: return 1;
      default:  return 2;
    endcase
  endfunction

  // Maximum fraction width of a bounded posit: N - 1 (sign) - 2 (shortest
  // regime) - ES.
  function automatic int fw_of(mode_e m);
    return n_of(m) - 3 - es_of(m);
  endfunction

  // Fixed-point layout of one quire lane (QW = 4 * lane width bits).
  //   pmag : largest |scale| of a product, 2 * R * 2^ES
  //   drop : product LSBs dropped so that the largest product keeps
  //          QHEAD bits of carry headroom below the lane MSB
  //   qf   : number of fraction bits of the quire lane
  localparam int QHEAD = 5;

  function automatic int pmag_of(mode_e m, int r);
    return 2 * r * (1 << es_of(m));
  endfunction

  function automatic int qdrop_of(mode_e m, int r);
    int qw, d;
    qw = 4 * n_of(m);
    d  = 2 * fw_of(m) + 2 + 2 * pmag_of(m, r) - (qw - 1 - QHEAD);
    return (d > 0) ? d : 0;
  endfunction

  function automatic int qf_of(mode_e m, int r);
    return 2 * fw_of(m) - qdrop_of(m, r) + pmag_of(m, r);
  endfunction

endpackage
