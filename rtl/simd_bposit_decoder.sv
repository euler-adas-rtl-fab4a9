// simd_bposit_decoder: decodes one 32-bit operand vector as four
// bPosit(8,0,R8), two bPosit(16,1,R16) or one bPosit(32,2,R32) lanes.
//
// Four 8-bit, two 16-bit and one 32-bit bposit_decoder sit on the same word;
// the precision mode selects which set drives the outputs. The paper says
// the decoders are resource-shared but does not show how; this plain
// per-format arrangement with an output multiplexer is this design's choice.
//
// Interface: word is the SIMD operand, mode the precision. info[j] holds
// sign / zero / NaR / scale of lane j (lanes beyond the mode's count are
// zero). mant holds the significands in lane layout: lane j of width
// LW = 32 / lanes occupies mant[LW*j +: LW], leading one at bit 5, 12 or 27.
// mant[31:30] are therefore zero in every mode; they are kept so that all
// lanes have the same width. Purely combinational.
module simd_bposit_decoder
  import euler_pkg::*;
#(
  parameter int R8  = 2,
  parameter int R16 = 3,
  parameter int R32 = 5
) (
  input  logic [31:0] word,
  input  mode_e       mode,
  output lane_info_t  info [4],
  output logic [31:0] mant
);

  lane_info_t i8 [4];
  lane_info_t i16[2];
  lane_info_t i32;
  logic [5:0]  m8 [4];
  logic [12:0] m16[2];
  logic [27:0] m32;

  for (genvar j = 0; j < 4; j++) begin : g_p8
    bposit_decoder #(.N(8), .ES(0), .R(R8)) u_dec (
      .p(word[8*j +: 8]), .sign(i8[j].sign), .zero(i8[j].zero), .nar(i8[j].nar),
      .sf(i8[j].sf), .mant(m8[j]));
  end
  for (genvar j = 0; j < 2; j++) begin : g_p16
    bposit_decoder #(.N(16), .ES(1), .R(R16)) u_dec (
      .p(word[16*j +: 16]), .sign(i16[j].sign), .zero(i16[j].zero), .nar(i16[j].nar),
      .sf(i16[j].sf), .mant(m16[j]));
  end
  bposit_decoder #(.N(32), .ES(2), .R(R32)) u_dec32 (
    .p(word), .sign(i32.sign), .zero(i32.zero), .nar(i32.nar), .sf(i32.sf), .mant(m32));

  always_comb begin
    for (int j = 0; j < 4; j++) info[j] = '0;
    mant = '0;
    case (mode)
      MODE_P8: begin
        for (int j = 0; j < 4; j++) begin
          info[j] = i8[j];
          mant[8*j +: 8] = {2'b00, m8[j]};
        end
      end
      MODE_P16: begin
        for (int j = 0; j < 2; j++) begin
          info[j] = i16[j];
          mant[16*j +: 16] = {3'b000, m16[j]};
        end
      end
      default: begin
        info[0] = i32;
        mant    = {4'b0000, m32};
      end
    endcase
  end

endmodule
