// tb_bposit_decoder: checks the bounded-posit decoder against the reference
// decoder for bPosit(8,0,2) and bPosit(16,1,3) exhaustively and for
// bPosit(32,2,5) on random and corner-case words.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The field rules checked (bounded regime, sign-XORed fields, 2 - f
// significand for negative words) are the paper's; the scale and significand
// representation is this design's.
module tb_bposit_decoder;
  import euler_ref_pkg::*;

  int checks = 0, failures = 0;

  logic [7:0]  p8;
  logic [15:0] p16;
  logic [31:0] p32;
  logic s8, z8, n8, s16, z16, n16, s32, z32, n32;
  logic signed [7:0] sf8, sf16, sf32;
  logic [5:0]  m8;
  logic [12:0] m16;
  logic [27:0] m32;

  bposit_decoder #(.N(8),  .ES(0), .R(2)) u8  (.p(p8),  .sign(s8),  .zero(z8),  .nar(n8),  .sf(sf8),  .mant(m8));
  bposit_decoder #(.N(16), .ES(1), .R(3)) u16 (.p(p16), .sign(s16), .zero(z16), .nar(n16), .sf(sf16), .mant(m16));
  bposit_decoder #(.N(32), .ES(2), .R(5)) u32 (.p(p32), .sign(s32), .zero(z32), .nar(n32), .sf(sf32), .mant(m32));

  task automatic cmp(string tag, longint unsigned p, dec_t d, logic s, logic z, logic n,
                     logic signed [7:0] sf, longint m);
    checks++;
    if (s !== d.sign || z !== d.zero || n !== d.nar ||
        (!d.zero && !d.nar && (int'(sf) != d.sf || m != d.mant))) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s p=%h got s%0d z%0d n%0d sf=%0d m=%h exp s%0d z%0d n%0d sf=%0d m=%h",
                 tag, p, s, z, n, sf, m, d.sign, d.zero, d.nar, d.sf, d.mant);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 256; i++) begin
      p8 = 8'(i);
      #1 cmp("p8", p8, ref_decode(p8, 8, 0, 2), s8, z8, n8, sf8, longint'(m8));
    end
    for (int i = 0; i < 65536; i++) begin
      p16 = 16'(i);
      #1 cmp("p16", p16, ref_decode(p16, 16, 1, 3), s16, z16, n16, sf16, longint'(m16));
    end
    for (int i = 0; i < 20000; i++) begin
      case (i)
        0: p32 = 32'h0000_0000;
        1: p32 = 32'h8000_0000;
        2: p32 = 32'h7fff_ffff;
        3: p32 = 32'h0000_0001;
        4: p32 = 32'hffff_ffff;
        5: p32 = 32'h8000_0001;
        6: p32 = 32'h4000_0000;
        7: p32 = 32'hc000_0000;
        default: p32 = $urandom;
      endcase
      #1 cmp("p32", p32, ref_decode(p32, 32, 2, 5), s32, z32, n32, sf32, longint'(m32));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
