// tb_bposit_encoder: rounding and encoding of random magnitudes for
// bPosit(8,0,2), bPosit(16,1,3) and bPosit(32,2,5), compared with a reference
// that searches for the nearest posit by exact value (ties to the even
// pattern). Scales beyond the bounded range exercise the maxpos / minpos
// saturation; zero and NaR inputs are checked too.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// Round to nearest even is the paper's rule; saturation to maxpos/minpos is
// this design's reading of its Posit-2022 exception handling.
module tb_bposit_encoder;
  import euler_ref_pkg::*;

  int checks = 0, failures = 0;
  logic sign, zero, nar;
  logic signed [7:0] sf;
  logic [31:0]  m8;
  logic [63:0]  m16;
  logic [127:0] m32;
  logic [7:0]  p8;
  logic [15:0] p16;
  logic [31:0] p32;

  bposit_encoder #(.N(8),  .ES(0), .R(2), .MW(32))  u8  (.sign(sign), .zero(zero), .nar(nar), .sf(sf), .mant(m8),  .p(p8));
  bposit_encoder #(.N(16), .ES(1), .R(3), .MW(64))  u16 (.sign(sign), .zero(zero), .nar(nar), .sf(sf), .mant(m16), .p(p16));
  bposit_encoder #(.N(32), .ES(2), .R(5), .MW(128)) u32 (.sign(sign), .zero(zero), .nar(nar), .sf(sf), .mant(m32), .p(p32));

  // value = mant * 2^(sf - (mw-1)) placed in a frame with qf fraction bits
  function automatic logic signed [255:0] frame(logic [127:0] m, int s, int mw, int qf, bit neg);
    logic signed [255:0] v;
    v = 256'(m) << (s - (mw - 1) + qf);
    return neg ? -v : v;
  endfunction

  task automatic chk(string tag, longint unsigned got, longint unsigned exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s sf=%0d sign=%0d got %h exp %h", tag, sf, sign, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int k;
    for (int it = 0; it < 4000; it++) begin
      sign = 1'($urandom);
      zero = (it % 97 == 1);
      nar  = (it % 89 == 2);
      // significands with a random count of trailing zeros, to hit ties
      k = $urandom_range(0, 40);
      m8  = (32'($urandom) | (32'd1 << 31)) & ~((32'd1 << (k % 31)) - 1);
      m16 = ({$urandom, $urandom} | (64'd1 << 63)) & ~((64'd1 << k) - 1);
      m32 = ({$urandom, $urandom, $urandom, $urandom} | (128'd1 << 127)) & ~((128'd1 << (k + 70)) - 1);
      sf = 8'($urandom_range(0, 12)) - 8'sd6;
      #1;
      chk("p8", p8, nar ? 64'h80 : zero ? 0 : ref_encode_fx(frame(128'(m8), sf, 32, 40, sign), 8, 0, 2, 40));
      sf = 8'($urandom_range(0, 30)) - 8'sd15;
      #1;
      chk("p16", p16, nar ? 64'h8000 : zero ? 0 : ref_encode_fx(frame(128'(m16), sf, 64, 80, sign), 16, 1, 3, 80));
      sf = 8'($urandom_range(0, 50)) - 8'sd25;
      #1;
      chk("p32", p32, nar ? 64'h8000_0000 : zero ? 0 : ref_encode_fx(frame(m32, sf, 128, 160, sign), 32, 2, 5, 160));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
