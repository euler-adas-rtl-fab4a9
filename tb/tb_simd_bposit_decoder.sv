// tb_simd_bposit_decoder: random SIMD words in each precision mode; every
// lane's fields and significand are compared with the reference decoder.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The three posit formats and regime bounds are the paper's; the lane layout
// of the significands is this design's.
module tb_simd_bposit_decoder;
  import euler_pkg::*;
  import euler_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] word, mant;
  mode_e       mode;
  lane_info_t  info [4];

  simd_bposit_decoder dut (.word(word), .mode(mode), .info(info), .mant(mant));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, n, es, r, nl;
    dec_t d;
    longint unsigned lanew;
    for (int it = 0; it < 6000; it++) begin
      m = it % 3;
      mode = mode_e'(m);
      word = $urandom;
      if (it % 17 == 0) word = 32'h8000_8080;
      if (it % 19 == 0) word = 32'h0000_0000;
      #1;
      n  = 8 << m;
      es = m;
      r  = (m == 0) ? 2 : (m == 1) ? 3 : 5;
      nl = 4 >> m;
      for (int j = 0; j < nl; j++) begin
        lanew = (longint'(word) >> (n * j)) & ((64'd1 << n) - 1);
        d = ref_decode(lanew, n, es, r);
        checks++;
        if (info[j].sign !== d.sign || info[j].zero !== d.zero || info[j].nar !== d.nar ||
            (!d.zero && !d.nar && (int'(info[j].sf) != d.sf ||
             ((longint'(mant) >> (n * j)) & ((64'd1 << n) - 1)) != d.mant))) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d word=%h lane=%0d", m, word, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
