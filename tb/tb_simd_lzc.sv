// tb_simd_lzc: random vectors with a random number of leading zeros per lane
// in every mode; counts and valid bits against a bit-by-bit scan.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The SIMD leading-zero count is the paper's block; the 32-bit segment size
// is this design's.
module tb_simd_lzc;
  import euler_pkg::*;

  int checks = 0, failures = 0;
  logic [127:0] din;
  mode_e        mode;
  logic [7:0]   cnt [4];
  logic [3:0]   valid;

  simd_lzc #(.W(128)) dut (.din(din), .mode(mode), .cnt(cnt), .valid(valid));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, qw, z, e;
    logic [127:0] x;
    for (int it = 0; it < 6000; it++) begin
      m = it % 3;
      mode = mode_e'(m);
      qw = 32 << m;
      din = '0;
      for (int j = 0; j < (4 >> m); j++) begin
        x = {$urandom, $urandom, $urandom, $urandom};
        z = $urandom_range(0, qw);
        x = (z >= qw) ? '0 : ((x | (128'd1 << 127)) >> (128 - qw + z));
        din = din | (x << (qw * j));
      end
      #1;
      for (int j = 0; j < (4 >> m); j++) begin
        e = qw;
        for (int b = 0; b < qw; b++) if (din[qw * j + b]) e = qw - 1 - b;
        checks++;
        if (int'(cnt[j]) != e || valid[j] != (e != qw)) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d lane=%0d got %0d exp %0d", m, j, cnt[j], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
