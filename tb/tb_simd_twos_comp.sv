// tb_simd_twos_comp: random 128-bit vectors and negate flags in every mode;
// each lane must equal its input or the input's two's complement modulo the
// lane width.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The SIMD two's-complement block is the paper's; the segmented carry chain
// is this design's.
module tb_simd_twos_comp;
  import euler_pkg::*;

  int checks = 0, failures = 0;
  logic [127:0] din, dout;
  logic [3:0]   neg;
  mode_e        mode;

  simd_twos_comp #(.W(128)) dut (.din(din), .mode(mode), .neg(neg), .dout(dout));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, qw;
    logic [127:0] x, y, mask;
    for (int it = 0; it < 6000; it++) begin
      m = it % 3;
      mode = mode_e'(m);
      qw = 32 << m;
      din = {$urandom, $urandom, $urandom, $urandom};
      if (it % 7 == 0) din = '0;                   // carries through every segment
      if (it % 11 == 0) din = {4{32'h0000_0001}};
      neg = 4'($urandom);
      #1;
      mask = (qw == 128) ? '1 : ((128'd1 << qw) - 1);
      for (int j = 0; j < (4 >> m); j++) begin
        x = (din >> (qw * j)) & mask;
        y = neg[j] ? ((-x) & mask) : x;
        checks++;
        if (((dout >> (qw * j)) & mask) != y) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d lane=%0d x=%h got %h", m, j, x, (dout >> (qw * j)) & mask);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
