// tb_simd_shifter: random vectors and per-lane shift amounts (including
// shifts past the lane width) in every mode; no bit may cross into the next
// lane.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The SIMD barrel shifter is the paper's block; left shift only with lane
// masks is this design's.
module tb_simd_shifter;
  import euler_pkg::*;

  int checks = 0, failures = 0;
  logic [127:0] din, dout;
  mode_e        mode;
  logic [7:0]   shamt [4];

  simd_shifter #(.W(128)) dut (.din(din), .mode(mode), .shamt(shamt), .dout(dout));

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
      for (int j = 0; j < 4; j++) shamt[j] = 8'($urandom_range(0, qw + 3));
      #1;
      mask = (qw == 128) ? '1 : ((128'd1 << qw) - 1);
      for (int j = 0; j < (4 >> m); j++) begin
        x = (din >> (qw * j)) & mask;
        y = (int'(shamt[j]) >= qw) ? '0 : ((x << shamt[j]) & mask);
        checks++;
        if (((dout >> (qw * j)) & mask) != y) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d lane=%0d sh=%0d", m, j, shamt[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
