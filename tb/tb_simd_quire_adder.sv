// tb_simd_quire_adder: random operands, including all-ones lanes that carry
// out, in every mode; each lane is the sum modulo the lane width and no carry
// reaches the next lane.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The shared 128-bit quire split by mode is the paper's; the 4/2/1 lane split
// of 32/64/128 bits is this design's.
module tb_simd_quire_adder;
  import euler_pkg::*;

  int checks = 0, failures = 0;
  logic [127:0] a, b, sum;
  mode_e        mode;

  simd_quire_adder #(.W(128)) dut (.a(a), .b(b), .mode(mode), .sum(sum));

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
      a = {$urandom, $urandom, $urandom, $urandom};
      b = {$urandom, $urandom, $urandom, $urandom};
      if (it % 5 == 0) begin
        a = '1;
        b = {4{32'h0000_0001}};
      end
      #1;
      mask = (qw == 128) ? '1 : ((128'd1 << qw) - 1);
      for (int j = 0; j < (4 >> m); j++) begin
        x = (a >> (qw * j)) & mask;
        y = (b >> (qw * j)) & mask;
        checks++;
        if (((sum >> (qw * j)) & mask) != ((x + y) & mask)) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d lane=%0d", m, j);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
