// tb_ilm_core: the iterative logarithmic multiplier against the reference
// loop for random operands and stage counts, plus two properties: with as many
// stages as operand bits the product is exact, and a single stage gives
// Mitchell's approximation, which never exceeds the exact product.
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// The ILM recurrence is the one the paper cites; the run-time stage count
// input is this design's.
module tb_ilm_core;
  import euler_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [15:0] x16, y16;
  logic [4:0]  ns16;
  logic [31:0] p16;
  logic [31:0] x32, y32;
  logic [3:0]  ns32;
  logic [63:0] p32;

  ilm_core #(.W(16), .NS(16)) u16 (.x(x16), .y(y16), .nstages(ns16), .p(p16));
  ilm_core #(.W(32), .NS(12)) u32 (.x(x32), .y(y32), .nstages(ns32), .p(p32));

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", msg);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 5000; it++) begin
      x16 = 16'($urandom); y16 = 16'($urandom);
      if (it % 50 == 0) x16 = 0;
      ns16 = 5'($urandom_range(0, 16));
      x32 = $urandom; y32 = $urandom;
      ns32 = 4'($urandom_range(0, 12));
      #1;
      chk(longint'(p16) == ref_ilm(x16, y16, ns16), $sformatf("w16 %h*%h ns%0d got %h", x16, y16, ns16, p16));
      chk(p32 == ref_ilm(x32, y32, ns32), $sformatf("w32 %h*%h ns%0d got %h", x32, y32, ns32, p32));
      ns16 = 16;
      #1 chk(p16 == 32'(x16) * 32'(y16), $sformatf("exact %h*%h got %h", x16, y16, p16));
      ns16 = 1;
      #1 chk(p16 <= 32'(x16) * 32'(y16), "mitchell bound");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
