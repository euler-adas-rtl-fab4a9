// tb_simd_ilm: random normalised significands in every mode, checked lane by
// lane against truncation plus the reference ILM at the default stage counts
// (3/6/12) and retained widths (4/8/16).
//
// The block is combinational: each vector is applied, and the outputs are
// compared 1 time unit later with values from the separate reference
// package (euler_ref_pkg) or a direct bit-level computation. A watchdog
// ends the run with a failure after 1 ms of simulated time. The result is
// printed as a TB_RESULT line with the number of checks and failures.
// Stage counts and retained widths are the paper's; the product lane layout
// is this design's.
module tb_simd_ilm;
  import euler_pkg::*;
  import euler_ref_pkg::*;

  int checks = 0, failures = 0;
  logic [31:0] ma, mb;
  logic [63:0] prod;
  mode_e       mode;

  simd_ilm dut (.ma(ma), .mb(mb), .mode(mode), .prod(prod));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m, lw, fw, nl, ns, t;
    longint unsigned a, b, e, g;
    for (int it = 0; it < 6000; it++) begin
      m = it % 3;
      mode = mode_e'(m);
      lw = 8 << m;
      fw = euler_ref_pkg::fw_of(lw, m);
      nl = 4 >> m;
      ns = (m == 0) ? 3 : (m == 1) ? 6 : 12;
      t  = (m == 0) ? 4 : (m == 1) ? 8 : 16;
      ma = '0;
      mb = '0;
      for (int j = 0; j < nl; j++) begin
        a = (longint'($urandom) & ((64'd1 << fw) - 1)) | (64'd1 << fw);
        b = (longint'($urandom) & ((64'd1 << fw) - 1)) | (64'd1 << fw);
        if (it % 23 == 0) a = 0;
        ma[lw*j +: 8] = 8'(a);
        mb[lw*j +: 8] = 8'(b);
        if (lw > 8) begin
          ma[lw*j + 8 +: 8] = 8'(a >> 8);
          mb[lw*j + 8 +: 8] = 8'(b >> 8);
        end
        if (lw > 16) begin
          ma[lw*j + 16 +: 16] = 16'(a >> 16);
          mb[lw*j + 16 +: 16] = 16'(b >> 16);
        end
      end
      #1;
      for (int j = 0; j < nl; j++) begin
        a = (longint'(ma) >> (lw * j)) & ((64'd1 << lw) - 1);
        b = (longint'(mb) >> (lw * j)) & ((64'd1 << lw) - 1);
        e = ref_ilm(ref_trunc(a, fw, t), ref_trunc(b, fw, t), ns);
        g = (lw == 32) ? prod : (prod >> (2 * lw * j)) & ((64'd1 << (2 * lw)) - 1);
        checks++;
        if (g != e) begin
          failures++;
          if (failures < 10) $display("FAIL mode=%0d lane=%0d %h*%h got %h exp %h", m, j, a, b, g, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
