// tb_euler_dense: runs a small fully connected layer y = W x (16 outputs,
// 16 inputs) through the engine in each precision mode, the way a neural
// network layer would use it, and measures its accuracy.
//
// How: weights and inputs are random reals in [-1, 1), rounded to the mode's
// bounded posit by the reference encoder. Each lane computes one output, so
// one pass of 16 operations (an FMA with c = 0, then 15 back-to-back MACs)
// gives 4, 2 or 1 outputs; groups follow each other without idle cycles.
// Every result is compared bit for bit with the reference model (truncation,
// ILM, fixed-point quire, nearest-posit rounding). In addition, the final
// outputs are compared with the exact dot product of the posit inputs,
// clamped to the largest posit; the error, divided by the sum of |w*x|, must
// stay below 0.15 (P8), 0.02 (P16) and 0.001 (P32). These bounds are this
// testbench's choice, a few times the truncation and rounding error of each
// mode.
//
// Timing: 10-time-unit clock, operands change on the falling edge; results
// appear 7 cycles after their operands. A watchdog ends the run with a
// failure after 20000 cycles. The engine runs at its default parameters.
module tb_euler_dense;
  import euler_pkg::*;
  import euler_ref_pkg::*;

  localparam int LAT  = 7;
  localparam int NOUT = 16;
  localparam int NIN  = 16;

  int checks = 0, failures = 0;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        in_valid = 1'b0;
  mode_e       in_mode = MODE_P8;
  op_e         in_op = OP_FMA;
  logic [31:0] vec_a = '0, vec_b = '0, vec_c = '0;
  logic        out_valid;
  mode_e       out_mode;
  logic [31:0] vec_res;
  logic [3:0]  out_nar;

  euler_nce dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(in_mode), .in_op(in_op),
    .vec_a(vec_a), .vec_b(vec_b), .vec_c(vec_c),
    .out_valid(out_valid), .out_mode(out_mode), .vec_res(vec_res), .out_nar(out_nar));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int r_of(int m); return (m == 0) ? 2 : (m == 1) ? 3 : 5; endfunction
  function automatic int ns_of(int m); return (m == 0) ? 3 : (m == 1) ? 6 : 12; endfunction
  function automatic int t_of(int m); return (m == 0) ? 4 : (m == 1) ? 8 : 16; endfunction

  // Real value of a posit pattern.
  function automatic real pval(longint unsigned p, int m);
    dec_t d;
    int n;
    n = 8 << m;
    d = ref_decode(p, n, m, r_of(m));
    if (d.zero || d.nar) return 0.0;
    return (d.sign ? -1.0 : 1.0) * real'(d.mant) * (2.0 ** (d.sf - euler_ref_pkg::fw_of(n, m)));
  endfunction

  // Uniform random real in [-1, 1).
  function automatic real rnd_unit();
    int u;
    u = int'($urandom_range(0, 65535));
    return real'(u - 32768) / 32768.0;
  endfunction

  // Posit pattern nearest to a real in [-1, 1).
  function automatic longint unsigned to_posit(real v, int m);
    logic signed [255:0] q;
    int qf;
    qf = qf_m(m, r_of(m));
    q  = 256'(longint'(v * (2.0 ** 40)));
    q  = (qf >= 40) ? (q <<< (qf - 40)) : (q >>> (40 - qf));
    return ref_encode_fx(q, 8 << m, m, r_of(m), qf);
  endfunction

  // Bit-accurate reference of one lane: product added to the quire lane.
  function automatic logic signed [255:0] lane_prod(longint unsigned a, longint unsigned b, int m);
    dec_t da, db;
    int n, fw;
    logic signed [255:0] pv;
    n  = 8 << m;
    fw = euler_ref_pkg::fw_of(n, m);
    da = ref_decode(a, n, m, r_of(m));
    db = ref_decode(b, n, m, r_of(m));
    if (da.zero || db.zero || da.nar || db.nar) return '0;
    pv = (256'(ref_ilm(ref_trunc(da.mant, fw, t_of(m)), ref_trunc(db.mant, fw, t_of(m)), ns_of(m)))
          >> drop_m(m, r_of(m))) << (da.sf + db.sf + pmag_m(m, r_of(m)));
    return (da.sign ^ db.sign) ? -pv : pv;
  endfunction

  longint unsigned w [3][NOUT][NIN];
  longint unsigned x [3][NIN];
  logic [31:0]     expq[$];
  longint          exp_cyc[$];
  longint          cyc = 0;
  real             max_err[3] = '{0.0, 0.0, 0.0};

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [31:0] e;
      longint c;
      checks++;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output");
      end else begin
        e = expq.pop_front();
        c = exp_cyc.pop_front();
        if (vec_res !== e || cyc - c != LAT) begin
          failures++;
          if (failures < 10) $display("FAIL got %h exp %h latency %0d", vec_res, e, cyc - c);
        end
      end
    end
  end

  initial begin
    for (int m = 0; m < 3; m++) begin
      for (int i = 0; i < NIN; i++) x[m][i] = to_posit(rnd_unit(), m);
      for (int o = 0; o < NOUT; o++)
        for (int i = 0; i < NIN; i++) w[m][o][i] = to_posit(rnd_unit(), m);
    end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int m = 0; m < 3; m++) begin
      int n, nl, qw, qf;
      logic signed [255:0] acc [4];
      real ex [4], mag [4];
      real maxp;
      n  = 8 << m;
      nl = 4 >> m;
      qw = 32 << m;
      qf = qf_m(m, r_of(m));
      maxp = pval((64'd1 << (n - 1)) - 1, m);
      for (int g = 0; g < NOUT / nl; g++) begin
        logic [31:0] res;
        for (int j = 0; j < 4; j++) begin acc[j] = '0; ex[j] = 0.0; mag[j] = 0.0; end
        for (int i = 0; i < NIN; i++) begin
          logic [31:0] a, b;
          a = '0;
          b = '0;
          res = '0;
          for (int j = 0; j < nl; j++) begin
            a |= 32'(w[m][g*nl+j][i] << (n * j));
            b |= 32'(x[m][i] << (n * j));
            acc[j] = acc[j] + lane_prod(w[m][g*nl+j][i], x[m][i], m);
            // wrap to the lane width as the quire does
            acc[j] = 256'(128'(acc[j]) & ((qw == 128) ? '1 : ((128'd1 << qw) - 1)));
            if (acc[j][qw-1]) acc[j] = acc[j] - (256'sd1 <<< qw);
            res |= 32'(ref_encode_fx(acc[j], n, m, r_of(m), qf) << (n * j));
            ex[j]  += pval(w[m][g*nl+j][i], m) * pval(x[m][i], m);
            mag[j] += (pval(w[m][g*nl+j][i], m) * pval(x[m][i], m) < 0.0)
                      ? -pval(w[m][g*nl+j][i], m) * pval(x[m][i], m)
                      :  pval(w[m][g*nl+j][i], m) * pval(x[m][i], m);
          end
          in_valid = 1'b1;
          in_mode  = mode_e'(m);
          in_op    = (i == 0) ? OP_FMA : OP_MAC;
          vec_a    = a;
          vec_b    = b;
          vec_c    = '0;
          expq.push_back(res);
          exp_cyc.push_back(cyc);
          @(negedge clk);
        end
        // accuracy of the finished outputs against exact arithmetic
        for (int j = 0; j < nl; j++) begin
          real y, t, err;
          y = pval((res >> (n * j)) & ((64'd1 << n) - 1), m);
          t = (ex[j] > maxp) ? maxp : (ex[j] < -maxp) ? -maxp : ex[j];
          err = ((y > t) ? y - t : t - y) / ((mag[j] > 0.0) ? mag[j] : 1.0);
          if (err > max_err[m]) max_err[m] = err;
        end
      end
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    $display("largest error / sum|w*x|: P8 %f P16 %f P32 %f", max_err[0], max_err[1], max_err[2]);
    checks++; if (max_err[0] > 0.15)  failures++;
    checks++; if (max_err[1] > 0.02)  failures++;
    checks++; if (max_err[2] > 0.001) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
