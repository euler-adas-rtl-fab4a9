// tb_euler_nce_knobs: the end-to-end test of tb_euler_nce, run on the engine
// configured with the other published accuracy setting: 2/4/8 ILM stages and
// 5/10/20 retained significand bits for P8/P16/P32 (regime bounds unchanged).
// It shows that the stage count and truncation width are real parameters of
// the datapath and that the quire layout and rounding stay exact when they
// change.
//
// A random stream of FMA and MAC operations in all three modes, with idle
// cycles, mode switches, zero and NaR lanes, is checked lane by lane against
// the reference model, with the result due exactly 7 cycles after its
// operands. Mechanism counters fail the test if a mechanism never occurred.
// Timing: 10-time-unit clock, operands change on the falling edge. A
// watchdog ends the run with a failure after 3*NOPS+1000 cycles. The two
// settings are the paper's; the operation set and quire layout are this
// design's.
module tb_euler_nce_knobs;
  import euler_pkg::*;
  import euler_ref_pkg::*;

  localparam int LAT  = 7;
  localparam int NOPS = 2000;

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

  euler_nce #(
    .NS8(2), .NS16(4), .NS32(8), .T8(5), .T16(10), .T32(20)
  ) dut (
    .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_mode(in_mode), .in_op(in_op),
    .vec_a(vec_a), .vec_b(vec_b), .vec_c(vec_c),
    .out_valid(out_valid), .out_mode(out_mode), .vec_res(vec_res), .out_nar(out_nar));

  always #5 clk = ~clk;

  // Expected results in issue order.
  typedef struct {
    longint    cycle;
    int        mode;
    logic [31:0] res;
    logic [3:0]  nar;
  } exp_t;
  exp_t expq[$];

  // Reference state.
  logic [127:0] rq = '0;
  logic [3:0]   rq_nar = '0;
  longint       cyc = 0;

  // Mechanism counters.
  int n_mode[3] = '{0, 0, 0};
  int n_fma = 0, n_mac = 0, n_b2b_mac = 0, n_switch = 0, n_bubble = 0;
  int n_nar = 0, n_zero = 0, n_maxpos = 0, n_minpos = 0, n_neg = 0;
  int n_trunc = 0, n_approx = 0, n_round = 0;

  function automatic int r_of(int m); return (m == 0) ? 2 : (m == 1) ? 3 : 5; endfunction
  function automatic int ns_of(int m); return (m == 0) ? 2 : (m == 1) ? 4 : 8; endfunction
  function automatic int t_of(int m); return (m == 0) ? 5 : (m == 1) ? 10 : 20; endfunction

  // Reference for one issued operation; updates the reference quire.
  function automatic exp_t model(int m, bit mac, logic [31:0] a, logic [31:0] b, logic [31:0] c);
    exp_t e;
    int n, es, r, fw, qw, qf, pm, dr, nl;
    dec_t da, db, dc;
    logic signed [255:0] pv, cv, qv, ov;
    longint unsigned ta, tb, ilm, lanew, res;
    logic [127:0] mask;
    n = 8 << m; es = m; r = r_of(m); fw = euler_ref_pkg::fw_of(n, es);
    qw = 32 << m; qf = qf_m(m, r); pm = pmag_m(m, r); dr = drop_m(m, r);
    nl = 4 >> m;
    mask = (qw == 128) ? '1 : ((128'd1 << qw) - 1);
    e.mode = m;
    e.res = '0;
    e.nar = '0;
    for (int j = 0; j < nl; j++) begin
      da = ref_decode((longint'(a) >> (n * j)) & ((64'd1 << n) - 1), n, es, r);
      db = ref_decode((longint'(b) >> (n * j)) & ((64'd1 << n) - 1), n, es, r);
      dc = ref_decode((longint'(c) >> (n * j)) & ((64'd1 << n) - 1), n, es, r);
      pv = 0;
      if (!da.zero && !da.nar && !db.zero && !db.nar) begin
        ta  = ref_trunc(da.mant, fw, t_of(m));
        tb  = ref_trunc(db.mant, fw, t_of(m));
        if (ta != da.mant || tb != db.mant) n_trunc++;
        ilm = ref_ilm(ta, tb, ns_of(m));
        if (ilm != ta * tb) n_approx++;
        pv  = (256'(ilm) >> dr) << (da.sf + db.sf + pm);
        if (da.sign ^ db.sign) pv = -pv;
      end
      cv = 0;
      if (!dc.zero && !dc.nar) begin
        cv = 256'(dc.mant) << (dc.sf - fw + qf);
        if (dc.sign) cv = -cv;
      end
      // old quire lane, sign extended
      ov = 256'((rq >> (qw * j)) & mask);
      if (ov[qw-1]) ov = ov - (256'sd1 <<< qw);
      qv = (mac ? ov : cv) + pv;
      // wrap to the lane width
      qv = 256'(128'(qv) & mask);
      if (qv[qw-1]) qv = qv - (256'sd1 <<< qw);
      rq = (rq & ~(mask << (qw * j))) | ((128'(qv) & mask) << (qw * j));
      rq_nar[j] = da.nar | db.nar | (mac ? rq_nar[j] : dc.nar);
      if (rq_nar[j]) begin
        res = 64'd1 << (n - 1);
        e.nar[j] = 1'b1;
        n_nar++;
      end else begin
        res = ref_encode_fx(qv, n, es, r, qf);
        if (res == 0) n_zero++;
        if (res == ((64'd1 << (n - 1)) - 1) || res == ((64'd1 << (n - 1)) + 1)) n_maxpos++;
        if (res == 1 || res == ((64'd1 << n) - 1)) n_minpos++;
        if (res[n-1]) n_neg++;
        if (qv != 0 && ref_value_fx(res[n-1] ? ((~res + 1) & ((64'd1 << n) - 1)) : res, n, es, r, qf)
                       != (qv[255] ? -qv : qv)) n_round++;
      end
      e.res = e.res | 32'(res << (n * j));
    end
    return e;
  endfunction

  // Random operand word: random patterns with some zero and NaR lanes.
  function automatic logic [31:0] rand_word(int m);
    logic [31:0] w;
    int n;
    n = 8 << m;
    w = $urandom;
    for (int j = 0; j < (4 >> m); j++) begin
      case ($urandom_range(0, 39))
        0: w = w & ~(32'((64'd1 << n) - 1) << (n * j));                        // zero
        1: w = (w & ~(32'((64'd1 << n) - 1) << (n * j))) | (32'(64'd1 << (n - 1)) << (n * j)); // NaR
        default: ;
      endcase
    end
    return w;
  endfunction

  // Watchdog.
  initial begin
    repeat (NOPS * 3 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc <= cyc + 1;

  // Output checker.
  int streak = 0, max_streak = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      int nl;
      streak++;
      if (streak > max_streak) max_streak = streak;
      if (expq.size() == 0) begin
        failures++;
        $display("FAIL unexpected output %h", vec_res);
      end else begin
        e = expq.pop_front();
        checks++;
        if (cyc - e.cycle != LAT) begin
          failures++;
          if (failures < 10) $display("FAIL latency %0d", cyc - e.cycle);
        end
        nl = 4 >> e.mode;
        checks++;
        if (vec_res !== e.res || out_nar !== e.nar || int'(out_mode) != e.mode) begin
          failures++;
          if (failures < 20)
            $display("FAIL cycle %0d mode %0d got %h nar %b exp %h nar %b", cyc, e.mode, vec_res, out_nar, e.res, e.nar);
        end
      end
    end else begin
      streak = 0;
    end
  end

  initial begin
    int m, prev_m;
    bit mac, prev_mac_valid;
    exp_t e;
    m = 0;
    prev_m = 0;
    prev_mac_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < NOPS; i++) begin
      if ($urandom_range(0, 9) == 0) begin
        in_valid = 1'b0;
        n_bubble++;
        prev_mac_valid = 0;
        @(negedge clk);
      end
      if ($urandom_range(0, 29) == 0) m = $urandom_range(0, 2);
      // first op after a mode switch starts a fresh accumulation
      mac = (m == prev_m) && ($urandom_range(0, 9) < 7);
      if (m != prev_m) n_switch++;
      n_mode[m]++;
      if (mac) n_mac++; else n_fma++;
      if (mac && prev_mac_valid) n_b2b_mac++;
      in_valid = 1'b1;
      in_mode  = mode_e'(m);
      in_op    = mac ? OP_MAC : OP_FMA;
      vec_a    = rand_word(m);
      vec_b    = rand_word(m);
      vec_c    = rand_word(m);
      if (i % 53 == 0) begin           // exact zero result
        vec_a = '0;
        vec_c = '0;
        in_op = OP_FMA;
        mac = 0;
      end
      e = model(m, mac, vec_a, vec_b, vec_c);
      e.cycle = cyc;
      expq.push_back(e);
      prev_m = m;
      prev_mac_valid = mac;
      @(negedge clk);
    end
    in_valid = 1'b0;
    repeat (LAT + 3) @(negedge clk);
    checks++;
    if (expq.size() != 0) begin
      failures++;
      $display("FAIL %0d results missing", expq.size());
    end
    // one result per cycle in steady state
    checks++;
    if (max_streak < 20) begin
      failures++;
      $display("FAIL longest run of back-to-back results %0d", max_streak);
    end
    $display("mechanisms: P8 %0d P16 %0d P32 %0d FMA %0d MAC %0d back-to-back MAC %0d mode switches %0d idle %0d",
             n_mode[0], n_mode[1], n_mode[2], n_fma, n_mac, n_b2b_mac, n_switch, n_bubble);
    $display("            NaR %0d zero %0d maxpos %0d minpos %0d negative %0d truncated %0d approximate %0d rounded %0d",
             n_nar, n_zero, n_maxpos, n_minpos, n_neg, n_trunc, n_approx, n_round);
    foreach (n_mode[k]) begin
      checks++;
      if (n_mode[k] == 0) failures++;
    end
    checks++; if (n_fma == 0) failures++;
    checks++; if (n_mac == 0) failures++;
    checks++; if (n_b2b_mac == 0) failures++;
    checks++; if (n_switch == 0) failures++;
    checks++; if (n_bubble == 0) failures++;
    checks++; if (n_nar == 0) failures++;
    checks++; if (n_zero == 0) failures++;
    checks++; if (n_maxpos == 0) failures++;
    checks++; if (n_minpos == 0) failures++;
    checks++; if (n_neg == 0) failures++;
    checks++; if (n_trunc == 0) failures++;
    checks++; if (n_approx == 0) failures++;
    checks++; if (n_round == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
