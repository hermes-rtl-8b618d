// tb_hermes_nttu: self-checking test of the NTT Unit with its twiddle memory.
// Two NTTUs of the default configuration (p = 16, N_part = 256) are tested:
// one in dependent stage 1 (NTTU 3) and one in independent stage 6 (NTTU 5).
// Each gets a private twiddle memory filled with a known pseudo-random
// function of the index. Random coefficients, rounds and block tags (both
// passes, log2 N = 9..16) are streamed one per cycle; the expected outputs
// are computed here from the lane arrangement written out bit by bit, the
// twiddle-index formula psi_rev[2^g + floor(i / 2^(logN-g))] and the Swap
// Mode rule, using 128-bit reference arithmetic. Latency (5) is checked.
module tb_hermes_nttu;
  import hermes_pkg::*;

  localparam logic [63:0] Q   = 64'h2000000000460001;
  localparam int          NUM = 3000;
  localparam int          LAT = 5;
  localparam int unsigned KD = 1, UD = 3, KI = 6, UI = 5;
  localparam int unsigned TD_D = 1 << (KD + 9), TD_I = 1 << (KI + 9);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic coef_t tw_val(int unsigned idx);
    logic [127:0] v;
    v = 128'(idx) * 128'h9E3779B97F4A7C15 + 128'd12345;
    return coef_t'(v % 128'(Q));
  endfunction

  function automatic coef_t rnd_mod();
    logic [127:0] r;
    r = {$urandom, $urandom, $urandom, $urandom};
    return coef_t'(r % 128'(Q));
  endfunction

  function automatic coef_t mulq(coef_t a, coef_t b);
    return coef_t'((128'(a) * 128'(b)) % 128'(Q));
  endfunction

  // load ports
  logic ld_valid; logic [31:0] ld_idx; tw_t ld_data;

  // DUT signals
  logic in_valid; logic [7:0] in_t; blk_tag_t in_tag;
  coef_t in1 [2]; coef_t in2 [2];
  logic [$clog2(TD_D)-1:0] idx_d [2];
  logic [$clog2(TD_I)-1:0] idx_i [2];
  tw_t td_d [2]; tw_t td_i [2];
  logic ov_d, ov_i;
  coef_t o1_d [2]; coef_t o2_d [2]; coef_t o1_i [2]; coef_t o2_i [2];

  hermes_tf_mem #(.DEPTH(TD_D)) m_d (.clk, .ld_valid, .ld_idx, .ld_data, .rd_idx(idx_d), .rd_data(td_d));
  hermes_tf_mem #(.DEPTH(TD_I)) m_i (.clk, .ld_valid, .ld_idx, .ld_data, .rd_idx(idx_i), .rd_data(td_i));

  hermes_nttu #(.STAGE(KD), .U(UD), .TDEPTH(TD_D)) dut_d (
    .clk, .rst_n, .q(Q), .in_valid, .in_t, .in_tag, .in1, .in2,
    .tf_idx(idx_d), .tf_data(td_d), .out_valid(ov_d), .out1(o1_d), .out2(o2_d));
  hermes_nttu #(.STAGE(KI), .U(UI), .TDEPTH(TD_I)) dut_i (
    .clk, .rst_n, .q(Q), .in_valid, .in_t, .in_tag, .in1, .in2,
    .tf_idx(idx_i), .tf_data(td_i), .out_valid(ov_i), .out1(o1_i), .out2(o2_i));

  int checks = 0, failures = 0;
  int bfly_seen = 0, swap_seen = 0;

  typedef struct { coef_t d1 [2]; coef_t d2 [2]; coef_t i1 [2]; coef_t i2 [2]; int t0; } exp_t;
  exp_t expq [$];

  // expected butterfly of one BU
  task automatic bfly(input int unsigned k, input int unsigned j, input blk_tag_t tg,
                      input coef_t a, input coef_t b, output coef_t r1, output coef_t r2);
    int unsigned nsw, mask, jt, gi, g, tix;
    coef_t t;
    nsw = tg.pass2 ? 16 - int'(tg.log_n) : 0;
    if (k < nsw) begin
      r1 = b; r2 = a; swap_seen++;
      return;
    end
    bfly_seen++;
    mask = ((1 << nsw) - 1) << (8 - nsw);
    jt = j ^ mask;
    gi = tg.pass2 ? (int'(tg.blk) * 256 + jt) : (int'(tg.blk) + jt * (1 << (int'(tg.log_n) - 8)));
    g  = tg.pass2 ? k + int'(tg.log_n) - 8 : k;
    tix = (1 << g) + (gi >> (int'(tg.log_n) - g));
    t = mulq(b, tw_val(tix));
    r1 = coef_t'((128'(a) + 128'(t)) % 128'(Q));
    r2 = coef_t'((128'(a) + 128'(Q) - 128'(t)) % 128'(Q));
  endtask

  initial begin
    in_valid = 0; in_t = 0; in_tag = '0; ld_valid = 0; ld_idx = 0; ld_data = '0;
    foreach (in1[e]) begin in1[e] = 0; in2[e] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    // fill both twiddle memories
    for (int unsigned k = 0; k < TD_I; k++) begin
      coef_t w;
      w = tw_val(k);
      ld_valid = 1; ld_idx = k;
      ld_data.w = w; ld_data.wpre = coef_t'(({w, 64'd0}) / 128'(Q));
      @(posedge clk);
    end
    ld_valid = 0;
    @(posedge clk);
    for (int n = 0; n < NUM; n++) begin
      exp_t ex;
      int unsigned ln, ld, li, jd, ji;
      ln = $urandom_range(9, 16);
      in_tag.log_n = 5'(ln);
      in_tag.pass2 = $urandom_range(0, 1);
      in_tag.blk   = 16'($urandom_range(0, (1 << (ln - 8)) - 1));
      in_t = 8'($urandom_range(0, 7));
      foreach (in1[e]) begin in1[e] = rnd_mod(); in2[e] = rnd_mod(); end
      // dependent stage KD: BU s takes in_s[0], in_s[1]; pair bit at lane bit 4-KD
      for (int unsigned s = 0; s < 2; s++) begin
        ld = ((UD << 1 | s) >> (4 - KD)) << (5 - KD) | ((UD << 1 | s) & ((1 << (4 - KD)) - 1));
        jd = ((ld >> 1) << 4) | (int'(in_t) << 1) | (ld & 1);   // arrangement A
        bfly(KD, jd, in_tag, (s == 0) ? in1[0] : in2[0], (s == 0) ? in1[1] : in2[1],
             ex.d1[s], ex.d2[s]);
      end
      // independent stage KI: BU e takes in1[e], in2[e]; pair bit at lane bit 7-KI
      for (int unsigned e = 0; e < 2; e++) begin
        li = ((UI << 1 | e) >> (7 - KI)) << (8 - KI) | ((UI << 1 | e) & ((1 << (7 - KI)) - 1));
        ji = (int'(in_t) << 5) | li;                               // arrangement B
        bfly(KI, ji, in_tag, in1[e], in2[e], ex.i1[e], ex.i2[e]);
      end
      ex.t0 = cyc;
      expq.push_back(ex);
      in_valid = 1;
      @(posedge clk);
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL: %0d outputs missing", expq.size()); end
    checks++;
    if (bfly_seen == 0 || swap_seen == 0) begin failures++; $display("FAIL: mode not exercised"); end
    $display("butterflies %0d swaps %0d", bfly_seen, swap_seen);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && ov_d) begin
      exp_t ex;
      checks++;
      if (!ov_i || expq.size() == 0) begin
        failures++; $display("FAIL: unexpected or misaligned output");
      end else begin
        ex = expq.pop_front();
        if (cyc - ex.t0 != LAT) begin failures++; $display("FAIL: latency %0d", cyc - ex.t0); end
        // dependent: out_s = {y1, y2} of BU s
        for (int s = 0; s < 2; s++) begin
          coef_t g1, g2;
          g1 = (s == 0) ? o1_d[0] : o2_d[0];
          g2 = (s == 0) ? o1_d[1] : o2_d[1];
          checks += 2;
          if (g1 !== ex.d1[s] || g2 !== ex.d2[s]) begin
            failures++;
            if (failures < 10) $display("FAIL dep BU%0d: %h %h exp %h %h", s, g1, g2, ex.d1[s], ex.d2[s]);
          end
        end
        // independent: out1[e] = y1, out2[e] = y2 of BU e
        for (int e = 0; e < 2; e++) begin
          checks += 2;
          if (o1_i[e] !== ex.i1[e] || o2_i[e] !== ex.i2[e]) begin
            failures++;
            if (failures < 10) $display("FAIL ind BU%0d: %h %h exp %h %h", e, o1_i[e], o2_i[e], ex.i1[e], ex.i2[e]);
          end
        end
      end
    end
  end

  initial begin
    repeat (TD_I + NUM + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
