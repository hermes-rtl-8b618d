// tb_hermes_top: end-to-end test of the whole accelerator at its default
// size (p = 16, N_part = 256, N up to 2^16, 64-bit coefficients).
// The testbench plays the role of HBM and host: for every transform length
// in LOGNS it builds the twiddle table psi_rev[k] = psi^bitrev(k) with Shoup
// companions (psi a primitive 2N-th root of unity modulo the 62-bit prime
// Q), loads it, starts the transform, supplies the load beats with random
// idle cycles (the load handshake must wait for them), collects the store
// beats and compares all N results with a software in-place Cooley-Tukey
// negacyclic NTT. It also counts the mechanisms of the design and fails if
// one never happened: single-pass transform, two-pass transform, Swap Mode,
// stream switch, pipeline drain between passes, load waiting on HBM, and
// checks that each pass issues one round per cycle (N/(2p) cycles) and that
// each drain stays below a fixed bound.
module tb_hermes_top;
  import hermes_pkg::*;

  localparam logic [63:0] Q     = 64'h2000000000460001;
  localparam logic [63:0] PSI17 = 64'h0f14b2a0a71a3523;   // primitive 2^17-th root
  localparam int unsigned LANES = 32, SP = 8;
  localparam int          NLOG  = 9;
  localparam int unsigned LOGNS [NLOG] = '{8, 13, 9, 10, 14, 11, 12, 15, 16};
  localparam int          DRAIN_MAX = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic tw_ld_valid; logic [31:0] tw_ld_idx; tw_t tw_ld_data;
  logic start, busy, done; logic [4:0] log_n;
  logic ld_valid, ld_ready, st_valid;
  coef_t ld_data [LANES]; coef_t st_data [LANES];

  hermes_top dut (.clk, .rst_n, .q(Q), .tw_ld_valid, .tw_ld_idx, .tw_ld_data,
                  .start, .log_n, .busy, .done, .ld_valid, .ld_ready, .ld_data,
                  .st_valid, .st_data);

  function automatic coef_t mulq(coef_t a, coef_t b);
    return coef_t'((128'(a) * 128'(b)) % 128'(Q));
  endfunction
  function automatic coef_t powq(coef_t b, longint unsigned e);
    coef_t r = 1;
    while (e != 0) begin
      if (e[0]) r = mulq(r, b);
      b = mulq(b, b);
      e >>= 1;
    end
    return r;
  endfunction
  function automatic int unsigned bitrev(int unsigned x, int unsigned n);
    int unsigned r = 0;
    for (int unsigned b = 0; b < n; b++) r |= ((x >> b) & 1) << (n - 1 - b);
    return r;
  endfunction

  coef_t tw  [1 << 16];
  coef_t a0  [1 << 16];
  coef_t fin [1 << 16];

  task automatic ref_ntt(input int unsigned ln);
    int unsigned n, t, m;
    n = 1 << ln;
    for (int unsigned i = 0; i < n; i++) fin[i] = a0[i];
    t = n;
    for (int unsigned g = 0; g < ln; g++) begin
      m = 1 << g; t >>= 1;
      for (int unsigned i = 0; i < m; i++)
        for (int unsigned j = 2 * i * t; j < 2 * i * t + t; j++) begin
          coef_t u, v;
          u = fin[j]; v = mulq(fin[j + t], tw[m + i]);
          fin[j]     = coef_t'((128'(u) + 128'(v)) % 128'(Q));
          fin[j + t] = coef_t'((128'(u) + 128'(Q) - 128'(v)) % 128'(Q));
        end
    end
  endtask

  int checks = 0, failures = 0;
  // mechanism counters
  int n_single = 0, n_double = 0, n_swap_runs = 0, n_switch = 0, n_drain = 0, n_ld_wait = 0;
  int st_beats;
  // per-run cycle counters
  int c_pass [2]; int c_drain [2];

  always @(posedge clk) begin
    if (rst_n) begin
      if (dut.u_core.g_stage[4].g_switch.u_switch.out_valid) n_switch++;
      if (dut.u_core.s_in_v[0] && dut.u_core.g_stage[0].g_nttu[0].u_nttu.mode_c == BU_SWAP) n_swap_runs++;
      if (ld_ready && !ld_valid) n_ld_wait++;
      case (dut.u_ctrl.state)
        ST_PASS1:  c_pass[0]++;
        ST_PASS2:  c_pass[1]++;
        ST_DRAIN1: c_drain[0]++;
        ST_DRAIN2: c_drain[1]++;
        default: ;
      endcase
    end
  end

  // store beats
  always @(posedge clk) begin
    if (rst_n && st_valid) begin
      for (int s = 0; s < LANES; s++) begin
        checks++;
        if (st_data[s] !== fin[st_beats * LANES + s]) begin
          failures++;
          if (failures < 10) $display("FAIL: index %0d got %h exp %h", st_beats * LANES + s,
                                      st_data[s], fin[st_beats * LANES + s]);
        end
      end
      st_beats++;
    end
  end

  initial begin
    tw_ld_valid = 0; tw_ld_idx = 0; tw_ld_data = '0;
    start = 0; log_n = 0; ld_valid = 0;
    foreach (ld_data[s]) ld_data[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int li = 0; li < NLOG; li++) begin
      int unsigned ln, n, beat;
      coef_t psi;
      ln = LOGNS[li]; n = 1 << ln;
      psi = powq(PSI17, (1 << 17) / (2 * n));
      for (int unsigned k = 0; k < n; k++) tw[k] = powq(psi, bitrev(k, ln));
      for (int unsigned k = 0; k < n; k++) a0[k] = coef_t'({$urandom, $urandom} % Q);
      ref_ntt(ln);
      // host loads the twiddle table
      for (int unsigned k = 0; k < n; k++) begin
        tw_ld_valid = 1; tw_ld_idx = k;
        tw_ld_data.w = tw[k]; tw_ld_data.wpre = coef_t'(({tw[k], 64'd0}) / 128'(Q));
        @(posedge clk);
      end
      tw_ld_valid = 0;
      c_pass = '{0, 0}; c_drain = '{0, 0}; st_beats = 0;
      start = 1; log_n = 5'(ln);
      @(posedge clk);
      start = 0;
      // HBM read beats, with idle cycles now and then
      beat = 0;
      while (beat < n / LANES) begin
        if (ld_ready && $urandom_range(0, 7) != 0) begin
          ld_valid = 1;
          for (int s = 0; s < LANES; s++) ld_data[s] = a0[beat * LANES + s];
          beat++;
        end else ld_valid = 0;
        @(posedge clk);
      end
      ld_valid = 0;
      wait (done);
      repeat (2) @(posedge clk);
      checks++;
      if (st_beats != n / LANES) begin failures++; $display("FAIL: %0d store beats", st_beats); end
      // one round per cycle in each pass, bounded drain
      checks++;
      if (c_pass[0] != n / LANES || c_pass[1] != ((ln > SP) ? n / LANES : 0)) begin
        failures++; $display("FAIL: pass cycles %0d %0d", c_pass[0], c_pass[1]);
      end
      checks++;
      if (c_drain[0] > DRAIN_MAX || c_drain[1] > DRAIN_MAX) begin
        failures++; $display("FAIL: drain cycles %0d %0d", c_drain[0], c_drain[1]);
      end
      if (c_drain[0] > 0) n_drain++;
      if (ln > SP) n_double++; else n_single++;
      $display("log2N=%0d: pass cycles %0d + %0d, drain %0d + %0d, compute %0d cycles",
               ln, c_pass[0], c_pass[1], c_drain[0], c_drain[1],
               c_pass[0] + c_pass[1] + c_drain[0] + c_drain[1]);
    end
    $display("mechanisms: single-pass %0d, two-pass %0d, swap-mode rounds %0d, switch rounds %0d, drains %0d, load waits %0d",
             n_single, n_double, n_swap_runs, n_switch, n_drain, n_ld_wait);
    checks += 6;
    if (n_single == 0)    begin failures++; $display("FAIL: no single-pass transform"); end
    if (n_double == 0)    begin failures++; $display("FAIL: no two-pass transform"); end
    if (n_swap_runs == 0) begin failures++; $display("FAIL: Swap Mode never used"); end
    if (n_switch == 0)    begin failures++; $display("FAIL: stream switch never used"); end
    if (n_drain == 0)     begin failures++; $display("FAIL: no drain"); end
    if (n_ld_wait == 0)   begin failures++; $display("FAIL: load never waited"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
