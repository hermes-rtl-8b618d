// tb_hermes_ntt_core: self-checking test of the compute array at its default
// size (p = 16, N_part = 256) against a software negacyclic NTT.
// For each transform length in LOGNS the testbench computes the twiddle
// table psi_rev[k] = psi^bitrev(k) (psi a primitive 2N-th root of unity mod
// a 62-bit prime) with Shoup companions, loads it, runs a reference
// in-place Cooley-Tukey NTT and keeps the state after global stage 7 and at
// the end. It then streams all first-pass blocks and all second-pass blocks
// through the array back to back and compares every output coefficient with
// the reference (second-pass outputs of a Swap Mode prefix sit at the
// swapped positions). It checks the array latency and counts Butterfly/Swap
// configurations exercised.
module tb_hermes_ntt_core;
  import hermes_pkg::*;

  localparam logic [63:0] Q     = 64'h2000000000460001;
  localparam logic [63:0] PSI17 = 64'h0f14b2a0a71a3523;   // primitive 2^17-th root
  localparam int unsigned LANES = 32, NP = 256, R = 8, SP = 8;
  localparam int unsigned LAT   = 8 * 5 + R + 1;
  localparam int          NLOG  = 3;
  localparam int unsigned LOGNS [NLOG] = '{13, 16, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic tw_ld_valid; logic [31:0] tw_ld_idx; tw_t tw_ld_data;
  logic in_valid; logic [7:0] in_t; blk_tag_t in_tag; coef_t in_data [LANES];
  logic out_valid; logic [7:0] out_t; blk_tag_t out_tag; coef_t out_data [LANES];

  hermes_ntt_core dut (.clk, .rst_n, .q(Q), .tw_ld_valid, .tw_ld_idx, .tw_ld_data,
                       .in_valid, .in_t, .in_tag, .in_data,
                       .out_valid, .out_t, .out_tag, .out_data);

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
  coef_t a0  [1 << 16];    // input
  coef_t mid [1 << 16];    // after global stage 7
  coef_t fin [1 << 16];    // final

  int checks = 0, failures = 0;
  int n_bfly_cfg = 0, n_swap_cfg = 0;
  int unsigned cur_logn;
  int first_in_cyc, first_out_cyc;
  int out_rounds;

  task automatic ref_ntt(input int unsigned ln);
    int unsigned n, t, m;
    n = 1 << ln;
    for (int unsigned i = 0; i < n; i++) fin[i] = a0[i];
    t = n;
    for (int unsigned g = 0; g < ln; g++) begin
      m = 1 << g; t >>= 1;
      for (int unsigned i = 0; i < m; i++) begin
        for (int unsigned j = 2 * i * t; j < 2 * i * t + t; j++) begin
          coef_t u, v;
          u = fin[j]; v = mulq(fin[j + t], tw[m + i]);
          fin[j]     = coef_t'((128'(u) + 128'(v)) % 128'(Q));
          fin[j + t] = coef_t'((128'(u) + 128'(Q) - 128'(v)) % 128'(Q));
        end
      end
      if (g == SP - 1) for (int unsigned i = 0; i < n; i++) mid[i] = fin[i];
    end
  endtask

  function automatic int unsigned gidx(blk_tag_t tg, int unsigned j);
    if (tg.pass2) return int'(tg.blk) * NP + j;
    return int'(tg.blk) + j * ((1 << int'(tg.log_n)) / NP);
  endfunction

  // expected output at block position j
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int unsigned nsw, mask;
      if (out_rounds == 0) first_out_cyc = cyc;
      out_rounds++;
      nsw = out_tag.pass2 ? 2 * SP - int'(out_tag.log_n) : 0;
      mask = ((1 << nsw) - 1) << (SP - nsw);
      for (int unsigned l = 0; l < LANES; l++) begin
        int unsigned j, i;
        coef_t e;
        j = (int'(out_t) << 5) | l;                 // arrangement B
        i = gidx(out_tag, j ^ mask);
        e = (out_tag.pass2 || out_tag.log_n == 5'(SP)) ? fin[i] : mid[i];
        checks++;
        if (out_data[l] !== e) begin
          failures++;
          if (failures < 10) $display("FAIL logn %0d pass2 %0d blk %0d j %0d: %h exp %h",
                                      out_tag.log_n, out_tag.pass2, out_tag.blk, j, out_data[l], e);
        end
      end
    end
  end

  task automatic send_pass(input int unsigned ln, input logic p2);
    int unsigned nb;
    nb = 1 << (ln - SP);
    for (int unsigned b = 0; b < nb; b++) begin
      for (int unsigned t = 0; t < R; t++) begin
        in_valid = 1; in_t = 8'(t);
        in_tag = '0; in_tag.pass2 = p2; in_tag.blk = 16'(b); in_tag.log_n = 5'(ln);
        for (int unsigned l = 0; l < LANES; l++) begin
          int unsigned j;
          j = ((l >> 1) << 4) | (t << 1) | (l & 1);  // arrangement A
          in_data[l] = p2 ? mid[gidx(in_tag, j)] : a0[gidx(in_tag, j)];
        end
        @(posedge clk);
      end
    end
    in_valid = 0;
  endtask

  initial begin
    tw_ld_valid = 0; tw_ld_idx = 0; tw_ld_data = '0;
    in_valid = 0; in_t = 0; in_tag = '0;
    foreach (in_data[l]) in_data[l] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int li = 0; li < NLOG; li++) begin
      int unsigned ln, n;
      coef_t psi;
      ln = LOGNS[li]; n = 1 << ln; cur_logn = ln;
      psi = powq(PSI17, (1 << 17) / (2 * n));
      for (int unsigned k = 0; k < n; k++) tw[k] = powq(psi, bitrev(k, ln));
      for (int unsigned k = 0; k < n; k++) a0[k] = coef_t'({$urandom, $urandom} % Q);
      ref_ntt(ln);
      for (int unsigned k = 0; k < n; k++) begin
        tw_ld_valid = 1; tw_ld_idx = k;
        tw_ld_data.w = tw[k]; tw_ld_data.wpre = coef_t'(({tw[k], 64'd0}) / 128'(Q));
        @(posedge clk);
      end
      tw_ld_valid = 0;
      @(posedge clk);
      out_rounds = 0;
      first_in_cyc = cyc;
      send_pass(ln, 1'b0);
      n_bfly_cfg++;
      if (ln > SP) begin
        send_pass(ln, 1'b1);
        if (ln < 2 * SP) n_swap_cfg++;
      end
      repeat (LAT + 10) @(posedge clk);
      checks++;
      if (out_rounds != ((ln > SP) ? 2 : 1) * (n / LANES)) begin
        failures++; $display("FAIL: %0d output rounds", out_rounds);
      end
      checks++;
      if (first_out_cyc - first_in_cyc != LAT) begin
        failures++; $display("FAIL: latency %0d, expected %0d", first_out_cyc - first_in_cyc, LAT);
      end
      $display("log2N=%0d done, latency %0d", ln, first_out_cyc - first_in_cyc);
    end
    checks++;
    if (n_swap_cfg == 0) begin failures++; $display("FAIL: Swap Mode never used"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
