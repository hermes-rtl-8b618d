// tb_hermes_ctrl: self-checking test of the sequencer / address generator
// at the default size (2p = 32 slots, N_part = 256).
// The datapath between the input-buffer write and the output-buffer read is
// replaced by a fixed delay line. For transform lengths 2^8, 2^13 and 2^16
// the testbench checks, from the fragmentation formula written out here:
//   * load beats write indices 32k .. 32k+31 to group 0;
//   * every issued read round hits 32 distinct banks, reads group 0 in pass
//     1 and group 1 in pass 2, and each pass reads every index exactly once;
//   * the input-buffer positions of a round are the block positions of the
//     indices read one cycle earlier (block b of pass 1 holds
//     b + (N/256)*j, block c of pass 2 holds 256*c + j);
//   * write-backs go to group 1 (pass 1) / group 0 (pass 2), to the index of
//     the output-buffer position read the cycle before, each index once;
//   * pass 2 does not start before all pass-1 write-backs, each pass issues
//     one round per cycle, and the store reads the result group in bursts,
//     ending with one done pulse.
module tb_hermes_ctrl;
  import hermes_pkg::*;

  localparam int unsigned LANES = 32, SP = 8, LOGN = 16, R = 8, DLY = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, ld_valid, ld_ready, st_valid;
  logic [4:0] log_n;
  logic g_rd_en [2]; logic [LOGN-1:0] g_rd_idx [2][LANES];
  logic g_wr_en [2]; logic g_wr_load; logic [LOGN-1:0] g_wr_idx [2][LANES];
  logic rd_src, ib_wr_valid, ib_wr_last; blk_tag_t ib_wr_tag;
  logic [7:0] ib_wr_pos [LANES];
  logic [7:0] ob_rd_t, ob_out_t; blk_tag_t ob_rd_tag, ob_out_tag;
  logic [7:0] ob_rd_pos [LANES];
  logic ob_out_valid;

  hermes_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 15) $display("FAIL: %s", msg); end
  endtask

  function automatic int unsigned bank(int unsigned i);
    return (i ^ (i >> SP)) % LANES;
  endfunction

  // delay line standing in for input buffer + array + output buffer
  typedef struct packed { logic v; logic [7:0] t; blk_tag_t tag; } rnd_t;
  rnd_t dl [DLY];
  rnd_t ib_rnd;
  always_comb begin
    ib_rnd.v = ib_wr_valid; ib_rnd.t = 8'(dut.rnd_q); ib_rnd.tag = ib_wr_tag;
  end
  always_ff @(posedge clk) begin
    dl[0] <= ib_rnd;
    for (int d = 1; d < DLY; d++) dl[d] <= dl[d-1];
  end
  assign ob_rd_t      = dl[DLY-2].t;
  assign ob_rd_tag    = dl[DLY-2].tag;
  assign ob_out_valid = dl[DLY-1].v;
  assign ob_out_t     = dl[DLY-1].t;
  assign ob_out_tag   = dl[DLY-1].tag;

  // bookkeeping
  bit rd_seen [2][1 << LOGN];
  bit wr_seen [2][1 << LOGN];
  logic [LOGN-1:0] last_rd_idx [LANES];
  logic            last_rd_v;
  logic [7:0]      last_ob_pos [LANES];
  int unsigned cur_ln, wb_pass1, n_done, st_beat, pass_cyc [2], ld_beat;

  always @(posedge clk) if (rst_n) begin
    int unsigned n;
    n = 1 << cur_ln;
    // reads issued in this cycle
    for (int g = 0; g < 2; g++) if (g_rd_en[g] && dut.state != ST_STORE) begin
      bit used [LANES];
      foreach (used[b]) used[b] = 0;
      chk(g == (dut.state == ST_PASS2), "read from wrong group");
      for (int s = 0; s < LANES; s++) begin
        int unsigned i;
        i = g_rd_idx[g][s];
        chk(!used[bank(i)], "bank conflict");
        used[bank(i)] = 1;
        chk(!rd_seen[g][i] && i < n, $sformatf("index %0d read twice or out of range", i));
        rd_seen[g][i] = 1;
      end
      pass_cyc[g]++;
      if (g == 1) chk(wb_pass1 == n / LANES, "pass 2 started before pass-1 write-backs finished");
    end
    // input buffer positions match the indices read one cycle earlier
    if (ib_wr_valid) begin
      chk(last_rd_v, "input-buffer write without a read");
      for (int s = 0; s < LANES; s++) begin
        int unsigned i;
        i = ib_wr_tag.pass2 ? int'(ib_wr_tag.blk) * 256 + ib_wr_pos[s]
                            : int'(ib_wr_tag.blk) + ib_wr_pos[s] * (n / 256);
        chk(i == last_rd_idx[s], "input-buffer position does not match read index");
      end
      chk(ib_wr_last == (dut.rnd_q == 3'(R - 1)), "last flag");
    end
    // write-backs
    for (int g = 0; g < 2; g++) if (g_wr_en[g] && !g_wr_load) begin
      chk(g == (ob_out_tag.pass2 ? 0 : 1), "write-back to wrong group");
      for (int s = 0; s < LANES; s++) begin
        int unsigned i, ie;
        i = g_wr_idx[g][s];
        ie = ob_out_tag.pass2 ? int'(ob_out_tag.blk) * 256 + last_ob_pos[s]
                              : int'(ob_out_tag.blk) + last_ob_pos[s] * (n / 256);
        chk(i == ie, "write-back index does not match output-buffer position");
        chk(!wr_seen[g][i], "index written back twice");
        wr_seen[g][i] = 1;
      end
      if (g == 1) wb_pass1++;
    end
    // load beats
    if (g_wr_en[0] && g_wr_load) begin
      chk(ld_valid && ld_ready, "load write without a beat");
      for (int s = 0; s < LANES; s++) chk(g_wr_idx[0][s] == LOGN'(ld_beat * LANES + s), "load index");
      ld_beat++;
    end
    // store reads
    if (dut.state == ST_STORE) begin
      int g;
      g = (cur_ln > SP) ? 0 : 1;
      chk(g_rd_en[g] && !g_rd_en[1-g], "store reads wrong group");
      for (int s = 0; s < LANES; s++) chk(g_rd_idx[g][s] == LOGN'(st_beat * LANES + s), "store index");
      st_beat++;
    end
    if (done) n_done++;
    last_rd_v <= g_rd_en[0] || g_rd_en[1];
    last_rd_idx <= g_rd_en[1] ? g_rd_idx[1] : g_rd_idx[0];
    last_ob_pos <= ob_rd_pos;
  end

  initial begin
    int unsigned lns [3] = '{8, 13, 16};
    start = 0; log_n = 0; ld_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (lns[k]) begin
      int unsigned n;
      cur_ln = lns[k]; n = 1 << cur_ln;
      foreach (rd_seen[g, i]) begin rd_seen[g][i] = 0; wr_seen[g][i] = 0; end
      wb_pass1 = 0; n_done = 0; st_beat = 0; pass_cyc = '{0, 0}; ld_beat = 0;
      @(posedge clk);
      start = 1; log_n = 5'(cur_ln);
      @(posedge clk);
      start = 0;
      while (ld_beat < n / LANES) begin
        ld_valid = ($urandom_range(0, 3) != 0);
        @(posedge clk);
      end
      ld_valid = 0;
      wait (done);
      repeat (3) @(posedge clk);
      for (int unsigned i = 0; i < n; i++) begin
        chk(rd_seen[0][i], "index never read in pass 1");
        chk(wr_seen[1][i], "index never written back in pass 1");
        if (cur_ln > SP) begin
          chk(rd_seen[1][i], "index never read in pass 2");
          chk(wr_seen[0][i], "index never written back in pass 2");
        end
      end
      chk(n_done == 1, "done pulses");
      chk(st_beat == n / LANES, "store beats");
      chk(pass_cyc[0] == n / LANES && pass_cyc[1] == ((cur_ln > SP) ? n / LANES : 0),
          "one round per cycle");
      $display("log2N=%0d: pass cycles %0d %0d", cur_ln, pass_cyc[0], pass_cyc[1]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
