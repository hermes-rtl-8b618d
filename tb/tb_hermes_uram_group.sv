// tb_hermes_uram_group: self-checking test of a URAM group with the
// conflict-free fragmentation layout (default size: 32 banks, 2^16 words).
// 1. Fills the group with burst writes of 32 consecutive indices per cycle.
// 2. For every transform length 2^8 .. 2^16 and both passes, reads every
//    block round by round in the round order used by the accelerator and
//    checks each word one cycle later. It also checks, from the mapping
//    formula, that no round puts two indices into one bank and that the
//    rounds of a pass cover every index exactly once.
// 3. Rewrites the memory with pass-1 round writes (log2 N = 13) and reads it
//    back with bursts.
module tb_hermes_uram_group;
  import hermes_pkg::*;

  localparam int unsigned BANKS = 32, S_PART = 8, LOGN = 16, N = 1 << LOGN, LW = 5;

  logic clk = 0;
  always #5 clk = ~clk;

  logic rd_en, wr_en;
  logic [LOGN-1:0] rd_idx [BANKS]; logic [LOGN-1:0] wr_idx [BANKS];
  coef_t rd_data [BANKS]; coef_t wr_data [BANKS];

  hermes_uram_group dut (.*);

  int checks = 0, failures = 0;

  function automatic coef_t val(int unsigned i, int unsigned gen);
    return {16'(gen), 16'hA5C3, 32'(i * 2654435761)};
  endfunction

  logic [LOGN-1:0] exp_idx [BANKS];
  logic            exp_v = 0;
  int unsigned     exp_gen = 0;
  bit              seen [N];

  always @(posedge clk) begin
    if (exp_v) begin
      for (int s = 0; s < BANKS; s++) begin
        checks++;
        if (rd_data[s] !== val(exp_idx[s], exp_gen)) begin
          failures++;
          if (failures < 10) $display("FAIL: slot %0d idx %0d got %h", s, exp_idx[s], rd_data[s]);
        end
      end
    end
  end

  // issue one read round and remember what it must return
  task automatic read_round(input logic [LOGN-1:0] idx [BANKS]);
    bit used [BANKS];
    foreach (used[b]) used[b] = 0;
    for (int s = 0; s < BANKS; s++) begin
      int unsigned b;
      b = (int'(idx[s]) ^ (int'(idx[s]) >> S_PART)) % BANKS;
      checks++;
      if (used[b]) begin failures++; $display("FAIL: bank conflict in round"); end
      used[b] = 1;
    end
    rd_idx = idx; rd_en = 1;
    @(posedge clk);
    #1;
    exp_idx = idx; exp_v = 1;
    rd_en = 0;
  endtask

  initial begin
    logic [LOGN-1:0] idx [BANKS];
    rd_en = 0; wr_en = 0;
    foreach (rd_idx[s]) begin rd_idx[s] = 0; wr_idx[s] = 0; wr_data[s] = 0; end
    @(posedge clk);
    // 1. burst fill
    for (int unsigned beat = 0; beat < N / BANKS; beat++) begin
      wr_en = 1;
      for (int s = 0; s < BANKS; s++) begin
        wr_idx[s] = LOGN'(beat * BANKS + s);
        wr_data[s] = val(beat * BANKS + s, 0);
      end
      @(posedge clk);
    end
    wr_en = 0;
    // 2. block reads for every length and pass
    for (int unsigned ln = S_PART; ln <= LOGN; ln++) begin
      for (int ps = 0; ps < ((ln > S_PART) ? 2 : 1); ps++) begin
        blk_tag_t tg;
        int unsigned mask, nb;
        nb = 1 << (ln - S_PART);
        foreach (seen[i]) seen[i] = 0;
        tg = '0; tg.pass2 = ps[0]; tg.log_n = 5'(ln);
        mask = round_mask(tg.pass2, ln, S_PART, LW);
        for (int unsigned b = 0; b < nb; b++) begin
          tg.blk = 16'(b);
          for (int unsigned r = 0; r < 8; r++) begin
            for (int unsigned s = 0; s < BANKS; s++) begin
              int unsigned i;
              i = global_index(tg, deposit(r, s, mask, S_PART), S_PART);
              idx[s] = LOGN'(i);
              checks++;
              if (seen[i]) begin failures++; $display("FAIL: index %0d read twice", i); end
              seen[i] = 1;
            end
            read_round(idx);
          end
        end
        for (int unsigned i = 0; i < (1 << ln); i++) begin
          checks++;
          if (!seen[i]) begin failures++; $display("FAIL: index %0d never read (ln %0d)", i, ln); end
        end
      end
    end
    // 3. pass-1 round writes for log2 N = 13, burst read back
    @(posedge clk);
    exp_v = 0;
    begin
      blk_tag_t tg;
      int unsigned mask;
      tg = '0; tg.log_n = 5'd13;
      mask = round_mask(1'b0, 13, S_PART, LW);
      for (int unsigned b = 0; b < 32; b++) begin
        tg.blk = 16'(b);
        for (int unsigned r = 0; r < 8; r++) begin
          wr_en = 1;
          for (int unsigned s = 0; s < BANKS; s++) begin
            int unsigned i;
            i = global_index(tg, deposit(r, s, mask, S_PART), S_PART);
            wr_idx[s] = LOGN'(i); wr_data[s] = val(i, 1);
          end
          @(posedge clk);
        end
      end
      wr_en = 0;
      exp_gen = 1;
      for (int unsigned beat = 0; beat < (1 << 13) / BANKS; beat++) begin
        for (int s = 0; s < BANKS; s++) idx[s] = LOGN'(beat * BANKS + s);
        read_round(idx);
      end
    end
    @(posedge clk);
    exp_v = 0;
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
