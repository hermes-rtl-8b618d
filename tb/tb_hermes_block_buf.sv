// tb_hermes_block_buf: self-checking test of the ping-pong block buffer.
// Writes blocks of 256 random coefficients as 8 rounds of 32 lanes in one
// permuted order, sometimes back to back and sometimes with idle gaps, and
// reads them back in a second, tag-dependent permutation. Every output
// coefficient, its round number and its tag are compared with a model; the
// block latency (8 cycles from first write round to first read round) and
// the absence of any spurious output are checked.
module tb_hermes_block_buf;
  import hermes_pkg::*;

  localparam int unsigned LANES = 32, DEPTH = 256, R = DEPTH / LANES;
  localparam int NBLK = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic wr_valid, wr_last; blk_tag_t wr_tag;
  logic [7:0] wr_pos [LANES]; coef_t wr_data [LANES];
  logic [7:0] rd_t, out_t; blk_tag_t rd_tag, out_tag;
  logic [7:0] rd_pos [LANES];
  logic out_valid; coef_t out_data [LANES];

  hermes_block_buf #(.LANES(LANES), .DEPTH(DEPTH)) dut (.*);

  // read permutation, depends on the tag
  always_comb
    for (int unsigned l = 0; l < LANES; l++)
      rd_pos[l] = 8'(((int'(rd_t) * LANES + l) * 37 + int'(rd_tag.blk)) % DEPTH);

  coef_t blocks [NBLK][DEPTH];
  int    start_cyc [NBLK];
  int checks = 0, failures = 0, rd_blk = 0, rd_round = 0;

  initial begin
    wr_valid = 0; wr_last = 0; wr_tag = '0;
    foreach (wr_pos[l]) begin wr_pos[l] = 0; wr_data[l] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int b = 0; b < NBLK; b++) begin
      if (b % 3 == 2) repeat ($urandom_range(1, 12)) @(posedge clk);
      start_cyc[b] = cyc;
      for (int t = 0; t < R; t++) begin
        wr_valid = 1; wr_last = (t == R - 1);
        wr_tag = '0; wr_tag.blk = 16'(b); wr_tag.log_n = 5'(b % 32); wr_tag.pass2 = b[0];
        for (int l = 0; l < LANES; l++) begin
          int unsigned p;
          p = ((t * LANES + l) * 13 + 5) % DEPTH;
          wr_pos[l] = 8'(p);
          wr_data[l] = {$urandom, $urandom};
          blocks[b][p] = wr_data[l];
        end
        @(posedge clk);
      end
      wr_valid = 0; wr_last = 0;
    end
    repeat (20) @(posedge clk);
    checks++;
    if (rd_blk != NBLK) begin failures++; $display("FAIL: read %0d blocks", rd_blk); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (rd_blk >= NBLK) begin
        failures++; $display("FAIL: spurious output");
      end else begin
        if (out_t != 8'(rd_round) || out_tag.blk != 16'(rd_blk) || out_tag.pass2 != rd_blk[0]) begin
          failures++; $display("FAIL: round/tag %0d/%0d exp %0d/%0d", out_t, out_tag.blk, rd_round, rd_blk);
        end
        if (rd_round == 0) begin
          checks++;
          // the read round is visible one cycle after it is issued
          if (cyc - start_cyc[rd_blk] < R + 1) begin
            failures++; $display("FAIL: block %0d out after %0d cycles", rd_blk, cyc - start_cyc[rd_blk]);
          end
          if (rd_blk % 3 != 2 && rd_blk > 0 && cyc - start_cyc[rd_blk] != R + 1) begin
            failures++; $display("FAIL: block %0d latency %0d", rd_blk, cyc - start_cyc[rd_blk]);
          end
        end
        for (int l = 0; l < LANES; l++) begin
          int unsigned p;
          p = ((rd_round * LANES + l) * 37 + rd_blk) % DEPTH;
          checks++;
          if (out_data[l] !== blocks[rd_blk][p]) begin
            failures++;
            if (failures < 10) $display("FAIL: blk %0d round %0d lane %0d", rd_blk, rd_round, l);
          end
        end
        if (rd_round == R - 1) begin rd_round = 0; rd_blk++; end
        else rd_round++;
      end
    end
  end

  initial begin
    repeat (NBLK * (R + 13) + 200) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
