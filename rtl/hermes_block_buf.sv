// hermes_block_buf: ping-pong block buffer that reorders one N_part-point
// block between two stream arrangements.
//
// Hermes moves every N_part-point block as N_part/(2p) rounds of 2p
// coefficients. Different parts of the datapath want different coefficients
// side by side in a round: the URAM rounds group elements that sit in
// distinct banks, the dependent stages want partners that are far apart, the
// independent stages partners that are close together. This buffer holds a
// whole block, so any arrangement can be turned into any other. Three
// instances are used: the input Buffer (URAM order -> core arrangement A),
// the Stream Switch inside the core (arrangement A -> B) and the output
// Buffer (arrangement B -> URAM order).
//
// Interface: the writer presents LANES coefficients per cycle with the block
// position of each (wr_pos) and flags the final round with wr_last; the tag
// is stored with the block. The reader side runs by itself once a block is
// complete: it announces the round it is about to read (rd_t, rd_tag), the
// parent returns the positions wanted in that round (rd_pos, combinational),
// and the data appear one cycle later on out_data with out_t / out_tag.
//
// Timing: two halves, so one block is written while the previous is read;
// sustained throughput is one round per cycle. The first round of a block
// leaves ROUNDS cycles after the first round entered. An assertion flags a
// write into a half that has not been read out (overflow).
//
// The paper shows block-sized buffers before and after the compute array and
// a stream switch between stages; building all three as this register
// buffer, and the ping-pong handshake, are this design's choices.
module hermes_block_buf
  import hermes_pkg::*;
#(
  parameter int unsigned LANES = 2 * P_DEF,
  parameter int unsigned DEPTH = N_PART_DEF
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write side
  input  logic                     wr_valid,
  input  logic                     wr_last,
  input  blk_tag_t                 wr_tag,
  input  logic [$clog2(DEPTH)-1:0] wr_pos  [LANES],
  input  coef_t                    wr_data [LANES],
  // read side
  output logic [7:0]               rd_t,
  output blk_tag_t                 rd_tag,
  input  logic [$clog2(DEPTH)-1:0] rd_pos  [LANES],
  output logic                     out_valid,
  output logic [7:0]               out_t,
  output blk_tag_t                 out_tag,
  output coef_t                    out_data [LANES]
);

  localparam int unsigned ROUNDS = DEPTH / LANES;

  coef_t    mem [2][DEPTH];
  blk_tag_t tag_q [2];
  logic     full [2];
  logic     wh, rh;
  logic     rd_go;

  assign rd_go  = full[rh];
  assign rd_tag = tag_q[rh];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wh        <= 1'b0;
      rh        <= 1'b0;
      full[0]   <= 1'b0;
      full[1]   <= 1'b0;
      rd_t      <= '0;
      out_valid <= 1'b0;
      out_t     <= '0;
      out_tag   <= '0;
      tag_q[0]  <= '0;
      tag_q[1]  <= '0;
    end else begin
      // write side
      if (wr_valid) begin
        tag_q[wh] <= wr_tag;
        if (wr_last) begin
          full[wh] <= 1'b1;
          wh       <= ~wh;
        end
      end
      // read side
      out_valid <= rd_go;
      if (rd_go) begin
        out_t   <= rd_t;
        out_tag <= tag_q[rh];
        if (rd_t == 8'(ROUNDS - 1)) begin
          rd_t     <= '0;
          full[rh] <= 1'b0;
          rh       <= ~rh;
        end else begin
          rd_t <= rd_t + 8'd1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_valid)
      for (int unsigned l = 0; l < LANES; l++) mem[wh][wr_pos[l]] <= wr_data[l];
    if (rd_go)
      for (int unsigned l = 0; l < LANES; l++) out_data[l] <= mem[rh][rd_pos[l]];
  end

  // a block may only be written into an empty half
  assert property (@(posedge clk) disable iff (!rst_n) wr_valid |-> !full[wh])
    else $error("hermes_block_buf: overflow, write into a full half");

endmodule
