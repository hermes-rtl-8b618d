// hermes_nttu: NTT Unit (NTTU), the building block of every partial stage.
//
// An NTTU takes two input streams in1 and in2, each carrying two
// coefficients per cycle, and owns two Butterfly Units:
//   * Control Unit: derives the BU mode from the NTTU mode (carried in the
//     block tag: how many leading core stages run in Swap Mode) and the
//     stage coordinate STAGE. Stages at or after the swap count use
//     Butterfly Mode.
//   * Data Read Unit: registers the four coefficients, routes them to the
//     BUs and fetches the twiddle factors. In a dependent stage
//     (STAGE < log2 p) both inputs of BU1 come from in1 and both inputs of
//     BU2 from in2; in an independent stage BU1 gets in1[0]/in2[0] and BU2
//     gets in1[1]/in2[1]. The twiddle index of each BU is computed from the
//     NTTU coordinate (STAGE, U), the round t and the block tag and sent to
//     the NTTU's twiddle memory; the word returns one cycle later, in step
//     with the registered coefficients.
//   * BU1, BU2 (hermes_bu).
// Each result returns to the stream position its input came from, so the
// stream layout is unchanged and the next stage's wiring chooses the pairs.
//
// Timing: fully pipelined, LAT = 5 (1 Data Read Unit register + 4 BU).
//
// The split into Control Unit, Data Read Unit and two BUs and the two
// routing patterns follow the paper; the lane arrangement (hermes_pkg
// core_pos / nttu_lane) and the register placement are this design's.
module hermes_nttu
  import hermes_pkg::*;
#(
  parameter int unsigned STAGE  = 0,              // core stage, 0 .. S_part-1
  parameter int unsigned U      = 0,              // NTTU index inside the stage
  parameter int unsigned P      = P_DEF,
  parameter int unsigned N_PART = N_PART_DEF,
  parameter int unsigned TDEPTH = 512             // twiddle table depth of this stage
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [COEF_W-1:0]         q,
  input  logic                      in_valid,
  input  logic [7:0]                in_t,         // round inside the block
  input  blk_tag_t                  in_tag,
  input  coef_t                     in1 [2],
  input  coef_t                     in2 [2],
  // twiddle memory port (TF / PTF)
  output logic [$clog2(TDEPTH)-1:0] tf_idx [2],
  input  tw_t                       tf_data [2],
  output logic                      out_valid,
  output coef_t                     out1 [2],
  output coef_t                     out2 [2]
);

  localparam int unsigned LW     = $clog2(2 * P);
  localparam int unsigned S_PART = $clog2(N_PART);
  localparam bit          DEP    = (STAGE < LW - 1);
  localparam int unsigned TW     = $clog2(TDEPTH);

  // ---------------- Control Unit ----------------
  bu_mode_e    mode_c, mode_q;
  int unsigned nsw;
  always_comb begin
    nsw    = n_swap(in_tag, S_PART);
    mode_c = (STAGE >= nsw) ? BU_BFLY : BU_SWAP;
  end

  // ---------------- Data Read Unit ----------------
  // twiddle addresses
  always_comb begin
    int unsigned lane, pos, jt, gi, g, mask;
    for (int unsigned b = 0; b < 2; b++) begin
      lane = DEP ? nttu_lane(STAGE, U, b, 0, S_PART, LW)
                 : nttu_lane(STAGE, U, 0, b, S_PART, LW);
      pos  = core_pos(!DEP, int'(in_t), lane, S_PART, LW);
      mask = ((32'd1 << nsw) - 1) << (S_PART - nsw);
      jt   = pos ^ mask;
      gi   = global_index(in_tag, jt, S_PART);
      g    = in_tag.pass2 ? STAGE + int'(in_tag.log_n) - S_PART : STAGE;
      tf_idx[b] = (mode_c == BU_BFLY) ? TW'(tw_index(g, gi, int'(in_tag.log_n))) : '0;
    end
  end

  logic  vld_q;
  coef_t x1_q [2];
  coef_t x2_q [2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= 1'b0;
    else        vld_q <= in_valid;
  end

  always_ff @(posedge clk) begin
    mode_q <= mode_c;
    for (int unsigned b = 0; b < 2; b++) begin
      if (DEP) begin
        x1_q[b] <= (b == 0) ? in1[0] : in2[0];
        x2_q[b] <= (b == 0) ? in1[1] : in2[1];
      end else begin
        x1_q[b] <= in1[b];
        x2_q[b] <= in2[b];
      end
    end
  end

  // ---------------- BU1 / BU2 ----------------
  logic  bu_valid [2];
  coef_t y1 [2];
  coef_t y2 [2];

  for (genvar b = 0; b < 2; b++) begin : g_bu
    hermes_bu #(.W(COEF_W)) u_bu (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (vld_q),
      .mode     (mode_q),
      .q        (q),
      .x1       (x1_q[b]),
      .x2       (x2_q[b]),
      .w        (tf_data[b].w),
      .wpre     (tf_data[b].wpre),
      .out_valid(bu_valid[b]),
      .y1       (y1[b]),
      .y2       (y2[b])
    );
  end

  always_comb begin
    if (DEP) begin
      out1[0] = y1[0]; out1[1] = y2[0];
      out2[0] = y1[1]; out2[1] = y2[1];
    end else begin
      out1[0] = y1[0]; out2[0] = y2[0];
      out1[1] = y1[1]; out2[1] = y2[1];
    end
  end

  assign out_valid = bu_valid[0];

endmodule
