// hermes_ntt_core: the hybrid-dataflow compute array ("NTT Architecture").
//
// S_part = log2(N_part) partial stages, each built from p/2 NTTUs (p
// butterflies, 2p coefficients per cycle). An N_part-point block enters as
// N_part/(2p) rounds of 2p coefficients, one round per cycle, and leaves
// after all S_part butterfly stages: the data dimension is unrolled in time
// (rounds) and in space (lanes), the stage dimension in space (stages in a
// row) and in time (two passes over the array for N > N_part, sequenced by
// the controller).
//
//   stages 0 .. log2(p)-1        dependent stages, arrangement A
//   stream switch                hermes_block_buf, arrangement A -> B
//   stages log2(p) .. S_part-1   independent stages, arrangement B
//
// In arrangement A lane l of round t carries block position
// j = {l[lw-1:1], t, l[0]} (lw = log2 2p), so the butterfly partners of the
// first log2(p) stages (distance N_part/2 .. N_part/p) are in the same round.
// In arrangement B, j = {t, l}, which brings together the partners of the
// remaining stages (distance N_part/(2p) .. 1). Each stage's wiring hands
// every NTTU the four lanes that form its two butterflies (hermes_pkg
// nttu_lane) and puts the results back on the same lanes.
//
// Every NTTU has its own twiddle memory (hermes_tf_mem). All copies share one
// load port; a copy of stage k keeps the indices below 2^(k+log2Nmax-S_part+1),
// which covers every index that stage uses in either pass.
//
// Interface: in_* takes rounds in arrangement A with their round number and
// block tag; out_* delivers rounds in arrangement B. No back-pressure: the
// array accepts and delivers one round per cycle.
// Timing: latency S_part*5 + N_part/(2p) + 1 cycles from a round entering to
// the same round number of the block leaving (5 per NTTU stage, the stream
// switch waits for a whole block).
//
// The stage counts (log2 p dependent, log2 N_part - log2 p independent),
// the p/2 NTTUs per stage, the stream switch and the per-NTTU twiddle
// copies follow the paper; the lane arrangements, the position of the
// switch (between the two groups of stages) and the latencies are this
// design's.
module hermes_ntt_core
  import hermes_pkg::*;
#(
  parameter int unsigned P         = P_DEF,
  parameter int unsigned N_PART    = N_PART_DEF,
  parameter int unsigned LOG_N_MAX = LOG_N_MAX_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coef_t       q,
  // twiddle load port (from HBM)
  input  logic        tw_ld_valid,
  input  logic [31:0] tw_ld_idx,
  input  tw_t         tw_ld_data,
  // block stream in (arrangement A)
  input  logic        in_valid,
  input  logic [7:0]  in_t,
  input  blk_tag_t    in_tag,
  input  coef_t       in_data [2*P],
  // block stream out (arrangement B)
  output logic        out_valid,
  output logic [7:0]  out_t,
  output blk_tag_t    out_tag,
  output coef_t       out_data [2*P]
);

  localparam int unsigned LANES  = 2 * P;
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned S_PART = $clog2(N_PART);
  localparam int unsigned D      = LW - 1;           // dependent stages
  localparam int unsigned NU     = P / 2;            // NTTUs per stage
  localparam int unsigned NLAT   = 5;                // NTTU latency

  initial begin
    assert (S_PART <= 2 * D + 1 && D >= 1 && D < S_PART)
      else $fatal(1, "hermes_ntt_core: unsupported P / N_PART combination");
  end

  // stage inputs / outputs
  coef_t    s_in   [S_PART][LANES];
  logic     s_in_v [S_PART];
  logic [7:0] s_in_t [S_PART];
  blk_tag_t s_in_tag [S_PART];
  coef_t    s_out  [S_PART][LANES];
  logic     s_out_v [S_PART];
  logic [7:0] s_out_t [S_PART];
  blk_tag_t s_out_tag [S_PART];

  for (genvar k = 0; k < S_PART; k++) begin : g_stage
    localparam int unsigned TDEPTH = 1 << (k + LOG_N_MAX - S_PART + 1);

    logic nv [NU];

    for (genvar u = 0; u < NU; u++) begin : g_nttu
      coef_t i1 [2]; coef_t i2 [2]; coef_t o1 [2]; coef_t o2 [2];
      logic [$clog2(TDEPTH)-1:0] tix [2];
      tw_t   tdat [2];

      for (genvar e = 0; e < 2; e++) begin : g_wire
        localparam int unsigned L1 = nttu_lane(k, u, 0, e, S_PART, LW);
        localparam int unsigned L2 = nttu_lane(k, u, 1, e, S_PART, LW);
        assign i1[e] = s_in[k][L1];
        assign i2[e] = s_in[k][L2];
        assign s_out[k][L1] = o1[e];
        assign s_out[k][L2] = o2[e];
      end

      hermes_tf_mem #(.DEPTH(TDEPTH)) u_tf (
        .clk, .ld_valid(tw_ld_valid), .ld_idx(tw_ld_idx), .ld_data(tw_ld_data),
        .rd_idx(tix), .rd_data(tdat));

      hermes_nttu #(.STAGE(k), .U(u), .P(P), .N_PART(N_PART), .TDEPTH(TDEPTH)) u_nttu (
        .clk, .rst_n, .q,
        .in_valid(s_in_v[k]), .in_t(s_in_t[k]), .in_tag(s_in_tag[k]),
        .in1(i1), .in2(i2), .tf_idx(tix), .tf_data(tdat),
        .out_valid(nv[u]), .out1(o1), .out2(o2));
    end

    // round number and tag follow the data through the NTTU pipeline
    logic [7:0] t_d [NLAT];
    blk_tag_t   tag_d [NLAT];
    always_ff @(posedge clk) begin
      t_d[0]   <= s_in_t[k];
      tag_d[0] <= s_in_tag[k];
      for (int unsigned d = 1; d < NLAT; d++) begin
        t_d[d]   <= t_d[d-1];
        tag_d[d] <= tag_d[d-1];
      end
    end
    assign s_out_v[k]   = nv[0];
    assign s_out_t[k]   = t_d[NLAT-1];
    assign s_out_tag[k] = tag_d[NLAT-1];

    // stage input
    if (k == 0) begin : g_first
      assign s_in_v[k]   = in_valid;
      assign s_in_t[k]   = in_t;
      assign s_in_tag[k] = in_tag;
      assign s_in[k]     = in_data;
    end else if (k == D) begin : g_switch
      // stream switch: arrangement A -> arrangement B
      logic [S_PART-1:0] wpos [LANES];
      logic [S_PART-1:0] rpos [LANES];
      logic [7:0]        rd_t;
      blk_tag_t          rd_tag;
      for (genvar l = 0; l < LANES; l++) begin : g_pos
        assign wpos[l] = S_PART'(core_pos(1'b0, int'(s_out_t[k-1]), l, S_PART, LW));
        assign rpos[l] = S_PART'(core_pos(1'b1, int'(rd_t), l, S_PART, LW));
      end
      hermes_block_buf #(.LANES(LANES), .DEPTH(N_PART)) u_switch (
        .clk, .rst_n,
        .wr_valid(s_out_v[k-1]), .wr_last(s_out_t[k-1] == 8'(N_PART / LANES - 1)),
        .wr_tag(s_out_tag[k-1]), .wr_pos(wpos), .wr_data(s_out[k-1]),
        .rd_t, .rd_tag, .rd_pos(rpos),
        .out_valid(s_in_v[k]), .out_t(s_in_t[k]), .out_tag(s_in_tag[k]),
        .out_data(s_in[k]));
    end else begin : g_chain
      assign s_in_v[k]   = s_out_v[k-1];
      assign s_in_t[k]   = s_out_t[k-1];
      assign s_in_tag[k] = s_out_tag[k-1];
      assign s_in[k]     = s_out[k-1];
    end
  end

  assign out_valid = s_out_v[S_PART-1];
  assign out_t     = s_out_t[S_PART-1];
  assign out_tag   = s_out_tag[S_PART-1];
  assign out_data  = s_out[S_PART-1];

endmodule
