// hermes_top: Hermes, a unified NTT accelerator with hybrid dataflow.
//
// Computes the forward negacyclic NTT (Cooley-Tukey, natural-order input,
// bit-reversed-order output, twiddles psi_rev[k] = psi^bitrev(k)) of one
// polynomial of N = 2^log_n coefficients, N_part <= N <= 2^LOG_N_MAX, with
// 64-bit coefficients modulo q < 2^62. Defaults: p = 16 butterflies per
// partial stage, N_part = 256, N up to 2^16.
//
//   HBM load --> URAM group 0 --(2p/cycle)--> input Buffer --> compute array
//   (8 stages x 8 NTTUs, stream switch) --> output Buffer --(2p/cycle)-->
//   URAM group 1 (pass 1) or group 0 (pass 2) --> HBM store
//
// A transform makes two passes over the compute array for N > N_part (one
// for N = N_part): the first over strided blocks, the second over contiguous
// blocks with the leading stages in Swap Mode. Intermediate results stay in
// the on-chip URAM groups, which use the conflict-free fragmentation layout
// so that 2p coefficients move per cycle with no bank conflicts.
//
// Interface (all ports plain signals):
//   q                     modulus, stable during a transform
//   tw_ld_*               twiddle-table load (psi_rev[k] and its Shoup
//                         companion), one word per cycle, before start
//   start, log_n          begin a transform; busy while it runs; done pulses
//   ld_valid/ld_ready/ld_data   load beats: beat k carries coefficients
//                         2p*k .. 2p*k+2p-1 in natural order
//   st_valid/st_data      store beats, same layout, result in bit-reversed
//                         order (slot s of beat k is NTT output index
//                         bitrev(2p*k+s))
// Timing: LOAD N/(2p) cycles, each pass N/(2p) cycles of issue plus the
// pipeline drain, STORE N/(2p) cycles.
//
// The overall structure follows the paper; the HBM itself and its controller
// are outside this module (the ports above are where they connect), and the
// sequential load/compute/store schedule is this design's choice.
module hermes_top
  import hermes_pkg::*;
#(
  parameter int unsigned P         = P_DEF,
  parameter int unsigned N_PART    = N_PART_DEF,
  parameter int unsigned LOG_N_MAX = LOG_N_MAX_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  coef_t       q,
  input  logic        tw_ld_valid,
  input  logic [31:0] tw_ld_idx,
  input  tw_t         tw_ld_data,
  input  logic        start,
  input  logic [4:0]  log_n,
  output logic        busy,
  output logic        done,
  input  logic        ld_valid,
  output logic        ld_ready,
  input  coef_t       ld_data [2*P],
  output logic        st_valid,
  output coef_t       st_data [2*P]
);

  localparam int unsigned LANES  = 2 * P;
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned S_PART = $clog2(N_PART);
  localparam int unsigned R      = N_PART / LANES;

  // controller
  logic                 g_rd_en  [2];
  logic [LOG_N_MAX-1:0] g_rd_idx [2][LANES];
  logic                 g_wr_en  [2];
  logic                 g_wr_load;
  logic [LOG_N_MAX-1:0] g_wr_idx [2][LANES];
  logic                 rd_src;
  logic                 ib_wr_valid, ib_wr_last;
  blk_tag_t             ib_wr_tag;
  logic [S_PART-1:0]    ib_wr_pos [LANES];
  logic [7:0]           ob_rd_t, ob_out_t;
  blk_tag_t             ob_rd_tag, ob_out_tag;
  logic [S_PART-1:0]    ob_rd_pos [LANES];
  logic                 ob_out_valid;
  coef_t                ob_out_data [LANES];

  hermes_ctrl #(.P(P), .N_PART(N_PART), .LOG_N_MAX(LOG_N_MAX)) u_ctrl (
    .clk, .rst_n, .start, .log_n, .busy, .done,
    .ld_valid, .ld_ready, .st_valid,
    .g_rd_en, .g_rd_idx, .g_wr_en, .g_wr_load, .g_wr_idx, .rd_src,
    .ib_wr_valid, .ib_wr_last, .ib_wr_tag, .ib_wr_pos,
    .ob_rd_t, .ob_rd_tag, .ob_rd_pos, .ob_out_valid, .ob_out_t, .ob_out_tag);

  // URAM groups
  coef_t g_rd_data [2][LANES];
  coef_t g_wr_data [2][LANES];

  always_comb
    for (int unsigned s = 0; s < LANES; s++) begin
      g_wr_data[0][s] = g_wr_load ? ld_data[s] : ob_out_data[s];
      g_wr_data[1][s] = ob_out_data[s];
    end

  for (genvar g = 0; g < 2; g++) begin : g_uram
    hermes_uram_group #(.BANKS(LANES), .N_PART(N_PART), .LOG_N_MAX(LOG_N_MAX)) u_group (
      .clk,
      .rd_en(g_rd_en[g]), .rd_idx(g_rd_idx[g]), .rd_data(g_rd_data[g]),
      .wr_en(g_wr_en[g]), .wr_idx(g_wr_idx[g]), .wr_data(g_wr_data[g]));
  end

  coef_t src_data [LANES];
  assign src_data = rd_src ? g_rd_data[1] : g_rd_data[0];
  assign st_data  = src_data;

  // input Buffer: URAM round order -> arrangement A
  logic [7:0]        ib_rd_t;
  blk_tag_t          ib_rd_tag;
  logic [S_PART-1:0] ib_rd_pos [LANES];
  logic              core_in_valid;
  logic [7:0]        core_in_t;
  blk_tag_t          core_in_tag;
  coef_t             core_in_data [LANES];

  always_comb
    for (int unsigned l = 0; l < LANES; l++)
      ib_rd_pos[l] = S_PART'(core_pos(1'b0, int'(ib_rd_t), l, S_PART, LW));

  hermes_block_buf #(.LANES(LANES), .DEPTH(N_PART)) u_ibuf (
    .clk, .rst_n,
    .wr_valid(ib_wr_valid), .wr_last(ib_wr_last), .wr_tag(ib_wr_tag),
    .wr_pos(ib_wr_pos), .wr_data(src_data),
    .rd_t(ib_rd_t), .rd_tag(ib_rd_tag), .rd_pos(ib_rd_pos),
    .out_valid(core_in_valid), .out_t(core_in_t), .out_tag(core_in_tag),
    .out_data(core_in_data));

  // compute array
  logic       core_out_valid;
  logic [7:0] core_out_t;
  blk_tag_t   core_out_tag;
  coef_t      core_out_data [LANES];

  hermes_ntt_core #(.P(P), .N_PART(N_PART), .LOG_N_MAX(LOG_N_MAX)) u_core (
    .clk, .rst_n, .q,
    .tw_ld_valid, .tw_ld_idx, .tw_ld_data,
    .in_valid(core_in_valid), .in_t(core_in_t), .in_tag(core_in_tag), .in_data(core_in_data),
    .out_valid(core_out_valid), .out_t(core_out_t), .out_tag(core_out_tag),
    .out_data(core_out_data));

  // output Buffer: arrangement B -> URAM round order. After a Swap Mode
  // prefix the coefficient at position j is block element j xor mask.
  logic [S_PART-1:0] ob_wr_pos [LANES];
  always_comb begin
    int unsigned nsw, mask;
    nsw  = n_swap(core_out_tag, S_PART);
    mask = ((32'd1 << nsw) - 1) << (S_PART - nsw);
    for (int unsigned l = 0; l < LANES; l++)
      ob_wr_pos[l] = S_PART'(core_pos(1'b1, int'(core_out_t), l, S_PART, LW) ^ mask);
  end

  hermes_block_buf #(.LANES(LANES), .DEPTH(N_PART)) u_obuf (
    .clk, .rst_n,
    .wr_valid(core_out_valid), .wr_last(core_out_t == 8'(R - 1)), .wr_tag(core_out_tag),
    .wr_pos(ob_wr_pos), .wr_data(core_out_data),
    .rd_t(ob_rd_t), .rd_tag(ob_rd_tag), .rd_pos(ob_rd_pos),
    .out_valid(ob_out_valid), .out_t(ob_out_t), .out_tag(ob_out_tag),
    .out_data(ob_out_data));

endmodule
