// hermes_ctrl: sequencer and address generator of the Hermes accelerator.
//
// One transform of N = 2^log_n points (N_part <= N <= min(N_part^2, 2^LOG_N_MAX))
// runs through these phases:
//   LOAD    N/(2p) burst beats from HBM, 2p consecutive coefficients per
//           beat, written to URAM group 0.
//   PASS1   N/N_part strided blocks (block b = {b + (N/N_part)*j}) are read
//           from group 0, one round of 2p coefficients per cycle, and sent
//           through the compute array (global stages 0 .. S_part-1, all BUs
//           in Butterfly Mode); results are written to group 1.
//   DRAIN1  wait until the last block of the pass is back in URAM.
//   PASS2   (only for N > N_part) N/N_part contiguous blocks are read from
//           group 1 and run through the array, the first 2*S_part - log_n
//           stages in Swap Mode ("S x i, B x j"), written to group 0.
//   DRAIN2  as DRAIN1.
//   STORE   N/(2p) burst beats read from the result group towards HBM.
// In total 2N/N_part block iterations for N > N_part, one for N = N_part.
//
// Round order inside a block: round r, slot s reads block position
// j = deposit(r, s, round_mask) (hermes_pkg), which places the 2p
// coefficients of every round in 2p different banks. The output side uses
// the same order when it writes a finished block back.
//
// Interface: start with log_n begins a transform; ld_ready tells the HBM side
// that load beats are accepted (one per cycle while ld_valid); st_valid marks
// store beats (no back-pressure, the HBM write side is assumed always ready).
// The URAM and buffer ports carry per-slot indices; data paths are muxed in
// the top level. done pulses for one cycle together with the last store beat.
//
// Timing: one round issued per cycle in PASS1/PASS2 with no bubbles between
// blocks; a pass ends with a drain of the pipeline latency before the next
// pass may read what it wrote.
//
// The phase order, the two passes, the swap rule and the fragmentation
// mapping follow the paper; the handshake, the drain between passes, the
// use of two URAM groups as ping-pong and the non-overlapped LOAD/STORE are
// this design's choices.
module hermes_ctrl
  import hermes_pkg::*;
#(
  parameter int unsigned P         = P_DEF,
  parameter int unsigned N_PART    = N_PART_DEF,
  parameter int unsigned LOG_N_MAX = LOG_N_MAX_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 start,
  input  logic [4:0]           log_n,
  output logic                 busy,
  output logic                 done,
  // HBM load / store beats
  input  logic                 ld_valid,
  output logic                 ld_ready,
  output logic                 st_valid,
  // URAM group 0 / 1 read ports (group g, slot s)
  output logic                 g_rd_en  [2],
  output logic [LOG_N_MAX-1:0] g_rd_idx [2][2*P],
  // URAM group 0 / 1 write ports
  output logic                 g_wr_en  [2],
  output logic                 g_wr_load,           // group 0 write data from HBM load
  output logic [LOG_N_MAX-1:0] g_wr_idx [2][2*P],
  // read data routing (valid in the cycle the data arrive)
  output logic                 rd_src,              // group feeding input buffer / store
  // input buffer write side
  output logic                 ib_wr_valid,
  output logic                 ib_wr_last,
  output blk_tag_t             ib_wr_tag,
  output logic [$clog2(N_PART)-1:0] ib_wr_pos [2*P],
  // output buffer read side
  input  logic [7:0]           ob_rd_t,
  input  blk_tag_t             ob_rd_tag,
  output logic [$clog2(N_PART)-1:0] ob_rd_pos [2*P],
  input  logic                 ob_out_valid,
  input  logic [7:0]           ob_out_t,
  input  blk_tag_t             ob_out_tag
);

  localparam int unsigned LANES  = 2 * P;
  localparam int unsigned LW     = $clog2(LANES);
  localparam int unsigned S_PART = $clog2(N_PART);
  localparam int unsigned R      = N_PART / LANES;
  localparam int unsigned RW     = (R > 1) ? $clog2(R) : 1;

  ctrl_state_e state;
  logic [4:0]  ln_q;
  logic [15:0] beat;            // load/store beat
  logic [15:0] blk;             // block being issued
  logic [RW-1:0] rnd;           // round being issued
  logic [15:0] wb_rounds;       // rounds written back in the current pass
  logic [15:0] n_beats, n_blocks, n_rounds;
  logic        two_pass;
  blk_tag_t    iss_tag;
  int unsigned iss_mask;

  assign n_beats  = 16'((32'd1 << ln_q) >> LW);
  assign n_blocks = 16'((32'd1 << ln_q) >> S_PART);
  assign n_rounds = 16'((32'd1 << ln_q) >> LW);
  assign two_pass = (ln_q > 5'(S_PART));

  always_comb begin
    iss_tag       = '0;
    iss_tag.pass2 = (state == ST_PASS2);
    iss_tag.blk   = blk;
    iss_tag.log_n = ln_q;
    iss_mask      = round_mask(iss_tag.pass2, int'(ln_q), S_PART, LW);
  end

  // ---------------- FSM ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      ln_q  <= 5'(S_PART);
      beat  <= '0;
      blk   <= '0;
      rnd   <= '0;
      wb_rounds <= '0;
    end else begin
      // rounds written back in the current pass (cleared when a pass starts;
      // the previous pass has fully drained by then)
      if (ob_out_valid) wb_rounds <= wb_rounds + 16'd1;
      case (state)
        ST_IDLE: if (start) begin
          ln_q  <= log_n;
          beat  <= '0;
          state <= ST_LOAD;
        end
        ST_LOAD: if (ld_valid) begin
          if (beat == n_beats - 1) begin
            beat  <= '0;
            blk   <= '0;
            rnd   <= '0;
            wb_rounds <= '0;
            state <= ST_PASS1;
          end else beat <= beat + 16'd1;
        end
        ST_PASS1, ST_PASS2: begin
          if (rnd == RW'(R - 1)) begin
            rnd <= '0;
            if (blk == n_blocks - 1) begin
              blk   <= '0;
              state <= (state == ST_PASS1) ? ST_DRAIN1 : ST_DRAIN2;
            end else blk <= blk + 16'd1;
          end else rnd <= rnd + RW'(1);
        end
        ST_DRAIN1: if (wb_rounds == n_rounds) begin
          wb_rounds <= '0;
          state     <= two_pass ? ST_PASS2 : ST_STORE;
        end
        ST_DRAIN2: if (wb_rounds == n_rounds) state <= ST_STORE;
        ST_STORE: begin
          if (beat == n_beats - 1) begin
            beat  <= '0;
            state <= ST_IDLE;
          end else beat <= beat + 16'd1;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy        = (state != ST_IDLE);
  assign ld_ready    = (state == ST_LOAD);

  // ---------------- read side ----------------
  logic store_fin;  // group holding the result
  assign store_fin = two_pass ? 1'b0 : 1'b1;

  always_comb begin
    for (int unsigned g = 0; g < 2; g++) begin
      g_rd_en[g] = 1'b0;
      for (int unsigned s = 0; s < LANES; s++) g_rd_idx[g][s] = '0;
    end
    for (int unsigned s = 0; s < LANES; s++) begin
      logic [LOG_N_MAX-1:0] bi, si;
      bi = LOG_N_MAX'(global_index(iss_tag, deposit(int'(rnd), s, iss_mask, S_PART), S_PART));
      si = LOG_N_MAX'(int'(beat) * LANES + s);
      g_rd_idx[0][s] = (state == ST_STORE) ? si : bi;
      g_rd_idx[1][s] = (state == ST_STORE) ? si : bi;
    end
    g_rd_en[0] = (state == ST_PASS1) || (state == ST_STORE && store_fin == 1'b0);
    g_rd_en[1] = (state == ST_PASS2) || (state == ST_STORE && store_fin == 1'b1);
  end

  // one cycle later the data arrive: input buffer write or store beat
  logic     iss_v_q, st_v_q, src_q;
  logic     last_q;
  blk_tag_t tag_q;
  int unsigned mask_q;
  logic [RW-1:0] rnd_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iss_v_q <= 1'b0;
      st_v_q  <= 1'b0;
      done    <= 1'b0;
      src_q   <= 1'b0;
      last_q  <= 1'b0;
      tag_q   <= '0;
      mask_q  <= 0;
      rnd_q   <= '0;
    end else begin
      iss_v_q <= (state == ST_PASS1) || (state == ST_PASS2);
      st_v_q  <= (state == ST_STORE);
      done    <= (state == ST_STORE) && (beat == n_beats - 1);
      src_q   <= (state == ST_STORE) ? store_fin : (state == ST_PASS2);
      last_q  <= (rnd == RW'(R - 1));
      tag_q   <= iss_tag;
      mask_q  <= iss_mask;
      rnd_q   <= rnd;
    end
  end

  assign rd_src      = src_q;
  assign st_valid    = st_v_q;
  assign ib_wr_valid = iss_v_q;
  assign ib_wr_last  = last_q;
  assign ib_wr_tag   = tag_q;
  always_comb
    for (int unsigned s = 0; s < LANES; s++)
      ib_wr_pos[s] = S_PART'(deposit(int'(rnd_q), s, mask_q, S_PART));

  // ---------------- write side ----------------
  int unsigned ob_mask, wb_mask;
  always_comb begin
    ob_mask = round_mask(ob_rd_tag.pass2, int'(ob_rd_tag.log_n), S_PART, LW);
    wb_mask = round_mask(ob_out_tag.pass2, int'(ob_out_tag.log_n), S_PART, LW);
    for (int unsigned s = 0; s < LANES; s++)
      ob_rd_pos[s] = S_PART'(deposit(int'(ob_rd_t), s, ob_mask, S_PART));
  end

  always_comb begin
    g_wr_en[0] = (state == ST_LOAD && ld_valid) || (ob_out_valid && ob_out_tag.pass2);
    g_wr_en[1] = ob_out_valid && !ob_out_tag.pass2;
    g_wr_load  = (state == ST_LOAD);
    for (int unsigned s = 0; s < LANES; s++) begin
      logic [LOG_N_MAX-1:0] wi;
      wi = LOG_N_MAX'(global_index(ob_out_tag, deposit(int'(ob_out_t), s, wb_mask, S_PART), S_PART));
      g_wr_idx[0][s] = (state == ST_LOAD) ? LOG_N_MAX'(int'(beat) * LANES + s) : wi;
      g_wr_idx[1][s] = wi;
    end
  end

  // write-backs never overlap the load phase
  assert property (@(posedge clk) disable iff (!rst_n) !(state == ST_LOAD && ob_out_valid))
    else $error("hermes_ctrl: write-back during load");

endmodule
