// hermes_uram_group: one group of 2p parallel URAM banks holding a whole
// polynomial (up to 2^LOG_N_MAX coefficients) in the conflict-free
// fragmentation layout.
//
// Coefficient i lives in
//     bank   = (i xor floor(i / N_part)) mod 2p
//     offset = floor(i / 2p)
// With this layout the 2p coefficients that the datapath touches in one
// round (2p consecutive indices for burst HBM transfers, or one round of a
// first- or second-pass block, see hermes_pkg::round_mask) always fall into
// 2p different banks, so each bank serves exactly one read and one write per
// cycle.
//
// Interface: a read port and a write port, each with one global index per
// slot (BANKS slots). The group routes every slot to its bank (a crossbar in
// front of the banks) and routes read data back to the slot it came from.
// Assertions flag two slots hitting the same bank in one cycle.
//
// Timing: read data one cycle after rd_en (synchronous URAM read); a write
// is visible to reads issued in later cycles.
//
// The mapping formula and the bank count follow the paper; the crossbar and
// port structure are this design's.
module hermes_uram_group
  import hermes_pkg::*;
#(
  parameter int unsigned BANKS     = 2 * P_DEF,
  parameter int unsigned N_PART    = N_PART_DEF,
  parameter int unsigned LOG_N_MAX = LOG_N_MAX_DEF
) (
  input  logic                 clk,
  input  logic                 rd_en,
  input  logic [LOG_N_MAX-1:0] rd_idx  [BANKS],
  output coef_t                rd_data [BANKS],
  input  logic                 wr_en,
  input  logic [LOG_N_MAX-1:0] wr_idx  [BANKS],
  input  coef_t                wr_data [BANKS]
);

  localparam int unsigned LW     = $clog2(BANKS);
  localparam int unsigned S_PART = $clog2(N_PART);
  localparam int unsigned DEPTH  = (1 << LOG_N_MAX) / BANKS;
  localparam int unsigned OW     = LOG_N_MAX - LW;

  coef_t mem [BANKS][DEPTH];

  logic [LW-1:0] rd_bank [BANKS];
  logic [LW-1:0] wr_bank [BANKS];
  logic [LW-1:0] rd_bank_q [BANKS];
  coef_t         bank_q [BANKS];

  // per-bank address and data, selected from the slot that maps to the bank
  logic [OW-1:0] b_raddr [BANKS];
  logic [OW-1:0] b_waddr [BANKS];
  coef_t         b_wdata [BANKS];
  logic [BANKS-1:0] b_rhit;
  logic [BANKS-1:0] b_whit;

  always_comb begin
    for (int unsigned s = 0; s < BANKS; s++) begin
      rd_bank[s] = LW'(frag_bank(int'(rd_idx[s]), S_PART, LW));
      wr_bank[s] = LW'(frag_bank(int'(wr_idx[s]), S_PART, LW));
    end
    for (int unsigned b = 0; b < BANKS; b++) begin
      b_raddr[b] = '0; b_waddr[b] = '0; b_wdata[b] = '0;
      b_rhit[b]  = 1'b0; b_whit[b] = 1'b0;
      for (int unsigned s = 0; s < BANKS; s++) begin
        if (rd_bank[s] == LW'(b)) begin
          b_raddr[b] = OW'(frag_offset(int'(rd_idx[s]), LW));
          b_rhit[b]  = 1'b1;
        end
        if (wr_bank[s] == LW'(b)) begin
          b_waddr[b] = OW'(frag_offset(int'(wr_idx[s]), LW));
          b_wdata[b] = wr_data[s];
          b_whit[b]  = 1'b1;
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int unsigned b = 0; b < BANKS; b++) begin
      if (wr_en && b_whit[b]) mem[b][b_waddr[b]] <= b_wdata[b];
      if (rd_en) bank_q[b] <= mem[b][b_raddr[b]];
    end
    if (rd_en) rd_bank_q <= rd_bank;
  end

  always_comb
    for (int unsigned s = 0; s < BANKS; s++) rd_data[s] = bank_q[rd_bank_q[s]];

  // conflict-free: with BANKS slots, every bank hit means one slot per bank
  assert property (@(posedge clk) rd_en |-> &b_rhit)
    else $error("hermes_uram_group: read bank conflict");
  assert property (@(posedge clk) wr_en |-> &b_whit)
    else $error("hermes_uram_group: write bank conflict");

endmodule
