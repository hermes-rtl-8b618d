// hermes_tf_mem: on-chip twiddle-factor copy of one NTTU.
//
// Holds twiddle factors psi_rev[k] together with their Shoup companions, as
// one 2*W-bit word per index k. Every NTTU owns a private copy so that the
// p/2 NTTUs of a partial stage never compete for a read port; each copy has
// one read port per BU. The table is filled before a transform through the
// load port (from HBM in the accelerator); a load word whose index is beyond
// DEPTH is not needed by this NTTU's stage and is ignored.
//
// Timing: writes take effect at the clock edge; reads return the word one
// cycle after the address (synchronous read, as a block RAM).
//
// Replication per NTTU follows the paper; sizing each copy to the indices its
// stage can touch (DEPTH) and the word layout are this design's choices.
// The paper instead keeps about log2(N_part)/2 times the N_part - 1 twiddles
// of the current block and refreshes them per block. The whole-table copies
// used here are simpler, but at the default size they add up to far more
// on-chip RAM than that scheme needs.
module hermes_tf_mem
  import hermes_pkg::*;
#(
  parameter int unsigned DEPTH = 512
) (
  input  logic                     clk,
  // load port
  input  logic                     ld_valid,
  input  logic [31:0]              ld_idx,
  input  tw_t                      ld_data,
  // two read ports (BU1, BU2)
  input  logic [$clog2(DEPTH)-1:0] rd_idx [2],
  output tw_t                      rd_data [2]
);

  tw_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ld_valid && ld_idx < DEPTH) mem[ld_idx[$clog2(DEPTH)-1:0]] <= ld_data;
    for (int unsigned b = 0; b < 2; b++) rd_data[b] <= mem[rd_idx[b]];
  end

endmodule
