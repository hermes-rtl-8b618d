// hermes_bu: Butterfly Unit (BU), the smallest compute element of Hermes.
//
// Butterfly Mode computes the Cooley-Tukey butterfly of the negacyclic NTT
//     t  = x2 * w mod q          (Shoup modular multiplication)
//     y1 = x1 + t mod q
//     y2 = x1 - t mod q
// Swap Mode bypasses the arithmetic and exchanges the pair: y1 = x2, y2 = x1.
//
// Shoup multiplication uses the precomputed companion wpre = floor(w*2^W/q):
//     qhat = floor(x2 * wpre / 2^W),  r = (x2*w - qhat*q) mod 2^W,  r in [0, 2q)
// followed by one conditional subtraction. Requires q < 2^(W-1) and
// x1, x2, w < q.
//
// Timing: fully pipelined, one butterfly per cycle, LAT = 4 cycles from
// in_valid to out_valid (three cycles of modular multiplication, one of
// modular add/sub). mode, q and x1 are sampled with x2.
//
// The datapath (MM block, adder/subtractor with compare-and-correct, output
// multiplexers selecting x2 / x1 in Swap Mode) follows the paper's BU figure;
// the pipeline cut points are a choice of this implementation.
module hermes_bu
  import hermes_pkg::*;
#(
  parameter int unsigned W = COEF_W
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  input  bu_mode_e     mode,
  input  logic [W-1:0] q,
  input  logic [W-1:0] x1,
  input  logic [W-1:0] x2,
  input  logic [W-1:0] w,
  input  logic [W-1:0] wpre,
  output logic         out_valid,
  output logic [W-1:0] y1,
  output logic [W-1:0] y2
);

  localparam int unsigned LAT = 4;

  // valid / mode / operand delay line
  logic [LAT-1:0] vld_q;
  bu_mode_e       mode_q [3];
  logic [W-1:0]   q_q    [3];
  logic [W-1:0]   x1_q   [3];
  logic [W-1:0]   x2_q   [3];

  // stage 1: the two wide products
  logic [W-1:0]   prod_xw_s1;   // x2*w mod 2^W (only the low half is needed)
  logic [W-1:0]   qhat_s1;
  // stage 2: Shoup remainder in [0, 2q)
  logic [W-1:0]   r_s2;
  // stage 3: reduced product
  logic [W-1:0]   t_s3;

  logic [2*W-1:0] prod_xwpre;
  logic [2*W-1:0] prod_qq;
  logic [W-1:0]   sum, diff;

  assign prod_xwpre = x2 * wpre;
  assign prod_qq    = qhat_s1 * q_q[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld_q <= '0;
    else        vld_q <= {vld_q[LAT-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    mode_q[0] <= mode;
    q_q[0]    <= q;
    x1_q[0]   <= x1;
    x2_q[0]   <= x2;
    for (int unsigned d = 1; d < 3; d++) begin
      mode_q[d] <= mode_q[d-1];
      q_q[d]    <= q_q[d-1];
      x1_q[d]   <= x1_q[d-1];
      x2_q[d]   <= x2_q[d-1];
    end
    prod_xw_s1 <= W'(x2 * w);
    qhat_s1    <= prod_xwpre[2*W-1:W];
    r_s2       <= prod_xw_s1 - prod_qq[W-1:0];
    t_s3       <= (r_s2 >= q_q[1]) ? r_s2 - q_q[1] : r_s2;
  end

  // modular add and subtract of x1 and t
  always_comb begin
    sum  = x1_q[2] + t_s3;
    diff = x1_q[2] - t_s3;
    if (sum >= q_q[2])   sum  = sum - q_q[2];
    if (x1_q[2] < t_s3)  diff = diff + q_q[2];
  end

  always_ff @(posedge clk) begin
    if (mode_q[2] == BU_BFLY) begin
      y1 <= sum;
      y2 <= diff;
    end else begin
      y1 <= x2_q[2];
      y2 <= x1_q[2];
    end
  end

  assign out_valid = vld_q[LAT-1];

endmodule
