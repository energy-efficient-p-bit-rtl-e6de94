// spin_gate: one replica's stochastic-computing spin gate, used spin-serially.
//
// For spin i of replica k the gate sees one weight per cycle. While acc_en is
// high it adds +J_ij (sigma_j,k(t)=1) or -J_ij (sigma_j,k(t)=0) into an 8-bit
// register; acc_load starts a new sum with the current product. In the update
// cycle (combinational outputs, sampled by the delay circuit when en_upd is
// high) it forms
//     S = acc + (+/-Q(t) by sigma_i,k+1(t-1)) + h_i + (+/-n_rnd by r) + Is_i,k(t)
// and saturates it:  S >= I0 -> I0-ALPHA,  S < -I0 -> -I0,  else S.
// The result is Is_i,k(t+1); its sign gives sigma_i,k(t+1) (1 means +1).
// acc keeps its value across the update cycle, so the update may share a
// cycle with the first product of the next spin (acc_load then overwrites it).
//
// The datapath, its widths (J 4, h 4, Q 8, n_rnd*r 4, acc 8, Is 8) and the
// saturation window follow the paper. Q is an unsigned magnitude and n_rnd a
// 3-bit magnitude; the accumulator wraps at 8 bits; the second sum is taken
// at full width before saturation. Those are this design's choices.
// I0 must not exceed 2**(IS_W-1) so that I0-ALPHA and -I0 fit in IS_W bits.
module spin_gate
  import ssqa_pkg::*;
#(
  parameter int J_W_P   = J_W,
  parameter int H_W_P   = H_W,
  parameter int ACC_W_P = ACC_W,
  parameter int IS_W_P  = IS_W,
  parameter int Q_W_P   = Q_W,
  parameter int NR_W_P  = NR_W,
  parameter int ALPHA_P = ALPHA
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     acc_en,
  input  logic                     acc_load,
  input  logic signed [J_W_P-1:0]  j,
  input  logic                     sig_j,
  input  logic signed [H_W_P-1:0]  h,
  input  logic        [Q_W_P-1:0]  q,
  input  logic                     sig_up,
  input  logic                     r,
  input  logic       [NR_W_P-2:0]  nrnd,
  input  logic       [IS_W_P-1:0]  i0,
  input  logic signed [IS_W_P-1:0] is_in,
  output logic signed [IS_W_P-1:0] is_out,
  output logic                     sig_out
);

  localparam int SW = IS_W_P + 4;   // wide enough for the five-term sum

  logic signed [ACC_W_P-1:0] acc, prod;
  logic signed [SW-1:0]      qterm, rterm, sum, i0_w, hi_lim, lo_lim;

  // First adder: +/-J_ij selected by sigma_j,k(t), 8-bit accumulator.
  always_comb begin
    prod = sig_j ? ACC_W_P'(j) : -ACC_W_P'(j);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc <= '0;
    else if (acc_load) acc <= prod;
    else if (acc_en)   acc <= acc + prod;
  end

  // Second adder, saturation block and sign block.
  always_comb begin
    qterm  = sig_up ? SW'($signed({1'b0, q}))    : -SW'($signed({1'b0, q}));
    rterm  = r      ? SW'($signed({1'b0, nrnd})) : -SW'($signed({1'b0, nrnd}));
    sum    = SW'(acc) + qterm + SW'(h) + rterm + SW'(is_in);
    i0_w   = SW'($signed({1'b0, i0}));
    hi_lim = i0_w - SW'(ALPHA_P);
    lo_lim = -i0_w;
    if (sum >= i0_w)       is_out = IS_W_P'(hi_lim);
    else if (sum < lo_lim) is_out = IS_W_P'(lo_lim);
    else                   is_out = IS_W_P'(sum);
    sig_out = ~is_out[IS_W_P-1];
  end

endmodule
