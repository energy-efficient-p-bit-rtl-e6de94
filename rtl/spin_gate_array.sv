// spin_gate_array: R spin gates, each with its own dual-BRAM delay circuit.
//
// All R replicas work on the same spin i in lock step and share the weight
// word J_ij, h_i, Q(t), I0 and n_rnd; each has its own random bit, its own
// spin-state and Is memories. Replica k reads sigma_j,k(t) and Is_i,k(t) from
// its own delay circuit and sigma_i,k+1(t-1) from the delay circuit of
// replica k+1; replica R-1 (the last) couples back to replica 0, closing the
// ring of the Trotter decomposition. The initial-state masks from the
// scheduler replace sigma(t)/sigma(t-1) by +1 and Is(t) by 0 in the first
// steps of an anneal. sig_out/is_out are the gates' update results, valid in
// the cycle en_upd is high.
// The gates-plus-delay-circuit structure follows the paper; the ring closure
// and the masks are this design's choices.
module spin_gate_array
  import ssqa_pkg::*;
#(
  parameter int N  = 800,
  parameter int R  = 20,
  parameter int AW = $clog2(N) + 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // issue side
  input  logic                   en_read,
  input  logic                   rd_iter,
  input  logic [AW-1:0]          countbit,
  input  logic [AW-1:0]          countspin,
  // data side
  input  logic                   acc_en,
  input  logic                   acc_load,
  input  logic                   mask_cur_p,
  input  logic                   en_upd,
  input  logic                   upd_iter,
  input  logic [AW-1:0]          upd_addr,
  input  logic                   mask_cur_u,
  input  logic                   mask_prev_u,
  input  logic signed [J_W-1:0]  j,
  input  logic signed [H_W-1:0]  h,
  input  logic [Q_W-1:0]         q,
  input  logic [NR_W-2:0]        nrnd,
  input  logic [IS_W-1:0]        i0,
  input  logic [R-1:0]           rnd,
  output logic [R-1:0]           sig_out,
  output logic signed [IS_W-1:0] is_out [R]
);

  logic [R-1:0] sig_t, sig_tm1;
  logic signed [IS_W-1:0] is_t [R];

  for (genvar k = 0; k < R; k++) begin : g_rep
    localparam int KUP = (k + 1) % R;

    dual_bram_delay #(.N(N), .IS_W_P(IS_W), .AW(AW)) u_delay (
      .clk, .rst_n,
      .en_upd, .wr_iter(upd_iter), .wr_addr(upd_addr),
      .sig_new(sig_out[k]), .is_new(is_out[k]),
      .en_read, .rd_iter, .countbit, .countspin,
      .sig_t(sig_t[k]), .sig_tm1(sig_tm1[k]), .is_t(is_t[k]));

    spin_gate u_gate (
      .clk, .rst_n,
      .acc_en, .acc_load,
      .j, .sig_j(mask_cur_p | sig_t[k]),
      .h, .q, .sig_up(mask_prev_u | sig_tm1[KUP]),
      .r(rnd[k]), .nrnd, .i0,
      .is_in(mask_cur_u ? '0 : is_t[k]),
      .is_out(is_out[k]), .sig_out(sig_out[k]));
  end

endmodule
