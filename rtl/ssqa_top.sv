// ssqa_top: fully connected stochastic simulated quantum annealer (SSQA)
// with a spin-serial, replica-parallel datapath and dual-BRAM delay lines.
//
// Blocks: AXI4-Lite hyperparameter registers, the scheduler, a 64-bit
// XOR-shift generator giving R random bits per cycle, the J/h weight memory
// and the spin-gate array (R spin gates, R delay circuits).
//
// Use: load J and h through the weight port while idle (w_en, w_is_h,
// w_row, w_col, w_data), write the hyperparameters over AXI4-Lite and write
// 1 to CTRL. Each annealing step takes N*(N+1) cycles; a run of T anneals of
// M steps takes T*M*N*(N+1) + 1 cycles after start. During the last step of
// every anneal each spin update is streamed out: out_valid for one cycle
// with out_idx = i, out_trial = anneal number and out_spins[k] = final
// sigma_i,k (1 means +1) of replica k. The host picks the best replica.
// `done` (also STATUS bit 1) rises one cycle after the last update.
module ssqa_top
  import ssqa_pkg::*;
#(
  parameter int N  = 800,
  parameter int R  = 20,
  parameter int AW = $clog2(N) + 1
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // AXI4-Lite slave (hyperparameters, start, status)
  input  logic [7:0]            s_axi_awaddr,
  input  logic                  s_axi_awvalid,
  output logic                  s_axi_awready,
  input  logic [31:0]           s_axi_wdata,
  input  logic [3:0]            s_axi_wstrb,
  input  logic                  s_axi_wvalid,
  output logic                  s_axi_wready,
  output logic [1:0]            s_axi_bresp,
  output logic                  s_axi_bvalid,
  input  logic                  s_axi_bready,
  input  logic [7:0]            s_axi_araddr,
  input  logic                  s_axi_arvalid,
  output logic                  s_axi_arready,
  output logic [31:0]           s_axi_rdata,
  output logic [1:0]            s_axi_rresp,
  output logic                  s_axi_rvalid,
  input  logic                  s_axi_rready,
  // weight / bias load port (use while idle)
  input  logic                  w_en,
  input  logic                  w_is_h,
  input  logic [AW-1:0]         w_row,
  input  logic [AW-1:0]         w_col,
  input  logic signed [J_W-1:0] w_data,
  // final spin states
  output logic                  out_valid,
  output logic [AW-1:0]         out_idx,
  output logic [15:0]           out_trial,
  output logic [R-1:0]          out_spins,
  output logic                  busy,
  output logic                  done
);

  hyper_t hyp_reg, hyp;
  logic   start;

  logic            en_read, countiter, rng_load, rng_en;
  logic [AW-1:0]   countbit, countspin, upd_addr;
  logic            acc_en, acc_load, mask_cur_p, en_upd, upd_iter;
  logic            mask_cur_u, mask_prev_u, last_step_u;
  logic [Q_W-1:0]  q_upd;
  logic [15:0]     trial_u;
  logic [R-1:0]    rnd, sig_out;
  logic signed [J_W-1:0]  j_word;
  logic signed [H_W-1:0]  h_word;
  logic signed [IS_W-1:0] is_out [R];

  axi_lite_regs #(.ADDR_W(8)) u_regs (
    .clk, .rst_n,
    .s_axi_awaddr, .s_axi_awvalid, .s_axi_awready,
    .s_axi_wdata, .s_axi_wstrb, .s_axi_wvalid, .s_axi_wready,
    .s_axi_bresp, .s_axi_bvalid, .s_axi_bready,
    .s_axi_araddr, .s_axi_arvalid, .s_axi_arready,
    .s_axi_rdata, .s_axi_rresp, .s_axi_rvalid, .s_axi_rready,
    .hyp(hyp_reg), .start, .busy, .done);

  ssqa_scheduler #(.N(N), .AW(AW)) u_sched (
    .clk, .rst_n, .start, .hyp_in(hyp_reg), .hyp, .busy, .done,
    .en_read, .countbit, .countspin, .countiter, .rng_load, .rng_en,
    .acc_en, .acc_load, .mask_cur_p, .en_upd, .upd_iter, .upd_addr, .q_upd,
    .mask_cur_u, .mask_prev_u, .last_step_u, .trial_u,
    .q_cur(), .step_cur());

  xorshift64 #(.R(R)) u_rng (
    .clk, .rst_n, .load(rng_load), .seed(hyp_reg.seed), .en(rng_en), .rnd);

  weight_mem #(.N(N), .AW(AW)) u_wmem (
    .clk,
    .wr_en(w_en && !busy), .wr_is_h(w_is_h), .wr_row(w_row), .wr_col(w_col), .wr_data(w_data),
    .rd_en(en_read), .rd_row(countspin), .rd_col(countbit),
    .j_out(j_word), .h_out(h_word));

  spin_gate_array #(.N(N), .R(R), .AW(AW)) u_array (
    .clk, .rst_n,
    .en_read, .rd_iter(countiter), .countbit, .countspin,
    .acc_en, .acc_load, .mask_cur_p, .en_upd, .upd_iter, .upd_addr,
    .mask_cur_u, .mask_prev_u,
    .j(j_word), .h(h_word), .q(q_upd), .nrnd(hyp.nrnd), .i0(hyp.i0),
    .rnd, .sig_out, .is_out);

  assign out_valid = en_upd && last_step_u;
  assign out_idx   = upd_addr;
  assign out_trial = trial_u;
  assign out_spins = sig_out;

endmodule
