// dual_bram_delay: the per-replica delay circuit built from block RAMs.
//
// Spin states: two 1-bit x N BRAMs swap roles every annealing step under
// count_iter. In a step with count_iter = c the new states sigma(t+1) are
// written, at address count_spin, into BRAM1 when c = 0 and into BRAM2 when
// c = 1. That same BRAM still holds the states of two steps ago, and its read
// port, addressed by count_spin, returns sigma(t-1) of the spin being updated
// just before it is overwritten. The other BRAM, written during the previous
// step, is read at count_bit and returns sigma(t) of every spin j in turn.
// Saturated internal signal: one IS_W x N BRAM written with Is(t+1) at
// count_spin and read at count_spin gives Is(t).
//
// Timing: reads are issued when en_read is high and their data appear one
// cycle later. The write of a spin's new state happens one cycle after the
// read of its old state (en_upd, with its own wr_iter/wr_addr), so the
// output muxes use the count_iter of the issuing cycle, delayed one clock.
//
// The two-BRAM ping-pong, the address and enable muxing and the single Is
// BRAM follow the paper; the registered output-mux select and the separate
// write-side count_iter/address are this design's pipelining choices.
module dual_bram_delay
  import ssqa_pkg::*;
#(
  parameter int N      = 800,
  parameter int IS_W_P = IS_W,
  parameter int AW     = $clog2(N) + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // write side (update cycle)
  input  logic                     en_upd,
  input  logic                     wr_iter,
  input  logic [AW-1:0]            wr_addr,
  input  logic                     sig_new,
  input  logic signed [IS_W_P-1:0] is_new,
  // read side
  input  logic                     en_read,
  input  logic                     rd_iter,
  input  logic [AW-1:0]            countbit,
  input  logic [AW-1:0]            countspin,
  output logic                     sig_t,
  output logic                     sig_tm1,
  output logic signed [IS_W_P-1:0] is_t
);

  logic          ena1, ena2;
  logic [AW-1:0] addrb1, addrb2;
  logic          doutb1, doutb2;
  logic          sel_q;

  // Fig. 7(a) muxes: write enable steered by count_iter, read addresses swapped.
  assign ena1   = en_upd & ~wr_iter;
  assign ena2   = en_upd &  wr_iter;
  assign addrb1 = rd_iter ? countbit  : countspin;
  assign addrb2 = rd_iter ? countspin : countbit;

  bram_sdp #(.DEPTH(N), .WIDTH(1), .AW(AW)) u_bram1 (
    .clk, .ena(ena1), .addra(wr_addr), .dina(sig_new),
    .enb(en_read), .addrb(addrb1), .doutb(doutb1));

  bram_sdp #(.DEPTH(N), .WIDTH(1), .AW(AW)) u_bram2 (
    .clk, .ena(ena2), .addra(wr_addr), .dina(sig_new),
    .enb(en_read), .addrb(addrb2), .doutb(doutb2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)       sel_q <= 1'b0;
    else if (en_read) sel_q <= rd_iter;
  end

  assign sig_t   = sel_q ? doutb1 : doutb2;
  assign sig_tm1 = sel_q ? doutb2 : doutb1;

  // Fig. 8(b): one BRAM for Is.
  logic [IS_W_P-1:0] is_raw;
  bram_sdp #(.DEPTH(N), .WIDTH(IS_W_P), .AW(AW)) u_bram_is (
    .clk, .ena(en_upd), .addra(wr_addr), .dina(is_new),
    .enb(en_read), .addrb(countspin), .doutb(is_raw));
  assign is_t = $signed(is_raw);

endmodule
