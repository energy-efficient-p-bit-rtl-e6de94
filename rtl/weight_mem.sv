// weight_mem: the problem memory - the N x N weight matrix J and the N biases h.
//
// J is one block-RAM array of N*N signed J_W-bit words addressed by
// (row i, column j); it is read once per cycle and the word J_ij is shared
// by all R replicas. h is a small N-word array read at the row address.
// Both reads have one cycle of latency (j_out/h_out are registered) and are
// issued when rd_en is high. A host write port loads either array while the
// annealer is idle (wr_is_h selects h; wr_col is then ignored).
// The J matrix in BRAM and the 4-bit weights follow the paper; keeping h in
// its own array and the write port are this design's choices.
module weight_mem
  import ssqa_pkg::*;
#(
  parameter int N     = 800,
  parameter int J_W_P = J_W,
  parameter int H_W_P = H_W,
  parameter int AW    = $clog2(N) + 1
) (
  input  logic                     clk,
  // host write port
  input  logic                     wr_en,
  input  logic                     wr_is_h,
  input  logic [AW-1:0]            wr_row,
  input  logic [AW-1:0]            wr_col,
  input  logic signed [J_W_P-1:0]  wr_data,
  // annealer read port
  input  logic                     rd_en,
  input  logic [AW-1:0]            rd_row,
  input  logic [AW-1:0]            rd_col,
  output logic signed [J_W_P-1:0]  j_out,
  output logic signed [H_W_P-1:0]  h_out
);

  localparam int MW = $clog2(N * N);
  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [J_W_P-1:0] jmem [N * N];
  logic [H_W_P-1:0] hmem [N];

  logic [MW-1:0] wr_lin, rd_lin;
  assign wr_lin = MW'(wr_row) * MW'(N) + MW'(wr_col);
  assign rd_lin = MW'(rd_row) * MW'(N) + MW'(rd_col);

  always_ff @(posedge clk) begin
    if (wr_en && !wr_is_h && wr_row < AW'(N) && wr_col < AW'(N))
      jmem[wr_lin] <= wr_data;
    if (wr_en && wr_is_h && wr_row < AW'(N))
      hmem[wr_row[IW-1:0]] <= H_W_P'(wr_data);
  end

  always_ff @(posedge clk) begin
    if (rd_en) begin
      j_out <= (rd_row < AW'(N) && rd_col < AW'(N)) ? $signed(jmem[rd_lin]) : '0;
      h_out <= (rd_row < AW'(N)) ? $signed(hmem[rd_row[IW-1:0]]) : '0;
    end
  end

endmodule
