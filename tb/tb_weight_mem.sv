// tb_weight_mem: loads a random J matrix and h vector through the write
// port, then reads them back in the annealer's order (row by row, column by
// column, one word per cycle) and checks the one-cycle read latency, sign of
// the words, and zero for out-of-range columns.
module tb_weight_mem;
  import ssqa_pkg::*;
  localparam int N = 13, AW = $clog2(N) + 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, wr_is_h = 0, rd_en = 0;
  logic [AW-1:0] wr_row = 0, wr_col = 0, rd_row = 0, rd_col = 0;
  logic signed [J_W-1:0] wr_data = 0, j_out;
  logic signed [H_W-1:0] h_out;

  weight_mem #(.N(N), .AW(AW)) dut (.clk, .wr_en, .wr_is_h, .wr_row, .wr_col, .wr_data,
                                    .rd_en, .rd_row, .rd_col, .j_out, .h_out);

  int checks = 0, failures = 0;
  int J [N][N];
  int h [N];

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    foreach (J[a, b]) J[a][b] = int'($urandom_range(15)) - 8;
    foreach (h[a]) h[a] = int'($urandom_range(15)) - 8;
    for (int a = 0; a < N; a++) begin
      for (int b = 0; b < N; b++) begin
        @(negedge clk); wr_en = 1; wr_is_h = 0; wr_row = AW'(a); wr_col = AW'(b); wr_data = J_W'(J[a][b]);
      end
      @(negedge clk); wr_is_h = 1; wr_row = AW'(a); wr_col = AW'(N - 1); wr_data = J_W'(h[a]);
    end
    @(negedge clk); wr_en = 0;
    for (int a = 0; a < N; a++)
      for (int b = 0; b <= N; b++) begin
        @(negedge clk); rd_en = 1; rd_row = AW'(a); rd_col = AW'(b);
        @(negedge clk); rd_en = 0;
        chk(int'(j_out) == ((b < N) ? J[a][b] : 0), $sformatf("J[%0d][%0d]", a, b));
        chk(int'(h_out) == h[a], $sformatf("h[%0d]", a));
        rd_col = '0;
        @(negedge clk);
        chk(int'(j_out) == ((b < N) ? J[a][b] : 0), "hold while rd_en low");
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
