// tb_ssqa_g14: denser MAX-CUT workload on the full-size annealer (N = 800,
// R = 20, default parameters).
//
// The graph has the shape of the G14/G15 benchmarks: the union of two
// triangulated 20 x 40 grids, the second laid over a random permutation of
// the nodes, all weights +1 (about 4,550 edges, mean degree about 11.4,
// maximum 12). J_ij = -w_ij and h = 0. The anneal runs STEPS steps with
// I0 = 8, n_rnd = 1 and Q rising from 0 by 1 every 20 steps to 8. The best of
// the 20 final replicas must reach MIN_CUT, and the run must take
// STEPS*N*(N+1)+1 cycles.
module tb_ssqa_g14;
  import ssqa_pkg::*;

  localparam int N     = 800;
  localparam int R     = 20;
  localparam int AW    = $clog2(N) + 1;
  localparam int ROWS  = 20, COLS = 40;
  localparam int STEPS = 200;
  localparam int MIN_CUT = 2850;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [7:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 4'hF;
  logic [1:0]  bresp, rresp;
  logic        w_en = 0, w_is_h = 0;
  logic [AW-1:0] w_row = 0, w_col = 0;
  logic signed [J_W-1:0] w_data = 0;
  logic        out_valid, busy, done;
  logic [AW-1:0] out_idx;
  logic [15:0] out_trial;
  logic [R-1:0] out_spins;

  ssqa_top dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .w_en, .w_is_h, .w_row, .w_col, .w_data,
    .out_valid, .out_idx, .out_trial, .out_spins, .busy, .done);

  int checks = 0, failures = 0;
  int J[], h[], W[];
  int cyc = 0, t_start = 0;
  logic busy_q = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    busy_q <= busy;
    if (busy && !busy_q) t_start <= cyc;
  end
  logic [R-1:0] got [N];

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(posedge clk);
    @(negedge clk);
  endtask

  int perm[N];

  // grid position -> node; layer 1 uses the permuted order
  function automatic int place(input int layer, input int r, input int c);
    return (layer == 0) ? r * COLS + c : perm[r * COLS + c];
  endfunction

  function automatic void add_edge(input int a, input int b);
    if (a != b) begin W[a*N + b] = 1; W[b*N + a] = 1; end
  endfunction

  initial begin
    int nout, best, cut, idx, nedges;
    longint unsigned seed;
    seed = 64'h5EED_0000_C0FF_EE11;
    J = new[N * N]; W = new[N * N]; h = new[N];
    foreach (J[x]) begin J[x] = 0; W[x] = 0; end
    foreach (h[x]) h[x] = 0;
    void'($urandom(2024));
    foreach (perm[x]) perm[x] = x;
    for (int x = N - 1; x > 0; x--) begin
      int y, tmp;
      y = $urandom_range(x);
      tmp = perm[x]; perm[x] = perm[y]; perm[y] = tmp;
    end
    for (int layer = 0; layer < 2; layer++)
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          int a;
          a = place(layer, r, c);
          if (c + 1 < COLS) add_edge(a, place(layer, r, c + 1));
          if (r + 1 < ROWS) add_edge(a, place(layer, r + 1, c));
          if (r + 1 < ROWS && c + 1 < COLS) add_edge(a, place(layer, r + 1, c + 1));
        end
    nedges = 0;
    foreach (W[x]) if (W[x] != 0) nedges++;
    nedges = nedges / 2;
    foreach (J[x]) J[x] = -W[x];

    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk); w_en = 1; w_is_h = 0; w_row = AW'(i); w_col = AW'(j); w_data = J_W'(J[i*N + j]);
      end
      @(negedge clk); w_en = 1; w_is_h = 1; w_row = AW'(i); w_col = 0; w_data = '0;
    end
    @(negedge clk); w_en = 0;


    axi_write(REG_TRIALS, 1);
    axi_write(REG_STEPS, STEPS);
    axi_write(REG_I0, 8);
    axi_write(REG_QMIN, 0);
    axi_write(REG_QMAX, 8);
    axi_write(REG_BETA, 1);
    axi_write(REG_TAU, 20);
    axi_write(REG_NRND, 1);
    axi_write(REG_SEED_LO, seed[31:0]);
    axi_write(REG_SEED_HI, seed[63:32]);
    axi_write(REG_CTRL, 1);
    nout = 0;
    while (!done) begin
      @(posedge clk);
      if (out_valid) begin
        idx = int'(out_idx);
        got[idx] = out_spins;
        nout++;
      end
    end
    chk(nout == N, "one output per spin");
    chk(cyc - t_start == STEPS * N * (N + 1) + 1, $sformatf("run length %0d", cyc - t_start));
    best = -1000000;
    for (int k = 0; k < R; k++) begin
      cut = 0;
      for (int i = 0; i < N; i++)
        for (int j = i + 1; j < N; j++)
          if (W[i*N + j] != 0 && got[i][k] != got[j][k]) cut += W[i*N + j];
      if (cut > best) best = cut;
    end
    chk(best >= MIN_CUT, $sformatf("best cut %0d below %0d", best, MIN_CUT));
    $display("G14-like workload: N=%0d edges=%0d R=%0d steps=%0d best cut=%0d", N, nedges, R, STEPS, best);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (130_000_000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
