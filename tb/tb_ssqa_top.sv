// tb_ssqa_top: end-to-end test of the annealer at reduced size.
//
// Loads a random dense J and random h through the weight port, programs the
// hyperparameters over AXI4-Lite, starts a run of several anneals and checks
// every streamed final spin state against ssqa_ref_pkg. Three runs use
// different settings (noise, Q schedule, I0) so that each mechanism occurs:
// Q increments and reaching Qmax, upper and lower saturation of Is, the
// BRAM ping-pong swap, anneal (trial) restarts, a start ignored while busy,
// and a second run after done. It also checks the cycle budget: N+1 cycles
// per spin and T*M*N*(N+1)+1 cycles from start to done.
module tb_ssqa_top;
  import ssqa_pkg::*;
  import ssqa_ref_pkg::*;

  localparam int N  = 7;
  localparam int R  = 4;
  localparam int AW = $clog2(N) + 1;

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

  ssqa_top #(.N(N), .R(R)) dut (
    .clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .w_en, .w_is_h, .w_row, .w_col, .w_data,
    .out_valid, .out_idx, .out_trial, .out_spins, .busy, .done);

  int checks = 0, failures = 0;
  int J[], h[];
  bit res[];

  // mechanism counters
  int n_q_inc = 0, n_q_cap = 0, n_sat_hi = 0, n_sat_lo = 0, n_swap = 0;
  int n_trial_restart = 0, n_ignored_start = 0, n_runs = 0;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic axi_write(input logic [7:0] a, input logic [31:0] d);
    @(negedge clk);
    awaddr = a; wdata = d; awvalid = 1; wvalid = 1;
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    while (!bvalid) @(posedge clk);
    @(negedge clk);
  endtask

  task automatic axi_read(input logic [7:0] a, output logic [31:0] d);
    @(negedge clk);
    araddr = a; arvalid = 1;
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(posedge clk);
    d = rdata;
    @(negedge clk);
  endtask

  task automatic load_problem(input int seed);
    int v;
    void'($urandom(seed));
    J = new[N * N]; h = new[N];
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        v = (i == j) ? 0 : int'($urandom_range(15)) - 8;
        J[i*N + j] = v;
      end
    foreach (h[i]) h[i] = int'($urandom_range(15)) - 8;
    for (int i = 0; i < N; i++) begin
      for (int j = 0; j < N; j++) begin
        @(negedge clk); w_en = 1; w_is_h = 0; w_row = AW'(i); w_col = AW'(j); w_data = J_W'(J[i*N + j]);
      end
      @(negedge clk); w_en = 1; w_is_h = 1; w_row = AW'(i); w_col = 0; w_data = J_W'(h[i]);
    end
    @(negedge clk); w_en = 0;
  endtask

  task automatic run_case(input int T, input int M, input int i0, input int qmin, input int qmax,
                          input int beta, input int tau, input int nrnd, input longint unsigned seed);
    int shi, slo, seen, expect_cycles, last_out;
    logic [31:0] st;
    ssqa_ref_pkg::run(N, R, T, M, i0, qmin, qmax, beta, tau, nrnd, seed, J, h, res, shi, slo);
    n_sat_hi += shi; n_sat_lo += slo;
    axi_write(REG_TRIALS, T);
    axi_write(REG_STEPS, M);
    axi_write(REG_I0, i0);
    axi_write(REG_QMIN, qmin);
    axi_write(REG_QMAX, qmax);
    axi_write(REG_BETA, beta);
    axi_write(REG_TAU, tau);
    axi_write(REG_NRND, nrnd);
    axi_write(REG_SEED_LO, seed[31:0]);
    axi_write(REG_SEED_HI, seed[63:32]);
    axi_read(REG_I0, st);
    chk(st == 32'(i0), "I0 register read-back");
    axi_write(REG_CTRL, 1);
    axi_read(REG_STATUS, st);
    chk(st[0] == 1'b1, "STATUS busy after start");
    axi_write(REG_CTRL, 1);   // ignored while busy
    n_ignored_start++;
    seen = 0; last_out = -1;
    while (!done) begin
      @(posedge clk);
      if (out_valid) begin
        int t, i;
        t = int'(out_trial); i = int'(out_idx);
        for (int k = 0; k < R; k++)
          chk(out_spins[k] == res[(t*N + i)*R + k],
              $sformatf("trial %0d spin %0d replica %0d", t, i, k));
        if (last_out >= 0 && i != 0) chk(cyc - last_out == N + 1, "N+1 cycles per spin");
        last_out = cyc;
        seen++;
      end
    end
    expect_cycles = T * M * N * (N + 1) + 1;
    // busy rises on the first annealing cycle; done is seen one drain cycle
    // after the last annealing cycle.
    chk(cyc - busy_rise == expect_cycles, $sformatf("run length %0d vs %0d", cyc - busy_rise, expect_cycles));
    chk(seen == T * N, "one output per spin and anneal");
    axi_read(REG_STATUS, st);
    chk(st[1:0] == 2'b10, "STATUS done, not busy");
    n_runs++;
  endtask

  int cyc = 0, busy_rise = 0;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (busy && !busy_last) busy_rise <= cyc;

  // mechanism monitors
  logic [Q_W-1:0] q_last = 0;
  logic iter_last = 0, busy_last = 0;
  logic [15:0] trial_last = 0;
  always @(posedge clk) begin
    if (busy && busy_last) begin
      if (dut.u_sched.q_cur > q_last) n_q_inc++;
      if (dut.u_sched.q_cur != q_last && dut.u_sched.q_cur == dut.u_sched.hyp.qmax) n_q_cap++;
      if (dut.countiter != iter_last) n_swap++;
      if (dut.u_sched.trial != trial_last) n_trial_restart++;
    end
    q_last <= dut.u_sched.q_cur;
    iter_last <= dut.countiter;
    busy_last <= busy;
    trial_last <= dut.u_sched.trial;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_problem(11);
    // strong noise, small I0: both saturation limits; Q ramps and caps
    run_case(3, 9, 12, 0, 5, 2, 2, 7, 64'h0123_4567_89AB_CDEF);
    // large I0, weak noise, fast Q ramp, odd step count
    run_case(2, 5, 100, 3, 40, 20, 1, 1, 64'hDEAD_BEEF_0000_0001);
    // a new problem and a zero seed
    load_problem(99);
    run_case(1, 6, 128, 0, 255, 255, 3, 0, 64'h0);
    $display("mechanisms: runs=%0d q_inc=%0d q_cap=%0d sat_hi=%0d sat_lo=%0d swaps=%0d trial_restarts=%0d ignored_starts=%0d",
             n_runs, n_q_inc, n_q_cap, n_sat_hi, n_sat_lo, n_swap, n_trial_restart, n_ignored_start);
    chk(n_q_inc > 0, "Q increment happened");
    chk(n_q_cap > 0, "Q reached Qmax");
    chk(n_sat_hi > 0, "upper saturation happened");
    chk(n_sat_lo > 0, "lower saturation happened");
    chk(n_swap > 0, "BRAM swap happened");
    chk(n_trial_restart > 0, "anneal restart happened");
    chk(n_runs == 3, "three runs done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
