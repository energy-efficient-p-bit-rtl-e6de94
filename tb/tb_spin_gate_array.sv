// tb_spin_gate_array: the R-replica array driven by the scheduler and the
// XOR-shift generator, with J and h served from testbench arrays with the
// weight memory's one-cycle latency. Every spin update of the last step of
// each anneal is compared with ssqa_ref_pkg, which checks the per-replica
// delay lines, the ring coupling to replica k+1 and the initial-state masks.
module tb_spin_gate_array;
  import ssqa_pkg::*;
  import ssqa_ref_pkg::*;
  localparam int N = 5, R = 3, AW = $clog2(N) + 1;
  localparam int T = 2, M = 6;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  hyper_t hyp_in, hyp;
  logic busy, done, en_read, countiter, rng_load, rng_en;
  logic [AW-1:0] countbit, countspin, upd_addr;
  logic acc_en, acc_load, mask_cur_p, en_upd, upd_iter, mask_cur_u, mask_prev_u, last_step_u;
  logic [Q_W-1:0] q_upd;
  logic [15:0] trial_u;
  logic [R-1:0] rnd, sig_out;
  logic signed [IS_W-1:0] is_out [R];
  logic signed [J_W-1:0] j_word;
  logic signed [H_W-1:0] h_word;

  ssqa_scheduler #(.N(N), .AW(AW)) u_sched (.clk, .rst_n, .start, .hyp_in, .hyp, .busy, .done,
    .en_read, .countbit, .countspin, .countiter, .rng_load, .rng_en,
    .acc_en, .acc_load, .mask_cur_p, .en_upd, .upd_iter, .upd_addr, .q_upd,
    .mask_cur_u, .mask_prev_u, .last_step_u, .trial_u, .q_cur(), .step_cur());
  xorshift64 #(.R(R)) u_rng (.clk, .rst_n, .load(rng_load), .seed(hyp_in.seed), .en(rng_en), .rnd);

  spin_gate_array #(.N(N), .R(R), .AW(AW)) dut (.clk, .rst_n,
    .en_read, .rd_iter(countiter), .countbit, .countspin,
    .acc_en, .acc_load, .mask_cur_p, .en_upd, .upd_iter, .upd_addr, .mask_cur_u, .mask_prev_u,
    .j(j_word), .h(h_word), .q(q_upd), .nrnd(hyp.nrnd), .i0(hyp.i0), .rnd, .sig_out, .is_out);

  int checks = 0, failures = 0, seen = 0;
  int J[], h[];
  bit res[];

  int row, col;
  assign row = 32'(countspin);
  assign col = 32'(countbit);
  always @(posedge clk) if (en_read) begin
    j_word <= (col < N) ? J_W'(J[row*N + col]) : '0;
    h_word <= H_W'(h[row]);
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  always @(posedge clk) if (en_upd && last_step_u) begin
    int base;
    bit ok;
    base = (32'(trial_u) * N + 32'(upd_addr)) * R;
    for (int k = 0; k < R; k++) begin
      ok = (sig_out[k] == res[base + k]);
      chk(ok, $sformatf("spin %0d replica %0d", base / R, k));
    end
    seen++;
  end

  initial begin
    int shi, slo;
    J = new[N*N]; h = new[N];
    foreach (J[x]) J[x] = int'($urandom_range(15)) - 8;
    foreach (h[x]) h[x] = int'($urandom_range(15)) - 8;
    hyp_in = '0;
    hyp_in.trials = T; hyp_in.steps = M; hyp_in.i0 = 20; hyp_in.qmin = 1; hyp_in.qmax = 12;
    hyp_in.beta = 3; hyp_in.tau = 2; hyp_in.nrnd = 4; hyp_in.seed = 64'h1357_9BDF_2468_ACE0;
    ssqa_ref_pkg::run(N, R, T, M, 20, 1, 12, 3, 2, 4, hyp_in.seed, J, h, res, shi, slo);
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    wait (done);
    @(negedge clk);
    chk(seen == T * N, "all final states seen");
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
