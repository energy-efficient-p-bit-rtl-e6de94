// tb_ssqa_scheduler: runs the scheduler for two anneals and compares every
// cycle with a counter model: count_bit/count_spin/count_iter, en_read, the
// one-cycle-delayed data-side controls (acc_load/acc_en, en_upd with its
// address, iteration and Q, the initial-state masks), the Q schedule
// (qmin, +beta every tau steps, capped at qmax), the run length
// T*M*N*(N+1)+1 and the start/done handshake.
module tb_ssqa_scheduler;
  import ssqa_pkg::*;
  localparam int N = 4, AW = $clog2(N) + 1;
  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;
  hyper_t hyp_in, hyp;
  logic busy, done, en_read, countiter, rng_load, rng_en;
  logic [AW-1:0] countbit, countspin, upd_addr;
  logic acc_en, acc_load, mask_cur_p, en_upd, upd_iter, mask_cur_u, mask_prev_u, last_step_u;
  logic [Q_W-1:0] q_upd, q_cur;
  logic [15:0] trial_u, step_cur;

  ssqa_scheduler #(.N(N), .AW(AW)) dut (.clk, .rst_n, .start, .hyp_in, .hyp, .busy, .done,
    .en_read, .countbit, .countspin, .countiter, .rng_load, .rng_en,
    .acc_en, .acc_load, .mask_cur_p, .en_upd, .upd_iter, .upd_addr, .q_upd,
    .mask_cur_u, .mask_prev_u, .last_step_u, .trial_u, .q_cur, .step_cur);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic run(input int T, input int M, input int qmin, input int qmax, input int beta, input int tau);
    int q, tc, cycles;
    // expected data-side values from the previous cycle
    bit p_acc_en, p_acc_load, p_upd, p_mc, p_mp, p_last;
    int p_addr, p_iter, p_q, p_trial;
    hyp_in = '0;
    hyp_in.trials = 16'(T); hyp_in.steps = 16'(M); hyp_in.qmin = Q_W'(qmin); hyp_in.qmax = Q_W'(qmax);
    hyp_in.beta = Q_W'(beta); hyp_in.tau = 16'(tau);
    @(negedge clk); start = 1;
    #1 chk(rng_load, "rng_load with start");
    @(negedge clk); start = 0;
    p_upd = 0; p_acc_en = 0; p_acc_load = 0; cycles = 0;
    for (int t = 0; t < T; t++) begin
      q = qmin; tc = 0;
      for (int s = 0; s < M; s++) begin
        for (int i = 0; i < N; i++)
          for (int b = 0; b <= N; b++) begin
            chk(busy && en_read && rng_en, "busy");
            chk(int'(countbit) == b && int'(countspin) == i && countiter == s[0], $sformatf("counters t%0d s%0d i%0d b%0d", t, s, i, b));
            chk(int'(q_cur) == q, $sformatf("Q(t) step %0d: %0d vs %0d", s, q_cur, q));
            chk(acc_en == p_acc_en && acc_load == p_acc_load, "acc controls");
            chk(en_upd == p_upd, "en_upd");
            if (p_upd) chk(int'(upd_addr) == p_addr && upd_iter == p_iter[0] && int'(q_upd) == p_q
                           && mask_cur_u == p_mc && mask_prev_u == p_mp && last_step_u == p_last
                           && int'(trial_u) == p_trial, "update controls");
            if (p_acc_en) chk(mask_cur_p == p_mc, "product mask");
            p_acc_en = (b < N); p_acc_load = (b == 0); p_upd = (b == N);
            p_addr = i; p_iter = s; p_q = q; p_mc = (s == 0); p_mp = (s <= 1);
            p_last = (s == M - 1); p_trial = t;
            @(negedge clk); cycles++;
          end
        if (tc == tau - 1) begin tc = 0; q = (q + beta > qmax) ? qmax : q + beta; end
        else tc++;
      end
    end
    // drain cycle
    chk(busy && !en_read && en_upd && !done, "drain cycle");
    @(negedge clk); cycles++;
    chk(!busy && done && !en_upd, "done after drain");
    chk(cycles == T * M * N * (N + 1) + 1, "run length");
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(!busy && !done, "idle after reset");
    run(2, 7, 1, 9, 3, 2);
    run(1, 3, 5, 200, 100, 1);
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
