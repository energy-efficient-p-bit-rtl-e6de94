// tb_dual_bram_delay: runs the delay circuit through several annealing steps
// with the scheduler's access pattern (per spin: reads at count_bit 0..N,
// then the write of the new state one cycle later, overlapping the next
// spin) and random new states. Checks sigma(t) at every count_bit,
// sigma(t-1) and Is(t) at every update against a history of the written
// values, and that the two BRAMs alternate.
module tb_dual_bram_delay;
  import ssqa_pkg::*;
  localparam int N = 5, AW = $clog2(N) + 1, STEPS = 7;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en_upd = 0, wr_iter = 0, sig_new = 0, en_read = 0, rd_iter = 0;
  logic [AW-1:0] wr_addr = 0, countbit = 0, countspin = 0;
  logic signed [IS_W-1:0] is_new = 0, is_t;
  logic sig_t, sig_tm1;

  dual_bram_delay #(.N(N), .AW(AW)) dut (.clk, .rst_n, .en_upd, .wr_iter, .wr_addr, .sig_new, .is_new,
    .en_read, .rd_iter, .countbit, .countspin, .sig_t, .sig_tm1, .is_t);

  int checks = 0, failures = 0, w1 = 0, w2 = 0;
  bit sh [STEPS][N];
  int ih [STEPS][N];

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int ps, pi, pb;        // step/spin/bit of the read issued in the previous cycle
    bit pv, pu;            // previous cycle issued a read / was count_bit = N
    foreach (sh[a, b]) begin sh[a][b] = $urandom_range(1); ih[a][b] = int'($urandom_range(255)) - 128; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    pv = 0; pu = 0; ps = 0; pi = 0; pb = 0;
    for (int s = 0; s <= STEPS; s++)
      for (int i = 0; i < N; i++)
        for (int b = 0; b <= N; b++) begin
          // data side of the previous cycle's issue
          en_upd = pv && pu;
          if (en_upd) begin
            wr_iter = ps[0]; wr_addr = AW'(pi); sig_new = sh[ps][pi]; is_new = IS_W'(ih[ps][pi]);
            if (ps[0]) w2++; else w1++;
          end
          // issue side
          en_read = (s < STEPS); rd_iter = s[0]; countbit = AW'(b); countspin = AW'(i);
          #1;
          if (pv && !pu && ps >= 1) chk(sig_t == sh[ps-1][pb], $sformatf("sigma(t) s%0d j%0d", ps, pb));
          if (pv && pu && ps >= 2) chk(sig_tm1 == sh[ps-2][pi], $sformatf("sigma(t-1) s%0d i%0d", ps, pi));
          if (pv && pu && ps >= 1) chk(int'(is_t) == ih[ps-1][pi], $sformatf("Is(t) s%0d i%0d", ps, pi));
          pv = en_read; pu = (b == N); ps = s; pi = i; pb = b;
          @(negedge clk);
          if (s == STEPS) begin pv = 0; end
        end
    chk(w1 > 0 && w2 > 0, "both BRAMs written");
    chk(dut.u_bram1.mem[0] == sh[STEPS-1 - ((STEPS-1) % 2 == 0 ? 0 : 1)][0], "BRAM1 holds even steps");
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
