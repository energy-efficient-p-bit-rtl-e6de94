// tb_spin_gate: drives random spin-serial sequences (NJ weights with their
// sigma_j, then an update) and checks the accumulator, Is(t+1) and
// sigma(t+1) against an integer model of the update rule, with I0 values
// chosen so that both saturation limits and the pass-through case occur.
module tb_spin_gate;
  import ssqa_pkg::*;
  localparam int NJ = 9;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic acc_en = 0, acc_load = 0, sig_j = 0, sig_up = 0, r = 0;
  logic signed [J_W-1:0] j = 0;
  logic signed [H_W-1:0] h = 0;
  logic [Q_W-1:0] q = 0;
  logic [NR_W-2:0] nrnd = 0;
  logic [IS_W-1:0] i0 = 0;
  logic signed [IS_W-1:0] is_in = 0, is_out;
  logic sig_out;

  spin_gate dut (.clk, .rst_n, .acc_en, .acc_load, .j, .sig_j, .h, .q, .sig_up, .r,
                 .nrnd, .i0, .is_in, .is_out, .sig_out);

  int checks = 0, failures = 0, n_hi = 0, n_lo = 0, n_mid = 0;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic int wrap8(input int v);
    v = v & 255; return (v >= 128) ? v - 256 : v;
  endfunction

  initial begin
    int acc, s, e, jj;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      acc = 0;
      for (int n = 0; n < NJ; n++) begin
        jj = int'($urandom_range(15)) - 8;
        j = J_W'(jj); sig_j = $urandom_range(1);
        acc_en = 1; acc_load = (n == 0);
        acc = (n == 0) ? 0 : acc;
        acc = wrap8(acc + (sig_j ? jj : -jj));
        @(negedge clk);
      end
      acc_en = 0; acc_load = 0;
      chk(int'(dut.acc) == acc, "accumulator");
      h = H_W'(int'($urandom_range(15)) - 8);
      q = Q_W'($urandom_range(it % 3 == 0 ? 255 : 20));
      sig_up = $urandom_range(1); r = $urandom_range(1);
      nrnd = $urandom_range(7);
      i0 = IS_W'((it % 4 == 0) ? 128 : $urandom_range(1, 40));
      is_in = IS_W'(int'($urandom_range(255)) - 128);
      if (int'(is_in) >= int'(i0) || int'(is_in) < -int'(i0)) is_in = '0;
      #1;
      s = acc + (sig_up ? int'(q) : -int'(q)) + int'(h) + (r ? int'(nrnd) : -int'(nrnd)) + int'(is_in);
      if (s >= int'(i0)) begin e = int'(i0) - ALPHA; n_hi++; end
      else if (s < -int'(i0)) begin e = -int'(i0); n_lo++; end
      else begin e = s; n_mid++; end
      chk(int'(is_out) == e, $sformatf("Is(t+1) got %0d exp %0d (sum %0d, I0 %0d)", is_out, e, s, i0));
      chk(sig_out == (e >= 0), "sigma(t+1)");
      @(negedge clk);
      chk(int'(dut.acc) == acc, "accumulator holds through the update cycle");
    end
    chk(n_hi > 0 && n_lo > 0 && n_mid > 0, "all saturation cases exercised");
    $display("cases: hi=%0d lo=%0d mid=%0d", n_hi, n_lo, n_mid);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
