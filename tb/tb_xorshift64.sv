// tb_xorshift64: checks the XOR-shift generator against a reference written
// with the published shift triple, including seeding, hold when disabled,
// the zero-seed substitute and the R-bit output slice.
module tb_xorshift64;
  localparam int R = 20;
  logic clk = 0, rst_n = 0, load = 0, en = 0;
  logic [63:0] seed = 0;
  logic [R-1:0] rnd;
  always #5 clk = ~clk;

  xorshift64 #(.R(R)) dut (.clk, .rst_n, .load, .seed, .en, .rnd);

  int checks = 0, failures = 0;
  longint unsigned m;

  function automatic longint unsigned ref_next(input longint unsigned x);
    x = x ^ (x << 13); x = x ^ (x >> 7); x = x ^ (x << 17);
    return x;
  endfunction

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    // known first outputs for seed 1: 1 -> 0x40822041 (low 32 bits)
    seed = 64'd1; load = 1; @(negedge clk); load = 0;
    chk(dut.state == 64'd1, "seed loaded");
    en = 1; @(negedge clk);
    chk(dut.state == 64'h0000_0000_4082_2041, "first xorshift64 step of seed 1");
    m = dut.state;
    for (int c = 0; c < 500; c++) begin
      en = ($urandom_range(3) != 0);
      @(negedge clk);
      if (en) m = ref_next(m);
      chk(dut.state == m, $sformatf("state at cycle %0d", c));
      chk(rnd == m[R-1:0], "output slice");
    end
    en = 0;
    seed = 0; load = 1; @(negedge clk); load = 0;
    chk(dut.state == 64'h9E37_79B9_7F4A_7C15, "zero seed replaced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
