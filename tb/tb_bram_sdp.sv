// tb_bram_sdp: random writes and reads against an array model; checks the
// one-cycle read latency, hold of doutb while enb is low, read-before-write
// on a same-address collision and that out-of-range writes are dropped.
module tb_bram_sdp;
  localparam int DEPTH = 50, WIDTH = 8, AW = $clog2(DEPTH) + 1;
  logic clk = 0;
  always #5 clk = ~clk;
  logic ena = 0, enb = 0;
  logic [AW-1:0] addra = 0, addrb = 0;
  logic [WIDTH-1:0] dina = 0, doutb;

  bram_sdp #(.DEPTH(DEPTH), .WIDTH(WIDTH), .AW(AW)) dut (.clk, .ena, .addra, .dina, .enb, .addrb, .doutb);

  int checks = 0, failures = 0, collisions = 0;
  logic [WIDTH-1:0] model [DEPTH];
  logic [WIDTH-1:0] exp_q;
  logic exp_v = 0;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    // fill
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk); ena = 1; addra = AW'(a); dina = WIDTH'($urandom); model[a] = dina;
    end
    @(negedge clk); ena = 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      if (exp_v) chk(doutb == exp_q, $sformatf("read data cycle %0d: got %h exp %h", c, doutb, exp_q));
      ena = $urandom_range(1); enb = $urandom_range(1);
      addra = AW'($urandom_range(DEPTH + 3)); addrb = AW'($urandom_range(DEPTH - 1));
      if ($urandom_range(3) == 0) addrb = addra;
      dina = WIDTH'($urandom);
      if (enb) begin exp_q = (addrb < DEPTH) ? model[addrb] : '0; exp_v = 1; end
      if (ena && enb && addra == addrb) collisions++;
      @(posedge clk);
      if (ena && addra < DEPTH) model[addra] = dina;
    end
    chk(collisions > 0, "same-address collisions exercised");
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
