// tb_axi_lite_regs: writes every hyperparameter register over AXI4-Lite and
// reads it back, checks the hyp outputs, byte strobes, the one-cycle start
// pulse, STATUS (busy/done), zero for an unknown offset, and that BVALID and
// RVALID wait for their READY.
module tb_axi_lite_regs;
  import ssqa_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0]  awaddr = 0, araddr = 0;
  logic        awvalid = 0, wvalid = 0, bready = 1, arvalid = 0, rready = 1;
  logic        awready, wready, bvalid, arready, rvalid;
  logic [31:0] wdata = 0, rdata;
  logic [3:0]  wstrb = 4'hF;
  logic [1:0]  bresp, rresp;
  hyper_t hyp;
  logic start, busy = 0, done = 0;

  axi_lite_regs dut (.clk, .rst_n,
    .s_axi_awaddr(awaddr), .s_axi_awvalid(awvalid), .s_axi_awready(awready),
    .s_axi_wdata(wdata), .s_axi_wstrb(wstrb), .s_axi_wvalid(wvalid), .s_axi_wready(wready),
    .s_axi_bresp(bresp), .s_axi_bvalid(bvalid), .s_axi_bready(bready),
    .s_axi_araddr(araddr), .s_axi_arvalid(arvalid), .s_axi_arready(arready),
    .s_axi_rdata(rdata), .s_axi_rresp(rresp), .s_axi_rvalid(rvalid), .s_axi_rready(rready),
    .hyp, .start, .busy, .done);

  int checks = 0, failures = 0, starts = 0;
  always @(posedge clk) if (start) starts++;

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wr(input logic [7:0] a, input logic [31:0] d, input logic [3:0] s = 4'hF, input int stall = 0);
    @(negedge clk);
    awaddr = a; wdata = d; wstrb = s; awvalid = 1; wvalid = 1; bready = (stall == 0);
    do @(posedge clk); while (!(awready && wready));
    @(negedge clk); awvalid = 0; wvalid = 0;
    repeat (stall) begin @(negedge clk); chk(bvalid, "BVALID held until BREADY"); end
    bready = 1;
    while (!bvalid) @(negedge clk);
    chk(bresp == 2'b00, "OKAY");
    @(negedge clk);
  endtask

  task automatic rd(input logic [7:0] a, output logic [31:0] d, input int stall = 0);
    logic [31:0] first;
    @(negedge clk);
    araddr = a; arvalid = 1; rready = (stall == 0);
    do @(posedge clk); while (!arready);
    @(negedge clk); arvalid = 0;
    while (!rvalid) @(negedge clk);
    first = rdata;
    repeat (stall) begin @(negedge clk); chk(rvalid && rdata == first, "RVALID/RDATA held"); end
    d = rdata; rready = 1;
    @(negedge clk);
  endtask

  initial begin
    logic [31:0] v;
    repeat (2) @(negedge clk);
    rst_n = 1;
    wr(REG_TRIALS, 32'h1234);   wr(REG_STEPS, 32'd500);  wr(REG_I0, 32'd64);
    wr(REG_QMIN, 32'd2);        wr(REG_QMAX, 32'd99, 4'hF, 3); wr(REG_BETA, 32'd7);
    wr(REG_TAU, 32'd25);        wr(REG_NRND, 32'd5);
    wr(REG_SEED_LO, 32'hCAFE_F00D); wr(REG_SEED_HI, 32'h0BAD_BEEF);
    chk(hyp.trials == 16'h1234 && hyp.steps == 16'd500 && hyp.i0 == 8'd64, "hyp a");
    chk(hyp.qmin == 8'd2 && hyp.qmax == 8'd99 && hyp.beta == 8'd7 && hyp.tau == 16'd25, "hyp b");
    chk(hyp.nrnd == 3'd5 && hyp.seed == 64'h0BAD_BEEF_CAFE_F00D, "hyp c");
    rd(REG_TRIALS, v, 2); chk(v == 32'h1234, "read trials");
    rd(REG_STEPS, v);  chk(v == 32'd500, "read steps");
    rd(REG_QMAX, v);   chk(v == 32'd99, "read qmax");
    rd(REG_SEED_HI, v); chk(v == 32'h0BAD_BEEF, "read seed hi");
    wr(REG_SEED_LO, 32'h0000_00AA, 4'b0001);
    rd(REG_SEED_LO, v); chk(v == 32'hCAFE_F0AA, "byte strobe");
    rd(8'h80, v); chk(v == 0, "unknown offset reads zero");
    chk(starts == 0, "no start yet");
    wr(REG_CTRL, 32'd1);
    chk(starts == 1, "one start pulse");
    busy = 1; rd(REG_STATUS, v); chk(v == 32'd1, "status busy");
    busy = 0; done = 1; rd(REG_STATUS, v); chk(v == 32'd2, "status done");
    wr(REG_CTRL, 32'd0);
    chk(starts == 1, "writing 0 does not start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
