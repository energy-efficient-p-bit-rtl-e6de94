// axi_lite_regs: AXI4-Lite slave holding the annealer's hyperparameters.
//
// The host processor writes the hyperparameters (number of anneals, steps
// per anneal M, I0, Qmin, Qmax, beta, tau, n_rnd, 64-bit seed) and starts a
// run by writing 1 to bit 0 of CTRL, which produces a one-cycle `start`
// pulse. STATUS reads busy (bit 0) and done (bit 1). Offsets are listed in
// ssqa_pkg (REG_*). 32-bit data; write strobes are honoured per byte.
//
// Handshake: one write and one read are handled at a time. A write is
// accepted when AWVALID and WVALID are both high and no response is pending
// (AWREADY and WREADY are then high for one cycle); BVALID follows one cycle
// later with OKAY. A read is accepted likewise on ARVALID and RVALID follows
// one cycle later. Unknown offsets read as zero and ignore writes.
// The paper says only that hyperparameters reach the scheduler over AXI from
// the CPU; the register map and this handshake are this design's own.
module axi_lite_regs
  import ssqa_pkg::*;
#(
  parameter int ADDR_W = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  // AXI4-Lite slave
  input  logic [ADDR_W-1:0] s_axi_awaddr,
  input  logic              s_axi_awvalid,
  output logic              s_axi_awready,
  input  logic [31:0]       s_axi_wdata,
  input  logic [3:0]        s_axi_wstrb,
  input  logic              s_axi_wvalid,
  output logic              s_axi_wready,
  output logic [1:0]        s_axi_bresp,
  output logic              s_axi_bvalid,
  input  logic              s_axi_bready,
  input  logic [ADDR_W-1:0] s_axi_araddr,
  input  logic              s_axi_arvalid,
  output logic              s_axi_arready,
  output logic [31:0]       s_axi_rdata,
  output logic [1:0]        s_axi_rresp,
  output logic              s_axi_rvalid,
  input  logic              s_axi_rready,
  // to / from the annealer
  output hyper_t            hyp,
  output logic              start,
  input  logic              busy,
  input  logic              done
);

  logic        wr_fire, rd_fire;
  logic [7:0]  waddr, raddr;
  logic [31:0] cur, merged;

  assign wr_fire = s_axi_awvalid && s_axi_wvalid && !s_axi_bvalid;
  assign rd_fire = s_axi_arvalid && !s_axi_rvalid;
  assign s_axi_awready = wr_fire;
  assign s_axi_wready  = wr_fire;
  assign s_axi_arready = rd_fire;
  assign s_axi_bresp   = 2'b00;
  assign s_axi_rresp   = 2'b00;
  assign waddr = 8'(s_axi_awaddr) & 8'hFC;
  assign raddr = 8'(s_axi_araddr) & 8'hFC;

  function automatic logic [31:0] reg_value(input logic [7:0] a, input hyper_t p,
                                            input logic b, input logic d);
    case (a)
      REG_STATUS:  return {30'd0, d, b};
      REG_TRIALS:  return {16'd0, p.trials};
      REG_STEPS:   return {16'd0, p.steps};
      REG_I0:      return 32'(p.i0);
      REG_QMIN:    return 32'(p.qmin);
      REG_QMAX:    return 32'(p.qmax);
      REG_BETA:    return 32'(p.beta);
      REG_TAU:     return {16'd0, p.tau};
      REG_NRND:    return 32'(p.nrnd);
      REG_SEED_LO: return p.seed[31:0];
      REG_SEED_HI: return p.seed[63:32];
      default:     return 32'd0;
    endcase
  endfunction

  always_comb begin
    cur = reg_value(waddr, hyp, busy, done);
    for (int b = 0; b < 4; b++)
      merged[8*b +: 8] = s_axi_wstrb[b] ? s_axi_wdata[8*b +: 8] : cur[8*b +: 8];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      hyp          <= '0;
      start        <= 1'b0;
      s_axi_bvalid <= 1'b0;
      s_axi_rvalid <= 1'b0;
      s_axi_rdata  <= '0;
    end else begin
      start <= 1'b0;
      if (wr_fire) begin
        s_axi_bvalid <= 1'b1;
        case (waddr)
          REG_CTRL:    start       <= s_axi_wstrb[0] && s_axi_wdata[0];
          REG_TRIALS:  hyp.trials  <= merged[15:0];
          REG_STEPS:   hyp.steps   <= merged[15:0];
          REG_I0:      hyp.i0      <= merged[IS_W-1:0];
          REG_QMIN:    hyp.qmin    <= merged[Q_W-1:0];
          REG_QMAX:    hyp.qmax    <= merged[Q_W-1:0];
          REG_BETA:    hyp.beta    <= merged[Q_W-1:0];
          REG_TAU:     hyp.tau     <= merged[15:0];
          REG_NRND:    hyp.nrnd    <= merged[NR_W-2:0];
          REG_SEED_LO: hyp.seed[31:0]  <= merged;
          REG_SEED_HI: hyp.seed[63:32] <= merged;
          default: ;
        endcase
      end else if (s_axi_bvalid && s_axi_bready) begin
        s_axi_bvalid <= 1'b0;
      end
      if (rd_fire) begin
        s_axi_rvalid <= 1'b1;
        s_axi_rdata  <= reg_value(raddr, hyp, busy, done);
      end else if (s_axi_rvalid && s_axi_rready) begin
        s_axi_rvalid <= 1'b0;
      end
    end
  end

  // AXI rule: a response stays valid until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_bvalid && !s_axi_bready |=> s_axi_bvalid);
  assert property (@(posedge clk) disable iff (!rst_n)
                   s_axi_rvalid && !s_axi_rready |=> s_axi_rvalid && $stable(s_axi_rdata));

endmodule
