// bram_sdp: simple dual-port block RAM (one write port A, one read port B).
//
// Port A writes dina to addra when ena is high. Port B reads addrb when enb
// is high and presents the word on doutb one clock later; doutb holds its
// value while enb is low. A read and a write of the same address in the same
// cycle return the old contents (read-before-write), which is the property
// the dual-BRAM delay line relies on. The array has no reset, like an FPGA
// block RAM; written this way it maps onto one.
module bram_sdp #(
  parameter int DEPTH = 800,
  parameter int WIDTH = 1,
  parameter int AW    = $clog2(DEPTH) + 1
) (
  input  logic             clk,
  input  logic             ena,
  input  logic [AW-1:0]    addra,
  input  logic [WIDTH-1:0] dina,
  input  logic             enb,
  input  logic [AW-1:0]    addrb,
  output logic [WIDTH-1:0] doutb
);

  localparam int IW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ena && addra < AW'(DEPTH)) mem[addra[IW-1:0]] <= dina;
  end

  always_ff @(posedge clk) begin
    if (enb) doutb <= (addrb < AW'(DEPTH)) ? mem[addrb[IW-1:0]] : '0;
  end

endmodule
