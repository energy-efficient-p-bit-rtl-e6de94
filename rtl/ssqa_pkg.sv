// ssqa_pkg: widths, types and constants shared by the SSQA annealer.
//
// The data widths are the ones printed on the spin-gate datapath of the
// architecture: 4-bit weights J and biases h, 8-bit saturated internal
// signal Is, 8-bit replica coupling Q, 4-bit noise term n_rnd*r and a 1-bit
// spin. The hyperparameter struct, its field widths and the AXI register
// map are this design's own choice.
package ssqa_pkg;

  localparam int J_W   = 4;   // weight J_ij, two's complement
  localparam int H_W   = 4;   // bias h_i, two's complement
  localparam int ACC_W = 8;   // serial J*sigma accumulator
  localparam int IS_W  = 8;   // saturated internal signal Is
  localparam int Q_W   = 8;   // replica coupling Q(t), unsigned
  localparam int NR_W  = 4;   // n_rnd * r, two's complement (n_rnd is NR_W-1 bits)
  localparam int ALPHA = 1;   // saturation offset, fixed to 1

  // Run-time hyperparameters written by the host.
  typedef struct packed {
    logic [15:0]       trials;  // number of annealing runs
    logic [15:0]       steps;   // annealing steps per run (M)
    logic [IS_W-1:0]   i0;      // pseudo inverse temperature I0 (<= 2**(IS_W-1))
    logic [Q_W-1:0]    qmin;    // initial Q
    logic [Q_W-1:0]    qmax;    // final Q
    logic [Q_W-1:0]    beta;    // Q increment
    logic [15:0]       tau;     // steps between increments (0 treated as 1)
    logic [NR_W-2:0]   nrnd;    // noise magnitude
    logic [63:0]       seed;    // XOR-shift seed
  } hyper_t;

  // AXI4-Lite register byte offsets.
  localparam logic [7:0] REG_CTRL    = 8'h00; // W: bit0 start (self-clearing)
  localparam logic [7:0] REG_STATUS  = 8'h04; // R: bit0 busy, bit1 done
  localparam logic [7:0] REG_TRIALS  = 8'h08;
  localparam logic [7:0] REG_STEPS   = 8'h0C;
  localparam logic [7:0] REG_I0      = 8'h10;
  localparam logic [7:0] REG_QMIN    = 8'h14;
  localparam logic [7:0] REG_QMAX    = 8'h18;
  localparam logic [7:0] REG_BETA    = 8'h1C;
  localparam logic [7:0] REG_TAU     = 8'h20;
  localparam logic [7:0] REG_NRND    = 8'h24;
  localparam logic [7:0] REG_SEED_LO = 8'h28;
  localparam logic [7:0] REG_SEED_HI = 8'h2C;

  // Seed used when the host writes zero (xorshift has a fixed point at 0).
  localparam logic [63:0] SEED_DEFAULT = 64'h9E37_79B9_7F4A_7C15;

  // One step of Marsaglia's 64-bit xorshift (shift triple 13, 7, 17).
  function automatic logic [63:0] xorshift64_next(input logic [63:0] s);
    logic [63:0] x;
    x = s;
    x = x ^ (x << 13);
    x = x ^ (x >> 7);
    x = x ^ (x << 17);
    return x;
  endfunction

endpackage
