// ssqa_scheduler: control of the spin-serial / replica-parallel annealer.
//
// A run is `trials` independent anneals of `steps` annealing steps each. In
// every step the N spins are visited in order (count_spin), and each spin
// takes N+1 cycles: in cycles count_bit = 0..N-1 the weight J_{i,count_bit}
// and sigma_{count_bit}(t) are read; in cycle count_bit = N the saturated
// signal Is_i(t), the upper replica's sigma_i(t-1) and h_i are read. One
// step therefore takes N*(N+1) cycles.
//
// The memories answer one cycle after a read, so all data-side controls
// leave this block through one register stage: acc_load/acc_en arrive with
// the J and sigma(t) words, and en_upd (with upd_addr, upd_iter, q_upd and
// the masks) arrives with Is(t) and sigma(t-1). Spin i is therefore updated
// in the first cycle of spin i+1; after the very last spin one drain cycle
// is spent before `done`.
//
// count_iter is the parity of the step and selects which delay-line BRAM is
// written. Q(t) starts at qmin and rises by beta every tau steps up to qmax
// (Q(t+tau) = Q(t) + beta). The delay BRAMs are not cleared: in the first
// step of each anneal sigma(t) and Is(t) reads are masked to +1 and 0, and in
// the first two steps sigma(t-1) is masked to +1, which sets the initial
// state sigma = +1, Is = 0.
//
// Following the paper: the N+1-cycle spin schedule, count_bit/count_spin/
// count_iter, en_read/en_upd and the Q schedule. This design's own: the
// register stage, the initial-state masks, the trial loop and the start/done
// handshake. The sparse-graph bypass of zero weights is not built; every
// spin always scans all N weights.
module ssqa_scheduler
  import ssqa_pkg::*;
#(
  parameter int N  = 800,
  parameter int AW = $clog2(N) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,       // one-cycle pulse, ignored while busy
  input  hyper_t          hyp_in,
  output hyper_t          hyp,         // hyperparameters latched at start
  output logic            busy,
  output logic            done,        // high from the end of a run to the next start
  // read side (issue cycle)
  output logic            en_read,
  output logic [AW-1:0]   countbit,
  output logic [AW-1:0]   countspin,
  output logic            countiter,
  output logic            rng_load,
  output logic            rng_en,
  // data side (one cycle after issue)
  output logic            acc_en,
  output logic            acc_load,
  output logic            mask_cur_p,  // sigma(t) forced to +1 for the products
  output logic            en_upd,
  output logic            upd_iter,
  output logic [AW-1:0]   upd_addr,
  output logic [Q_W-1:0]  q_upd,
  output logic            mask_cur_u,  // Is(t) forced to 0
  output logic            mask_prev_u, // sigma(t-1) forced to +1
  output logic            last_step_u, // update belongs to the last step of an anneal
  output logic [15:0]     trial_u,
  // observation
  output logic [Q_W-1:0]  q_cur,
  output logic [15:0]     step_cur
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_t;
  state_t state;

  logic [15:0]   trial, step, tau_cnt;
  logic [AW-1:0] spin, bitc;
  logic [Q_W-1:0] q;

  logic last_bit, last_spin, last_step, last_trial, q_tick;
  logic [Q_W:0] q_sum;
  logic [15:0]  tau_eff, steps_eff, trials_eff;

  always_comb begin
    tau_eff    = (hyp.tau    == '0) ? 16'd1 : hyp.tau;
    steps_eff  = (hyp.steps  == '0) ? 16'd1 : hyp.steps;
    trials_eff = (hyp.trials == '0) ? 16'd1 : hyp.trials;
    last_bit   = (bitc == AW'(N));
    last_spin  = (spin == AW'(N - 1));
    last_step  = (step == steps_eff - 16'd1);
    last_trial = (trial == trials_eff - 16'd1);
    q_tick     = (tau_cnt == tau_eff - 16'd1);
    q_sum      = {1'b0, q} + {1'b0, hyp.beta};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      hyp     <= '0;
      done    <= 1'b0;
      trial   <= '0;
      step    <= '0;
      tau_cnt <= '0;
      spin    <= '0;
      bitc    <= '0;
      q       <= '0;
    end else begin
      case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          hyp     <= hyp_in;
          done    <= 1'b0;
          trial   <= '0;
          step    <= '0;
          tau_cnt <= '0;
          spin    <= '0;
          bitc    <= '0;
          q       <= hyp_in.qmin;
        end
        S_RUN: begin
          if (!last_bit) bitc <= bitc + 1'b1;
          else begin
            bitc <= '0;
            if (!last_spin) spin <= spin + 1'b1;
            else begin
              spin <= '0;
              if (!last_step) begin
                step <= step + 1'b1;
                if (q_tick) begin
                  tau_cnt <= '0;
                  q <= (q_sum > {1'b0, hyp.qmax}) ? hyp.qmax : q_sum[Q_W-1:0];
                end else begin
                  tau_cnt <= tau_cnt + 1'b1;
                end
              end else begin
                step    <= '0;
                tau_cnt <= '0;
                q       <= hyp.qmin;
                if (!last_trial) trial <= trial + 1'b1;
                else             state <= S_DRAIN;
              end
            end
          end
        end
        S_DRAIN: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Issue-side outputs.
  assign busy      = (state != S_IDLE);
  assign en_read   = (state == S_RUN);
  assign countbit  = bitc;
  assign countspin = spin;
  assign countiter = step[0];
  assign rng_load  = (state == S_IDLE) && start;
  assign rng_en    = (state != S_IDLE);
  assign q_cur     = q;
  assign step_cur  = step;

  // Data-side register stage.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_en      <= 1'b0;
      acc_load    <= 1'b0;
      mask_cur_p  <= 1'b0;
      en_upd      <= 1'b0;
      upd_iter    <= 1'b0;
      upd_addr    <= '0;
      q_upd       <= '0;
      mask_cur_u  <= 1'b0;
      mask_prev_u <= 1'b0;
      last_step_u <= 1'b0;
      trial_u     <= '0;
    end else begin
      acc_en      <= (state == S_RUN) && !last_bit;
      acc_load    <= (state == S_RUN) && (bitc == '0);
      mask_cur_p  <= (step == '0);
      en_upd      <= (state == S_RUN) && last_bit;
      upd_iter    <= step[0];
      upd_addr    <= spin;
      q_upd       <= q;
      mask_cur_u  <= (step == '0);
      mask_prev_u <= (step <= 16'd1);
      last_step_u <= last_step;
      trial_u     <= trial;
    end
  end

  // An update is never issued in the same cycle as a product.
  assert property (@(posedge clk) disable iff (!rst_n) !(en_upd && acc_en));

  // The Is register is IS_W bits wide, so -I0 .. I0-1 only fits for I0 up to 2**(IS_W-1).
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && state == S_IDLE) |-> hyp_in.i0 <= IS_W'(2 ** (IS_W - 1)));

endmodule
