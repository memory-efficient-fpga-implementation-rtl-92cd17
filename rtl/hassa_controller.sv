// hassa_controller: temperature schedule, run control and result-memory
// control of the HA-SSA processor.
//
// Temperature: within one iteration the pseudo-inverse temperature I0
// starts at I0min and is held for tau enabled cycles per step; after each
// step it is multiplied by 2^beta (a left shift by beta, clamped to I0max).
// The iteration ends after the tau cycles spent at I0max; the next one starts
// again at I0min. With the published hyperparameters (I0min 1, I0max 32,
// beta 1, tau 100) an iteration is 6 steps = 600 cycles, and mshot = 150
// iterations make one 90,000-cycle trial. The run lasts a whole number of
// iterations (mshot per trial, trials trials), never a cut-off iteration.
//
// Storing (the memory saving of HA-SSA): only spin vectors produced while
// I0 = I0max are written to the result FIFO, tau vectors per iteration.
// The spin-gate array has two register stages (Itanh, then m), so the
// controller carries a "sampled at I0max" tag through two matching stages;
// the FIFO write strobe is en & tag2 and takes the m vector that the array
// holds before that enabled edge overwrites it. After the last iteration of
// a trial two drain cycles flush the pipeline, then the array is cleared
// (one clr cycle) before the next trial.
//
// Back-pressure: if the FIFO is full when a vector must be written, en is
// held low (stall) until the host has read an entry; no result is lost and
// no annealing step is skipped. Reads: fifo_rd = res_req & !fifo_empty.
//
// Interface: start (pulse, in IDLE) latches hp_in and begins; busy is high
// from then until done, a one-cycle pulse after the last trial. i0, nrnd,
// en, clr drive the spin-gate array (en also steps the random generator).
// Follows the published text for the schedule, the shift-based update, the
// iteration-based duration and the I0max-only write; the two-stage tag, the
// drain/clear sequence, the stall and the clamping are this design's choice.
// tau, mshot and trials of 0 behave as 1.
module hassa_controller
  import hassa_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  hyper_t             hp_in,
  input  logic               fifo_full,
  input  logic               fifo_empty,
  input  logic               res_req,
  output logic               en,
  output logic               clr,
  output i0_t                i0,
  output nrnd_t              nrnd,
  output logic               fifo_wr,
  output logic               fifo_rd,
  output logic               stall,
  output logic               busy,
  output logic               done,
  output logic [ITER_W-1:0]  iter_idx,
  output logic [TRIAL_W-1:0] trial_idx
);

  typedef enum logic [2:0] {
    S_IDLE  = 3'd0,
    S_CLEAR = 3'd1,
    S_RUN   = 3'd2,
    S_DRAIN = 3'd3
  } state_e;

  state_e            state;
  hyper_t            hp;
  logic [TAU_W-1:0]  tau_cnt;
  logic              drain_cnt;
  logic              tag1, tag2;
  logic              active;
  logic              at_max;
  logic              step_last, iter_last, trial_last;
  logic [I0_W+7:0]   i0_shift;
  i0_t               i0_next;

  assign active = (state == S_RUN) || (state == S_DRAIN);
  assign at_max = (i0 >= hp.i0max);
  assign stall  = active && tag2 && fifo_full;
  assign en     = active && !stall;
  assign clr    = (state == S_CLEAR);
  assign fifo_wr = en && tag2;
  assign fifo_rd = res_req && !fifo_empty;
  assign busy   = (state != S_IDLE);
  assign nrnd   = hp.nrnd;

  assign step_last  = (32'(tau_cnt) + 1 >= 32'(hp.tau));
  assign iter_last  = (32'(iter_idx) + 1 >= 32'(hp.mshot));
  assign trial_last = (32'(trial_idx) + 1 >= 32'(hp.trials));

  // I0(t + tau) = 2^beta * I0(t), clamped to I0max.
  always_comb begin
    i0_shift = (I0_W+8)'(i0) << hp.beta;
    i0_next  = (i0_shift >= (I0_W+8)'(hp.i0max)) ? hp.i0max : i0_shift[I0_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      hp        <= '0;
      i0        <= '0;
      tau_cnt   <= '0;
      iter_idx  <= '0;
      trial_idx <= '0;
      drain_cnt <= 1'b0;
      tag1      <= 1'b0;
      tag2      <= 1'b0;
      done      <= 1'b0;
    end else begin
      done <= 1'b0;
      if (en) begin
        tag1 <= (state == S_RUN) && at_max;
        tag2 <= tag1;
      end
      unique case (state)
        S_IDLE: begin
          if (start) begin
            hp        <= hp_in;
            trial_idx <= '0;
            state     <= S_CLEAR;
          end
        end
        S_CLEAR: begin
          i0        <= hp.i0min;
          tau_cnt   <= '0;
          iter_idx  <= '0;
          tag1      <= 1'b0;
          tag2      <= 1'b0;
          state     <= S_RUN;
        end
        S_RUN: begin
          if (en) begin
            if (!step_last) begin
              tau_cnt <= tau_cnt + 1'b1;
            end else begin
              tau_cnt <= '0;
              if (!at_max) begin
                i0 <= i0_next;
              end else begin
                i0 <= hp.i0min;
                if (iter_last) begin
                  drain_cnt <= 1'b0;
                  state     <= S_DRAIN;
                end else begin
                  iter_idx <= iter_idx + 1'b1;
                end
              end
            end
          end
        end
        S_DRAIN: begin
          if (en) begin
            drain_cnt <= 1'b1;
            if (drain_cnt) begin
              if (trial_last) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                trial_idx <= trial_idx + 1'b1;
                state     <= S_CLEAR;
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_write_when_full: assert property (@(posedge clk) disable iff (!rst_n)
    !(fifo_wr && fifo_full)) else $error("hassa_controller: FIFO write while full");
  a_write_only_active: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_wr |-> active) else $error("hassa_controller: FIFO write outside a run");

endmodule
