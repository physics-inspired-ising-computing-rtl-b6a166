// anneal_ctrl -- linear simulated-annealing schedule for one trial.
//
// A one-cycle start pulse begins a trial: run goes high and beta takes
// BETA_START. Every HOLD_CYCLES master cycles beta rises by BETA_STEP; after
// N_STEPS values the trial ends, run falls (the p-bits freeze and their
// states can be read) and done pulses for one cycle. start is ignored while
// busy. beta is unsigned with 4 fraction bits (pbit_pkg::beta_t).
// Defaults follow the paper: beta = 0.5 .. 7.0 in steps of 0.5 (14 values),
// 937 sweeps per value. A sweep takes on average 32 master cycles (the ten
// clocks average 9.375 MHz against the 300 MHz master clock), so each value
// is held 937*32 = 29984 cycles and a trial lasts 1.399 ms, the paper's
// 1.4 ms. Timing the steps by master cycles rather than counting sweeps is
// this design's choice.
module anneal_ctrl
  import pbit_pkg::*;
#(
  parameter beta_t       BETA_START  = beta_t'(8),   // 0.5
  parameter beta_t       BETA_STEP   = beta_t'(8),   // 0.5
  parameter int unsigned N_STEPS     = 14,
  parameter int unsigned HOLD_CYCLES = 29984
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  start,
  output logic  run,
  output beta_t beta,
  output logic  busy,
  output logic  done
);
  localparam int HW = $clog2(HOLD_CYCLES + 1);
  localparam int SW = $clog2(N_STEPS + 1);

  logic [HW-1:0] hold_cnt;
  logic [SW-1:0] step_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      beta     <= BETA_START;
      hold_cnt <= '0;
      step_cnt <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy     <= 1'b1;
          beta     <= BETA_START;
          hold_cnt <= '0;
          step_cnt <= '0;
        end
      end else if (hold_cnt == HW'(HOLD_CYCLES - 1)) begin
        hold_cnt <= '0;
        if (step_cnt == SW'(N_STEPS - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          step_cnt <= step_cnt + 1'b1;
          beta     <= beta + BETA_STEP;
        end
      end else begin
        hold_cnt <= hold_cnt + 1'b1;
      end
    end
  end

  assign run = busy;

  // done is a single-cycle pulse that ends a trial; beta never leaves the schedule
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);
  a_done_ends:  assert property (@(posedge clk) disable iff (!rst_n) done |-> !busy);
  a_beta_range: assert property (@(posedge clk) disable iff (!rst_n)
                  busy |-> (beta >= BETA_START &&
                            32'(beta) <= 32'(BETA_START) + (N_STEPS - 1) * 32'(BETA_STEP)));
endmodule
