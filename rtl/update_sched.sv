// update_sched: which spins are updated in each step of a sweep.
//
// The host writes an update schedule of up to MAX_STEPS steps; each step
// holds SLOTS entries {valid, spin}. A sequential (Gibbs) schedule has one
// valid slot per step and one step per spin, so a sweep of N spins takes N
// steps. A cluster-parallel schedule lists the spins of one colour (an
// independent set of the coupling graph) in the slots of a step, at most
// 16 per step, so a colour with more than 16 spins spreads over several
// steps. The graph colouring itself is done by the host.
//
// `sweep_start` returns to step 0, `step_adv` moves to the next step;
// `slot_sel` always shows the current step and `last_step` is high on step
// n_steps-1. Reading is combinational from the schedule memory.
//
// The two update schemes, the limit of 16 parallel updates per step and a
// colour needing several steps when it has more than 16 spins follow the
// paper; storing the schedule as a table is this design's choice.
module update_sched
  import pim_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  logic                sched_we,
  input  logic [STEP_W-1:0]   sched_step,
  input  logic [SLOT_W-1:0]   sched_slot,
  input  slot_t               sched_wdata,
  input  logic [STEP_W:0]     n_steps,
  input  logic                sweep_start,
  input  logic                step_adv,
  output slot_t               slot_sel [SLOTS],
  output logic [STEP_W-1:0]   step_idx,
  output logic                last_step
);

  slot_t table_q [MAX_STEPS][SLOTS];

  always_ff @(posedge clk) begin
    if (sched_we) table_q[sched_step][sched_slot] <= sched_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           step_idx <= '0;
    else if (sweep_start) step_idx <= '0;
    else if (step_adv)    step_idx <= step_idx + 1'b1;
  end

  always_comb begin
    for (int k = 0; k < SLOTS; k++) slot_sel[k] = table_q[step_idx][k];
  end

  assign last_step = ({1'b0, step_idx} == n_steps - 1'b1);

endmodule
