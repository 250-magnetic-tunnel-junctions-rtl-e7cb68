// anneal_sched: inverse temperature beta and transverse coupling J_T per sweep.
//
// An anneal is n_sweeps sweeps, numbered n = 0 .. n_sweeps-1. beta rises
// linearly, beta(n) = beta0 + n * beta_step, saturating at the largest Q8.8
// value; the factorisation runs start at beta0 = 0. J_T(n) for SQA is read
// from a table of Z_MAX entries that the host fills from
//     J_T(n) = -J_T0 * log(tanh(beta * (Z - n) / (Z - 1) * G_x)),
// so that the transcendental functions stay on the host. `anneal_start`
// sets n = 0, `sweep_adv` moves to n+1; `last_sweep` is high on the final
// sweep. All outputs are registered or read straight from registers.
//
// The linear beta ramp and the J_T formula are the paper's; computing J_T
// off-line into a table, and the Q8.8 formats, are this design's choices.
module anneal_sched
  import pim_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              jt_we,
  input  logic [Z_W-1:0]    jt_addr,
  input  logic [BETA_W-1:0] jt_wdata,
  input  logic [BETA_W-1:0] beta0,
  input  logic [BETA_W-1:0] beta_step,
  input  logic [Z_W:0]      n_sweeps,
  input  logic              anneal_start,
  input  logic              sweep_adv,
  output logic [Z_W-1:0]    sweep_idx,
  output logic [BETA_W-1:0] beta,
  output logic [BETA_W-1:0] jt,
  output logic              last_sweep
);

  logic [BETA_W-1:0] jt_tab [Z_MAX];
  logic [BETA_W:0]   beta_next;

  always_ff @(posedge clk) begin
    if (jt_we) jt_tab[jt_addr] <= jt_wdata;
  end

  assign beta_next = {1'b0, beta} + {1'b0, beta_step};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sweep_idx <= '0;
      beta      <= '0;
    end else if (anneal_start) begin
      sweep_idx <= '0;
      beta      <= beta0;
    end else if (sweep_adv) begin
      sweep_idx <= sweep_idx + 1'b1;
      beta      <= beta_next[BETA_W] ? '1 : beta_next[BETA_W-1:0];
    end
  end

  assign jt         = jt_tab[sweep_idx];
  assign last_sweep = ({1'b0, sweep_idx} == n_sweeps - 1'b1);

endmodule
