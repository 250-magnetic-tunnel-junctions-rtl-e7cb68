// pim_seq: the step, sweep and anneal sequencer of the Ising machine.
//
// One step generates one new value for every p-bit taking part in it, in
// the order the paper gives for an STT-MTJ p-bit:
//   1. reset: V_in DACs to zero and V_dd negative, held t_reset cycles,
//      which puts every MTJ deterministically in the antiparallel state;
//   2. zero bias: V_dd to zero while the field engine computes the inputs
//      (matrix multiplication) and pbit_drive turns them into V_in codes;
//   3. V_in codes written to the DACs (still at zero bias);
//   4. perturb: V_dd positive, held t_perturb cycles, so that each MTJ
//      switches to the parallel state with a probability set by its V_in;
//   5. read: the ADCs sample V_out (V_dd still positive), the thresholds
//      give the new spins, the energies are updated and the spins written.
// A step then waits until step_period cycles have passed since its start,
// so steps follow each other at a fixed rate (the paper's 12.5 kHz at
// 8000 cycles of a 100 MHz clock). A step that needs longer than the
// period starts the next one at once and counts an overrun.
// After the last step of a sweep, PT mode runs the replica exchange; the
// anneal moves to the next sweep (next beta and J_T) inside the same
// period, so the step rate holds across sweeps. After the last sweep the
// best replica is searched and `done` pulses.
//
// The reset / zero-bias / perturb / sample order and the fixed step rate
// are from the paper. Reading while V_dd is still positive, the hold
// times, the overrun policy and the handshakes with the other blocks
// (start pulse, done pulse) are this design's choices.
module pim_seq
  import pim_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  mode_e       mode,
  input  logic [15:0] t_reset,
  input  logic [15:0] t_perturb,
  input  logic [15:0] step_period,
  // status of the other blocks
  input  logic        last_step,
  input  logic        last_sweep,
  input  logic        vin_done,
  input  logic        vdd_done,
  input  logic        field_done,
  input  logic        drive_done,
  input  logic        adc_done,
  input  logic        cmp_done,
  input  logic        energy_done,
  input  logic        pt_done,
  input  logic        best_done,
  // commands
  output logic        clear,        // start of anneal: spins, energies, schedules
  output logic        sweep_start,  // step index back to 0
  output logic        sweep_adv,    // next sweep of the anneal
  output logic        step_adv,     // next step of the sweep
  output logic        vin_start,
  output logic        vin_zero,     // 1: V_in DACs get the zero code
  output logic        vdd_start,
  output vdd_sel_e    vdd_sel,
  output logic        field_start,
  output logic        drive_start,
  output logic        adc_start,
  output logic        energy_start,
  output logic        spin_write,
  output logic        pt_start,
  output logic        best_start,
  output logic        busy,
  output logic        done,
  output logic [31:0] step_count,
  output logic [31:0] sweep_count,
  output logic [31:0] overrun_count
);

  typedef enum logic [4:0] {
    P_IDLE, P_INIT, P_RESET, P_W_RESET, P_HOLD_RESET, P_W_ZERO, P_W_DRIVE,
    P_W_VIN, P_W_PERT, P_HOLD_PERT, P_W_ADC, P_W_CMP, P_W_ENERGY, P_POST,
    P_W_PT, P_PAD, P_W_BEST
  } phase_e;

  phase_e      ph;
  logic [15:0] hold;
  logic [15:0] pc;          // cycles since the current step began
  logic        vin_ok, vdd_ok, field_ok;

  assign busy = (ph != P_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph            <= P_IDLE;
      hold          <= '0;
      pc            <= '0;
      vin_ok        <= 1'b0;
      vdd_ok        <= 1'b0;
      field_ok      <= 1'b0;
      clear         <= 1'b0;
      sweep_start   <= 1'b0;
      sweep_adv     <= 1'b0;
      step_adv      <= 1'b0;
      vin_start     <= 1'b0;
      vin_zero      <= 1'b1;
      vdd_start     <= 1'b0;
      vdd_sel       <= VDD_ZERO;
      field_start   <= 1'b0;
      drive_start   <= 1'b0;
      adc_start     <= 1'b0;
      energy_start  <= 1'b0;
      spin_write    <= 1'b0;
      pt_start      <= 1'b0;
      best_start    <= 1'b0;
      done          <= 1'b0;
      step_count    <= '0;
      sweep_count   <= '0;
      overrun_count <= '0;
    end else begin
      clear        <= 1'b0;
      sweep_start  <= 1'b0;
      sweep_adv    <= 1'b0;
      step_adv     <= 1'b0;
      vin_start    <= 1'b0;
      vdd_start    <= 1'b0;
      field_start  <= 1'b0;
      drive_start  <= 1'b0;
      adc_start    <= 1'b0;
      energy_start <= 1'b0;
      spin_write   <= 1'b0;
      pt_start     <= 1'b0;
      best_start   <= 1'b0;
      done         <= 1'b0;
      pc           <= (pc == '1) ? pc : pc + 1'b1;
      if (vin_done)   vin_ok   <= 1'b1;
      if (vdd_done)   vdd_ok   <= 1'b1;
      if (field_done) field_ok <= 1'b1;

      unique case (ph)
        P_IDLE: if (start) begin
          clear         <= 1'b1;
          sweep_start   <= 1'b1;
          step_count    <= '0;
          sweep_count   <= '0;
          overrun_count <= '0;
          ph            <= P_INIT;
        end
        P_INIT: ph <= P_RESET;
        // 1. reset pulse
        P_RESET: begin
          pc        <= 16'd1;
          vin_zero  <= 1'b1;
          vin_start <= 1'b1;
          vdd_sel   <= VDD_NEG;
          vdd_start <= 1'b1;
          vin_ok    <= 1'b0;
          vdd_ok    <= 1'b0;
          ph        <= P_W_RESET;
        end
        P_W_RESET: if (vin_ok && vdd_ok) begin
          hold <= t_reset;
          ph   <= P_HOLD_RESET;
        end
        // 2. zero bias and compute
        P_HOLD_RESET: if (hold <= 16'd1) begin
          vdd_sel     <= VDD_ZERO;
          vdd_start   <= 1'b1;
          vdd_ok      <= 1'b0;
          field_start <= 1'b1;
          field_ok    <= 1'b0;
          ph          <= P_W_ZERO;
        end else begin
          hold <= hold - 1'b1;
        end
        P_W_ZERO: if (vdd_ok && field_ok) begin
          drive_start <= 1'b1;
          ph          <= P_W_DRIVE;
        end
        // 3. V_in codes
        P_W_DRIVE: if (drive_done) begin
          vin_zero  <= 1'b0;
          vin_start <= 1'b1;
          vin_ok    <= 1'b0;
          ph        <= P_W_VIN;
        end
        // 4. perturb pulse
        P_W_VIN: if (vin_ok) begin
          vdd_sel   <= VDD_POS;
          vdd_start <= 1'b1;
          vdd_ok    <= 1'b0;
          ph        <= P_W_PERT;
        end
        P_W_PERT: if (vdd_ok) begin
          hold <= t_perturb;
          ph   <= P_HOLD_PERT;
        end
        // 5. read and update
        P_HOLD_PERT: if (hold <= 16'd1) begin
          adc_start <= 1'b1;
          ph        <= P_W_ADC;
        end else begin
          hold <= hold - 1'b1;
        end
        P_W_ADC: if (adc_done) ph <= P_W_CMP;
        P_W_CMP: if (cmp_done) begin
          energy_start <= 1'b1;
          ph           <= P_W_ENERGY;
        end
        P_W_ENERGY: if (energy_done) begin
          spin_write <= 1'b1;
          step_count <= step_count + 1'b1;
          ph         <= P_POST;
        end
        P_POST: begin
          if (last_step && mode == MODE_PT) begin
            pt_start <= 1'b1;
            ph       <= P_W_PT;
          end else begin
            ph <= P_PAD;
          end
          if (pc > step_period - 16'd1) overrun_count <= overrun_count + 1'b1;
        end
        P_W_PT: if (pt_done) ph <= P_PAD;
        // wait out the step period
        P_PAD: if (pc >= step_period - 16'd1) begin
          if (!last_step) begin
            step_adv <= 1'b1;
            ph       <= P_RESET;
          end else begin
            sweep_count <= sweep_count + 1'b1;
            if (last_sweep) begin
              best_start <= 1'b1;
              ph         <= P_W_BEST;
            end else begin
              sweep_adv   <= 1'b1;
              sweep_start <= 1'b1;
              ph          <= P_RESET;
            end
          end
        end
        P_W_BEST: if (best_done) begin
          done <= 1'b1;
          ph   <= P_IDLE;
        end
        default: ph <= P_IDLE;
      endcase
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
