// pbit_drive: turns each cell's field into the V_in DAC code of its p-bit.
//
// For cell m, mapped to replica r and updating spin i, it forms the p-bit
// input of Eq. (3) and, in SQA mode, Eq. (6)-(7):
//     I = beta_r * field[m]                              (SA, PT)
//     I = beta   * field[m] + J_T * (s_{r-1,i} + s_{r+1,i})  (SQA)
// where r-1 and r+1 are the ring neighbours of r inside its group of 16
// replicas (replica ids {group, position}, position taken modulo 16).
// beta_r is the common annealing beta, or in PT mode the beta of the
// temperature replica r currently holds. I is then mapped through the
// cell's own linear calibration, V_in = mu + I / sigma, stored as the DAC
// code mu and the gain 1/sigma in DAC codes per unit input (Q8.8):
//     code = clamp(mu + (gain * I) >> 16, 0, 65535)
// beta and J_T are unsigned Q8.8. Cells not taking part in the step (no
// working MTJ, or their slot is empty) get the zero-bias code. The codes
// are registered one cycle after `start`, with `done`.
//
// The formulas for I and the per-cell linear calibration that maps every
// MTJ onto one standard sigmoid follow the paper; the fixed-point formats
// and the ring numbering of replicas are this design's choices.
module pbit_drive
  import pim_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // host write of the calibration of one cell: {gain[15:0], mu[15:0]}
  input  logic                      cal_we,
  input  logic [$clog2(N_MTJ)-1:0]  cal_addr,
  input  logic [31:0]               cal_wdata,
  // operation
  input  logic                      start,
  input  mode_e                     mode,
  input  logic [BETA_W-1:0]         beta,
  input  logic [BETA_W-1:0]         beta_rep [N_REP],
  input  logic [BETA_W-1:0]         jt,
  input  logic [DAC_W-1:0]          vin_zero_code,
  input  logic signed [FIELD_W-1:0] field    [N_MTJ],
  input  slot_t                     slot_sel [SLOTS],
  input  cell_map_t                 cell_map [N_MTJ],
  input  logic [N_MAX-1:0]          state    [N_REP],
  output logic [DAC_W-1:0]          codes    [N_MTJ],
  output logic [N_MTJ-1:0]          active,
  output logic                      done
);

  localparam int I_W = FIELD_W + BETA_W + 2;   // input I, Q.8
  localparam int P_W = I_W + GAIN_W + 1;       // gain * I, Q.16

  logic [DAC_W-1:0]  mu   [N_MTJ];
  logic [GAIN_W-1:0] gain [N_MTJ];

  function automatic logic [DAC_W-1:0] to_code(
      input logic signed [FIELD_W-1:0] f,
      input logic [BETA_W-1:0]         b,
      input logic                      sqa,
      input logic [BETA_W-1:0]         jtv,
      input logic                      s_prev,
      input logic                      s_next,
      input logic [DAC_W-1:0]          mu_c,
      input logic [GAIN_W-1:0]         gain_c);
    logic signed [I_W-1:0]   i_in;
    logic signed [I_W-1:0]   f_term;
    logic signed [P_W-1:0]   prod;
    logic signed [P_W-1:0]   code;
    i_in = I_W'(f) * $signed({1'b0, b});
    if (sqa) begin
      // (s_prev + s_next) is -2, 0 or +2
      f_term = (s_prev == s_next) ? (I_W'($signed({1'b0, jtv})) <<< 1) : '0;
      if (s_prev == s_next && !s_prev) f_term = -f_term;
      i_in = i_in + f_term;
    end
    prod = P_W'(i_in) * $signed({1'b0, gain_c});
    code = $signed({{(P_W-DAC_W){1'b0}}, mu_c}) + (prod >>> (BETA_FRAC + GAIN_FRAC));
    if (code < 0)                           return '0;
    else if (code > P_W'((1 << DAC_W) - 1)) return '1;
    else                                    return code[DAC_W-1:0];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < N_MTJ; m++) begin
        mu[m]    <= '0;
        gain[m]  <= '0;
        codes[m] <= '0;
      end
      active <= '0;
      done   <= 1'b0;
    end else begin
      done <= start;
      if (cal_we) begin
        mu[cal_addr]   <= cal_wdata[15:0];
        gain[cal_addr] <= cal_wdata[31:16];
      end
      if (start) begin
        for (int m = 0; m < N_MTJ; m++) begin
          logic [REP_W-1:0]  r, rp, rn;
          logic [SPIN_W-1:0] i;
          logic              act;
          r   = cell_map[m].rep;
          i   = slot_sel[cell_map[m].slot].spin;
          rp  = {r[REP_W-1:4], r[3:0] - 4'd1};
          rn  = {r[REP_W-1:4], r[3:0] + 4'd1};
          act = cell_map[m].en && slot_sel[cell_map[m].slot].valid;
          active[m] <= act;
          codes[m]  <= act ? to_code(field[m],
                                     (mode == MODE_PT) ? beta_rep[r] : beta,
                                     (mode == MODE_SQA), jt,
                                     state[rp][i], state[rn][i],
                                     mu[m], gain[m])
                           : vin_zero_code;
        end
      end
    end
  end

endmodule
