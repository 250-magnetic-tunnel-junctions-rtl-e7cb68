// energy_track: Ising energy of every replica, and the best replica.
//
// Energies are kept relative to the all -1 start state, E_r - E(all -1),
// which is enough to rank replicas and to compare neighbours for parallel
// tempering. When spin i of a replica changes from s_old to s_new, Eq. (1)
// changes by
//     dE = -(s_new - s_old) * (h_i + sum_{j != i} J_ij s_j),
// and the bracket is exactly the field the p-bit was driven with, so no
// second matrix product is needed. Spins updated together in one step are
// independent (same colour), so their changes add up exactly.
//
// `upd_start` captures, for every cell, whether it was active, its old and
// new spin and its field; the cells are then visited one per cycle and dE
// added to their replica's energy (N_MTJ + 1 cycles, then `upd_done`).
// `best_start` scans the replicas marked in `rep_valid`, one per cycle, and
// reports the lowest energy and its replica with `best_done`. `clear`
// zeroes all energies.
//
// The paper selects the best replica by its final energy; the incremental
// bookkeeping and the serial scans are this design's choices.
module energy_track
  import pim_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      clear,
  input  logic                      upd_start,
  input  logic [N_MTJ-1:0]          upd_active,
  input  logic [N_MTJ-1:0]          s_old,
  input  logic [N_MTJ-1:0]          s_new,
  input  logic signed [FIELD_W-1:0] field    [N_MTJ],
  input  cell_map_t                 cell_map [N_MTJ],
  output logic                      upd_done,
  input  logic                      best_start,
  input  logic [N_REP-1:0]          rep_valid,
  output logic [REP_W-1:0]          best_rep,
  output logic signed [E_W-1:0]     best_energy,
  output logic                      best_done,
  output logic signed [E_W-1:0]     energy   [N_REP],
  output logic                      busy
);

  localparam int M_W = $clog2(N_MTJ);

  logic                      upd_run, best_run, best_found;
  logic [M_W:0]              m;
  logic [REP_W:0]            r;
  logic [N_MTJ-1:0]          chg_q, up_q;
  logic signed [FIELD_W-1:0] field_q [N_MTJ];

  assign busy = upd_run | best_run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      upd_run     <= 1'b0;
      best_run    <= 1'b0;
      best_found  <= 1'b0;
      upd_done    <= 1'b0;
      best_done   <= 1'b0;
      m           <= '0;
      r           <= '0;
      chg_q       <= '0;
      up_q        <= '0;
      best_rep    <= '0;
      best_energy <= '0;
      for (int k = 0; k < N_REP; k++) energy[k] <= '0;
      for (int k = 0; k < N_MTJ; k++) field_q[k] <= '0;
    end else begin
      upd_done  <= 1'b0;
      best_done <= 1'b0;
      if (clear) begin
        for (int k = 0; k < N_REP; k++) energy[k] <= '0;
      end
      // ---- incremental update ----
      if (upd_start && !busy) begin
        chg_q   <= upd_active & (s_old ^ s_new);
        up_q    <= s_new;
        field_q <= field;
        m       <= '0;
        upd_run <= 1'b1;
      end else if (upd_run) begin
        if (chg_q[m[M_W-1:0]]) begin
          // -1 -> +1 lowers E by 2*field, +1 -> -1 raises it
          if (up_q[m[M_W-1:0]])
            energy[cell_map[m[M_W-1:0]].rep] <= energy[cell_map[m[M_W-1:0]].rep]
                                               - (E_W'(field_q[m[M_W-1:0]]) <<< 1);
          else
            energy[cell_map[m[M_W-1:0]].rep] <= energy[cell_map[m[M_W-1:0]].rep]
                                               + (E_W'(field_q[m[M_W-1:0]]) <<< 1);
        end
        if (m == (M_W+1)'(N_MTJ - 1)) begin
          upd_run  <= 1'b0;
          upd_done <= 1'b1;
        end
        m <= m + 1'b1;
      end
      // ---- best replica search ----
      if (best_start && !busy) begin
        r          <= '0;
        best_run   <= 1'b1;
        best_found <= 1'b0;
      end else if (best_run) begin
        if (rep_valid[r[REP_W-1:0]] &&
            (!best_found || energy[r[REP_W-1:0]] < best_energy)) begin
          best_found  <= 1'b1;
          best_rep    <= r[REP_W-1:0];
          best_energy <= energy[r[REP_W-1:0]];
        end
        if (r == (REP_W+1)'(N_REP - 1)) begin
          best_run  <= 1'b0;
          best_done <= 1'b1;
        end
        r <= r + 1'b1;
      end
    end
  end

  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
    (upd_start || best_start) |-> !busy);

endmodule
