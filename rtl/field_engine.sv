// field_engine: the matrix multiplication of Eq. (3), for all MTJs at once.
//
// For every MTJ cell m it computes
//     field[m] = h_i + sum_{j != i} J_ij * s_{r,j}
// where i is the spin cell m updates in the current step (the spin of the
// schedule slot the cell is mapped to) and r is the replica the cell
// belongs to. The coupling matrix J and the biases h are held in on-chip
// memories written by the host.
//
// How it works: after `start`, a column counter j runs from 0 to
// n_spins-1. Each cycle one J entry per schedule slot, J[spin_k][j], is
// read (one read port per slot, since all cells mapped to one slot share a
// row) and every cell adds it to its accumulator with the sign of its own
// replica's spin s_{r,j}. In sequential mode all replicas update the same
// spin, so one row is broadcast to every cell; in cluster mode up to 16
// rows are read side by side. The result is ready n_spins + 2 cycles after
// `start`, marked by a one-cycle `done`. `slot_sel`, `cell_map` and `state`
// must hold still while `busy`.
//
// The paper says only that the FPGA performs this matrix multiplication;
// the column-serial accumulation, the memory organisation and the number
// widths are this design's own.
module field_engine
  import pim_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // host writes
  input  logic                      j_we,
  input  logic [2*SPIN_W-1:0]       j_addr,     // {i, j}
  input  logic signed [J_W-1:0]     j_wdata,
  input  logic                      h_we,
  input  logic [SPIN_W-1:0]         h_addr,
  input  logic signed [H_W-1:0]     h_wdata,
  // operation
  input  logic                      start,
  input  logic [SPIN_W:0]           n_spins,
  input  slot_t                     slot_sel [SLOTS],
  input  cell_map_t                 cell_map [N_MTJ],
  input  logic [N_MAX-1:0]          state    [N_REP],
  output logic signed [FIELD_W-1:0] field    [N_MTJ],
  output logic                      busy,
  output logic                      done
);

  logic signed [J_W-1:0] jmem [N_MAX*N_MAX];
  logic signed [H_W-1:0] hmem [N_MAX];

  logic                  run, v_q;
  logic [SPIN_W:0]       jcnt;
  logic [SPIN_W-1:0]     j_q;
  logic signed [J_W-1:0] jrow_q [SLOTS];

  assign busy = run | v_q;

  always_ff @(posedge clk) begin
    if (j_we) jmem[j_addr] <= j_wdata;
    if (h_we) hmem[h_addr] <= h_wdata;
  end

  // column read, one port per slot
  always_ff @(posedge clk) begin
    for (int k = 0; k < SLOTS; k++)
      jrow_q[k] <= jmem[{slot_sel[k].spin, jcnt[SPIN_W-1:0]}];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      v_q  <= 1'b0;
      jcnt <= '0;
      j_q  <= '0;
      done <= 1'b0;
      for (int m = 0; m < N_MTJ; m++) field[m] <= '0;
    end else begin
      done <= 1'b0;
      v_q  <= 1'b0;
      if (start && !busy) begin
        jcnt <= '0;
        run  <= (n_spins != '0);
        done <= (n_spins == '0);
        for (int m = 0; m < N_MTJ; m++)
          field[m] <= FIELD_W'(hmem[slot_sel[cell_map[m].slot].spin]);
      end else if (run) begin
        j_q  <= jcnt[SPIN_W-1:0];
        v_q  <= 1'b1;
        jcnt <= jcnt + 1'b1;
        if (jcnt == n_spins - 1'b1) run <= 1'b0;
      end
      if (v_q) begin
        for (int m = 0; m < N_MTJ; m++) begin
          if (j_q != slot_sel[cell_map[m].slot].spin) begin
            if (state[cell_map[m].rep][j_q])
              field[m] <= field[m] + FIELD_W'(jrow_q[cell_map[m].slot]);
            else
              field[m] <= field[m] - FIELD_W'(jrow_q[cell_map[m].slot]);
          end
        end
        if (!run) done <= 1'b1;
      end
    end
  end

  a_no_restart: assert property (@(posedge clk) disable iff (!rst_n)
    start |-> !busy);

endmodule
