// spin_state: the spin configuration of every replica (the N x R matrix).
//
// Bit state[r][i] is spin i of replica r: 1 stands for +1, 0 for -1.
// `clear` sets every spin of every replica to -1, the common start state
// of an anneal (energy_track counts energies from that state). On
// `wr_en`, every cell m marked in `active` writes its new p-bit value
// `spin_up[m]` to spin slot_sel[slot].spin of its replica. In cluster mode
// the 16 cells of a replica write 16 different spins in the same cycle.
// The host reads one 32-bit word of a replica through `rd_rep`/`rd_word`.
//
// Holding all replicas' states on chip follows the paper's use of the FPGA
// for the matrix products; the all -1 start state is this design's choice.
module spin_state
  import pim_pkg::*;
(
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            clear,
  input  logic                            wr_en,
  input  logic [N_MTJ-1:0]                active,
  input  logic [N_MTJ-1:0]                spin_up,
  input  cell_map_t                       cell_map [N_MTJ],
  input  slot_t                           slot_sel [SLOTS],
  output logic [N_MAX-1:0]                state    [N_REP],
  input  logic [REP_W-1:0]                rd_rep,
  input  logic [$clog2(N_MAX/32)-1:0]     rd_word,
  output logic [31:0]                     rd_data
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < N_REP; r++) state[r] <= '0;
    end else if (clear) begin
      for (int r = 0; r < N_REP; r++) state[r] <= '0;
    end else if (wr_en) begin
      for (int m = 0; m < N_MTJ; m++)
        if (active[m])
          state[cell_map[m].rep][slot_sel[cell_map[m].slot].spin] <= spin_up[m];
    end
  end

  assign rd_data = state[rd_rep][32*rd_word +: 32];

endmodule
