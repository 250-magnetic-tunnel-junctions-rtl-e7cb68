// pt_swap: parallel-tempering exchanges between replicas.
//
// Replicas are taken in groups of 16 by their id {group, position}. Each
// group runs a ladder of 16 temperatures whose betas the host writes in
// increasing order (index 0 hottest, index 15 coldest). Instead of moving
// whole spin configurations, replicas exchange temperatures: rep_at[g][t]
// is the replica that holds temperature t in group g, and `beta_rep[r]` the
// beta replica r runs at now.
//
// After a sweep, `start` walks every group and every neighbouring pair of
// temperatures (t, t+1), one pair per cycle, 16*15 cycles in all. With the
// deterministic rule, the pair exchanges when the colder replica has the
// higher energy, so the exchange never raises the energy held at the lower
// temperature. `init` restores the identity assignment.
//
// Exchanging replicas after a sweep and the deterministic criterion are
// from the paper, which also names the Metropolis criterion
// p = min(1, exp(-beta dE)); that random criterion is not built here. The
// pair order and exchanging temperatures rather than states are this
// design's choices.
module pt_swap
  import pim_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ladder_we,
  input  logic [3:0]               ladder_addr,
  input  logic [BETA_W-1:0]        ladder_wdata,
  input  logic                     init,
  input  logic                     start,
  input  logic signed [E_W-1:0]    energy   [N_REP],
  output logic [BETA_W-1:0]        beta_rep [N_REP],
  output logic                     busy,
  output logic                     done,
  output logic [31:0]              swap_count
);

  localparam int N_GRP = N_REP / 16;
  localparam int G_W   = $clog2(N_GRP);

  logic [BETA_W-1:0] ladder  [16];
  logic [REP_W-1:0]  rep_at  [N_GRP][16];
  logic [3:0]        temp_of [N_REP];
  logic [G_W-1:0]    g;
  logic [3:0]        t;
  logic [REP_W-1:0]  ra, rb;

  assign ra = rep_at[g][t];
  assign rb = rep_at[g][t + 4'd1];

  always_comb begin
    for (int r = 0; r < N_REP; r++) beta_rep[r] = ladder[temp_of[r]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      g          <= '0;
      t          <= '0;
      swap_count <= '0;
      for (int k = 0; k < 16; k++) ladder[k] <= '0;
      for (int r = 0; r < N_REP; r++) begin
        rep_at[r / 16][r % 16] <= REP_W'(r);
        temp_of[r]             <= 4'(r % 16);
      end
    end else begin
      done <= 1'b0;
      if (ladder_we) ladder[ladder_addr] <= ladder_wdata;
      if (init) begin
        busy       <= 1'b0;
        swap_count <= '0;
        for (int r = 0; r < N_REP; r++) begin
          rep_at[r / 16][r % 16] <= REP_W'(r);
          temp_of[r]             <= 4'(r % 16);
        end
      end else if (start && !busy) begin
        busy <= 1'b1;
        g    <= '0;
        t    <= '0;
      end else if (busy) begin
        // ra holds the hotter temperature t, rb the colder t+1
        if (energy[rb] > energy[ra]) begin
          rep_at[g][t]        <= rb;
          rep_at[g][t + 4'd1] <= ra;
          temp_of[ra]         <= t + 4'd1;
          temp_of[rb]         <= t;
          swap_count          <= swap_count + 1'b1;
        end
        if (t == 4'd14) begin
          t <= '0;
          if (g == G_W'(N_GRP - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
          g <= g + 1'b1;
        end else begin
          t <= t + 1'b1;
        end
      end
    end
  end

endmodule
