// tb_energy_track: self-checking test of energy_track.
//
// A small random Ising problem (J symmetric with zero diagonal, h) and
// random replica states are kept here. Each step picks spins for cells
// (sequential-style: one spin per replica; cluster-style: several
// non-interacting spins per replica), computes their true fields from the
// current state, draws new spin values and feeds the update to the block.
// After every step each replica's tracked energy must equal
// E(s) - E(all -1), with E(s) = -sum_{i<j} J_ij s_i s_j - sum_i h_i s_i
// recomputed from scratch. The best-replica search must return the lowest
// energy among the valid replicas, and the update must take N_MTJ + 1
// cycles, the search N_REP + 1.
module tb_energy_track;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic                      clear = 0, upd_start = 0, best_start = 0;
  logic [N_MTJ-1:0]          upd_active = '0, s_old = '0, s_new = '0;
  logic signed [FIELD_W-1:0] field [N_MTJ];
  cell_map_t                 cell_map [N_MTJ];
  logic                      upd_done, best_done, busy;
  logic [N_REP-1:0]          rep_valid = '0;
  logic [REP_W-1:0]          best_rep;
  logic signed [E_W-1:0]     best_energy;
  logic signed [E_W-1:0]     energy [N_REP];

  energy_track dut (.clk, .rst_n, .clear, .upd_start, .upd_active, .s_old, .s_new, .field,
    .cell_map, .upd_done, .best_start, .rep_valid, .best_rep, .best_energy, .best_done,
    .energy, .busy);

  localparam int N = 24;
  localparam int R = 32;   // replicas used
  int jm [N][N];
  int hv [N];
  bit st [R][N];

  function automatic longint e_abs(input int r, input bit all_down);
    longint e;
    e = 0;
    for (int i = 0; i < N; i++) begin
      int si;
      si = all_down ? -1 : (st[r][i] ? 1 : -1);
      e -= longint'(hv[i]) * si;
      for (int j = i + 1; j < N; j++) begin
        int sj;
        sj = all_down ? -1 : (st[r][j] ? 1 : -1);
        e -= longint'(jm[i][j]) * si * sj;
      end
    end
    return e;
  endfunction

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < N_MTJ; m++) begin field[m] = '0; cell_map[m] = '0; end
    for (int i = 0; i < N; i++) begin
      hv[i] = int'($urandom % 201) - 100;
      jm[i][i] = 0;
      for (int j = i + 1; j < N; j++) begin
        jm[i][j] = int'($urandom % 201) - 100;
        jm[j][i] = jm[i][j];
      end
    end
    for (int r = 0; r < R; r++) for (int i = 0; i < N; i++) st[r][i] = 0;
    for (int r = 0; r < R; r++) rep_valid[r] = 1'b1;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int it = 0; it < 60; it++) begin
      int cyc;
      bit ok;
      int spin_of [N_MTJ];
      upd_active = '0;
      for (int m = 0; m < N_MTJ; m++) begin
        int r, i, f;
        r = m % R;
        // cells m and m+R.. of a replica take spins i, i+?; keep spins of
        // one replica distinct and non-interacting by using at most one
        // cell per replica on odd iterations, several on even ones with
        // the couplings between them ignored (they are set apart below)
        i = (it % 2 == 1) ? int'($urandom % N) : ((m / R) * 3 + it) % N;
        spin_of[m] = i;
        cell_map[m].en   = 1'b1;
        cell_map[m].rep  = REP_W'(r);
        cell_map[m].slot = '0;
        upd_active[m] = (it % 2 == 1) ? (m < R) : (m < 8 * R);
      end
      // fields from the state before the step
      for (int m = 0; m < N_MTJ; m++) begin
        int f;
        f = hv[spin_of[m]];
        for (int j = 0; j < N; j++)
          if (j != spin_of[m]) f += st[m % R][j] ? jm[spin_of[m]][j] : -jm[spin_of[m]][j];
        field[m] = FIELD_W'(f);
        s_old[m] = st[m % R][spin_of[m]];
        s_new[m] = 1'($urandom);
      end
      // cluster-style steps: make the updated spins of a replica independent
      if (it % 2 == 0) begin
        for (int r = 0; r < R; r++)
          for (int a = 0; a < 8; a++)
            for (int b = 0; b < 8; b++)
              if (a != b && jm[spin_of[a*R + r]][spin_of[b*R + r]] != 0) begin
                // recompute fields with a zero coupling instead: simplest is
                // to drop cell b from the step
                upd_active[b*R + r] = (b < a) ? upd_active[b*R + r] : 1'b0;
              end
      end
      @(negedge clk); upd_start = 1;
      @(negedge clk); upd_start = 0;
      cyc = 1;
      while (!upd_done) begin @(negedge clk); cyc++; end
      check(cyc == N_MTJ + 1, $sformatf("update took %0d cycles", cyc));
      for (int m = 0; m < N_MTJ; m++)
        if (upd_active[m]) st[m % R][spin_of[m]] = s_new[m];
      ok = 1;
      for (int r = 0; r < R; r++)
        if (longint'(energy[r]) != e_abs(r, 0) - e_abs(r, 1)) begin
          ok = 0;
          $display("rep %0d energy %0d expected %0d", r, energy[r], e_abs(r, 0) - e_abs(r, 1));
        end
      check(ok, $sformatf("energies after step %0d", it));
    end
    // best search
    begin
      longint best;
      int     cyc;
      best = 64'h7fffffffffffffff;
      for (int r = 0; r < R; r++)
        if (e_abs(r, 0) - e_abs(r, 1) < best) best = e_abs(r, 0) - e_abs(r, 1);
      @(negedge clk); best_start = 1;
      @(negedge clk); best_start = 0;
      cyc = 1;
      while (!best_done) begin @(negedge clk); cyc++; end
      check(longint'(best_energy) == best, "best energy");
      check(longint'(energy[best_rep]) == best && best_rep < REP_W'(R), "best replica");
      check(cyc == N_REP + 1, $sformatf("search took %0d cycles", cyc));
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    begin
      bit ok;
      ok = 1;
      for (int r = 0; r < N_REP; r++) if (energy[r] != 0) ok = 0;
      check(ok, "clear");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
