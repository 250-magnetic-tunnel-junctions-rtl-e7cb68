// tb_field_engine: self-checking test of field_engine.
//
// A random problem of n spins (random J with zero diagonal, random h) is
// loaded, random replica states are set, and the 256 cells are mapped to
// random replicas and slots of a step whose 16 slots name random spins.
// After `start`, every field must equal h_i + sum_{j != i} J_ij s_{r,j}
// computed here in plain integer arithmetic, and `done` must come
// n + 2 cycles after `start`. Both a sequential-style step (one slot, all
// cells on it) and a cluster step (16 slots) are tried, with a non-zero
// diagonal J_ii written to check that it is skipped.
module tb_field_engine;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic                      j_we = 0, h_we = 0, start = 0;
  logic [2*SPIN_W-1:0]       j_addr = 0;
  logic signed [J_W-1:0]     j_wdata = 0;
  logic [SPIN_W-1:0]         h_addr = 0;
  logic signed [H_W-1:0]     h_wdata = 0;
  logic [SPIN_W:0]           n_spins = 0;
  slot_t                     slot_sel [SLOTS];
  cell_map_t                 cell_map [N_MTJ];
  logic [N_MAX-1:0]          state [N_REP];
  logic signed [FIELD_W-1:0] field [N_MTJ];
  logic                      busy, done;

  field_engine dut (.clk, .rst_n, .j_we, .j_addr, .j_wdata, .h_we, .h_addr, .h_wdata,
    .start, .n_spins, .slot_sel, .cell_map, .state, .field, .busy, .done);

  localparam int N = 40;
  int jm [N][N];
  int hv [N];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < SLOTS; k++) slot_sel[k] = '0;
    for (int m = 0; m < N_MTJ; m++) cell_map[m] = '0;
    for (int r = 0; r < N_REP; r++) state[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      hv[i] = int'($urandom % 2001) - 1000;
      @(negedge clk); h_we = 1; h_addr = SPIN_W'(i); h_wdata = H_W'(hv[i]);
      for (int j = 0; j < N; j++) begin
        jm[i][j] = int'($urandom % 601) - 300;
        @(negedge clk); h_we = 0;
        j_we = 1; j_addr = {SPIN_W'(i), SPIN_W'(j)}; j_wdata = J_W'(jm[i][j]);
      end
      @(negedge clk); j_we = 0;
    end
    n_spins = (SPIN_W+1)'(N);
    for (int it = 0; it < 12; it++) begin
      int cyc;
      bit cluster;
      cluster = it[0];
      for (int r = 0; r < N_REP; r++)
        for (int j = 0; j < N_MAX; j++) state[r][j] = 1'($urandom);
      for (int k = 0; k < SLOTS; k++) begin
        slot_sel[k].valid = 1'b1;
        slot_sel[k].spin  = SPIN_W'($urandom % N);
      end
      for (int m = 0; m < N_MTJ; m++) begin
        cell_map[m].en   = 1'b1;
        cell_map[m].rep  = REP_W'($urandom);
        cell_map[m].slot = cluster ? SLOT_W'($urandom) : '0;
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == N + 2, $sformatf("field took %0d cycles", cyc));
      for (int m = 0; m < N_MTJ; m++) begin
        int i, r, e;
        i = int'(slot_sel[cell_map[m].slot].spin);
        r = int'(cell_map[m].rep);
        e = hv[i];
        for (int j = 0; j < N; j++)
          if (j != i) e += state[r][j] ? jm[i][j] : -jm[i][j];
        check(int'(field[m]) == e, $sformatf("cell %0d field %0d expected %0d", m, field[m], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
