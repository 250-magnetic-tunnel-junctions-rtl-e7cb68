// tb_spin_state: self-checking test of spin_state.
//
// A reference copy of the replica states is kept here. Random steps write
// the p-bit values of random active cells (sequential and cluster-style
// maps) and the whole state and the host read port must match the
// reference; `clear` must return every spin to -1 (0).
module tb_spin_state;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             clear = 0, wr_en = 0;
  logic [N_MTJ-1:0] active = '0, spin_up = '0;
  cell_map_t        cell_map [N_MTJ];
  slot_t            slot_sel [SLOTS];
  logic [N_MAX-1:0] state [N_REP];
  logic [N_MAX-1:0] ref_state [N_REP];
  logic [REP_W-1:0] rd_rep = 0;
  logic [3:0]       rd_word = 0;
  logic [31:0]      rd_data;

  spin_state dut (.clk, .rst_n, .clear, .wr_en, .active, .spin_up, .cell_map, .slot_sel,
    .state, .rd_rep, .rd_word, .rd_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(input string what);
    bit ok;
    ok = 1;
    for (int r = 0; r < N_REP; r++) if (state[r] != ref_state[r]) ok = 0;
    check(ok, what);
  endtask

  initial begin
    for (int m = 0; m < N_MTJ; m++) cell_map[m] = '0;
    for (int k = 0; k < SLOTS; k++) slot_sel[k] = '0;
    for (int r = 0; r < N_REP; r++) ref_state[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    compare_all("all -1 after reset");
    for (int it = 0; it < 200; it++) begin
      bit cluster;
      cluster = it[0];
      // distinct slots / replicas so no two cells write one bit
      for (int k = 0; k < SLOTS; k++) begin
        slot_sel[k].valid = 1'b1;
        slot_sel[k].spin  = SPIN_W'(k * 32 + ($urandom % 32));
      end
      for (int m = 0; m < N_MTJ; m++) begin
        cell_map[m].en   = 1'b1;
        cell_map[m].rep  = cluster ? REP_W'((m / 16 + it) % 16) : REP_W'(m);
        cell_map[m].slot = cluster ? SLOT_W'(m % 16) : SLOT_W'(it % 16);
        active[m]  = 1'($urandom);
        spin_up[m] = 1'($urandom);
        if (active[m])
          ref_state[cell_map[m].rep][slot_sel[cell_map[m].slot].spin] = spin_up[m];
      end
      @(negedge clk); wr_en = 1;
      @(negedge clk); wr_en = 0;
      compare_all($sformatf("state after step %0d", it));
      rd_rep  = REP_W'($urandom);
      rd_word = 4'($urandom);
      #1;
      check(rd_data == ref_state[rd_rep][32*rd_word +: 32], "host read word");
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int r = 0; r < N_REP; r++) ref_state[r] = '0;
    compare_all("clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
