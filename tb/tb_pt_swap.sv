// tb_pt_swap: self-checking test of pt_swap.
//
// A ladder of 16 increasing betas is written. Several exchange passes are
// run with random replica energies; a reference model here walks every
// group and pair (t, t+1) in the same order and exchanges the two
// temperatures when the replica at the colder one has the higher energy.
// After each pass the beta of every replica and the exchange count must
// match the model, and a pass must take 16*15 + 1 cycles. `init` must
// restore the identity assignment.
module tb_pt_swap;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic                  ladder_we = 0, init = 0, start = 0;
  logic [3:0]            ladder_addr = 0;
  logic [BETA_W-1:0]     ladder_wdata = 0;
  logic signed [E_W-1:0] energy [N_REP];
  logic [BETA_W-1:0]     beta_rep [N_REP];
  logic                  busy, done;
  logic [31:0]           swap_count;

  pt_swap dut (.clk, .rst_n, .ladder_we, .ladder_addr, .ladder_wdata, .init, .start,
    .energy, .beta_rep, .busy, .done, .swap_count);

  int ladder [16];
  int rep_at [16][16];
  int temp_of [N_REP];
  int swaps;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare(input string what);
    bit ok;
    ok = 1;
    for (int r = 0; r < N_REP; r++) if (int'(beta_rep[r]) != ladder[temp_of[r]]) ok = 0;
    check(ok, what);
    check(int'(swap_count) == swaps, $sformatf("%s: %0d exchanges, expected %0d", what, swap_count, swaps));
  endtask

  initial begin
    for (int r = 0; r < N_REP; r++) energy[r] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      ladder[t] = 100 + 50 * t;
      @(negedge clk); ladder_we = 1; ladder_addr = 4'(t); ladder_wdata = BETA_W'(ladder[t]);
    end
    @(negedge clk); ladder_we = 0;
    for (int r = 0; r < N_REP; r++) begin rep_at[r/16][r%16] = r; temp_of[r] = r % 16; end
    swaps = 0;
    compare("identity after reset");
    for (int pass = 0; pass < 8; pass++) begin
      int cyc;
      for (int r = 0; r < N_REP; r++) energy[r] = E_W'(int'($urandom % 2001) - 1000);
      for (int g = 0; g < 16; g++)
        for (int t = 0; t < 15; t++) begin
          int a, b;
          a = rep_at[g][t];
          b = rep_at[g][t+1];
          if (energy[b] > energy[a]) begin
            rep_at[g][t] = b; rep_at[g][t+1] = a;
            temp_of[a] = t + 1; temp_of[b] = t;
            swaps++;
          end
        end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      check(cyc == 16 * 15 + 1, $sformatf("pass took %0d cycles", cyc));
      compare($sformatf("pass %0d", pass));
    end
    check(swaps > 0, "some exchanges happened");
    @(negedge clk); init = 1;
    @(negedge clk); init = 0;
    for (int r = 0; r < N_REP; r++) begin rep_at[r/16][r%16] = r; temp_of[r] = r % 16; end
    swaps = 0;
    compare("init");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
