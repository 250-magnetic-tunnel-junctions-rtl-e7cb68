// tb_update_sched: self-checking test of update_sched.
//
// A random schedule table is written (random valid bits and spins, as a
// cluster-parallel schedule would be). Stepping through n_steps steps must
// show each step's 16 slots in order, raise last_step on exactly the last
// step, and return to step 0 on sweep_start. A sequential schedule (one
// valid slot per step, spin = step) is then checked the same way.
module tb_update_sched;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic              sched_we = 0, sweep_start = 0, step_adv = 0;
  logic [STEP_W-1:0] sched_step = 0;
  logic [SLOT_W-1:0] sched_slot = 0;
  slot_t             sched_wdata = '0;
  logic [STEP_W:0]   n_steps = 0;
  slot_t             slot_sel [SLOTS];
  logic [STEP_W-1:0] step_idx;
  logic              last_step;
  slot_t             ref_tab [MAX_STEPS][SLOTS];

  update_sched dut (.clk, .rst_n, .sched_we, .sched_step, .sched_slot, .sched_wdata,
    .n_steps, .sweep_start, .step_adv, .slot_sel, .step_idx, .last_step);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_sweeps(input int ns);
    n_steps = (STEP_W+1)'(ns);
    for (int sw = 0; sw < 2; sw++) begin
      @(negedge clk); sweep_start = 1;
      @(negedge clk); sweep_start = 0;
      for (int s = 0; s < ns; s++) begin
        bit ok;
        ok = 1;
        for (int k = 0; k < SLOTS; k++) if (slot_sel[k] != ref_tab[s][k]) ok = 0;
        check(ok, $sformatf("step %0d slots", s));
        check(last_step == (s == ns - 1), $sformatf("last_step at step %0d", s));
        if (s != ns - 1) begin
          @(negedge clk); step_adv = 1;
          @(negedge clk); step_adv = 0;
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // cluster-like table
    for (int s = 0; s < 40; s++)
      for (int k = 0; k < SLOTS; k++) begin
        ref_tab[s][k].valid = 1'($urandom);
        ref_tab[s][k].spin  = SPIN_W'($urandom);
        @(negedge clk);
        sched_we = 1; sched_step = STEP_W'(s); sched_slot = SLOT_W'(k);
        sched_wdata = ref_tab[s][k];
      end
    @(negedge clk); sched_we = 0;
    run_sweeps(40);
    run_sweeps(7);
    // sequential table over all MAX_STEPS steps
    for (int s = 0; s < MAX_STEPS; s++)
      for (int k = 0; k < SLOTS; k++) begin
        ref_tab[s][k].valid = (k == 0);
        ref_tab[s][k].spin  = (k == 0) ? SPIN_W'(s) : '0;
        @(negedge clk);
        sched_we = 1; sched_step = STEP_W'(s); sched_slot = SLOT_W'(k);
        sched_wdata = ref_tab[s][k];
      end
    @(negedge clk); sched_we = 0;
    run_sweeps(MAX_STEPS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
