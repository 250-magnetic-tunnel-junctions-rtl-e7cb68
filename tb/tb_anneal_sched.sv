// tb_anneal_sched: self-checking test of anneal_sched.
//
// A J_T table is written with random values. An anneal of n_sweeps sweeps
// must give beta(n) = beta0 + n * beta_step (saturating at 0xFFFF, which a
// steep ramp reaches), J_T(n) from the table, the sweep index n, and
// last_sweep on exactly the final sweep; anneal_start must restart at
// beta0.
module tb_anneal_sched;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic              jt_we = 0, anneal_start = 0, sweep_adv = 0;
  logic [Z_W-1:0]    jt_addr = 0;
  logic [BETA_W-1:0] jt_wdata = 0, beta0 = 0, beta_step = 0;
  logic [Z_W:0]      n_sweeps = 0;
  logic [Z_W-1:0]    sweep_idx;
  logic [BETA_W-1:0] beta, jt;
  logic              last_sweep;
  logic [BETA_W-1:0] jt_ref [512];

  anneal_sched dut (.clk, .rst_n, .jt_we, .jt_addr, .jt_wdata, .beta0, .beta_step,
    .n_sweeps, .anneal_start, .sweep_adv, .sweep_idx, .beta, .jt, .last_sweep);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 512; n++) begin
      jt_ref[n] = BETA_W'($urandom);
      @(negedge clk); jt_we = 1; jt_addr = Z_W'(n); jt_wdata = jt_ref[n];
    end
    @(negedge clk); jt_we = 0;
    for (int run = 0; run < 3; run++) begin
      int nsw;
      nsw       = (run == 2) ? 512 : 100 + run * 50;
      beta0     = (run == 0) ? 16'd0 : BETA_W'($urandom % 1000);
      beta_step = (run == 1) ? 16'd900 : BETA_W'($urandom % 100);
      n_sweeps  = (Z_W+1)'(nsw);
      @(negedge clk); anneal_start = 1;
      @(negedge clk); anneal_start = 0;
      for (int n = 0; n < nsw; n++) begin
        int eb;
        eb = int'(beta0) + n * int'(beta_step);
        if (eb > 65535) eb = 65535;
        check(int'(beta) == eb, $sformatf("beta(%0d) = %0d expected %0d", n, beta, eb));
        check(jt == jt_ref[n], $sformatf("J_T(%0d)", n));
        check(int'(sweep_idx) == n, "sweep index");
        check(last_sweep == (n == nsw - 1), "last_sweep");
        @(negedge clk); sweep_adv = 1;
        @(negedge clk); sweep_adv = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
