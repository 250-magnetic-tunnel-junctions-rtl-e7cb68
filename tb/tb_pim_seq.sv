// tb_pim_seq: self-checking test of the step / sweep / anneal sequencer.
//
// The other blocks are replaced by fixed-latency responders, and the
// update and annealing schedules by counters. For anneals in SA and PT
// mode, with a step period long enough and one too short, the test checks:
//  * every step drives V_dd negative (with V_in at zero), then zero, then
//    positive (after the V_in codes), in that order;
//  * the field is computed during zero bias, the ADC read starts at least
//    t_perturb cycles after the perturb level is set, the spins are written
//    after the energy update;
//  * steps start exactly step_period cycles apart, across sweep
//    boundaries too, or back to back with an overrun counted when the
//    period is too short;
//  * step, sweep, PT-exchange and best-search counts, and one `done`.
module tb_pim_seq;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic        start = 0;
  mode_e       mode = MODE_SA;
  logic [15:0] t_reset = 16'd20, t_perturb = 16'd50, step_period = 16'd600;
  logic        last_step, last_sweep;
  logic        vin_done, vdd_done, field_done, drive_done, adc_done, cmp_done;
  logic        energy_done, pt_done, best_done;
  logic        clear, sweep_start, sweep_adv, step_adv, vin_start, vin_zero, vdd_start;
  vdd_sel_e    vdd_sel;
  logic        field_start, drive_start, adc_start, energy_start, spin_write;
  logic        pt_start, best_start, busy, done;
  logic [31:0] step_count, sweep_count, overrun_count;

  pim_seq dut (.clk, .rst_n, .start, .mode, .t_reset, .t_perturb, .step_period,
    .last_step, .last_sweep, .vin_done, .vdd_done, .field_done, .drive_done, .adc_done,
    .cmp_done, .energy_done, .pt_done, .best_done, .clear, .sweep_start, .sweep_adv,
    .step_adv, .vin_start, .vin_zero, .vdd_start, .vdd_sel, .field_start, .drive_start,
    .adc_start, .energy_start, .spin_write, .pt_start, .best_start, .busy, .done,
    .step_count, .sweep_count, .overrun_count);

  // fixed-latency responders: done N cycles after start
  function automatic logic delayed(input logic [63:0] hist, input int n);
    return hist[n-1];
  endfunction
  logic [63:0] h_vin = '0, h_vdd = '0, h_field = '0, h_drive = '0, h_adc = '0,
               h_energy = '0, h_pt = '0, h_best = '0;
  always_ff @(posedge clk) begin
    h_vin    <= {h_vin[62:0], vin_start};
    h_vdd    <= {h_vdd[62:0], vdd_start};
    h_field  <= {h_field[62:0], field_start};
    h_drive  <= {h_drive[62:0], drive_start};
    h_adc    <= {h_adc[62:0], adc_start};
    h_energy <= {h_energy[62:0], energy_start};
    h_pt     <= {h_pt[62:0], pt_start};
    h_best   <= {h_best[62:0], best_start};
  end
  assign vin_done    = delayed(h_vin, 40);
  assign vdd_done    = delayed(h_vdd, 35);
  assign field_done  = delayed(h_field, 60);
  assign drive_done  = delayed(h_drive, 1);
  assign adc_done    = delayed(h_adc, 45);
  assign energy_done = delayed(h_energy, 30);
  assign pt_done     = delayed(h_pt, 20);
  assign best_done   = delayed(h_best, 10);
  initial cmp_done = 1'b0;
  always_ff @(posedge clk) cmp_done <= adc_done;

  // schedule counters
  int n_steps = 1, n_sweeps = 1, step_i = 0, sweep_i = 0;
  always_ff @(posedge clk) begin
    if (sweep_start) step_i <= 0; else if (step_adv) step_i <= step_i + 1;
    if (clear) sweep_i <= 0; else if (sweep_adv) sweep_i <= sweep_i + 1;
  end
  assign last_step  = (step_i == n_steps - 1);
  assign last_sweep = (sweep_i == n_sweeps - 1);

  // event monitor
  int cyc = 0, last_step_start = 0, n_step_starts = 0, n_pt = 0, n_best = 0, n_done = 0, n_spinw = 0;
  int period_bad, order_bad, pert_bad, n_sweep_adv;
  int expect_period;
  int state_ord;  // 0 wait reset, 1 wait zero, 2 wait vin codes, 3 wait pos, 4 wait adc
  int pos_time;
  bit field_in_zero, field_seen;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (vdd_start && vdd_sel == VDD_NEG) begin
      if (n_step_starts > 0 && expect_period > 0 && cyc - last_step_start != expect_period)
        period_bad++;
      if (n_step_starts > 0 && expect_period == 0 && cyc - last_step_start < 100)
        period_bad++;
      if (!(vin_start && vin_zero)) order_bad++;
      if (state_ord != 0) order_bad++;
      last_step_start = cyc;
      n_step_starts++;
      state_ord = 1;
      field_seen = 0;
    end
    if (vdd_start && vdd_sel == VDD_ZERO) begin
      if (state_ord != 1) order_bad++;
      state_ord = 2;
      if (field_start) field_seen = 1;
    end
    if (vin_start && !vin_zero) begin
      if (state_ord != 2 || !field_seen) order_bad++;
      state_ord = 3;
    end
    if (vdd_start && vdd_sel == VDD_POS) begin
      if (state_ord != 3) order_bad++;
      state_ord = 4;
      pos_time = cyc;
    end
    if (adc_start) begin
      if (state_ord != 4) order_bad++;
      // V_dd DAC takes 35 cycles to set the level, then t_perturb of hold
      if (cyc - pos_time < 35 + int'(t_perturb)) pert_bad++;
      state_ord = 5;
    end
    if (spin_write) begin
      if (state_ord != 5) order_bad++;
      n_spinw++;
      state_ord = 0;
    end
    if (pt_start)  n_pt++;
    if (best_start) n_best++;
    if (done) n_done++;
    if (sweep_adv) n_sweep_adv++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input mode_e md, input int ns, input int nsw, input int period);
    int c0;
    mode = md; n_steps = ns; n_sweeps = nsw; step_period = 16'(period);
    expect_period = (period >= 500) ? period : 0;
    n_step_starts = 0; n_pt = 0; n_best = 0; n_done = 0; n_spinw = 0;
    period_bad = 0; order_bad = 0; pert_bad = 0; n_sweep_adv = 0; state_ord = 0;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    c0 = 0;
    while (!done && c0 < 1000000) begin @(negedge clk); c0++; end
    @(negedge clk);
    check(n_done == 1, "one done");
    check(!busy, "idle after done");
    check(n_step_starts == ns * nsw, $sformatf("%0d steps started", n_step_starts));
    check(n_spinw == ns * nsw, "spins written once per step");
    check(step_count == 32'(ns * nsw), "step count");
    check(sweep_count == 32'(nsw), "sweep count");
    check(n_sweep_adv == nsw - 1, "sweep advances");
    check(n_pt == ((md == MODE_PT) ? nsw : 0), $sformatf("%0d PT passes", n_pt));
    check(n_best == 1, "one best search");
    check(order_bad == 0, $sformatf("%0d phase-order errors", order_bad));
    check(pert_bad == 0, "perturb hold respected");
    check(period_bad == 0, $sformatf("%0d step-period errors", period_bad));
    if (expect_period > 0) check(overrun_count == 0, "no overrun");
    else                   check(overrun_count == 32'(ns * nsw), $sformatf("%0d overruns", overrun_count));
  endtask

  initial begin
    cyc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(MODE_SA, 5, 3, 600);
    run(MODE_PT, 4, 3, 700);
    run(MODE_SQA, 3, 2, 100);   // too short: overruns
    run(MODE_SA, 1, 4, 800);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
