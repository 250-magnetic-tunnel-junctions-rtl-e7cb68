// tb_mtj_pe_model: self-checking test of the PE behavioural model.
//
// Cells are given four gate voltages around the switching midpoint and
// taken through 2000 reset / zero / perturb cycles. Checks: after a reset
// every cell reads the antiparallel V_out; V_out of both states equals the
// series-divider value; the fraction of perturb pulses that switch a cell
// matches 1 / (1 + exp(-128.8 (V_in - 1.852))) within 0.04; a second
// positive level without a reset in between does not switch again.
module tb_mtj_pe_model;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  real vdd;
  real vin  [16];
  real vout [16];

  mtj_pe_model #(.CELLS(16), .SEED(7)) dut (.vdd, .vin, .vout);

  localparam real R_P  = 2600.0;
  localparam real R_AP = 2600.0 * 2.8;
  localparam real R_ON = 2000.0;

  initial begin
    #10000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int  nsw [16];
    real lv [4];
    real v_ap, v_p;
    int  bad_reset, bad_level;
    lv[0] = 1.80; lv[1] = 1.852; lv[2] = 1.8605; lv[3] = 1.90;
    for (int c = 0; c < 16; c++) begin vin[c] = lv[c % 4]; nsw[c] = 0; end
    vdd = 0.0;
    v_ap = 1.0 * R_ON / (R_AP + R_ON);
    v_p  = 1.0 * R_ON / (R_P + R_ON);
    bad_reset = 0; bad_level = 0;
    #10;
    for (int it = 0; it < 2000; it++) begin
      vdd = -1.0; #10;
      vdd = 0.0;  #10;
      vdd = 1.0;  #10;
      for (int c = 0; c < 16; c++) begin
        bit up;
        up = vout[c] > 0.5 * (v_ap + v_p);
        if (up) nsw[c]++;
        if (!(vout[c] > (up ? v_p : v_ap) - 1e-9 && vout[c] < (up ? v_p : v_ap) + 1e-9))
          bad_level++;
      end
      // re-applying the positive level without reset must not switch more
      if (it == 0) begin
        real prev_v [16];
        for (int c = 0; c < 16; c++) prev_v[c] = vout[c];
        vdd = 0.7; #10;
        vdd = 1.0; #10;
        for (int c = 0; c < 16; c++)
          check(vout[c] == prev_v[c], "no second switching without reset");
      end
      vdd = -1.0; #10;
      vdd = 0.0; vdd = 1.0; #10;
      vdd = -1.0; #10;
      vdd = 0.1; #10;
      for (int c = 0; c < 16; c++)
        if (vout[c] > 0.1 * (v_ap + 1e-6)) bad_reset++;
      vdd = 0.0; #10;
    end
    check(bad_level == 0, $sformatf("%0d V_out values off the divider", bad_level));
    check(bad_reset == 0, $sformatf("%0d cells not AP after reset", bad_reset));
    for (int c = 0; c < 16; c++) begin
      real p, e;
      p = real'(nsw[c]) / 2000.0;
      e = 1.0 / (1.0 + $exp(-128.8 * (vin[c] - 1.852)));
      check(p > e - 0.04 && p < e + 0.04,
            $sformatf("cell %0d V_in %f: switched %f expected %f", c, vin[c], p, e));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
