// tb_vth_compare: self-checking test of vth_compare.
//
// Random thresholds are written for all 256 cells, then random samples,
// including samples equal to and one above the threshold, are compared.
// Each spin must be 1 exactly when sample > threshold, one cycle after
// sample_valid, and must hold while sample_valid is low.
module tb_vth_compare;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic             vth_we = 0, sample_valid = 0;
  logic [7:0]       vth_addr = 0;
  logic [ADC_W-1:0] vth_wdata = 0;
  logic [ADC_W-1:0] samples [N_MTJ];
  logic [N_MTJ-1:0] spin_up;
  logic             spin_valid;
  logic [ADC_W-1:0] th [N_MTJ];

  vth_compare #(.CELLS(N_MTJ)) dut (.clk, .rst_n, .vth_we, .vth_addr, .vth_wdata,
    .sample_valid, .samples, .spin_up, .spin_valid);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int m = 0; m < N_MTJ; m++) samples[m] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < N_MTJ; m++) begin
      th[m] = ADC_W'($urandom);
      @(negedge clk);
      vth_we = 1; vth_addr = 8'(m); vth_wdata = th[m];
    end
    @(negedge clk); vth_we = 0;
    for (int it = 0; it < 30; it++) begin
      logic [N_MTJ-1:0] expv;
      for (int m = 0; m < N_MTJ; m++) begin
        int sel;
        sel = int'($urandom % 3);
        case (sel)
          0: samples[m] = th[m];
          1: samples[m] = th[m] + 1'b1;
          default: samples[m] = ADC_W'($urandom);
        endcase
        expv[m] = samples[m] > th[m];
      end
      sample_valid = 1;
      @(negedge clk);
      sample_valid = 0;
      check(spin_valid, "spin_valid one cycle after sample_valid");
      check(spin_up == expv, "spins match V_out > V_th");
      for (int m = 0; m < N_MTJ; m++) samples[m] = ~samples[m];
      @(negedge clk);
      check(!spin_valid && spin_up == expv, "spins hold");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
