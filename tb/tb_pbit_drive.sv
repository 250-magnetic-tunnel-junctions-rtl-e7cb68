// tb_pbit_drive: self-checking test of pbit_drive.
//
// Random calibrations (mu, gain), fields, betas, J_T, replica states and
// cell maps are applied in SA, SQA and PT mode. The expected DAC code of
// each cell is computed here in real arithmetic as
//     clamp(mu + floor(gain/256 * I), 0, 65535)
// with I = beta/256 * field (+ J_T/256 * (s_prev + s_next) in SQA, ring
// neighbours inside the group of 16; per-replica beta in PT), and inactive
// cells (disabled, or on an empty slot) must get the zero-bias code. Codes
// must appear one cycle after `start`.
module tb_pbit_drive;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  logic                      cal_we = 0, start = 0;
  logic [7:0]                cal_addr = 0;
  logic [31:0]               cal_wdata = 0;
  mode_e                     mode = MODE_SA;
  logic [BETA_W-1:0]         beta = 0, jt = 0;
  logic [BETA_W-1:0]         beta_rep [N_REP];
  logic [DAC_W-1:0]          vin_zero_code = 16'd123;
  logic signed [FIELD_W-1:0] field [N_MTJ];
  slot_t                     slot_sel [SLOTS];
  cell_map_t                 cell_map [N_MTJ];
  logic [N_MAX-1:0]          state [N_REP];
  logic [DAC_W-1:0]          codes [N_MTJ];
  logic [N_MTJ-1:0]          active;
  logic                      done;
  int                        mu [N_MTJ], gain [N_MTJ];

  pbit_drive dut (.clk, .rst_n, .cal_we, .cal_addr, .cal_wdata, .start, .mode, .beta,
    .beta_rep, .jt, .vin_zero_code, .field, .slot_sel, .cell_map, .state, .codes,
    .active, .done);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N_REP; r++) begin beta_rep[r] = '0; state[r] = '0; end
    for (int m = 0; m < N_MTJ; m++) begin field[m] = '0; cell_map[m] = '0; end
    for (int k = 0; k < SLOTS; k++) slot_sel[k] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < N_MTJ; m++) begin
      mu[m]   = 40000 + int'($urandom % 16000);
      gain[m] = int'($urandom % 65536);
      @(negedge clk);
      cal_we = 1; cal_addr = 8'(m); cal_wdata = {16'(gain[m]), 16'(mu[m])};
    end
    @(negedge clk); cal_we = 0;
    for (int it = 0; it < 30; it++) begin
      mode = mode_e'(it % 3);
      beta = BETA_W'($urandom % 2048);
      jt   = BETA_W'($urandom % 4096);
      for (int r = 0; r < N_REP; r++) begin
        beta_rep[r] = BETA_W'($urandom % 2048);
        for (int j = 0; j < 64; j++) state[r][j] = 1'($urandom);
      end
      for (int k = 0; k < SLOTS; k++) begin
        slot_sel[k].valid = ($urandom % 8) != 0;
        slot_sel[k].spin  = SPIN_W'($urandom % 64);
      end
      for (int m = 0; m < N_MTJ; m++) begin
        field[m]         = FIELD_W'(int'($urandom % 20001) - 10000);
        cell_map[m].en   = ($urandom % 10) != 0;
        cell_map[m].rep  = REP_W'($urandom);
        cell_map[m].slot = SLOT_W'($urandom);
      end
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      check(done, "done one cycle after start");
      for (int m = 0; m < N_MTJ; m++) begin
        int  r, i, rp, rn, e;
        bit  act;
        real b, in_i, v;
        r   = int'(cell_map[m].rep);
        i   = int'(slot_sel[cell_map[m].slot].spin);
        rp  = (r / 16) * 16 + (r % 16 + 15) % 16;
        rn  = (r / 16) * 16 + (r % 16 + 1) % 16;
        act = cell_map[m].en && slot_sel[cell_map[m].slot].valid;
        b   = (mode == MODE_PT) ? real'(beta_rep[r]) : real'(beta);
        in_i = b * real'(field[m]);       // Q.8
        if (mode == MODE_SQA)
          in_i += real'(jt) * real'((state[rp][i] ? 1 : -1) + (state[rn][i] ? 1 : -1));
        v = real'(mu[m]) + $floor(in_i * real'(gain[m]) / 65536.0);
        if (v < 0.0) v = 0.0;
        if (v > 65535.0) v = 65535.0;
        e = act ? int'(v) : 123;
        check(active[m] == act, "active flag");
        check(int'(codes[m]) == e, $sformatf("mode %0d cell %0d code %0d expected %0d",
                                             mode, m, codes[m], e));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
