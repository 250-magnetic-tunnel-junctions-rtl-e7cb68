// tb_pim_top: end-to-end test of the Ising machine at its default size.
//
// pim_top is wired, through its SPI pins, to 16 V_in DAC models, one
// bipolar V_dd DAC model, 16 behavioural PEs of 16 MTJ cells and 16 ADC
// models, exactly as on the board: cell m = 16*p + c is channel c of DAC p,
// PE p and ADC p, and channel p of the V_dd DAC supplies PE p. Six cell
// positions are treated as having no working MTJ, leaving 250. Every cell
// is calibrated from its own switching midpoint (mu) and the common slope
// (gain), and read with a threshold halfway between the P and AP levels.
//
// Anneals run, all at the default step period of 8000 cycles (12.5 kHz at
// 100 MHz):
//  1. SA, sequential schedule, 250 independent replicas, a random 8-spin
//     +-1 spin glass;
//  2. SA, cluster-parallel schedule, 15 replicas of 16 MTJs, a 32-spin
//     antiferromagnetic ring coloured in 2 colours (2 steps per sweep);
//  3. SQA, sequential, 15 rings of 16 replicas, J_T rising over the anneal;
//  4. PT, sequential, 15 groups of 16 replicas on a beta ladder;
//  5. a step period too short for a step, to force overruns.
// For each anneal the test checks that the best replica reaches the exact
// ground-state energy (found by exhaustive search here, or known for the
// ring), that every replica's tracked energy equals the energy of its
// read-back spins, the step count and step timing, and that no ADC word
// came back for the wrong channel. It also counts each mechanism (reset
// and perturb pulses, sequential and multi-spin steps, SQA coupling,
// PT exchanges, overruns) and fails if one never happened.
module tb_pim_top;
  import pim_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- DUT ----------------
  logic                  cfg_we = 0, start = 0;
  logic [23:0]           cfg_addr = 0, cfg_raddr = 0;
  logic [31:0]           cfg_wdata = 0, cfg_rdata;
  logic                  busy, done, adc_id_err;
  logic [REP_W-1:0]      best_rep;
  logic signed [E_W-1:0] best_energy;
  logic [N_PE:0]         dac_sclk, dac_cs_n, dac_mosi;
  logic [N_PE-1:0]       adc_sclk, adc_cs_n, adc_mosi, adc_miso;

  pim_top dut (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_raddr, .cfg_rdata,
    .start, .busy, .done, .best_rep, .best_energy, .dac_sclk, .dac_cs_n, .dac_mosi,
    .adc_sclk, .adc_cs_n, .adc_mosi, .adc_miso, .adc_id_err);

  // ---------------- board ----------------
  real vdd_v [16];
  logic [15:0] vdd_codes [16];
  int vdd_frames, vdd_bad;
  ad5767_model #(.VMIN(-2.5), .VMAX(2.5)) vdd_dac (.sclk(dac_sclk[N_PE]), .cs_n(dac_cs_n[N_PE]),
    .mosi(dac_mosi[N_PE]), .vout(vdd_v), .codes(vdd_codes), .frames(vdd_frames),
    .bad_frames(vdd_bad));

  int vin_bad [N_PE];
  for (genvar p = 0; p < N_PE; p++) begin : g_board
    real         vin [16];
    real         vout [16];
    logic [15:0] codes [16];
    int          frames, conversions;
    ad5767_model #(.VMIN(0.0), .VMAX(2.5)) dac (.sclk(dac_sclk[p]), .cs_n(dac_cs_n[p]),
      .mosi(dac_mosi[p]), .vout(vin), .codes, .frames, .bad_frames(vin_bad[p]));
    mtj_pe_model #(.CELLS(16), .SEED(11 + p), .V50_SPREAD(0.03)) pe (.vdd(vdd_v[p]),
      .vin, .vout);
    max11131_model #(.VREF(2.5)) adc (.sclk(adc_sclk[p]), .cs_n(adc_cs_n[p]),
      .mosi(adc_mosi[p]), .miso(adc_miso[p]), .ain(vout), .conversions);
  end

  // ---------------- mechanism counters ----------------
  int n_reset_pulse = 0, n_perturb_pulse = 0, n_seq_steps = 0, n_multi_steps = 0;
  int n_sqa_steps = 0;
  real last_vdd0 = 0.0;
  always @(posedge clk) begin
    if (vdd_v[0] < -0.5 && last_vdd0 >= -0.5) n_reset_pulse++;
    if (vdd_v[0] > 0.5 && last_vdd0 <= 0.5) n_perturb_pulse++;
    last_vdd0 = vdd_v[0];
    if (dut.spin_write) begin
      int nv;
      nv = 0;
      for (int k = 0; k < SLOTS; k++) if (dut.slot_sel[k].valid) nv++;
      if (nv == 1) n_seq_steps++;
      if (nv > 1)  n_multi_steps++;
      if (dut.mode == MODE_SQA && dut.jt != 0) n_sqa_steps++;
    end
  end

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host ----------------
  task automatic wr(input region_e rg, input int off, input int data);
    @(negedge clk);
    cfg_we = 1; cfg_addr = {rg, 20'(off)}; cfg_wdata = 32'(data);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic rd(input int addr, output logic [31:0] data);
    cfg_raddr = 24'(addr);
    #1;
    data = cfg_rdata;
  endtask

  localparam int DEAD [6] = '{3, 40, 77, 130, 200, 255};
  function automatic bit is_dead(input int m);
    foreach (DEAD[k]) if (DEAD[k] == m) return 1;
    return 0;
  endfunction

  int  N;
  int  jm [64][64];
  int  hv [64];

  function automatic longint energy_of(input bit s [64]);
    longint e;
    e = 0;
    for (int i = 0; i < N; i++) begin
      e -= longint'(hv[i]) * (s[i] ? 1 : -1);
      for (int j = i + 1; j < N; j++)
        e -= longint'(jm[i][j]) * (s[i] ? 1 : -1) * (s[j] ? 1 : -1);
    end
    return e;
  endfunction

  task automatic load_problem();
    for (int i = 0; i < N; i++) begin
      wr(RG_H, i, hv[i]);
      for (int j = 0; j < N; j++) wr(RG_J, (i << SPIN_W) | j, jm[i][j]);
    end
    wr(RG_REG, 1, N);
  endtask

  // sequential schedule: step i updates spin i in slot 0
  task automatic load_seq_schedule();
    for (int s = 0; s < N; s++)
      for (int k = 0; k < SLOTS; k++)
        wr(RG_STEP, (s << SLOT_W) | k, (k == 0) ? ((1 << SPIN_W) | s) : 0);
    wr(RG_REG, 2, N);
  endtask

  // one replica per working cell, numbered {group, position}: 15 groups
  // of 16 (the last 10 working cells idle), or all 250 as plain replicas
  task automatic map_one_per_cell(input bit grouped);
    int k;
    k = 0;
    for (int m = 0; m < N_MTJ; m++) begin
      if (is_dead(m) || (grouped && k >= 240)) wr(RG_MAP, m, 0);
      else begin
        wr(RG_MAP, m, (1 << (REP_W + SLOT_W)) | (k << SLOT_W));
        k++;
      end
    end
  endtask

  // cluster mode: 15 replicas of 16 working cells, cell k -> slot k % 16
  task automatic map_cluster();
    int k;
    k = 0;
    for (int m = 0; m < N_MTJ; m++) begin
      if (is_dead(m) || k >= 240) wr(RG_MAP, m, 0);
      else begin
        wr(RG_MAP, m, (1 << (REP_W + SLOT_W)) | ((k / 16) << SLOT_W) | (k % 16));
        k++;
      end
    end
  endtask

  task automatic run_anneal(input int nsweeps, input int exp_steps, input int period,
                            output int cycles);
    logic [31:0] v;
    wr(RG_REG, 3, nsweeps);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
    rd(3, v);
    check(v == 32'(exp_steps), $sformatf("%0d steps, expected %0d", v, exp_steps));
    rd(4, v);
    check(v == 32'(nsweeps), "sweep count");
    check(!adc_id_err, "ADC channel ids");
  endtask

  // every valid replica: tracked energy == energy of its spins; best is min
  task automatic check_replicas(input int nrep, input longint e_gs, input string what);
    longint e_down, best_seen;
    bit     ok;
    bit     s [64];
    bit     all_down [64];
    logic [31:0] ev;
    foreach (all_down[i]) all_down[i] = 0;
    e_down    = energy_of(all_down);
    ok        = 1;
    best_seen = 64'h7fffffffffffffff;
    for (int r = 0; r < nrep; r++) begin
      longint e;
      for (int w = 0; w < 2; w++) begin
        logic [31:0] word;
        rd(32'h200000 | (r << 4) | w, word);
        for (int b = 0; b < 32; b++) s[32*w + b] = word[b];
      end
      e = energy_of(s) - e_down;
      rd(32'h100000 | r, ev);
      if (longint'($signed(ev)) != e) ok = 0;
      if (e < best_seen) best_seen = e;
    end
    check(ok, {what, ": tracked energies match read-back spins"});
    check(longint'(best_energy) == best_seen, {what, ": best replica is the lowest"});
    check(longint'(best_energy) == e_gs - e_down,
          $sformatf("%s: best energy %0d, ground state %0d", what, best_energy, e_gs - e_down));
    $display("%s: best replica %0d energy %0d (ground state %0d)", what, best_rep,
             best_energy, e_gs - e_down);
  endtask

  initial begin
    longint e_gs;
    int cycles, n_pt_swaps, n_overrun;
    logic [31:0] rv;
    repeat (5) @(posedge clk);
    rst_n = 1;
    // calibration and thresholds, one per cell
    for (int m = 0; m < N_MTJ; m++) begin
      real v50;
      int  mu;
      v50 = 1.852;
      case (m / 16)
        0:  v50 = g_board[0].pe.v50_c[m % 16];
        1:  v50 = g_board[1].pe.v50_c[m % 16];
        2:  v50 = g_board[2].pe.v50_c[m % 16];
        3:  v50 = g_board[3].pe.v50_c[m % 16];
        4:  v50 = g_board[4].pe.v50_c[m % 16];
        5:  v50 = g_board[5].pe.v50_c[m % 16];
        6:  v50 = g_board[6].pe.v50_c[m % 16];
        7:  v50 = g_board[7].pe.v50_c[m % 16];
        8:  v50 = g_board[8].pe.v50_c[m % 16];
        9:  v50 = g_board[9].pe.v50_c[m % 16];
        10: v50 = g_board[10].pe.v50_c[m % 16];
        11: v50 = g_board[11].pe.v50_c[m % 16];
        12: v50 = g_board[12].pe.v50_c[m % 16];
        13: v50 = g_board[13].pe.v50_c[m % 16];
        14: v50 = g_board[14].pe.v50_c[m % 16];
        default: v50 = g_board[15].pe.v50_c[m % 16];
      endcase
      mu = int'(v50 / 2.5 * 65536.0);
      // gain: 1/128.8 V per unit input = 203.5 DAC codes, Q8.8
      wr(RG_CAL, m, (52096 << 16) | mu);
      wr(RG_VTH, m, 530);
    end

    // ---- 1. SA, sequential, 250 replicas, 8-spin spin glass ----
    N = 8;
    for (int i = 0; i < N; i++) begin
      hv[i] = 0;
      jm[i][i] = 0;
      for (int j = i + 1; j < N; j++) begin
        jm[i][j] = ($urandom % 2) ? 1 : -1;
        jm[j][i] = jm[i][j];
      end
    end
    begin
      bit s [64];
      e_gs = 64'h7fffffffffffffff;
      foreach (s[i]) s[i] = 0;
      for (int x = 0; x < (1 << N); x++) begin
        for (int i = 0; i < N; i++) s[i] = x[i];
        if (energy_of(s) < e_gs) e_gs = energy_of(s);
      end
    end
    load_problem();
    load_seq_schedule();
    map_one_per_cell(0);
    wr(RG_REG, 0, MODE_SA);
    wr(RG_REG, 4, 0);        // beta from 0
    wr(RG_REG, 5, 80);       // +0.31 per sweep
    run_anneal(12, 8 * 12, 8000, cycles);
    check(cycles >= 8 * 12 * 8000 && cycles <= 8 * 12 * 8000 + 8000,
          $sformatf("SA anneal took %0d cycles for %0d steps of 8000", cycles, 8 * 12));
    rd(5, rv);
    check(rv == 0, "no overrun at the default step period");
    check_replicas(250, e_gs, "SA sequential");

    // ---- 4. PT on the same problem, 15 groups of 16 ----
    map_one_per_cell(1);
    for (int t = 0; t < 16; t++) wr(RG_PTB, t, 40 + 50 * t);
    wr(RG_REG, 0, MODE_PT);
    run_anneal(12, 8 * 12, 8000, cycles);
    rd(6, rv);
    n_pt_swaps = int'(rv);
    check_replicas(240, e_gs, "PT");

    // ---- 3. SQA on the same problem, 15 rings of 16 ----
    for (int n = 0; n < 12; n++) wr(RG_JT, n, 10 + n * n * 4);
    wr(RG_REG, 0, MODE_SQA);
    wr(RG_REG, 4, 512);      // beta = 2, constant
    wr(RG_REG, 5, 0);
    run_anneal(12, 8 * 12, 8000, cycles);
    check_replicas(240, e_gs, "SQA");

    // ---- 2. SA, cluster parallel, antiferromagnetic ring of 32 ----
    N = 32;
    for (int i = 0; i < N; i++) begin
      hv[i] = 0;
      for (int j = 0; j < N; j++) jm[i][j] = 0;
    end
    for (int i = 0; i < N; i++) begin
      jm[i][(i + 1) % N] = -1;
      jm[(i + 1) % N][i] = -1;
    end
    e_gs = -32;
    load_problem();
    // colour 0 = even spins, colour 1 = odd spins, 16 per step
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < SLOTS; k++) wr(RG_STEP, (s << SLOT_W) | k, (1 << SPIN_W) | (2 * k + s));
    wr(RG_REG, 2, 2);
    map_cluster();
    wr(RG_REG, 0, MODE_SA);
    wr(RG_REG, 4, 0);
    wr(RG_REG, 5, 60);
    run_anneal(20, 2 * 20, 8000, cycles);
    check_replicas(15, e_gs, "SA cluster parallel");

    // ---- 5. step period too short ----
    wr(RG_REG, 8, 2000);
    run_anneal(2, 2 * 2, 2000, cycles);
    rd(5, rv);
    n_overrun = int'(rv);
    wr(RG_REG, 8, 8000);

    // ---- mechanisms ----
    check(n_reset_pulse > 0, "reset pulses seen");
    check(n_perturb_pulse > 0, "perturb pulses seen");
    check(n_seq_steps > 0, "sequential steps");
    check(n_multi_steps > 0, "cluster-parallel steps");
    check(n_sqa_steps > 0, "SQA steps with transverse coupling");
    check(n_pt_swaps > 0, "PT exchanges");
    check(n_overrun > 0, "step overruns");
    check(vdd_bad == 0, "V_dd DAC frames well formed");
    begin
      int bad;
      bad = 0;
      for (int p = 0; p < N_PE; p++) begin
        bad += vin_bad[p];
        if (vin_bad[p] != 0) $display("DAC %0d: %0d bad frames", p, vin_bad[p]);
      end
      check(bad == 0, "V_in DAC frames well formed");
    end
    $display("mechanisms: reset %0d perturb %0d seq-steps %0d multi-steps %0d sqa-steps %0d pt-swaps %0d overruns %0d",
             n_reset_pulse, n_perturb_pulse, n_seq_steps, n_multi_steps, n_sqa_steps,
             n_pt_swaps, n_overrun);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
