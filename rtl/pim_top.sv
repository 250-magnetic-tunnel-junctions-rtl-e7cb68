// pim_top: FPGA side of the 250-MTJ probabilistic Ising machine.
//
// The machine samples Ising spins with real MTJ p-bits. The FPGA holds the
// problem (couplings J, biases h) and the spin state of every replica; for
// each update step it computes the input of every p-bit taking part,
// converts it into a gate voltage V_in for that cell's transistor, drives
// the reset and perturb pulses on the PE supplies V_dd, and reads V_out
// back to get the new spins. Around the steps it runs sweeps and an
// annealing schedule (SA with a linear beta ramp, SQA with a transverse
// coupling between ring neighbours, or PT with temperature exchanges) and
// at the end reports the replica with the lowest energy.
//
// Blocks: pim_seq (step / sweep / anneal sequencing), update_sched
// (sequential or cluster-parallel schedule), anneal_sched (beta, J_T),
// field_engine (matrix product), pbit_drive (beta, SQA term, calibration),
// 16 + 1 dac_ctrl (16 V_in DACs, one V_dd DAC), 16 adc_ctrl, vth_compare,
// spin_state, energy_track and pt_swap.
//
// Interface:
//  * Host configuration writes: cfg_we, cfg_addr[23:20] = region (see
//    pim_pkg::region_e), cfg_addr[19:0] = offset, cfg_wdata. Registers
//    (region 0): 0 mode, 1 n_spins, 2 n_steps per sweep, 3 n_sweeps,
//    4 beta0, 5 beta_step, 6 t_reset, 7 t_perturb, 8 step_period,
//    9 V_dd reset code, 10 V_dd perturb code, 11 V_dd zero code,
//    12 V_in zero code. Cell map words are {en, rep[7:0], slot[3:0]},
//    schedule words {valid, spin[8:0]} at offset {step, slot}, J_ij at
//    offset {i, j}.
//  * Host reads (combinational): cfg_raddr[23:20] = 0 status (0 busy,
//    1 best replica, 2/7 best energy low/high, 3 steps, 4 sweeps,
//    5 overruns, 6 PT exchanges, 8 {step, sweep} index), 1 energy of replica [7:0], 2 spin word
//    {rep[11:4], word[3:0]}.
//  * start pulse, busy, done pulse at the end of the anneal.
//  * SPI pins: dac_*[15:0] to the V_in DACs of PE 1..16, dac_*[16] to the
//    V_dd DAC (channel p = V_dd of PE p+1); adc_*[15:0] to the ADCs of
//    PE 1..16. Cell m = 16*p + c sits on channel c of DAC p and ADC p,
//    as in the paper's figure (V_in 1~16 on DAC 01, V_out 01..16 on ADC 01).
//
// Timing: one step every step_period cycles (8000 at a 100 MHz clock gives
// the paper's 12.5 kHz, 250 p-bits x 12.5 kHz = 3.125 M spin flips/s).
module pim_top
  import pim_pkg::*;
#(
  parameter int DAC_HALF_DIV = 1,
  parameter int ADC_HALF_DIV = 2
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  cfg_we,
  input  logic [23:0]           cfg_addr,
  input  logic [31:0]           cfg_wdata,
  input  logic [23:0]           cfg_raddr,
  output logic [31:0]           cfg_rdata,
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [REP_W-1:0]      best_rep,
  output logic signed [E_W-1:0] best_energy,
  output logic [N_PE:0]         dac_sclk,
  output logic [N_PE:0]         dac_cs_n,
  output logic [N_PE:0]         dac_mosi,
  output logic [N_PE-1:0]       adc_sclk,
  output logic [N_PE-1:0]       adc_cs_n,
  output logic [N_PE-1:0]       adc_mosi,
  input  logic [N_PE-1:0]       adc_miso,
  output logic                  adc_id_err
);

  // ---------------- configuration registers ----------------
  mode_e             mode;
  logic [SPIN_W:0]   n_spins;
  logic [STEP_W:0]   n_steps;
  logic [Z_W:0]      n_sweeps;
  logic [BETA_W-1:0] beta0, beta_step;
  logic [15:0]       t_reset, t_perturb, step_period;
  logic [DAC_W-1:0]  vdd_neg_code, vdd_pos_code, vdd_zero_code, vin_zero_code;
  cell_map_t         cell_map [N_MTJ];

  region_e    wr_rg;
  logic [19:0] wr_off;
  assign wr_rg  = region_e'(cfg_addr[23:20]);
  assign wr_off = cfg_addr[19:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode          <= MODE_SA;
      n_spins       <= '0;
      n_steps       <= '0;
      n_sweeps      <= (Z_W+1)'(1);
      beta0         <= '0;
      beta_step     <= '0;
      t_reset       <= 16'd100;
      t_perturb     <= 16'd1000;
      step_period   <= 16'd8000;
      vdd_neg_code  <= 16'd19661;
      vdd_pos_code  <= 16'd45875;
      vdd_zero_code <= 16'd32768;
      vin_zero_code <= 16'd0;
      for (int m = 0; m < N_MTJ; m++) cell_map[m] <= '0;
    end else if (cfg_we) begin
      if (wr_rg == RG_REG) begin
        unique case (wr_off[3:0])
          4'd0:  mode          <= mode_e'(cfg_wdata[1:0]);
          4'd1:  n_spins       <= cfg_wdata[SPIN_W:0];
          4'd2:  n_steps       <= cfg_wdata[STEP_W:0];
          4'd3:  n_sweeps      <= cfg_wdata[Z_W:0];
          4'd4:  beta0         <= cfg_wdata[BETA_W-1:0];
          4'd5:  beta_step     <= cfg_wdata[BETA_W-1:0];
          4'd6:  t_reset       <= cfg_wdata[15:0];
          4'd7:  t_perturb     <= cfg_wdata[15:0];
          4'd8:  step_period   <= cfg_wdata[15:0];
          4'd9:  vdd_neg_code  <= cfg_wdata[15:0];
          4'd10: vdd_pos_code  <= cfg_wdata[15:0];
          4'd11: vdd_zero_code <= cfg_wdata[15:0];
          4'd12: vin_zero_code <= cfg_wdata[15:0];
          default: ;
        endcase
      end
      if (wr_rg == RG_MAP)
        cell_map[wr_off[7:0]] <= cell_map_t'(cfg_wdata[REP_W+SLOT_W:0]);
    end
  end

  // replicas that own at least one working cell
  logic [N_REP-1:0] rep_valid;
  always_comb begin
    rep_valid = '0;
    for (int m = 0; m < N_MTJ; m++)
      if (cell_map[m].en) rep_valid[cell_map[m].rep] = 1'b1;
  end

  // ---------------- sequencer ----------------
  logic clear, sweep_start, sweep_adv, step_adv, vin_start, vin_zero, vdd_start;
  logic field_start, drive_start, adc_start, energy_start, spin_write;
  logic pt_start, best_start;
  vdd_sel_e vdd_sel;
  logic last_step, last_sweep, vin_done, vdd_done, field_done, drive_done;
  logic adc_done, cmp_done, energy_done, pt_done, best_done;
  logic [31:0] step_count, sweep_count, overrun_count, swap_count;

  pim_seq u_seq (
    .clk, .rst_n, .start, .mode, .t_reset, .t_perturb, .step_period,
    .last_step, .last_sweep, .vin_done, .vdd_done, .field_done, .drive_done,
    .adc_done, .cmp_done, .energy_done, .pt_done, .best_done,
    .clear, .sweep_start, .sweep_adv, .step_adv, .vin_start, .vin_zero,
    .vdd_start, .vdd_sel, .field_start, .drive_start, .adc_start,
    .energy_start, .spin_write, .pt_start, .best_start, .busy, .done,
    .step_count, .sweep_count, .overrun_count
  );

  // ---------------- schedules ----------------
  slot_t             slot_sel [SLOTS];
  logic [STEP_W-1:0] step_idx;
  logic [Z_W-1:0]    sweep_idx;
  logic [BETA_W-1:0] beta, jt;

  update_sched u_sched (
    .clk, .rst_n,
    .sched_we    (cfg_we && wr_rg == RG_STEP),
    .sched_step  (wr_off[STEP_W+SLOT_W-1:SLOT_W]),
    .sched_slot  (wr_off[SLOT_W-1:0]),
    .sched_wdata (slot_t'(cfg_wdata[SPIN_W:0])),
    .n_steps, .sweep_start, .step_adv,
    .slot_sel, .step_idx, .last_step
  );

  anneal_sched u_anneal (
    .clk, .rst_n,
    .jt_we        (cfg_we && wr_rg == RG_JT),
    .jt_addr      (wr_off[Z_W-1:0]),
    .jt_wdata     (cfg_wdata[BETA_W-1:0]),
    .beta0, .beta_step, .n_sweeps,
    .anneal_start (clear),
    .sweep_adv,
    .sweep_idx, .beta, .jt, .last_sweep
  );

  // ---------------- spins, fields, drive ----------------
  logic [N_MAX-1:0]          state [N_REP];
  logic signed [FIELD_W-1:0] field [N_MTJ];
  logic [DAC_W-1:0]          drive_codes [N_MTJ];
  logic [N_MTJ-1:0]          active, spin_up, s_old;
  logic [BETA_W-1:0]         beta_rep [N_REP];
  logic                      field_busy;
  logic [31:0]               state_word;

  spin_state u_state (
    .clk, .rst_n, .clear,
    .wr_en   (spin_write),
    .active, .spin_up, .cell_map, .slot_sel, .state,
    .rd_rep  (cfg_raddr[11:4]),
    .rd_word (cfg_raddr[3:0]),
    .rd_data (state_word)
  );

  field_engine u_field (
    .clk, .rst_n,
    .j_we    (cfg_we && wr_rg == RG_J),
    .j_addr  (wr_off[2*SPIN_W-1:0]),
    .j_wdata (cfg_wdata[J_W-1:0]),
    .h_we    (cfg_we && wr_rg == RG_H),
    .h_addr  (wr_off[SPIN_W-1:0]),
    .h_wdata (cfg_wdata[H_W-1:0]),
    .start   (field_start),
    .n_spins, .slot_sel, .cell_map, .state, .field,
    .busy    (field_busy),
    .done    (field_done)
  );

  pbit_drive u_drive (
    .clk, .rst_n,
    .cal_we    (cfg_we && wr_rg == RG_CAL),
    .cal_addr  (wr_off[7:0]),
    .cal_wdata (cfg_wdata),
    .start     (drive_start),
    .mode, .beta, .beta_rep, .jt, .vin_zero_code,
    .field, .slot_sel, .cell_map, .state,
    .codes     (drive_codes),
    .active,
    .done      (drive_done)
  );

  // ---------------- DACs ----------------
  logic [N_PE:0]    dac_done_v;
  logic [DAC_W-1:0] vdd_code;
  logic [DAC_W-1:0] vdd_codes [CELLS_PER_PE];

  always_comb begin
    unique case (vdd_sel)
      VDD_NEG: vdd_code = vdd_neg_code;
      VDD_POS: vdd_code = vdd_pos_code;
      default: vdd_code = vdd_zero_code;
    endcase
    for (int c = 0; c < CELLS_PER_PE; c++) vdd_codes[c] = vdd_code;
  end

  for (genvar p = 0; p < N_PE; p++) begin : g_vin_dac
    logic [DAC_W-1:0] codes [CELLS_PER_PE];
    logic             unused_busy;
    always_comb begin
      for (int c = 0; c < CELLS_PER_PE; c++)
        codes[c] = vin_zero ? vin_zero_code : drive_codes[p*CELLS_PER_PE + c];
    end
    dac_ctrl #(.CHANNELS(CELLS_PER_PE), .HALF_DIV(DAC_HALF_DIV)) u_dac (
      .clk, .rst_n, .start (vin_start), .codes,
      .busy (unused_busy), .done (dac_done_v[p]),
      .sclk (dac_sclk[p]), .cs_n (dac_cs_n[p]), .mosi (dac_mosi[p])
    );
  end

  logic vdd_busy;
  dac_ctrl #(.CHANNELS(CELLS_PER_PE), .HALF_DIV(DAC_HALF_DIV)) u_vdd_dac (
    .clk, .rst_n, .start (vdd_start), .codes (vdd_codes),
    .busy (vdd_busy), .done (dac_done_v[N_PE]),
    .sclk (dac_sclk[N_PE]), .cs_n (dac_cs_n[N_PE]), .mosi (dac_mosi[N_PE])
  );

  // all V_in DACs run in lock step
  assign vin_done = &dac_done_v[N_PE-1:0];
  assign vdd_done = dac_done_v[N_PE];

  // ---------------- ADCs and read-out ----------------
  logic [N_PE-1:0]  adc_done_v, adc_err_v;
  logic [ADC_W-1:0] samples [N_MTJ];

  for (genvar p = 0; p < N_PE; p++) begin : g_adc
    logic [ADC_W-1:0] s [CELLS_PER_PE];
    logic             unused_busy;
    adc_ctrl #(.CHANNELS(CELLS_PER_PE), .HALF_DIV(ADC_HALF_DIV)) u_adc (
      .clk, .rst_n, .start (adc_start), .samples (s),
      .id_err (adc_err_v[p]), .busy (unused_busy), .done (adc_done_v[p]),
      .sclk (adc_sclk[p]), .cs_n (adc_cs_n[p]), .mosi (adc_mosi[p]),
      .miso (adc_miso[p])
    );
    always_comb begin
      for (int c = 0; c < CELLS_PER_PE; c++) samples[p*CELLS_PER_PE + c] = s[c];
    end
  end

  assign adc_done   = &adc_done_v;
  assign adc_id_err = |adc_err_v;

  vth_compare #(.CELLS(N_MTJ)) u_vth (
    .clk, .rst_n,
    .vth_we       (cfg_we && wr_rg == RG_VTH),
    .vth_addr     (wr_off[7:0]),
    .vth_wdata    (cfg_wdata[ADC_W-1:0]),
    .sample_valid (adc_done),
    .samples,
    .spin_up,
    .spin_valid   (cmp_done)
  );

  // old value of the spin each cell is updating
  always_comb begin
    for (int m = 0; m < N_MTJ; m++)
      s_old[m] = state[cell_map[m].rep][slot_sel[cell_map[m].slot].spin];
  end

  // ---------------- energies, PT ----------------
  logic signed [E_W-1:0] energy [N_REP];
  logic                  energy_busy, pt_busy;

  energy_track u_energy (
    .clk, .rst_n, .clear,
    .upd_start  (energy_start),
    .upd_active (active),
    .s_old,
    .s_new      (spin_up),
    .field, .cell_map,
    .upd_done   (energy_done),
    .best_start, .rep_valid, .best_rep, .best_energy, .best_done,
    .energy,
    .busy       (energy_busy)
  );

  pt_swap u_pt (
    .clk, .rst_n,
    .ladder_we    (cfg_we && wr_rg == RG_PTB),
    .ladder_addr  (wr_off[3:0]),
    .ladder_wdata (cfg_wdata[BETA_W-1:0]),
    .init         (clear),
    .start        (pt_start),
    .energy, .beta_rep,
    .busy         (pt_busy),
    .done         (pt_done),
    .swap_count
  );

  // ---------------- host read-back ----------------
  always_comb begin
    cfg_rdata = '0;
    unique case (cfg_raddr[23:20])
      4'h0: unique case (cfg_raddr[3:0])
        4'd0: cfg_rdata = {29'd0, adc_id_err, field_busy, busy};
        4'd1: cfg_rdata = 32'(best_rep);
        4'd2: cfg_rdata = best_energy[31:0];
        4'd3: cfg_rdata = step_count;
        4'd4: cfg_rdata = sweep_count;
        4'd5: cfg_rdata = overrun_count;
        4'd6: cfg_rdata = swap_count;
        4'd7: cfg_rdata = 32'(best_energy[E_W-1:32]);
        4'd8: cfg_rdata = 32'({step_idx, sweep_idx});
        default: cfg_rdata = '0;
      endcase
      4'h1: cfg_rdata = energy[cfg_raddr[REP_W-1:0]][31:0];
      4'h2: cfg_rdata = state_word;
      default: cfg_rdata = '0;
    endcase
  end

endmodule
