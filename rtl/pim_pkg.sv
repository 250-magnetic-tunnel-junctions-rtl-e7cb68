// pim_pkg: sizes, types and encodings shared by the FPGA logic of the
// 250-MTJ probabilistic Ising machine.
//
// The machine has 16 processing elements (PEs) of 16 one-transistor /
// one-MTJ p-bit cells (256 cell positions, of which 250 carry a working
// MTJ). Each cell is driven by one channel of a 16-channel DAC (V_in) and
// read back by one channel of a 16-channel ADC (V_out); one more DAC gives
// the bipolar V_dd of each PE. These counts and the 24-bit DAC / 16-bit ADC
// frame widths follow the paper. Problem size limit, number widths,
// fixed-point formats and the configuration address map are this design's
// own choices and are documented where they are used.
package pim_pkg;

  // ---- array organisation (paper) ----
  localparam int N_PE         = 16;                   // processing elements
  localparam int CELLS_PER_PE = 16;                   // MTJ cells per PE
  localparam int N_MTJ        = N_PE * CELLS_PER_PE;  // 256 cell positions
  localparam int SLOTS        = 16;                   // spins updated per step, cluster mode

  // ---- problem storage (this design's choices) ----
  localparam int N_MAX   = 512;  // largest problem; the paper's largest is 444 p-bits
  localparam int SPIN_W  = $clog2(N_MAX);
  localparam int N_REP   = 256;  // logical replicas (one per MTJ at most)
  localparam int REP_W   = $clog2(N_REP);
  localparam int SLOT_W  = $clog2(SLOTS);
  localparam int J_W     = 16;   // coupling J_ij, signed integer
  localparam int H_W     = 24;   // bias h_i, signed integer
  localparam int FIELD_W = 32;   // h_i + sum_j J_ij s_j
  localparam int E_W     = 40;   // replica energy
  localparam int MAX_STEPS = 512; // update steps per sweep
  localparam int STEP_W  = $clog2(MAX_STEPS);
  localparam int Z_MAX   = 16384; // sweeps per anneal (paper's Max-Cut runs use 10,000)
  localparam int Z_W     = $clog2(Z_MAX);
  localparam int BETA_W  = 16;   // beta and J_T, unsigned Q8.8
  localparam int BETA_FRAC = 8;
  localparam int GAIN_W  = 16;   // calibration gain, DAC codes per unit input, Q8.8
  localparam int GAIN_FRAC = 8;

  // ---- converters ----
  localparam int DAC_W       = 16;  // DAC code
  localparam int DAC_FRAME_W = 24;  // paper: 24-bit DAC command
  localparam int ADC_W       = 12;  // ADC result
  localparam int ADC_FRAME_W = 16;  // paper: 16-bit ADC word

  // Annealing algorithm run on the replicas.
  typedef enum logic [1:0] {
    MODE_SA  = 2'd0,   // independent (replicated) simulated annealing
    MODE_SQA = 2'd1,   // simulated quantum annealing, rings of 16 replicas
    MODE_PT  = 2'd2    // parallel tempering, groups of 16 replicas
  } mode_e;

  // What one physical MTJ cell does: enable, logical replica, slot of the
  // update step whose spin it samples.
  typedef struct packed {
    logic              en;
    logic [REP_W-1:0]  rep;
    logic [SLOT_W-1:0] slot;
  } cell_map_t;

  // One slot of an update step: which spin, if any.
  typedef struct packed {
    logic              valid;
    logic [SPIN_W-1:0] spin;
  } slot_t;

  // V_dd levels the sequencer asks the V_dd DAC for.
  typedef enum logic [1:0] {
    VDD_ZERO = 2'd0,
    VDD_NEG  = 2'd1,   // reset pulse
    VDD_POS  = 2'd2    // perturb pulse
  } vdd_sel_e;

  // Configuration write address (24 bits): region in [23:20], offset in [19:0]
  // (J_ij uses offset {i, j}, 18 bits).
  typedef enum logic [3:0] {
    RG_REG   = 4'h0,  // control registers
    RG_H     = 4'h1,  // h_i
    RG_MAP   = 4'h2,  // cell map
    RG_CAL   = 4'h3,  // calibration {gain, mu}
    RG_VTH   = 4'h4,  // read thresholds
    RG_STEP  = 4'h5,  // update schedule {step, slot}
    RG_JT    = 4'h6,  // J_T(n) table
    RG_PTB   = 4'h7,  // PT beta ladder
    RG_J     = 4'h8   // J_ij, address [17:0] = {i, j}
  } region_e;

endpackage
