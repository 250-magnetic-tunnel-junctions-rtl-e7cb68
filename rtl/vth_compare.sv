// vth_compare: turns the sampled V_out of every MTJ cell into a spin.
//
// Each cell has its own threshold V_th, written by the host after the
// cells have been characterised. When `sample_valid` is high the ADC codes
// in `samples` are compared with the thresholds and `spin_up` is
// registered: 1 (spin +1, MTJ switched to the low-resistance P state) where
// V_out > V_th, 0 (spin -1, still antiparallel) otherwise. `spin_valid`
// follows one cycle after `sample_valid`.
//
// The comparison rule and the per-cell stored thresholds follow the paper;
// the storage as a register array with a host write port is this design's.
module vth_compare
  import pim_pkg::*;
#(
  parameter int CELLS = N_MTJ
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     vth_we,
  input  logic [$clog2(CELLS)-1:0] vth_addr,
  input  logic [ADC_W-1:0]         vth_wdata,
  input  logic                     sample_valid,
  input  logic [ADC_W-1:0]         samples [CELLS],
  output logic [CELLS-1:0]         spin_up,
  output logic                     spin_valid
);

  logic [ADC_W-1:0] vth [CELLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < CELLS; i++) vth[i] <= ADC_W'(1 << (ADC_W - 1));
      spin_up    <= '0;
      spin_valid <= 1'b0;
    end else begin
      if (vth_we) vth[vth_addr] <= vth_wdata;
      spin_valid <= sample_valid;
      if (sample_valid)
        for (int i = 0; i < CELLS; i++) spin_up[i] <= (samples[i] > vth[i]);
    end
  end

endmodule
