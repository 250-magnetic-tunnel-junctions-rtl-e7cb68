// mtj_pe_model: behavioural model (not synthesizable logic) of one
// processing element, 16 one-transistor / one-MTJ p-bit cells.
//
// Each cell is an STT-MTJ in series with an NMOS transistor: the MTJ top
// sits on the PE's shared supply V_dd, the transistor gate takes the cell's
// V_in, and V_out is the node between MTJ and transistor. Analog voltages
// are `real` ports.
//
// Behaviour modelled:
//  * V_dd below VDD_RESET (a negative pulse): the MTJ switches
//    deterministically to the antiparallel (AP, high resistance) state.
//  * V_dd rising above VDD_PERTURB (a positive pulse): an AP cell switches
//    to the parallel (P, low resistance) state with probability
//        P_p = 1 / (1 + exp(-SLOPE * (V_in - V50)))
//    with SLOPE = 128.8 /V and V50 = 1.852 V, the fit the paper prints for
//    its devices; V50 of each cell is spread by up to +-V50_SPREAD to mimic
//    device-to-device variation. A P cell stays P.
//  * V_out = V_dd * R_ON / (R_MTJ + R_ON), with R_P = 2.6 kOhm and
//    R_AP = 2.8 * R_P (TMR of 180 %), so a P cell reads higher than an AP
//    cell.
// The transistor on-resistance, the V_dd thresholds and the spread are
// assumptions of the model, not values from the paper.
module mtj_pe_model #(
  parameter int  CELLS       = 16,
  parameter int  SEED        = 1,
  parameter real SLOPE       = 128.8,
  parameter real V50         = 1.852,
  parameter real V50_SPREAD  = 0.0,
  parameter real R_P         = 2600.0,
  parameter real TMR         = 1.8,
  parameter real R_ON        = 2000.0,
  parameter real VDD_RESET   = -0.5,
  parameter real VDD_PERTURB = 0.5
) (
  input  real vdd,
  input  real vin  [CELLS],
  output real vout [CELLS]
);

  logic is_p   [CELLS];   // 1: parallel state
  real  v50_c  [CELLS];
  logic pert_armed;

  function automatic real urand();
    return real'($urandom) / 4294967296.0;
  endfunction

  initial begin
    void'($urandom(SEED));
    for (int c = 0; c < CELLS; c++) begin
      is_p[c]  = 1'b0;
      v50_c[c] = V50 + V50_SPREAD * (2.0 * urand() - 1.0);
    end
    pert_armed = 1'b1;
  end

  always @(vdd) begin
    if (vdd < VDD_RESET) begin
      for (int c = 0; c < CELLS; c++) is_p[c] = 1'b0;
      pert_armed = 1'b1;
    end else if (vdd > VDD_PERTURB) begin
      if (pert_armed) begin
        for (int c = 0; c < CELLS; c++) begin
          real p;
          p = 1.0 / (1.0 + $exp(-SLOPE * (vin[c] - v50_c[c])));
          if (!is_p[c] && urand() < p) is_p[c] = 1'b1;
        end
        pert_armed = 1'b0;
      end
    end else begin
      pert_armed = 1'b1;
    end
  end

  always_comb begin
    for (int c = 0; c < CELLS; c++)
      vout[c] = vdd * R_ON / ((is_p[c] ? R_P : R_P * (1.0 + TMR)) + R_ON);
  end

endmodule
