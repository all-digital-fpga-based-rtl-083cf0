// gpio_dac_node_model: behavioural model (not synthesizable) of the GPIO
// output buffers whose pads are shorted into the DAC output V_DAC, together
// with the optional external correction resistors.
//
// Each enabled pad whose drive bit is 1 connects V_DAC to the upper rail V_d
// through its PMOS; each enabled pad whose drive bit is 0 connects V_DAC to
// the lower rail V_s through its NMOS. A disabled pad (oe = 0) is open.
// External resistors, all optional:
//   R_PP  V_d  -> V_DAC  (parallel, upper)     0.0 = not fitted
//   R_PN  V_DAC -> V_s   (parallel, lower)     0.0 = not fitted
//   R_SP  VDD  -> V_d    (series, supply side) 0.0 = short
//   R_SN  V_s  -> ground (series, ground side) 0.0 = short
// The pre-drivers run from the same bank rails, so both transistor kinds see
// |V_gs| = V_d - V_s.
//
// Two device models, chosen by MODEL:
//   0  every on transistor is a fixed resistor R_ON_OHM, which gives the
//      ideal divider V_DAC = D_m / D_max * VDD of a standalone DAC;
//   1  (default) square-law MOSFET with threshold VTH_V, equal for both
//      kinds, and a gain factor set so that one pad carries VDD/2 / R_ON_OHM
//      at mid-scale (V_ds = VDD/2), which is how the on-resistance is
//      measured. This reproduces the two curved end regions and the straight
//      middle region where both kinds are in triode.
// The circuit is solved by two nested bisections: the outer one on the total
// supply current I_T (which fixes V_d and V_s), the inner one on V_DAC for
// current balance at the shorted node.
//
// Besides V_DAC and the supply current it reports the largest current through
// any one on pad, and flags `pin_overload` when that exceeds I_PIN_MAX_A, the
// DC rating of one pad (24 mA for the FPGA the defaults describe). The
// standalone DAC exceeds it near mid-scale.
//
// Outputs are the settled values, in microvolts and microamperes, updated
// whenever a drive bit or enable changes (zero delay); the ~30 ns pad
// transition time and all capacitance are not modelled.
//
// Defaults (3.3 V, 40 ohm, 1.15 V) are the values measured on the 4-bit
// board. The square-law form and the calibration of its gain are this
// model's own choices.
module gpio_dac_node_model #(
  parameter int unsigned N_GPIO   = 15,
  parameter int unsigned MODEL    = 1,
  parameter real         VDD_V    = 3.3,
  parameter real         VTH_V    = 1.15,
  parameter real         R_ON_OHM = 40.0,
  parameter real         R_PP     = 0.0,
  parameter real         R_PN     = 0.0,
  parameter real         R_SP     = 0.0,
  parameter real         R_SN     = 0.0,
  parameter real         I_PIN_MAX_A = 0.024
) (
  input  logic [N_GPIO-1:0] gpio_out,
  input  logic [N_GPIO-1:0] gpio_oe,
  output logic [31:0]       vdac_uv,
  output logic [31:0]       itotal_ua,
  output logic [31:0]       ipin_max_ua,
  output logic              pin_overload
);

  localparam int unsigned ITER = 60;

  // Gain factor of one square-law transistor, from the mid-scale on-resistance.
  localparam real VOV0 = VDD_V - VTH_V;
  localparam real VMID = VDD_V / 2.0;
  localparam real BETA = (VMID / R_ON_OHM) / (VOV0 * VMID - VMID * VMID / 2.0);

  // Drain current of one on transistor with |V_gs| = vgs and |V_ds| = vds.
  function automatic real dev_i(input real vgs, input real vds);
    real vov;
    if (vds <= 0.0) return 0.0;
    if (MODEL == 0) return vds / R_ON_OHM;
    vov = vgs - VTH_V;
    if (vov <= 0.0) return 0.0;
    if (vds < vov) return BETA * (vov * vds - vds * vds / 2.0);
    return BETA * vov * vov / 2.0;
  endfunction

  function automatic real cond(input real r);
    return (r > 0.0) ? 1.0 / r : 0.0;
  endfunction

  // Current from V_d down into the node, and from the node down to V_s.
  function automatic real i_up(input real n_hi, input real vd, input real vs, input real v);
    return n_hi * dev_i(vd - vs, vd - v) + (vd - v) * cond(R_PP);
  endfunction

  function automatic real i_dn(input real n_lo, input real vd, input real vs, input real v);
    return n_lo * dev_i(vd - vs, v - vs) + (v - vs) * cond(R_PN);
  endfunction

  // Node voltage for given rails: i_up falls and i_dn rises with v.
  function automatic real solve_node(input real n_hi, input real n_lo,
                                     input real vd, input real vs);
    real lo, hi, mid;
    lo = vs;
    hi = vd;
    for (int unsigned k = 0; k < ITER; k++) begin
      mid = (lo + hi) / 2.0;
      if (i_up(n_hi, vd, vs, mid) > i_dn(n_lo, vd, vs, mid)) lo = mid;
      else hi = mid;
    end
    return (lo + hi) / 2.0;
  endfunction

  real n_hi, n_lo;
  real v_node, i_tot, i_pin;

  always_comb begin
    real rs, lo, hi, it, vd, vs, v, i_br, i_p, i_n;
    n_hi = 0.0;
    n_lo = 0.0;
    for (int unsigned k = 0; k < N_GPIO; k++) begin
      if (gpio_oe[k]) begin
        if (gpio_out[k]) n_hi = n_hi + 1.0;
        else             n_lo = n_lo + 1.0;
      end
    end
    rs = R_SP + R_SN;
    vd = VDD_V;
    vs = 0.0;
    if (rs <= 0.0) begin
      v_node = solve_node(n_hi, n_lo, VDD_V, 0.0);
      i_tot  = i_dn(n_lo, VDD_V, 0.0, v_node);
    end else begin
      // Supply current I_T: the branch current it allows falls as I_T rises.
      lo = 0.0;
      hi = VDD_V / rs;
      for (int unsigned k = 0; k < ITER; k++) begin
        it   = (lo + hi) / 2.0;
        vd   = VDD_V - it * R_SP;
        vs   = it * R_SN;
        v    = solve_node(n_hi, n_lo, vd, vs);
        i_br = i_dn(n_lo, vd, vs, v);
        if (i_br > it) lo = it;
        else hi = it;
      end
      it     = (lo + hi) / 2.0;
      vd     = VDD_V - it * R_SP;
      vs     = it * R_SN;
      v_node = solve_node(n_hi, n_lo, vd, vs);
      i_tot  = it;
    end
    // Current of one on pad in each group (zero when the group is empty).
    i_p   = (n_hi > 0.0) ? dev_i(vd - vs, vd - v_node) : 0.0;
    i_n   = (n_lo > 0.0) ? dev_i(vd - vs, v_node - vs) : 0.0;
    i_pin = (i_p > i_n) ? i_p : i_n;
    vdac_uv      = 32'($rtoi(v_node * 1.0e6 + 0.5));
    itotal_ua    = 32'($rtoi(i_tot * 1.0e6 + 0.5));
    ipin_max_ua  = 32'($rtoi(i_pin * 1.0e6 + 0.5));
    pin_overload = (i_pin > I_PIN_MAX_A);
  end

endmodule
