// tb_gpio_dac_node_model: self-checking test of the behavioural model of the
// shorted GPIO pads, for a 4-bit DAC (15 pads), in six set-ups:
//   r0 / q0  resistive / square-law devices, standalone (no external parts)
//   r1 / q1  the same with parallel resistors r_pp = r_pn = 2.35 ohm
//   r2 / q2  the same with series r_sp = 10 ohm, r_sn = 0, parallel 5 ohm
// The resistive set-ups are compared with closed-form divider formulas
// computed here. The square-law set-ups are checked for the properties the
// measurements show: rail-to-rail standalone output, symmetry, compressed
// end steps, the ~300 mA mid-scale peak, a nearly flat current and better
// linearity with parallel resistors, and a much lower current with series
// resistors. Disabled pads must carry no current.
module tb_gpio_dac_node_model;
  localparam int G = 15;
  localparam real VDD = 3.3, RON = 40.0;
  logic [G-1:0] pads, oe;
  logic [31:0] v[6], i[6], ip[6];
  logic ovl[6];
  int checks = 0, failures = 0;
  real vr[6][16], ir[6][16];

  gpio_dac_node_model #(.N_GPIO(G), .MODEL(0))                                   r0 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[0]), .itotal_ua(i[0]), .ipin_max_ua(ip[0]), .pin_overload(ovl[0]));
  gpio_dac_node_model #(.N_GPIO(G), .MODEL(0), .R_PP(2.35), .R_PN(2.35))         r1 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[1]), .itotal_ua(i[1]), .ipin_max_ua(ip[1]), .pin_overload(ovl[1]));
  gpio_dac_node_model #(.N_GPIO(G), .MODEL(0), .R_PP(5.0), .R_PN(5.0), .R_SP(10.0)) r2 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[2]), .itotal_ua(i[2]), .ipin_max_ua(ip[2]), .pin_overload(ovl[2]));
  gpio_dac_node_model #(.N_GPIO(G), .MODEL(1))                                   q0 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[3]), .itotal_ua(i[3]), .ipin_max_ua(ip[3]), .pin_overload(ovl[3]));
  gpio_dac_node_model #(.N_GPIO(G), .MODEL(1), .R_PP(2.35), .R_PN(2.35))         q1 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[4]), .itotal_ua(i[4]), .ipin_max_ua(ip[4]), .pin_overload(ovl[4]));
  gpio_dac_node_model #(.N_GPIO(G), .MODEL(1), .R_PP(5.0), .R_PN(5.0), .R_SP(10.0)) q2 (.gpio_out(pads), .gpio_oe(oe), .vdac_uv(v[5]), .itotal_ua(i[5]), .ipin_max_ua(ip[5]), .pin_overload(ovl[5]));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic bit near(input real a, input real b, input real tol);
    return (a - b <= tol) && (b - a <= tol);
  endfunction

  // Series-parallel resistive divider: upper branch r_sp + (pads_hi || r_pp),
  // lower branch (pads_lo || r_pn) + r_sn. Conductance 0 = open.
  function automatic void divider(input int c, input real rpp, input real rpn,
                                  input real rsp, input real rsn,
                                  output real vout, output real itot);
    real gu, gl, ru, rl;
    gu = c / RON + ((rpp > 0.0) ? 1.0 / rpp : 0.0);
    gl = (G - c) / RON + ((rpn > 0.0) ? 1.0 / rpn : 0.0);
    if (gu == 0.0) begin vout = 0.0; itot = 0.0; return; end
    if (gl == 0.0) begin vout = VDD; itot = 0.0; return; end
    ru = rsp + 1.0 / gu;
    rl = rsn + 1.0 / gl;
    itot = VDD / (ru + rl);
    vout = itot * (rl - rsn) + itot * rsn;
  endfunction

  // Largest |DNL| in LSB over codes 0..15 of a transfer curve.
  function automatic real max_dnl(input int s);
    real lsb, m, d;
    lsb = (vr[s][15] - vr[s][0]) / 15.0;
    m = 0.0;
    for (int c = 1; c < 16; c++) begin
      d = (vr[s][c] - vr[s][c-1]) / lsb - 1.0;
      if (d < 0.0) d = -d;
      if (d > m) m = d;
    end
    return m;
  endfunction

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real ve, ie, alpha;
    oe = '1;
    for (int c = 0; c < 16; c++) begin
      pads = G'((32'd1 << c) - 1);
      #1;
      for (int s = 0; s < 6; s++) begin
        vr[s][c] = real'(v[s]) * 1.0e-6;
        ir[s][c] = real'(i[s]) * 1.0e-6;
      end
      $display("code %2d  V: %5.3f %5.3f %5.3f %5.3f %5.3f %5.3f  I[mA]: %6.1f %6.1f %6.1f %6.1f %6.1f %6.1f",
               c, vr[0][c], vr[1][c], vr[2][c], vr[3][c], vr[4][c], vr[5][c],
               ir[0][c]*1e3, ir[1][c]*1e3, ir[2][c]*1e3, ir[3][c]*1e3, ir[4][c]*1e3, ir[5][c]*1e3);
      // Resistive: ideal divider V = D/Dmax * VDD.
      check(near(vr[0][c], c * VDD / 15.0, 1e-3), $sformatf("r0 V code %0d", c));
      divider(c, 0.0, 0.0, 0.0, 0.0, ve, ie);
      check(near(ir[0][c], ie, 1e-4), $sformatf("r0 I code %0d: %f vs %f", c, ir[0][c], ie));
      // Parallel resistors: V = (D + a) / (Dmax + 2a) * VDD, a = r_o / r_p.
      alpha = RON / 2.35;
      check(near(vr[1][c], (c + alpha) / (15.0 + 2.0 * alpha) * VDD, 1e-3), $sformatf("r1 V code %0d", c));
      divider(c, 2.35, 2.35, 0.0, 0.0, ve, ie);
      check(near(ir[1][c], ie, 1e-4), $sformatf("r1 I code %0d", c));
      // Largest single-pad current: an up pad carries (VDD - V)/R_ON, a down
      // pad V/R_ON; flagged above the 24 mA rating.
      ie = 0.0;
      if (c > 0)  ie = (VDD - c * VDD / 15.0) / RON;
      if (c < 15 && (c * VDD / 15.0) / RON > ie) ie = (c * VDD / 15.0) / RON;
      check(near(real'(ip[0]) * 1e-6, ie, 1e-4) && ovl[0] == (ie > 0.024),
            $sformatf("r0 pad current code %0d: %0d uA vs %f", c, ip[0], ie));
      divider(c, 5.0, 5.0, 10.0, 0.0, ve, ie);
      check(near(vr[2][c], ve, 1e-3) && near(ir[2][c], ie, 1e-4),
            $sformatf("r2 code %0d: V %f vs %f, I %f vs %f", c, vr[2][c], ve, ir[2][c], ie));
    end
    // Square-law standalone: rail to rail, symmetric, monotonic.
    check(near(vr[3][0], 0.0, 1e-3) && near(vr[3][15], VDD, 1e-3), "q0 rail to rail");
    for (int c = 1; c < 16; c++) begin
      check(vr[3][c] > vr[3][c-1], $sformatf("q0 monotonic at %0d", c));
      check(near(vr[3][c] + vr[3][15-c], VDD, 2e-3), $sformatf("q0 symmetric at %0d", c));
    end
    // End steps compressed, middle steps wider (non-linear ends).
    check((vr[3][1] - vr[3][0]) < 0.8 * (vr[3][8] - vr[3][7]), "q0 compressed end step");
    // Mid-scale peak current near the measured ~300 mA, zero at the ends.
    check(ir[3][8] > 0.25 && ir[3][8] < 0.35, $sformatf("q0 peak current %f", ir[3][8]));
    check(ir[3][0] < 1e-6 && ir[3][15] < 1e-6, "q0 no static current at the ends");
    // Pad rating: exceeded at mid-scale standalone, not with series resistors.
    pads = 15'h00ff; #1;
    check(ovl[3] && ip[3] > 32'd30000, $sformatf("q0 mid-scale pad current %0d uA over rating", ip[3]));
    check(!ovl[5], $sformatf("q2 pad current %0d uA within rating", ip[5]));
    // Parallel resistors: more current, nearly flat, better DNL, smaller range.
    check(ir[4][8] > 1.5 * ir[3][8], "q1 draws more current than standalone");
    check(ir[4][0] > 0.8 * ir[4][8], "q1 current nearly constant");
    check(max_dnl(4) < 0.5 * max_dnl(3), $sformatf("q1 DNL %f vs standalone %f", max_dnl(4), max_dnl(3)));
    check(vr[4][15] - vr[4][0] < 0.8 * VDD, "q1 reduced dynamic range");
    // Series + parallel: far lower current than parallel only, still monotonic.
    check(ir[5][8] < 0.33 * ir[4][8], $sformatf("q2 current %f vs q1 %f", ir[5][8], ir[4][8]));
    for (int c = 1; c < 16; c++) check(vr[5][c] > vr[5][c-1], $sformatf("q2 monotonic at %0d", c));
    $display("DNL max: standalone %f  parallel %f  series-parallel %f", max_dnl(3), max_dnl(4), max_dnl(5));
    // Disabled pads are open: no output drive, no current.
    pads = 15'h00ff; oe = '0; #1;
    check(i[0] == 0 && i[3] == 0 && ip[0] == 0 && !ovl[3], "all pads disabled: no current");
    // Only 3 high and 3 low pads enabled: the resistive divider sits at VDD/2.
    oe = 15'h07e0; #1;
    check(near(real'(v[0]) * 1e-6, VDD / 2.0, 1e-3), "partial enable halves");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
