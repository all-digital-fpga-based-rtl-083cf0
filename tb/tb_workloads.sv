// tb_workloads: the measured board configurations, run end to end.
//
// Six copies of the complete DAC run the built-in staircase (thermometer
// mapping, 5 clocks per step at 100 MHz = 20 MS/s) through one full period.
// Each copy has the board resistors of one measured configuration:
//   w0  4 bit, standalone
//   w1  4 bit, r_pp = r_pn = 2.35 ohm
//   w2  4 bit, r_sp = 10 ohm, r_pp = r_pn = 5 ohm
//   w3  4 bit, r_sp = 10 ohm, r_pp = r_pn = 7.5 ohm
//   w4  4 bit, r_sp = 10 ohm, r_pp = r_pn = 10 ohm
//   w5  5 bit, r_sp = 9 ohm,  r_pp = r_pn = 5 ohm
// For each it records V_DAC and the supply current at every code, then
// derives the largest DNL and INL (end-point fit), the dynamic range and the
// peak current, prints them, and checks them against the measured trends:
// ~300 mA standalone peak, ~1 A with 2.35 ohm parallel resistors and better
// DNL than standalone, several times less current with series resistors, a
// wider range and lower current but worse linearity as r_p grows, and a
// 5-bit peak current in the low hundreds of mA.
module tb_workloads;
  import dac_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  logic clk = 1'b0, rst_n = 1'b1;
  logic out_enable = 1'b0;
  int checks = 0, failures = 0;

  logic [3:0]  cq4[5];
  logic [4:0]  cq5;
  logic [31:0] v[6], it[6];
  real vr[6][32], ir[6][32];
  int  seen[6];

  always #5 clk = ~clk;

  // Instances share every control; only the board differs.
  fpga_dac_top #(.N_BITS(4)) w0 (.clk(clk), .rst_n(rst_n), .src_sel(SRC_STAIRCASE), .enc_sel(ENC_THERMOMETER),
    .code_in(4'd0), .sample_div(16'd5), .out_enable(out_enable), .gpio_out(), .gpio_oe(), .code_q(cq4[0]),
    .sample_tick(), .vdac_uv(v[0]), .itotal_ua(it[0]), .ipin_max_ua(), .pin_overload());
  fpga_dac_top #(.N_BITS(4), .R_PP(2.35), .R_PN(2.35)) w1 (.clk(clk), .rst_n(rst_n), .src_sel(SRC_STAIRCASE),
    .enc_sel(ENC_THERMOMETER), .code_in(4'd0), .sample_div(16'd5), .out_enable(out_enable), .gpio_out(),
    .gpio_oe(), .code_q(cq4[1]), .sample_tick(), .vdac_uv(v[1]), .itotal_ua(it[1]), .ipin_max_ua(), .pin_overload());
  fpga_dac_top #(.N_BITS(4), .R_SP(10.0), .R_PP(5.0), .R_PN(5.0)) w2 (.clk(clk), .rst_n(rst_n),
    .src_sel(SRC_STAIRCASE), .enc_sel(ENC_THERMOMETER), .code_in(4'd0), .sample_div(16'd5),
    .out_enable(out_enable), .gpio_out(), .gpio_oe(), .code_q(cq4[2]), .sample_tick(), .vdac_uv(v[2]),
    .itotal_ua(it[2]), .ipin_max_ua(), .pin_overload());
  fpga_dac_top #(.N_BITS(4), .R_SP(10.0), .R_PP(7.5), .R_PN(7.5)) w3 (.clk(clk), .rst_n(rst_n),
    .src_sel(SRC_STAIRCASE), .enc_sel(ENC_THERMOMETER), .code_in(4'd0), .sample_div(16'd5),
    .out_enable(out_enable), .gpio_out(), .gpio_oe(), .code_q(cq4[3]), .sample_tick(), .vdac_uv(v[3]),
    .itotal_ua(it[3]), .ipin_max_ua(), .pin_overload());
  fpga_dac_top #(.N_BITS(4), .R_SP(10.0), .R_PP(10.0), .R_PN(10.0)) w4 (.clk(clk), .rst_n(rst_n),
    .src_sel(SRC_STAIRCASE), .enc_sel(ENC_THERMOMETER), .code_in(4'd0), .sample_div(16'd5),
    .out_enable(out_enable), .gpio_out(), .gpio_oe(), .code_q(cq4[4]), .sample_tick(), .vdac_uv(v[4]),
    .itotal_ua(it[4]), .ipin_max_ua(), .pin_overload());
  fpga_dac_top #(.N_BITS(5), .R_SP(9.0), .R_PP(5.0), .R_PN(5.0)) w5 (.clk(clk), .rst_n(rst_n),
    .src_sel(SRC_STAIRCASE), .enc_sel(ENC_THERMOMETER), .code_in(5'd0), .sample_div(16'd5),
    .out_enable(out_enable), .gpio_out(), .gpio_oe(), .code_q(cq5), .sample_tick(), .vdac_uv(v[5]),
    .itotal_ua(it[5]), .ipin_max_ua(), .pin_overload());

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int levels(input int s);
    return (s == 5) ? 32 : 16;
  endfunction

  function automatic real dr(input int s);
    return vr[s][levels(s) - 1] - vr[s][0];
  endfunction

  function automatic real imax(input int s);
    real m = 0.0;
    for (int c = 0; c < levels(s); c++) if (ir[s][c] > m) m = ir[s][c];
    return m;
  endfunction

  // Largest |DNL| and |INL| in LSB, end-point fit.
  function automatic real dnl(input int s);
    real lsb, m = 0.0, d;
    lsb = dr(s) / real'(levels(s) - 1);
    for (int c = 1; c < levels(s); c++) begin
      d = (vr[s][c] - vr[s][c-1]) / lsb - 1.0;
      if (d < 0.0) d = -d;
      if (d > m) m = d;
    end
    return m;
  endfunction

  function automatic real inl(input int s);
    real lsb, m = 0.0, d;
    lsb = dr(s) / real'(levels(s) - 1);
    for (int c = 0; c < levels(s); c++) begin
      d = (vr[s][c] - vr[s][0]) / lsb - real'(c);
      if (d < 0.0) d = -d;
      if (d > m) m = d;
    end
    return m;
  endfunction

  initial begin : watchdog
    #100us;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Sample each copy once per code, in the middle of the step.
  initial begin
    for (int s = 0; s < 6; s++) seen[s] = 0;
    #1 rst_n = 1'b0;
    #20 rst_n = 1'b1;
    out_enable = 1'b1;
    // Let the first registered code reach the pads, then sample 2 clocks
    // into every 5-clock step for 32 steps (two 4-bit periods, one 5-bit).
    repeat (2) @(negedge clk);
    for (int k = 0; k < 32; k++) begin
      for (int s = 0; s < 6; s++) begin
        int c;
        c = (s == 5) ? int'(cq5) : int'(cq4[s]);
        vr[s][c] = real'(v[s]) * 1e-6;
        ir[s][c] = real'(it[s]) * 1e-6;
        seen[s] = seen[s] | ((c == levels(s) - 1) ? 1 : 0);
      end
      repeat (5) @(negedge clk);
    end
    for (int s = 0; s < 6; s++) begin
      check(seen[s] == 1, $sformatf("w%0d reached full scale", s));
      for (int c = 1; c < levels(s); c++)
        check(vr[s][c] > vr[s][c-1], $sformatf("w%0d monotonic at code %0d", s, c));
      $display("w%0d  DR %5.3f V  Imax %6.1f mA  DNL %5.3f LSB  INL %5.3f LSB  Vmin %5.3f Vmax %5.3f",
               s, dr(s), imax(s) * 1e3, dnl(s), inl(s), vr[s][0], vr[s][levels(s)-1]);
    end
    // Standalone: rail to rail, ~300 mA peak.
    check(dr(0) > 3.29, "w0 full-rail output");
    check(imax(0) > 0.25 && imax(0) < 0.35, "w0 peak current ~300 mA");
    // Parallel 2.35 ohm: ~1 A, better linearity, smaller range.
    check(imax(1) > 0.85 && imax(1) < 1.15, "w1 total current ~1 A");
    check(dnl(1) < dnl(0) && inl(1) < inl(0), "w1 more linear than standalone");
    check(dnl(1) <= 0.5 && inl(1) <= 0.5, "w1 DNL, INL within 0.5 LSB");
    check(dr(1) < dr(0), "w1 reduced range");
    // Series-parallel: several times less current than parallel only.
    check(imax(2) * 3.0 < imax(1), "w2 current well below w1");
    check(dnl(2) <= 0.25 && inl(2) <= 0.5, "w2 DNL <= 0.25, INL <= 0.5 LSB");
    // Larger parallel resistors: more range, less current, worse linearity.
    check(dr(3) > dr(2) && dr(4) > dr(3), "range grows with r_p");
    check(imax(3) < imax(2) && imax(4) < imax(3), "current falls with r_p");
    check(inl(4) >= inl(2), "linearity worsens with r_p");
    // 5 bit, 9 ohm / 5 ohm: peak current in the low hundreds of mA (~222 mA measured).
    check(imax(5) > 0.1 && imax(5) < 0.35, "w5 peak current");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
