// tb_fpga_dac_top: end-to-end test of the whole DAC at its default size
// (4 bits, 15 shorted pads, standalone, square-law pad model), 100 MHz clock.
//
// 1. Reset: pads disabled, no output current.
// 2. External source, binary then thermometer mapping: every code 0..15,
//    one clock of latency, V_DAC strictly increasing from 0 V to VDD, both
//    mappings giving the same settled voltage for the same code.
// 3. Staircase at 5 clocks per step (20 MS/s): two periods, with the mapping
//    switched from binary to thermometer during the run; each step rises,
//    each wrap falls from full scale to 0 V, steps are 50 ns apart.
// 4. Staircase at 50000 clocks per step (500 us): one full period.
// 5. Output enable dropped: the node is released, no current.
// Along the way the 24 mA pad rating must be flagged near mid-scale and not
// at the end codes.
// Each mechanism is counted and must have happened at least once.
module tb_fpga_dac_top;
  import dac_pkg::*;
  timeunit 1ns;
  timeprecision 1ps;

  localparam int G = 15;
  logic clk = 1'b0, rst_n = 1'b1;
  code_src_e src;
  enc_mode_e enc;
  logic [3:0] code_in, code_q;
  logic [15:0] div;
  logic oe_in, tick;
  logic [G-1:0] pads, oe;
  logic [31:0] vdac_uv, itot_ua, ipin_ua;
  logic overload;
  int checks = 0, failures = 0;
  int n_ext = 0, n_bin = 0, n_thermo = 0, n_stair_step = 0, n_wrap = 0;
  int n_mode_switch = 0, n_disable = 0, n_slow_step = 0, n_overload = 0;
  int v_ext[2][16];

  fpga_dac_top dut (
    .clk(clk), .rst_n(rst_n), .src_sel(src), .enc_sel(enc), .code_in(code_in),
    .sample_div(div), .out_enable(oe_in), .gpio_out(pads), .gpio_oe(oe),
    .code_q(code_q), .sample_tick(tick), .vdac_uv(vdac_uv), .itotal_ua(itot_ua),
    .ipin_max_ua(ipin_ua), .pin_overload(overload));

  always #5 clk = ~clk;   // 100 MHz

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Follow the staircase on the analog output; returns steps seen.
  task automatic watch_staircase(input int n_samples, input int step_cycles,
                                 input bit switch_mode);
    int prev_v, prev_code, cyc, last_change;
    prev_v = int'(vdac_uv); prev_code = int'(code_q); cyc = 0; last_change = -1;
    while (n_samples > 0) begin
      @(negedge clk);
      cyc++;
      if (int'(code_q) != prev_code) begin
        check($countones(pads) == int'(code_q), "pads high equal the code");
        check(int'(code_q) == (prev_code + 1) % 16, "staircase advances by one");
        if (code_q == 4'd0) begin
          check(int'(vdac_uv) < prev_v && vdac_uv < 32'd1000, "wrap falls to 0 V");
          n_wrap++;
        end else begin
          check(int'(vdac_uv) > prev_v, $sformatf("step %0d rises", code_q));
        end
        if (last_change >= 0) begin
          check(cyc - last_change == step_cycles,
                $sformatf("step spacing %0d cycles, expected %0d", cyc - last_change, step_cycles));
          if (step_cycles > 1000) n_slow_step++;
        end
        last_change = cyc;
        if (enc == ENC_BINARY) n_bin++; else n_thermo++;
        n_stair_step++;
        n_samples--;
        prev_code = int'(code_q);
        if (switch_mode && n_samples == 16) begin
          enc = ENC_THERMOMETER;   // switch mapping while running
          n_mode_switch++;
        end
      end
      prev_v = int'(vdac_uv);
    end
  endtask

  initial begin
    realtime t0;
    src = SRC_EXTERNAL; enc = ENC_BINARY; code_in = '0; div = 16'd5; oe_in = 1'b0;
    #1 rst_n = 1'b0;   // asynchronous reset edge
    repeat (3) @(negedge clk);
    check(oe == '0 && itot_ua == 0, "reset: pads disabled, no current");
    rst_n = 1'b1;
    oe_in = 1'b1;
    // 2. External codes, both mappings.
    for (int e = 0; e < 2; e++) begin
      enc = enc_mode_e'(e);
      if (e == 1) n_mode_switch++;
      for (int c = 0; c < 16; c++) begin
        code_in = 4'(c);
        #1;
        if (c > 0) check(code_q == 4'(c - 1), "code not yet at the pads");
        @(negedge clk);
        check(code_q == 4'(c) && $countones(pads) == c, $sformatf("code %0d reached the pads", c));
        v_ext[e][c] = int'(vdac_uv);
        // Standalone pads exceed their 24 mA rating near mid-scale only.
        if (c == 0 || c == 15) check(!overload, "no pad overload at the end codes");
        if (c == 7 || c == 8) check(overload && ipin_ua > 32'd24000, "pad overload at mid-scale");
        if (overload) n_overload++;
        n_ext++;
        if (e == 0) n_bin++; else n_thermo++;
        if (c > 0) check(v_ext[e][c] > v_ext[e][c-1], $sformatf("enc %0d code %0d rises", e, c));
        if (e == 1) check(v_ext[1][c] == v_ext[0][c], $sformatf("mappings agree at code %0d", c));
      end
      check(v_ext[e][0] < 1000 && v_ext[e][15] > 3299000, "output spans 0 V to VDD");
    end
    // 3. Staircase, 20 MS/s, two periods with a mapping switch.
    enc = ENC_BINARY; n_mode_switch++;
    code_in = '0; @(negedge clk);
    src = SRC_STAIRCASE; div = 16'd5;
    t0 = $realtime;
    watch_staircase(32, 5, 1'b1);
    check(($realtime - t0) >= 32 * 50.0 && ($realtime - t0) < 34 * 50.0,
          $sformatf("32 samples at 20 MS/s took %0.1f ns", $realtime - t0));
    // 4. Staircase, 500 us per step, one full period.
    src = SRC_EXTERNAL; @(negedge clk);
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    src = SRC_STAIRCASE; div = 16'd50000;
    t0 = $realtime;
    watch_staircase(16, 50000, 1'b0);
    check(($realtime - t0) >= 16 * 500000.0 && ($realtime - t0) < 16 * 500000.0 + 100.0,
          $sformatf("one 500 us period took %0.1f ns", $realtime - t0));
    // 5. Output buffers disabled.
    oe_in = 1'b0; @(negedge clk);
    check(oe == '0 && itot_ua == 0, "disabled: no current");
    n_disable++;
    // Every mechanism happened.
    check(n_ext > 0, "external source used");
    check(n_bin > 0 && n_thermo > 0, "both mappings used");
    check(n_stair_step >= 48, "staircase ran");
    check(n_wrap >= 3, "staircase wrapped");
    check(n_mode_switch >= 2, "mapping switched");
    check(n_slow_step > 0, "500 us steps seen");
    check(n_disable > 0, "output disable");
    check(n_overload > 0, "pad overload flagged");
    $display("mechanisms: external=%0d binary=%0d thermometer=%0d stair_steps=%0d wraps=%0d mode_switches=%0d slow_steps=%0d disables=%0d overloads=%0d",
             n_ext, n_bin, n_thermo, n_stair_step, n_wrap, n_mode_switch, n_slow_step, n_disable, n_overload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
