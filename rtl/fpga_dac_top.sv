// fpga_dac_top: the complete GPIO-based DAC, from digital code to analog node.
//
// The FPGA core (fpga_dac_core) maps a code onto the drive bits of 2^N-1
// GPIO outputs; their pads are shorted on the board into the single output
// V_DAC, optionally with external correction resistors. The board side is a
// behavioural model (gpio_dac_node_model) that reports the settled V_DAC and
// the total supply current, so this top is meant for simulation; the
// synthesizable part is fpga_dac_core.
//
// Ports: the core's controls (source select, mapping select, external code,
// staircase step length in clock cycles, output enable), the pad drive bits
// and enables as they leave the FPGA, and the analog results in microvolts
// and microamperes, with the largest single-pad current and a flag when it
// exceeds the pad's DC rating. Timing is the core's: a code reaches the
// pads, and so V_DAC, one clock cycle after it appears at the selected source.
//
// The default configuration is the standalone 4-bit DAC with no external
// parts: 15 pads, 3.3 V I/O supply, 40 ohm pads, 1.15 V threshold.
module fpga_dac_top
  import dac_pkg::*;
#(
  parameter int unsigned N_BITS   = 4,
  parameter int unsigned DIV_W    = 16,
  parameter int unsigned N_GPIO   = (1 << N_BITS) - 1,
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
  input  logic              clk,
  input  logic              rst_n,
  input  code_src_e         src_sel,
  input  enc_mode_e         enc_sel,
  input  logic [N_BITS-1:0] code_in,
  input  logic [DIV_W-1:0]  sample_div,
  input  logic              out_enable,
  output logic [N_GPIO-1:0] gpio_out,
  output logic [N_GPIO-1:0] gpio_oe,
  output logic [N_BITS-1:0] code_q,
  output logic              sample_tick,
  output logic [31:0]       vdac_uv,
  output logic [31:0]       itotal_ua,
  output logic [31:0]       ipin_max_ua,
  output logic              pin_overload
);

  fpga_dac_core #(
    .N_BITS (N_BITS),
    .DIV_W  (DIV_W),
    .N_GPIO (N_GPIO)
  ) u_core (
    .clk         (clk),
    .rst_n       (rst_n),
    .src_sel     (src_sel),
    .enc_sel     (enc_sel),
    .code_in     (code_in),
    .sample_div  (sample_div),
    .out_enable  (out_enable),
    .gpio_out    (gpio_out),
    .gpio_oe     (gpio_oe),
    .code_q      (code_q),
    .sample_tick (sample_tick)
  );

  gpio_dac_node_model #(
    .N_GPIO   (N_GPIO),
    .MODEL    (MODEL),
    .VDD_V    (VDD_V),
    .VTH_V    (VTH_V),
    .R_ON_OHM (R_ON_OHM),
    .R_PP     (R_PP),
    .R_PN     (R_PN),
    .R_SP     (R_SP),
    .R_SN     (R_SN),
    .I_PIN_MAX_A (I_PIN_MAX_A)
  ) u_pads (
    .gpio_out  (gpio_out),
    .gpio_oe   (gpio_oe),
    .vdac_uv   (vdac_uv),
    .itotal_ua (itotal_ua),
    .ipin_max_ua  (ipin_max_ua),
    .pin_overload (pin_overload)
  );

endmodule
