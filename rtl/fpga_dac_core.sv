// fpga_dac_core: the logic that goes into the FPGA for the GPIO-based DAC.
//
// It turns a digital code into the drive pattern of 2^N-1 GPIO outputs whose
// pads are shorted together outside the core. Each pad acts as one unit
// inverter of an inverter-based resistor-divider DAC, so the shorted node
// settles near D_m / D_max of the I/O supply when D_m pads drive high.
//
//   code source : `src_sel` picks the external word `code_in` (SRC_EXTERNAL)
//                 or the built-in periodic staircase (SRC_STAIRCASE), whose
//                 step lasts `sample_div` clock cycles.
//   mapping     : `enc_sel` picks binary-weighted (bit b_i drives 2^i pads)
//                 or thermometer (D_m unit pads high).
//   pad register: the drive bits and output enables are registered, so every
//                 pad of the DAC switches on the same clock edge.
//
// Timing: the pads show a code one clock cycle after it is present at the
// selected source (`code_q` is the code the pads currently show). The output
// enables follow `out_enable` with the same one-cycle delay. The active-low
// asynchronous reset drives all pads low with their output buffers disabled.
// An assertion checks every cycle that the number of high pads equals the
// code on the pads.
//
// From the paper: shorting 2^N-1 GPIO outputs, binary-weighted and
// thermometer mappings, the staircase stimulus, output buffers enabled.
// This design's own choices: the run-time selects, the pad register, the
// one-cycle latency and the reset state.
module fpga_dac_core
  import dac_pkg::*;
#(
  parameter int unsigned N_BITS = 4,
  parameter int unsigned DIV_W  = 16,
  parameter int unsigned N_GPIO = (1 << N_BITS) - 1
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
  output logic              sample_tick
);

  logic [N_BITS-1:0] stair_code;
  logic [N_BITS-1:0] code_sel;
  logic [N_GPIO-1:0] pads;

  staircase_gen #(
    .N_BITS (N_BITS),
    .DIV_W  (DIV_W)
  ) u_stair (
    .clk         (clk),
    .rst_n       (rst_n),
    .en          (src_sel == SRC_STAIRCASE),
    .sample_div  (sample_div),
    .code        (stair_code),
    .sample_tick (sample_tick)
  );

  assign code_sel = (src_sel == SRC_STAIRCASE) ? stair_code : code_in;

  pad_encoder #(
    .N_BITS (N_BITS),
    .N_GPIO (N_GPIO)
  ) u_enc (
    .code    (code_sel),
    .enc_sel (enc_sel),
    .gpio    (pads)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpio_out <= '0;
      gpio_oe  <= '0;
      code_q   <= '0;
    end else begin
      gpio_out <= pads;
      gpio_oe  <= {N_GPIO{out_enable}};
      code_q   <= code_sel;
    end
  end

  // Both mappings drive exactly D_m pads high: the node level depends only on
  // how many pads are high, so this is what sets the output voltage. The
  // check starts on the first clock after reset.
  logic chk_en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_pad_count : assert property (@(posedge clk)
    chk_en |-> ($countones(gpio_out) == int'(code_q)))
    else $error("pad count %0d differs from code %0d", $countones(gpio_out), code_q);

endmodule
