// dac_pkg: types and constants shared by the GPIO-based DAC.
//
// The DAC shorts the pads of 2^N-1 GPIO output buffers into one analog node.
// The number of pads follows from the resolution N: D_max = 2^N - 1. One pad
// is one unit "inverter" of an inverter-based resistor-divider DAC.
// The two code-to-pad mappings (binary-weighted and thermometer) are the two
// the DAC was measured with. The enum encodings are this design's own choice.
package dac_pkg;

  // Full-scale code D_max = 2^N - 1, which is also the number of shorted GPIOs.
  function automatic int unsigned n_gpio(input int unsigned n_bits);
    return (1 << n_bits) - 1;
  endfunction

  // How a code is spread over the shorted GPIOs.
  typedef enum logic {
    ENC_BINARY      = 1'b0,  // bit b_i drives 2^i pads (may glitch at major carries)
    ENC_THERMOMETER = 1'b1   // D_m unit pads high (monotonic)
  } enc_mode_e;

  // Where the code comes from.
  typedef enum logic {
    SRC_EXTERNAL  = 1'b0,    // word supplied by user logic
    SRC_STAIRCASE = 1'b1     // built-in periodic staircase test pattern
  } code_src_e;

endpackage
