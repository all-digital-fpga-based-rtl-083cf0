// pad_encoder: spreads an N-bit code D_m over the 2^N-1 shorted GPIO pads.
//
// Two mappings, chosen by `enc_sel`:
//   ENC_BINARY       binary weighted: code bit b_i drives 2^i pads in
//                    parallel (1 + 2 + 4 + 8 = 15 pads for N = 4). Pad order
//                    is this design's choice: b_i owns pads 2^i-1 .. 2^(i+1)-2,
//                    i.e. gpio[0] = b0, gpio[2:1] = b1, gpio[6:3] = b2,
//                    gpio[14:7] = b3.
//   ENC_THERMOMETER  pad k is high when D_m > k. A step D_m -> D_m+1 turns on
//                    one more pad and none off, so the output cannot dip at
//                    major-carry steps (0111 -> 1000) the way the binary
//                    mapping does when its pads switch at slightly
//                    different times.
// Both give exactly D_m high pads, hence the same settled output level.
// Purely combinational; the caller registers the result.
//
// The binary weighting and the thermometer alternative follow the published
// DAC; the pad order and the run-time select are this design's own.
module pad_encoder
  import dac_pkg::*;
#(
  parameter int unsigned N_BITS = 4,
  parameter int unsigned N_GPIO = (1 << N_BITS) - 1
) (
  input  logic [N_BITS-1:0] code,
  input  enc_mode_e         enc_sel,
  output logic [N_GPIO-1:0] gpio
);

  logic [N_GPIO-1:0] pads_bin;
  logic [N_GPIO-1:0] pads_thermo;

  // Binary weighted: pads 2^i-1 .. 2^(i+1)-2 all copy bit i.
  for (genvar i = 0; i < N_BITS; i++) begin : g_bit
    assign pads_bin[(2**(i+1))-2 -: (2**i)] = {(2**i){code[i]}};
  end

  // Thermometer: the lowest D_m pads are high.
  always_comb begin
    for (int unsigned k = 0; k < N_GPIO; k++) begin
      pads_thermo[k] = (32'(code) > k);
    end
  end

  assign gpio = (enc_sel == ENC_THERMOMETER) ? pads_thermo : pads_bin;

endmodule
