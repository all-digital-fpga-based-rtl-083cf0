// tb_pad_encoder: exhaustive test of both code-to-pad mappings at N = 4
// (15 pads) and N = 5 (31 pads).
//   binary:      pad k must copy code bit floor(log2(k+1)) and the number of
//                high pads must equal the code;
//   thermometer: exactly pads 0..D-1 high, and no pad may turn off on an
//                up-step D -> D+1.
module tb_pad_encoder;
  import dac_pkg::*;
  logic [3:0]  c4;
  logic [14:0] g4, prev4;
  logic [4:0]  c5;
  logic [30:0] g5;
  enc_mode_e   enc;
  int checks = 0, failures = 0;

  pad_encoder #(.N_BITS(4)) dut4 (.code(c4), .enc_sel(enc), .gpio(g4));
  pad_encoder #(.N_BITS(5)) dut5 (.code(c5), .enc_sel(enc), .gpio(g5));

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic int owner_bit(input int k);
    int b = 0;
    while ((2 << b) - 1 <= k) b++;   // pad k lies in [2^b-1, 2^(b+1)-2]
    return b;
  endfunction

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Binary weighted.
    enc = ENC_BINARY;
    for (int c = 0; c < 16; c++) begin
      c4 = 4'(c); #1;
      check($countones(g4) == c, $sformatf("bin N=4 code %0d count %0d", c, $countones(g4)));
      for (int k = 0; k < 15; k++)
        check(g4[k] == c4[owner_bit(k)], $sformatf("bin N=4 code %0d pad %0d", c, k));
    end
    for (int c = 0; c < 32; c++) begin
      c5 = 5'(c); #1;
      check($countones(g5) == c, $sformatf("bin N=5 code %0d count %0d", c, $countones(g5)));
      for (int k = 0; k < 31; k++)
        check(g5[k] == c5[owner_bit(k)], $sformatf("bin N=5 code %0d pad %0d", c, k));
    end
    // Thermometer.
    enc = ENC_THERMOMETER;
    prev4 = '0;
    for (int c = 0; c < 16; c++) begin
      c4 = 4'(c); #1;
      check(g4 == 15'((32'd1 << c) - 1), $sformatf("thermo N=4 code %0d pads %b", c, g4));
      check((prev4 & ~g4) == '0, $sformatf("thermo N=4 pad turned off at code %0d", c));
      prev4 = g4;
    end
    for (int c = 0; c < 32; c++) begin
      c5 = 5'(c); #1;
      check(g5 == 31'((64'd1 << c) - 1), $sformatf("thermo N=5 code %0d pads %b", c, g5));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
