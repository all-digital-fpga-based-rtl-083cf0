// tb_fpga_dac_core: self-checking test of the FPGA part of the DAC.
//
// Checks the reset state (pads low, buffers disabled), the one-cycle latency
// from code to pads in external mode for both mappings, the pad patterns
// against independently computed binary and thermometer patterns, the output
// enables, and the staircase source: one step every sample_div cycles,
// 0..15 then back to 0.
module tb_fpga_dac_core;
  import dac_pkg::*;
  localparam int N = 4, G = 15;
  logic clk = 1'b0, rst_n = 1'b1;
  code_src_e src;
  enc_mode_e enc;
  logic [N-1:0] code_in, code_q;
  logic [15:0] div;
  logic oe_in, tick;
  logic [G-1:0] pads, oe;
  int checks = 0, failures = 0;

  fpga_dac_core #(.N_BITS(N)) dut (
    .clk(clk), .rst_n(rst_n), .src_sel(src), .enc_sel(enc), .code_in(code_in),
    .sample_div(div), .out_enable(oe_in), .gpio_out(pads), .gpio_oe(oe),
    .code_q(code_q), .sample_tick(tick));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  function automatic logic [G-1:0] exp_pads(input enc_mode_e e, input int c);
    logic [G-1:0] p;
    if (e == ENC_THERMOMETER) return G'((32'd1 << c) - 1);
    // Binary weighted: 1 pad for bit0, 2 for bit1, 4 for bit2, 8 for bit3.
    p = '0;
    if ((c & 1) != 0) p[0]     = 1'b1;
    if ((c & 2) != 0) p[2:1]   = '1;
    if ((c & 4) != 0) p[6:3]   = '1;
    if ((c & 8) != 0) p[14:7]  = '1;
    return p;
  endfunction

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    src = SRC_EXTERNAL; enc = ENC_BINARY; code_in = '0; div = 16'd4; oe_in = 1'b1;
    #1 rst_n = 1'b0;   // asynchronous reset edge
    #1;
    check(pads == '0 && oe == '0, "reset state");
    @(negedge clk); rst_n = 1'b1;
    // External source: code presented before edge k appears after edge k.
    for (int e = 0; e < 2; e++) begin
      enc = enc_mode_e'(e);
      for (int i = 0; i < 40; i++) begin
        automatic int c = (i < 16) ? i : int'($urandom_range(0, 15));
        code_in = N'(c);
        @(negedge clk);
        check(pads == exp_pads(enc, c), $sformatf("enc=%0d code=%0d pads=%b", e, c, pads));
        check(code_q == N'(c), "code_q follows code_in");
        check(oe == '1, "enables on");
      end
    end
    // Latency is exactly one cycle: change code, check before and after the edge.
    enc = ENC_THERMOMETER;
    code_in = 4'd3; @(negedge clk);
    code_in = 4'd12; #1;
    check(pads == exp_pads(ENC_THERMOMETER, 3), "no combinational path to pads");
    @(negedge clk);
    check(pads == exp_pads(ENC_THERMOMETER, 12), "one-cycle latency");
    // Output enables.
    oe_in = 1'b0; @(negedge clk);
    check(oe == '0, "enables off");
    oe_in = 1'b1; @(negedge clk);
    check(oe == '1, "enables back on");
    // Staircase source, binary mapping, step of 4 cycles.
    enc = ENC_BINARY; src = SRC_STAIRCASE;
    begin
      automatic int last_code = -1, run = 0, steps = 0, wraps = 0;
      repeat (4 * 40) begin
        @(negedge clk);
        check(pads == exp_pads(ENC_BINARY, int'(code_q)), "staircase pads");
        if (last_code >= 0 && int'(code_q) != last_code) begin
          check(int'(code_q) == (last_code + 1) % 16, "staircase step +1");
          check(run == 4, $sformatf("step length %0d", run));
          if (code_q == '0) wraps++;
          steps++;
          run = 1;
        end else begin
          run++;
        end
        last_code = int'(code_q);
      end
      check(steps >= 35 && wraps >= 2, $sformatf("staircase ran: steps=%0d wraps=%0d", steps, wraps));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
