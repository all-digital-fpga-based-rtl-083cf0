// tb_staircase_gen: self-checking test of the staircase pattern generator.
//
// For several step lengths (including 0, which must act as 1) it checks that
// sample_tick comes exactly every sample_div cycles, that the code advances
// by one on each tick and wraps from 15 to 0, that the code holds between
// ticks, and that `en` low freezes the pattern.
module tb_staircase_gen;
  localparam int N = 4;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0;
  logic [15:0] div;
  logic [N-1:0] code;
  logic tick;
  int checks = 0, failures = 0;

  staircase_gen #(.N_BITS(N), .DIV_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .en(en), .sample_div(div), .code(code), .sample_tick(tick));

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_div(input int d);
    int exp_code, last_tick, cyc, eff, nticks;
    eff = (d == 0) ? 1 : d;
    rst_n = 1'b0; en = 1'b0; div = 16'(d);
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1; en = 1'b1;
    exp_code = 0; last_tick = -1; cyc = 0; nticks = 0;
    while (nticks < 40) begin
      @(negedge clk);
      check(code == N'(exp_code), $sformatf("div=%0d code=%0d exp=%0d", d, code, exp_code));
      if (tick) begin
        if (last_tick >= 0)
          check(cyc - last_tick == eff, $sformatf("div=%0d tick spacing %0d", d, cyc - last_tick));
        else
          check(cyc == eff - 1, $sformatf("div=%0d first tick at %0d", d, cyc));
        last_tick = cyc;
        exp_code = (exp_code + 1) % 16;
        nticks++;
      end
      cyc++;
    end
    // Freeze: no change while en is low.
    en = 1'b0;
    begin
      logic [N-1:0] held;
      held = code;
      repeat (3 * eff + 3) begin
        @(negedge clk);
        check(code == held && !tick, "frozen while en low");
      end
    end
  endtask

  initial begin
    run_div(1);
    run_div(0);
    run_div(3);
    run_div(5);
    run_div(17);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
