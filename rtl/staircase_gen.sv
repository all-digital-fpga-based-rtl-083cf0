// staircase_gen: periodic staircase test pattern for the DAC.
//
// The code steps 0, 1, ..., 2^N-1 and wraps back to 0, so the DAC output is a
// rising staircase with one abrupt fall per period. One step lasts
// `sample_div` clock cycles (0 is treated as 1), so the sample rate is
// f_clk / sample_div: at a 100 MHz clock, 50000 gives the 500 us steps of the
// low-frequency measurement and 5 gives 20 MS/s.
//
// Interface: `en` freezes the pattern when low. `sample_tick` is high for the
// one cycle in which `code` advances; `code` is registered and changes on the
// clock edge that ends that cycle. The active-low asynchronous reset puts the
// code at 0 and restarts the period.
//
// The staircase as a test stimulus follows the measurements; the divider,
// its width, the reset values and the tick are this design's own choices.
module staircase_gen #(
  parameter int unsigned N_BITS = 4,
  parameter int unsigned DIV_W  = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              en,
  input  logic [DIV_W-1:0]  sample_div,
  output logic [N_BITS-1:0] code,
  output logic              sample_tick
);

  logic [DIV_W-1:0] cnt;
  logic [DIV_W-1:0] last;

  // Last count of a period; a divide ratio of 0 behaves as 1.
  assign last        = (sample_div == '0) ? '0 : sample_div - 1'b1;
  assign sample_tick = en && (cnt >= last);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt  <= '0;
      code <= '0;
    end else if (en) begin
      if (sample_tick) begin
        cnt  <= '0;
        code <= code + 1'b1;   // wraps from D_max to 0
      end else begin
        cnt  <= cnt + 1'b1;
      end
    end
  end

endmodule
