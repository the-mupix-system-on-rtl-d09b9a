// clock_divider: derives the 62.5 MHz system clock from the 1.25 GHz
// serializer clock.
//
// The on-chip PLL locks a VCO to the external 125 MHz reference; its
// 1.25 GHz output shifts the serial link one bit per cycle. A modulo-DIV
// counter on that clock produces the system clock for the time-stamp
// counter, pixels and readout state machine (high for the first DIV/2
// counts) and a one-cycle load strobe for the serializer in the middle of
// the low phase, when the word registered at the last system clock edge is
// stable. The paper states that all these clocks are generated on chip but
// not how; the counter is this design's choice, and DIV = 20 follows from
// 1.25 GHz / 62.5 MHz.
//
// Interface: clk_ser, rst_n; clk_sys (registered, 50 % duty), ser_load.
// Timing: clk_sys rises on the clk_ser edge at which the count returns to
// 0; ser_load is high during count LOAD_AT.
module clock_divider #(
  parameter int unsigned DIV     = 20,
  parameter int unsigned LOAD_AT = DIV * 3 / 4
) (
  input  logic clk_ser,
  input  logic rst_n,
  output logic clk_sys,
  output logic ser_load
);

  localparam int unsigned CW = $clog2(DIV);

  logic [CW-1:0] cnt;
  logic [CW-1:0] cnt_d;

  assign cnt_d = (cnt == CW'(DIV - 1)) ? '0 : cnt + 1'b1;

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= CW'(DIV - 1);
      clk_sys  <= 1'b0;
      ser_load <= 1'b0;
    end else begin
      cnt      <= cnt_d;
      clk_sys  <= (cnt_d < CW'(DIV / 2));
      ser_load <= (cnt_d == CW'(LOAD_AT));
    end
  end

endmodule
