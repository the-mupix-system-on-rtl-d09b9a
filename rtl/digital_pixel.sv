// digital_pixel: digital half of one pixel, placed in the chip periphery.
//
// The analog pixel drives its pulse to a comparator in the periphery; this
// block registers the comparator output. On a rising edge it sets the hit
// flag and latches the current time stamp. While the flag is set the pixel
// is dead: further edges are ignored, so the latched time stamp is that of
// the first hit. The readout clears the flag when it moves the hit to the
// column buffer, and the pixel is then ready again. Flag and time stamp
// follow the paper. The two-flop synchroniser on the comparator output and
// "set wins over clear" in the same cycle are this design's choices.
//
// Interface: clk (62.5 MHz), rst_n, comp (asynchronous comparator output),
// ts_gray (time-stamp bus), clear (from the readout), hit (flag), ts (latched).
// Timing: an edge of comp shows as hit two or three clocks later (the
// synchroniser plus the flag register); ts holds the time-stamp bus value
// of the cycle in which the edge was detected.
module digital_pixel #(
  parameter int unsigned TS_BITS = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               comp,
  input  logic [TS_BITS-1:0] ts_gray,
  input  logic               clear,
  output logic               hit,
  output logic [TS_BITS-1:0] ts
);

  logic [2:0] sync_q;   // [0],[1]: synchroniser, [2]: previous value
  logic       rise;

  assign rise = sync_q[1] & ~sync_q[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sync_q <= '0;
      hit    <= 1'b0;
      ts     <= '0;
    end else begin
      sync_q <= {sync_q[1:0], comp};
      if (rise && (!hit || clear)) begin
        hit <= 1'b1;
        ts  <= ts_gray;
      end else if (clear) begin
        hit <= 1'b0;
      end
    end
  end

endmodule
