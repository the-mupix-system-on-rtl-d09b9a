// gray_counter: free-running time-stamp counter with Gray-coded output.
//
// The pixels latch this value when they are hit. The paper says the time
// stamp is eight bits wide and sampled from a 62.5 MHz Gray counter; how
// the counter is built is this design's choice: a binary counter whose
// next value is converted to Gray code and registered, so the output
// changes in exactly one bit per clock and is glitch-free.
//
// Interface: clk (62.5 MHz), asynchronous active-low rst_n, gray (W bits).
// Timing: gray is 0 after reset and steps once per clock edge; it wraps
// after 2**W clocks (256 x 16 ns = 4.096 us for W = 8).
module gray_counter #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  output logic [W-1:0] gray
);

  logic [W-1:0] bin_q;
  logic [W-1:0] bin_d;

  assign bin_d = bin_q + 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bin_q <= '0;
      gray  <= '0;
    end else begin
      bin_q <= bin_d;
      gray  <= bin_d ^ (bin_d >> 1);
    end
  end

endmodule
