// serializer: parallel-to-serial converter of the fast link.
//
// A W-bit shift register on the 1.25 GHz clock. On the load strobe it
// takes the coded word of one system clock cycle; on every other cycle it
// shifts left, so the most significant bit (the first bit of the first
// 8b/10b code) leaves first. The paper names the serializer and its
// 1.25 Gbit/s rate; the load strobe and the bit order are this design's.
//
// Interface: clk_ser, rst_n, load (one cycle in W), din[W-1:0]; sdo is the
// serial bit for the LVDS driver.
// Timing: din[W-1] appears on sdo in the cycle after load, din[0] W-1
// cycles later.
module serializer #(
  parameter int unsigned W = 20
) (
  input  logic         clk_ser,
  input  logic         rst_n,
  input  logic         load,
  input  logic [W-1:0] din,
  output logic         sdo
);

  logic [W-1:0] sh_q;

  always_ff @(posedge clk_ser or negedge rst_n) begin
    if (!rst_n) begin
      sh_q <= '0;
    end else if (load) begin
      sh_q <= din;
    end else begin
      sh_q <= {sh_q[W-2:0], 1'b0};
    end
  end

  assign sdo = sh_q[W-1];

endmodule
