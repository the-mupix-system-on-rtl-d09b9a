// link_encoder: 8b/10b coding of one two-byte link slot per clock.
//
// The readout state machine produces two bytes per 62.5 MHz cycle, which
// at ten bits per coded byte is the 1.25 Gbit/s of the serial link. Two
// byte encoders are chained: the high byte is coded first with the running
// disparity left by the previous slot, the low byte with the disparity the
// high byte leaves. The two-byte width is this design's consequence of the
// paper's 62.5 MHz state machine clock and 1.25 Gbit/s link rate.
//
// Interface: clk (62.5 MHz), rst_n, slot (two bytes with K flags, high byte
// sent first); code[19:0] = {code(hi), code(lo)}, bit 19 sent first.
// Timing: code is registered, one clock after slot. The running disparity
// is negative after reset.
module link_encoder
  import mupix_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  link_slot_t slot,
  output logic [19:0] code
);

  logic       rd_q;
  logic       rd_hi;
  logic       rd_lo;
  logic [9:0] c_hi;
  logic [9:0] c_lo;

  enc8b10b u_enc_hi (
    .din    (slot.hi.data),
    .k      (slot.hi.k),
    .rd_in  (rd_q),
    .dout   (c_hi),
    .rd_out (rd_hi)
  );

  enc8b10b u_enc_lo (
    .din    (slot.lo.data),
    .k      (slot.lo.k),
    .rd_in  (rd_hi),
    .dout   (c_lo),
    .rd_out (rd_lo)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q <= 1'b0;
      code <= '0;
    end else begin
      rd_q <= rd_lo;
      code <= {c_hi, c_lo};
    end
  end

endmodule
