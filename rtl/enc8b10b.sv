// enc8b10b: 8b/10b encoder for one byte (standard Widmer-Franaszek code).
//
// The paper states only that the output data are 8b/10b encoded; the
// standard code is used here. The byte HGF_EDCBA is split into a 5-bit part
// EDCBA, coded to six bits abcdei, and a 3-bit part HGF, coded to four bits
// fghj. Each table entry is the code for negative running disparity (RD-);
// entries marked "alt" are replaced by their bitwise complement when the
// running disparity is positive. A sub-block with unequal numbers of ones
// and zeros flips the running disparity. For D.x.7 the alternate code A7 is
// used where the primary P7 would make a run of five equal bits, and the
// control characters K28.0-K28.7, K23.7, K27.7, K29.7 and K30.7 are
// supported.
//
// Interface: din (byte), k (control flag), rd_in (running disparity before
// the byte, 1 = positive); dout[9:0] = {a,b,c,d,e,i,f,g,h,j}, bit 9 sent
// first; rd_out (running disparity after the byte). Combinational.
module enc8b10b (
  input  logic [7:0] din,
  input  logic       k,
  input  logic       rd_in,
  output logic [9:0] dout,
  output logic       rd_out
);

  logic [4:0] x;
  logic [2:0] y;
  logic [5:0] c6;       // RD- form of the 6-bit sub-block
  logic       alt6;     // 6-bit sub-block alternates with disparity
  logic [3:0] c4;
  logic       alt4;
  logic       rd_mid;
  logic [5:0] o6;
  logic [3:0] o4;
  logic       k28;
  logic       use_a7;

  assign x   = din[4:0];
  assign y   = din[7:5];
  assign k28 = k && (x == 5'd28);

  // 5b/6b table, RD- column.
  always_comb begin
    alt6 = 1'b1;
    unique case (x)
      5'd0 : c6 = 6'b100111;
      5'd1 : c6 = 6'b011101;
      5'd2 : c6 = 6'b101101;
      5'd3 : begin c6 = 6'b110001; alt6 = 1'b0; end
      5'd4 : c6 = 6'b110101;
      5'd5 : begin c6 = 6'b101001; alt6 = 1'b0; end
      5'd6 : begin c6 = 6'b011001; alt6 = 1'b0; end
      5'd7 : c6 = 6'b111000;
      5'd8 : c6 = 6'b111001;
      5'd9 : begin c6 = 6'b100101; alt6 = 1'b0; end
      5'd10: begin c6 = 6'b010101; alt6 = 1'b0; end
      5'd11: begin c6 = 6'b110100; alt6 = 1'b0; end
      5'd12: begin c6 = 6'b001101; alt6 = 1'b0; end
      5'd13: begin c6 = 6'b101100; alt6 = 1'b0; end
      5'd14: begin c6 = 6'b011100; alt6 = 1'b0; end
      5'd15: c6 = 6'b010111;
      5'd16: c6 = 6'b011011;
      5'd17: begin c6 = 6'b100011; alt6 = 1'b0; end
      5'd18: begin c6 = 6'b010011; alt6 = 1'b0; end
      5'd19: begin c6 = 6'b110010; alt6 = 1'b0; end
      5'd20: begin c6 = 6'b001011; alt6 = 1'b0; end
      5'd21: begin c6 = 6'b101010; alt6 = 1'b0; end
      5'd22: begin c6 = 6'b011010; alt6 = 1'b0; end
      5'd23: c6 = 6'b111010;
      5'd24: c6 = 6'b110011;
      5'd25: begin c6 = 6'b100110; alt6 = 1'b0; end
      5'd26: begin c6 = 6'b010110; alt6 = 1'b0; end
      5'd27: c6 = 6'b110110;
      5'd28: begin c6 = 6'b001110; alt6 = 1'b0; end
      5'd29: c6 = 6'b101110;
      5'd30: c6 = 6'b011110;
      default: c6 = 6'b101011;  // 31
    endcase
    if (k28) begin
      c6   = 6'b001111;
      alt6 = 1'b1;
    end
  end

  assign o6     = (alt6 && rd_in) ? ~c6 : c6;
  assign rd_mid = ($countones(c6) != 3) ? ~rd_in : rd_in;

  // D.x.A7 replaces D.x.P7 to avoid a run of five equal bits.
  assign use_a7 = (!rd_mid && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                  ( rd_mid && (x == 5'd11 || x == 5'd13 || x == 5'd14));

  // 3b/4b table, RD- column.
  always_comb begin
    alt4 = 1'b1;
    if (k28) begin
      unique case (y)
        3'd0: c4 = 4'b1011;
        3'd1: c4 = 4'b0110;
        3'd2: c4 = 4'b1010;
        3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;
        3'd5: c4 = 4'b0101;
        3'd6: c4 = 4'b1001;
        default: c4 = 4'b0111;
      endcase
    end else begin
      unique case (y)
        3'd0: c4 = 4'b1011;
        3'd1: begin c4 = 4'b1001; alt4 = 1'b0; end
        3'd2: begin c4 = 4'b0101; alt4 = 1'b0; end
        3'd3: c4 = 4'b1100;
        3'd4: c4 = 4'b1101;
        3'd5: begin c4 = 4'b1010; alt4 = 1'b0; end
        3'd6: begin c4 = 4'b0110; alt4 = 1'b0; end
        default: c4 = (use_a7 || k) ? 4'b0111 : 4'b1110;
      endcase
    end
  end

  assign o4     = (alt4 && rd_mid) ? ~c4 : c4;
  assign rd_out = ($countones(c4) != 2) ? ~rd_mid : rd_mid;
  assign dout   = {o6, o4};

endmodule
