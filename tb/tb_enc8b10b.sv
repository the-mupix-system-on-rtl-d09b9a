// tb_enc8b10b: checks published 8b/10b code words for both running
// disparities, and over all 256 data bytes and 12 control characters the
// properties every valid 8b/10b code has: 4 to 6 ones in a code (and 5 or 6
// from negative, 4 or 5 from positive disparity), the disparity update,
// no run longer than five, no comma pattern in data, and that each code
// word decodes to one byte only.
module tb_enc8b10b;
  logic [7:0] din;
  logic       k, rd_in;
  logic [9:0] dout;
  logic       rd_out;
  int checks = 0, failures = 0;

  enc8b10b dut (.din(din), .k(k), .rd_in(rd_in), .dout(dout), .rd_out(rd_out));

  task automatic enc(input logic [7:0] d, input logic kk, input logic rd);
    din = d; k = kk; rd_in = rd;
    #1;
  endtask

  task automatic known(input logic [7:0] d, input logic kk, input logic rd,
                       input logic [9:0] exp, input logic exp_rd, input string nm);
    enc(d, kk, rd);
    checks++;
    if (dout !== exp || rd_out !== exp_rd) begin
      failures++;
      $display("FAIL %s rd=%b: got %b rd_out=%b, expected %b %b", nm, rd, dout, rd_out, exp, exp_rd);
    end
  endtask

  function automatic int max_run(input logic [9:0] c);
    int run = 1, best = 1;
    for (int i = 8; i >= 0; i--) begin
      run = (c[i] == c[i+1]) ? run + 1 : 1;
      if (run > best) best = run;
    end
    return best;
  endfunction

  function automatic bit has_comma(input logic [9:0] c);
    for (int i = 0; i <= 3; i++)
      if (c[9-i -: 7] == 7'b0011111 || c[9-i -: 7] == 7'b1100000) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int owner [logic [9:0]];
    logic [7:0] kchars [12] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC,
                                8'hDC, 8'hFC, 8'hF7, 8'hFB, 8'hFD, 8'hFE};
    // published code words (abcdei fghj)
    known(8'h00, 0, 0, 10'b100111_0100, 0, "D0.0");
    known(8'h00, 0, 1, 10'b011000_1011, 1, "D0.0");
    known(8'hB5, 0, 0, 10'b101010_1010, 0, "D21.5");
    known(8'hB5, 0, 1, 10'b101010_1010, 1, "D21.5");
    known(8'hBC, 1, 0, 10'b001111_1010, 1, "K28.5");
    known(8'hBC, 1, 1, 10'b110000_0101, 0, "K28.5");
    known(8'h1C, 1, 0, 10'b001111_0100, 0, "K28.0");
    known(8'h1C, 1, 1, 10'b110000_1011, 1, "K28.0");
    known(8'hFC, 1, 0, 10'b001111_1000, 0, "K28.7");
    known(8'hE7, 0, 0, 10'b111000_1110, 1, "D7.7");
    known(8'hE7, 0, 1, 10'b000111_0001, 0, "D7.7");
    known(8'hF1, 0, 0, 10'b100011_0111, 1, "D17.7 (A7)");
    known(8'hF1, 0, 1, 10'b100011_0001, 0, "D17.7");
    known(8'hEB, 0, 1, 10'b110100_1000, 0, "D11.7 (A7)");
    known(8'hEB, 0, 0, 10'b110100_1110, 1, "D11.7");
    known(8'h23, 0, 0, 10'b110001_1001, 0, "D3.1");
    known(8'h7F, 0, 0, 10'b101011_0011, 1, "D31.3");
    known(8'h18, 0, 0, 10'b110011_0100, 0, "D24.0");

    for (int rd = 0; rd < 2; rd++) begin
      for (int b = 0; b < 256 + 12; b++) begin
        logic isk;
        logic [7:0] byt;
        int ones, ones6;
        isk = (b >= 256);
        byt = isk ? kchars[b-256] : 8'(b);
        enc(byt, isk, rd[0]);
        ones  = $countones(dout);
        ones6 = $countones(dout[9:4]);
        checks++;
        if (!(rd == 0 ? (ones == 5 || ones == 6) : (ones == 4 || ones == 5))) begin
          failures++; $display("FAIL disparity %h k=%b rd=%0d: %b", byt, isk, rd, dout);
        end
        checks++;
        if (ones6 < 2 || ones6 > 4) begin
          failures++; $display("FAIL 6b sub-block %h: %b", byt, dout);
        end
        checks++;
        if (rd_out !== (rd[0] ^ (ones != 5))) begin
          failures++; $display("FAIL rd_out %h rd=%0d", byt, rd);
        end
        checks++;
        if (max_run(dout) > 5) begin
          failures++; $display("FAIL run length %h: %b", byt, dout);
        end
        if (!isk) begin
          checks++;
          if (has_comma(dout)) begin
            failures++; $display("FAIL comma in data %h: %b", byt, dout);
          end
        end
        checks++;
        if (owner.exists(dout) && owner[dout] != b) begin
          failures++; $display("FAIL code %b of %0d also used by %0d", dout, b, owner[dout]);
        end
        owner[dout] = b;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
