// tb_link_encoder: checks the 20-bit codes of known slots, including the
// running disparity carried from the high to the low byte and from one
// slot to the next, the one-clock latency, and for 2000 random slots that
// the running digital sum of the line bits stays within +-1 after every
// 10-bit code (what a correct disparity chain guarantees).
module tb_link_encoder;
  import mupix_pkg::*;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  link_slot_t  slot;
  logic [19:0] code;
  int checks = 0, failures = 0;

  link_encoder dut (.clk(clk), .rst_n(rst_n), .slot(slot), .code(code));

  always #5 clk = ~clk;

  function automatic link_slot_t mk(input logic kh, input logic [7:0] h,
                                    input logic kl, input logic [7:0] l);
    return '{hi: '{k: kh, data: h}, lo: '{k: kl, data: l}};
  endfunction

  task automatic expect_code(input logic [19:0] e, input string nm);
    checks++;
    if (code !== e) begin
      failures++; $display("FAIL %s: %b_%b expected %b_%b", nm, code[19:10], code[9:0], e[19:10], e[9:0]);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rds;
    slot = mk(1, K28_5, 1, K28_5);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    slot = mk(1, K28_5, 1, K28_5);
    @(negedge clk);
    expect_code({10'b001111_1010, 10'b110000_0101}, "K28.5 K28.5 from RD-");
    slot = mk(1, K28_5, 0, 8'h00);
    @(negedge clk);
    expect_code({10'b001111_1010, 10'b011000_1011}, "K28.5 D0.0 from RD-");
    slot = mk(0, 8'h00, 1, K28_0);
    @(negedge clk);
    expect_code({10'b011000_1011, 10'b110000_1011}, "D0.0 K28.0 from RD+");
    slot = mk(1, K28_4, 1, K28_4);
    @(negedge clk);
    expect_code({10'b110000_1101, 10'b110000_1101}, "K28.4 K28.4 from RD+");
    // random traffic: running digital sum, starting at +1 after the last
    // known slot left positive disparity
    rds = 1;
    for (int n = 0; n < 2000; n++) begin
      slot = mk(0, 8'($urandom), 0, 8'($urandom));
      if (n % 7 == 0) slot = mk(1, K28_5, 0, 8'($urandom));
      @(negedge clk);
      for (int h = 0; h < 2; h++) begin
        logic [9:0] c;
        c = h ? code[9:0] : code[19:10];
        rds += 2 * $countones(c) - 10;
        checks++;
        if (rds != 1 && rds != -1) begin
          failures++; $display("FAIL running sum %0d at slot %0d", rds, n);
          rds = (rds > 0) ? 1 : -1;
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
