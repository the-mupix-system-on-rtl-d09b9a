// tb_gray_counter: checks the time-stamp counter against n ^ (n >> 1),
// where n counts clock edges since reset, that exactly one bit changes per
// step, and that the count wraps after 256 steps.
module tb_gray_counter;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic [7:0] gray;
  logic [7:0] prev;
  int checks = 0, failures = 0;

  gray_counter #(.W(8)) dut (.clk(clk), .rst_n(rst_n), .gray(gray));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned n;
    repeat (3) @(posedge clk);
    @(negedge clk);
    checks++; if (gray !== 8'h00) begin failures++; $display("reset value %h", gray); end
    rst_n = 1'b1;
    prev = gray;
    for (n = 1; n <= 600; n++) begin
      @(negedge clk);
      checks++;
      if (gray !== 8'((n % 256) ^ ((n % 256) >> 1))) begin
        failures++; $display("step %0d: gray %h", n, gray);
      end
      checks++;
      if ($countones(gray ^ prev) != 1) begin
        failures++; $display("step %0d: %0d bits changed", n, $countones(gray ^ prev));
      end
      prev = gray;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
