// tb_serializer: loads random 20-bit words once every 20 clocks and checks
// that the following 20 serial bits are the word, most significant first.
module tb_serializer;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        load = 1'b0;
  logic [19:0] din = '0;
  logic        sdo;
  int checks = 0, failures = 0;

  serializer #(.W(20)) dut (.clk_ser(clk), .rst_n(rst_n), .load(load), .din(din), .sdo(sdo));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [19:0] w;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 50; n++) begin
      w = 20'($urandom);
      din = w; load = 1'b1;
      @(negedge clk);
      load = 1'b0; din = '0;
      for (int i = 19; i >= 0; i--) begin
        checks++;
        if (sdo !== w[i]) begin
          failures++; $display("FAIL word %0d bit %0d", n, i);
        end
        if (i > 0) @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
