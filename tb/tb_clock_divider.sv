// tb_clock_divider: checks that the system clock has a period of 20 fast
// clocks and is high for 10 of them, and that the serializer load strobe is
// high for one fast clock per period, 15 fast clocks after the rising edge
// of the system clock.
module tb_clock_divider;
  logic clk_ser = 1'b0;
  logic rst_n = 1'b0;
  logic clk_sys, ser_load;
  int checks = 0, failures = 0;

  clock_divider #(.DIV(20)) dut (.clk_ser(clk_ser), .rst_n(rst_n),
    .clk_sys(clk_sys), .ser_load(ser_load));

  always #5 clk_ser = ~clk_ser;

  initial begin
    repeat (10000) @(posedge clk_ser);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int high, loads, load_pos;
    repeat (3) @(negedge clk_ser);
    rst_n = 1'b1;
    // find a rising edge of clk_sys
    while (clk_sys) @(negedge clk_ser);
    while (!clk_sys) @(negedge clk_ser);
    for (int p = 0; p < 40; p++) begin
      high = 0; loads = 0; load_pos = -1;
      for (int i = 0; i < 20; i++) begin
        if (clk_sys) high++;
        if (ser_load) begin loads++; load_pos = i; end
        checks++;
        if (i == 0 && !clk_sys) begin failures++; $display("FAIL period %0d does not start high", p); end
        @(negedge clk_ser);
      end
      checks++; if (high != 10) begin failures++; $display("FAIL high %0d", high); end
      checks++; if (loads != 1 || load_pos != 15) begin
        failures++; $display("FAIL loads %0d at %0d", loads, load_pos);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
