// tb_digital_pixel: drives comparator pulses and checks that the first
// edge sets the hit flag three clocks later with the time stamp of the
// detection cycle, that edges while the flag is set are ignored (dead
// time), that clear frees the pixel, and that a new edge in the clear
// cycle keeps the flag set with the new time stamp.
module tb_digital_pixel;
  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  logic       comp = 1'b0;
  logic [7:0] ts_bus = 8'h00;
  logic       clear = 1'b0;
  logic       hit;
  logic [7:0] ts;
  int checks = 0, failures = 0;

  digital_pixel #(.TS_BITS(8)) dut (.clk(clk), .rst_n(rst_n), .comp(comp),
    .ts_gray(ts_bus), .clear(clear), .hit(hit), .ts(ts));

  always #5 clk = ~clk;
  // time-stamp bus: a new value every clock
  always @(posedge clk) ts_bus <= ts_bus + 8'd7;

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (hit=%b ts=%h)", msg, hit, ts); end
  endtask

  // Pulse comp at a negedge; returns the bus value the pixel must latch.
  task automatic pulse(output logic [7:0] exp_ts);
    comp = 1'b1;
    @(posedge clk); @(posedge clk);
    @(negedge clk);
    exp_ts = ts_bus;
    @(negedge clk); @(negedge clk);
    comp = 1'b0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [7:0] e1, e2, e3;
    repeat (3) @(negedge clk);
    chk(hit == 1'b0, "no hit in reset");
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    chk(hit == 1'b0, "idle");
    // latency: comp at negedge N0, hit visible after the third posedge
    comp = 1'b1;
    @(negedge clk); chk(hit == 1'b0, "latency 1");
    @(negedge clk); e1 = ts_bus; chk(hit == 1'b0, "latency 2");
    @(negedge clk); chk(hit == 1'b1, "hit after 3 clocks");
    chk(ts == e1, "time stamp of first hit");
    comp = 1'b0;
    repeat (3) @(negedge clk);
    // second pulse while flag set: dead, time stamp unchanged
    pulse(e2);
    repeat (3) @(negedge clk);
    chk(hit == 1'b1 && ts == e1, "dead time keeps first time stamp");
    // clear
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    chk(hit == 1'b0, "cleared");
    repeat (3) @(negedge clk);
    pulse(e2);
    chk(hit == 1'b1 && ts == e2, "new hit after clear");
    // edge detected in the clear cycle: set wins with the new time stamp
    repeat (3) @(negedge clk);
    comp = 1'b1;
    @(posedge clk); @(posedge clk);
    @(negedge clk);
    e3 = ts_bus;
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    chk(hit == 1'b1 && ts == e3, "set wins over clear");
    comp = 1'b0;
    repeat (4) @(negedge clk);
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    chk(hit == 1'b0, "cleared again");
    // a long pulse makes a single hit
    comp = 1'b1; repeat (10) @(negedge clk);
    clear = 1'b1; @(negedge clk); clear = 1'b0;
    repeat (5) @(negedge clk);
    chk(hit == 1'b0, "level held high gives no new hit");
    comp = 1'b0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
