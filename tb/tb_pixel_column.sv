// tb_pixel_column: hits four pixels of a 40-row column at different times,
// then copies the hit flags (load) and pulls them one by one. Expected:
// rows leave in ascending order with the time stamps seen on the bus when
// their edges were detected, pending drops after the last pull, a hit that
// arrives after the load waits for the next load, and pulled pixels do not
// reappear (their flags were cleared by the pull).
module tb_pixel_column;
  import mupix_pkg::*;
  localparam int R = 40;
  logic         clk = 1'b0;
  logic         rst_n = 1'b0;
  logic [R-1:0] comp = '0;
  logic [7:0]   ts_bus = 8'h00;
  logic         load = 1'b0, pull = 1'b0, buf_clear = 1'b0;
  logic         buf_valid, pending;
  col_hit_t     buf_hit;
  int checks = 0, failures = 0;

  pixel_column #(.ROWS_P(R)) dut (.clk(clk), .rst_n(rst_n), .comp(comp),
    .ts_gray(ts_bus), .load(load), .pull(pull), .buf_clear(buf_clear),
    .buf_valid(buf_valid), .buf_hit(buf_hit), .pending(pending));

  always #5 clk = ~clk;
  always @(posedge clk) ts_bus <= ts_bus + 8'd3;

  logic [7:0] exp_ts [R];

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s (valid=%b row=%0d ts=%h pending=%b)", msg, buf_valid,
               buf_hit.row, buf_hit.ts, pending);
    end
  endtask

  task automatic hit_row(input int r);
    comp[r] = 1'b1;
    @(posedge clk); @(posedge clk);
    @(negedge clk);
    exp_ts[r] = ts_bus;
    @(negedge clk);
    comp[r] = 1'b0;
  endtask

  task automatic cmd(input bit l, input bit p, input bit c);
    load = l; pull = p; buf_clear = c;
    @(negedge clk);
    load = 0; pull = 0; buf_clear = 0;
  endtask

  task automatic pull_expect(input int r);
    cmd(0, 1, 0);
    chk(buf_valid && buf_hit.row == 8'(r), $sformatf("row %0d pulled", r));
    chk(buf_hit.ts == exp_ts[r], $sformatf("row %0d time stamp", r));
    cmd(0, 0, 1);
    chk(!buf_valid, "buffer emptied");
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    hit_row(17); hit_row(39); hit_row(3); hit_row(0);
    repeat (2) @(negedge clk);
    chk(!pending, "nothing pending before load");
    cmd(0, 1, 0);
    chk(!buf_valid, "pull before load finds nothing");
    cmd(1, 0, 0);
    chk(pending, "pending after load");
    // a hit after the load is not part of this cycle
    hit_row(5);
    repeat (2) @(negedge clk);
    pull_expect(0);
    pull_expect(3);
    pull_expect(17);
    chk(pending, "still pending before the last pull");
    pull_expect(39);
    chk(!pending, "second register empty");
    cmd(0, 1, 0);
    chk(!buf_valid, "row 5 not pulled before the next load");
    // next cycle: only row 5
    cmd(1, 0, 0);
    pull_expect(5);
    chk(!pending, "only row 5 was in the second cycle");
    // pull into a full buffer is refused (and flagged by the assertion,
    // which is why this testbench never does it); clear without data
    cmd(0, 0, 1);
    chk(!buf_valid, "clear of empty buffer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
