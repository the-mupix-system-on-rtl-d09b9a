// tb_readout_fsm: runs the readout state machine on a 4x4 matrix of real
// pixel columns and decodes its slot stream into frames. Checks: empty
// frames (header, counter, filler, trailer: 4 cycles) with an incrementing
// synchronisation counter; a frame with four hits in three columns that
// are sent in column/row priority order with their time stamps, three of
// them back to back at one hit per two cycles (13 cycles in all); and the
// hit limit: with max_hits = 2 five hits are spread over three frames and
// the limit event fires twice.
module tb_readout_fsm;
  import mupix_pkg::*;
  localparam int C = 4, R = 4, HCW = $clog2(C * R + 1);

  logic           clk = 1'b0;
  logic           rst_n = 1'b0;
  logic [R-1:0]   comp [C];
  logic [7:0]     ts_bus = 8'h00;
  logic [HCW-1:0] max_hits = '0;
  logic [C-1:0]   col_valid, col_pending, buf_clear;
  col_hit_t       col_hit [C];
  logic           load, pull, ev_hit, ev_limit;
  link_slot_t     slot;
  logic [15:0]    cycle_cnt;
  int checks = 0, failures = 0;

  for (genvar c = 0; c < C; c++) begin : g_col
    pixel_column #(.ROWS_P(R)) u_col (.clk(clk), .rst_n(rst_n), .comp(comp[c]),
      .ts_gray(ts_bus), .load(load), .pull(pull), .buf_clear(buf_clear[c]),
      .buf_valid(col_valid[c]), .buf_hit(col_hit[c]), .pending(col_pending[c]));
  end

  readout_fsm #(.COLS_P(C), .ROWS_P(R)) dut (.clk(clk), .rst_n(rst_n),
    .max_hits(max_hits), .col_valid(col_valid), .col_hit(col_hit),
    .col_pending(col_pending), .load(load), .pull(pull), .buf_clear(buf_clear),
    .slot(slot), .ev_hit(ev_hit), .ev_limit(ev_limit), .cycle_cnt(cycle_cnt));

  always #5 clk = ~clk;
  always @(posedge clk) ts_bus <= ts_bus + 8'd1;

  // ---- frame decoder --------------------------------------------------
  typedef struct packed { logic [7:0] col, row, ts; } hit_t;
  typedef struct {
    int   counter;
    int   length;
    hit_t hits [$];
  } frame_t;

  frame_t frames [$];
  frame_t cur;
  int     in_frame = 0, after_hdr = 0, half = 0, start_cyc = 0, cyc = 0;
  int     n_limit = 0, n_bad = 0;
  hit_t   h;

  always @(negedge clk) if (rst_n) begin
    cyc++;
    if (ev_limit) n_limit++;
    if (slot.hi.k && slot.hi.data == K28_0 && slot.lo.k && slot.lo.data == K28_0) begin
      cur.counter = -1; cur.length = 0; cur.hits.delete();
      in_frame = 1; after_hdr = 1; half = 0; start_cyc = cyc;
    end else if (slot.hi.k && slot.hi.data == K28_4 && slot.lo.k && slot.lo.data == K28_4) begin
      if (in_frame) begin
        cur.length = cyc - start_cyc + 1;
        frames.push_back(cur);
      end
      in_frame = 0;
    end else if (!slot.hi.k && !slot.lo.k && in_frame) begin
      if (after_hdr) begin
        cur.counter = {slot.hi.data, slot.lo.data};
        after_hdr = 0;
      end else if (half == 0) begin
        h.col = slot.hi.data; h.row = slot.lo.data; half = 1;
      end else begin
        h.ts = slot.hi.data; half = 0;
        if (slot.lo.data != 8'h00) n_bad++;
        cur.hits.push_back(h);
      end
    end else begin
      after_hdr = 0;
    end
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // Raise the given pixels together; returns the time stamp they latch.
  task automatic inject(input int cs [$], input int rs [$], output logic [7:0] ts);
    foreach (cs[i]) comp[cs[i]][rs[i]] = 1'b1;
    @(posedge clk); @(posedge clk);
    @(negedge clk);
    ts = ts_bus;
    @(negedge clk); @(negedge clk);
    foreach (cs[i]) comp[cs[i]][rs[i]] = 1'b0;
  endtask

  task automatic wait_hit_frames(input int n, output frame_t got [$]);
    got = {};
    while (got.size() < n) begin
      @(negedge clk);
      while (frames.size() > 0) begin
        frame_t f;
        f = frames.pop_front();
        if (f.hits.size() > 0) got.push_back(f);
      end
    end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    frame_t got [$];
    logic [7:0] t1, t2;
    int prev_cnt;
    foreach (comp[c]) comp[c] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // empty frames
    repeat (20) @(negedge clk);
    chk(frames.size() >= 4, "empty frames produced");
    prev_cnt = frames[0].counter;
    foreach (frames[i]) begin
      chk(frames[i].length == 4 && frames[i].hits.size() == 0, $sformatf("empty frame %0d length %0d", i, frames[i].length));
      chk(frames[i].counter == prev_cnt + i, "sync counter increments");
    end
    frames = {};

    // four hits, one column with two
    inject('{1, 1, 3, 0}, '{2, 0, 3, 1}, t1);
    wait_hit_frames(1, got);
    chk(got[0].hits.size() == 4, $sformatf("4 hits in one frame, got %0d", got[0].hits.size()));
    if (got[0].hits.size() == 4) begin
      chk(got[0].hits[0] == {8'd0, 8'd1, t1}, "hit 0 = col 0 row 1");
      chk(got[0].hits[1] == {8'd1, 8'd0, t1}, "hit 1 = col 1 row 0");
      chk(got[0].hits[2] == {8'd3, 8'd3, t1}, "hit 2 = col 3 row 3");
      chk(got[0].hits[3] == {8'd1, 8'd2, t1}, "hit 3 = col 1 row 2 (second pull)");
    end
    chk(got[0].length == 13, $sformatf("frame of 4 hits takes 13 cycles, took %0d", got[0].length));
    chk(n_limit == 0, "no limit without max_hits");

    // hit limit
    max_hits = HCW'(2);
    repeat (10) @(negedge clk);
    frames = {};
    inject('{2, 2, 2, 2, 0}, '{0, 1, 2, 3, 0}, t2);
    wait_hit_frames(3, got);
    chk(got[0].hits.size() == 2 && got[1].hits.size() == 2 && got[2].hits.size() == 1,
        $sformatf("limit splits 5 hits 2/2/1, got %0d/%0d/%0d", got[0].hits.size(),
                  got[1].hits.size(), got[2].hits.size()));
    if (got[2].hits.size() == 1) begin
      chk(got[0].hits[0] == {8'd0, 8'd0, t2} && got[0].hits[1] == {8'd2, 8'd0, t2}, "first limited frame");
      chk(got[1].hits[0] == {8'd2, 8'd1, t2} && got[1].hits[1] == {8'd2, 8'd2, t2}, "second limited frame");
      chk(got[2].hits[0] == {8'd2, 8'd3, t2}, "last hit");
    end
    chk(got[1].counter == got[0].counter + 1 && got[2].counter == got[1].counter + 1, "limited frames consecutive");
    chk(n_limit == 2, $sformatf("limit fired twice, %0d", n_limit));
    chk(n_bad == 0, "reserved byte zero");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
