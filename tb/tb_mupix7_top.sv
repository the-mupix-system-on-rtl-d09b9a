// tb_mupix7_top: end-to-end test of the full 32 x 40 chip at its default
// parameters, from comparator pulses to the 1.25 Gbit/s serial line.
//
// The testbench fires comparator pulses on random pixels, predicts for each
// the time stamp the pixel must latch (the time-stamp bus two system clocks
// after the pulse starts) and whether the pixel is still dead from an
// earlier hit, then aligns to the K28.5 comma on the serial line, decodes
// the 8b/10b symbols and parses the frames. Every live hit must arrive
// exactly once with its column, row and time stamp, nothing else may
// arrive, and the frame counter must count up by one per frame.
// Mechanisms counted (each must occur): empty readout cycles, hits sent,
// two hits of one column in one cycle (second pull), hits sent back to back
// at the full link rate, cycles ended by the hit limit, and hits lost to
// pixel dead time.
module tb_mupix7_top;
  import mupix_pkg::*;
  localparam int C = COLS, R = ROWS, HCW = $clog2(C * R + 1);

  logic           clk_ser = 1'b0;
  logic           rst_n = 1'b1;
  logic [R-1:0]   comp [C];
  logic [HCW-1:0] max_hits = '0;
  logic           sdo, clk_sys, ev_hit, ev_limit;
  logic [7:0]     ts_gray;
  logic [15:0]    cycle_cnt;
  int checks = 0, failures = 0;

  mupix7_top dut (.clk_ser(clk_ser), .rst_n(rst_n), .comp(comp), .max_hits(max_hits),
    .sdo(sdo), .clk_sys(clk_sys), .ts_gray(ts_gray), .ev_hit(ev_hit),
    .ev_limit(ev_limit), .cycle_cnt(cycle_cnt));

  always #1 clk_ser = ~clk_ser;   // one time unit = 0.4 ns

  // Pixel state probes (hit flag and readout clear), used to tell whether a
  // pulse falls into a pixel's dead time.
  logic [R-1:0] flag [C];
  logic [R-1:0] clr  [C];
  for (genvar c = 0; c < C; c++) begin : g_probe
    assign flag[c] = dut.g_col[c].u_col.hit;
    assign clr[c]  = dut.g_col[c].u_col.clear;
  end

  task automatic chk(input bit cond, input string msg);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s", msg); end
  endtask

  // ---- 8b/10b decode table, filled from a reference encoder -----------
  logic [7:0] e_din;
  logic       e_k, e_rd, e_rdo;
  logic [9:0] e_dout;
  enc8b10b u_ref (.din(e_din), .k(e_k), .rd_in(e_rd), .dout(e_dout), .rd_out(e_rdo));
  logic [8:0] dec [logic [9:0]];   // {k, byte}
  bit         table_ready = 0;

  initial begin
    logic [7:0] kc [3] = '{K28_0, K28_4, K28_5};
    for (int rd = 0; rd < 2; rd++) begin
      for (int b = 0; b < 259; b++) begin
        e_k   = (b >= 256);
        e_din = e_k ? kc[b-256] : 8'(b);
        e_rd  = rd[0];
        #0.5;
        dec[e_dout] = {e_k, e_din};
      end
    end
    table_ready = 1;
  end

  // ---- reference of the hits that must arrive --------------------------
  typedef logic [23:0] key_t;              // {col, row, ts}
  int   expected [key_t];
  int   n_expected = 0, n_received = 0, n_dead = 0, n_unexpected = 0;
  int   age [C][R];
  logic [7:0] pend_ts [C][R];

  function automatic key_t mk_key(int c, int r, logic [7:0] t);
    return {8'(c), 8'(r), t};
  endfunction

  bit   req [C][R];

  // Request a pulse on a pixel (comparator high for 3 system clocks, then
  // low for 2); ignored while the pixel's previous pulse is in progress.
  task automatic fire(input int c, input int r);
    req[c][r] = 1'b1;
  endtask

  always @(negedge clk_sys) if (rst_n && table_ready) begin
    for (int c = 0; c < C; c++) begin
      for (int r = 0; r < R; r++) begin
        if (age[c][r] == 0 && req[c][r]) begin
          comp[c][r] = 1'b1;
          age[c][r]  = 1;
        end else if (age[c][r] != 0) begin
          age[c][r]++;
          if (age[c][r] == 3) begin
            // the edge is seen by the pixel at the next clock edge
            if (!flag[c][r] || clr[c][r]) begin
              expected[mk_key(c, r, ts_gray)]++;
              n_expected++;
            end else begin
              n_dead++;
            end
          end
          if (age[c][r] == 4) comp[c][r] = 1'b0;
          if (age[c][r] == 6) age[c][r] = 0;
        end
        req[c][r] = 1'b0;
      end
    end
  end

  // ---- serial line: comma alignment and symbol decoding ----------------
  logic [9:0] win = '0;
  int         bitpos = -1;
  int         n_sym = 0, n_badsym = 0;

  // frame parser state
  int   in_frame = 0, cnt_left = 0, hbytes = 0, last_cnt = -1;
  int   n_frames = 0, n_empty = 0, n_multi = 0, n_b2b = 0, n_limit = 0, n_cnt_err = 0;
  int   frame_hits = 0, run_hits = 0;
  logic [15:0] cnt_val;
  logic [7:0]  hb [4];
  bit          col_seen [C];

  task automatic symbol(input logic k, input logic [7:0] b);
    if (k) begin
      run_hits = 0;
      if (b == K28_0) begin
        if (!in_frame) begin
          in_frame = 1; cnt_left = 2; hbytes = 0; frame_hits = 0;
          foreach (col_seen[i]) col_seen[i] = 0;
        end
      end else if (b == K28_4) begin
        if (in_frame) begin
          n_frames++;
          if (frame_hits == 0) n_empty++;
        end
        in_frame = 0;
      end
    end else if (in_frame) begin
      if (cnt_left > 0) begin
        cnt_val = {cnt_val[7:0], b};
        cnt_left--;
        if (cnt_left == 0) begin
          if (last_cnt >= 0 && cnt_val != 16'(last_cnt + 1)) n_cnt_err++;
          last_cnt = cnt_val;
        end
      end else begin
        hb[hbytes] = b;
        hbytes++;
        if (hbytes == 4) begin
          key_t key;
          hbytes = 0;
          frame_hits++;
          run_hits++;
          if (run_hits >= 2) n_b2b++;
          if (hb[0] < C) begin
            if (col_seen[hb[0]]) n_multi++;
            col_seen[hb[0]] = 1;
          end
          key = {hb[0], hb[1], hb[2]};
          if (hb[3] != 8'h00) n_badsym++;
          if (expected.exists(key) && expected[key] > 0) begin
            expected[key]--;
            if (expected[key] == 0) expected.delete(key);
            n_received++;
          end else begin
            n_unexpected++;
            $display("unexpected hit col %0d row %0d ts %h", hb[0], hb[1], hb[2]);
          end
        end
      end
    end
  endtask

  always @(negedge clk_ser) if (rst_n && table_ready) begin
    win = {win[8:0], sdo};
    if (bitpos < 0) begin
      if (win == 10'b0011111010 || win == 10'b1100000101) bitpos = 0;
    end else begin
      bitpos++;
    end
    if (bitpos == 0 || bitpos == 10) begin
      bitpos = 0;
      n_sym++;
      if (dec.exists(win)) symbol(dec[win][8], dec[win][7:0]);
      else n_badsym++;
    end
  end

  always @(posedge clk_sys) if (ev_limit) n_limit++;

  // ---- watchdog ----------------------------------------------------------
  initial begin
    #4000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus ----------------------------------------------------------
  task automatic sys_cycles(input int n);
    repeat (n) @(negedge clk_sys);
  endtask

  initial begin
    foreach (comp[c]) comp[c] = '0;
    foreach (age[c, r]) begin age[c][r] = 0; req[c][r] = 1'b0; end
    // The system clock stands still while the divider is in reset, so the
    // reset must arrive as an edge for the asynchronous reset to act.
    #1 rst_n = 1'b0;
    wait (table_ready);
    #20 rst_n = 1'b1;
    sys_cycles(60);                       // idle: empty readout cycles

    // 1: sparse random hits, no hit limit
    for (int t = 0; t < 600; t++) begin
      @(negedge clk_sys);
      if ($urandom_range(0, 3) == 0) fire($urandom_range(0, C - 1), $urandom_range(0, R - 1));
    end
    sys_cycles(100);

    // 2: bursts of 48 simultaneous hits over 6 columns, no limit
    for (int b = 0; b < 3; b++) begin
      @(negedge clk_sys);
      for (int i = 0; i < 48; i++) fire((i % 6) * 5 + b, (i * 7 + b) % R);
      sys_cycles(150);
    end

    // 3: hit limit of 5 and repeated pulses on a busy matrix (dead time)
    max_hits = HCW'(5);
    for (int t = 0; t < 800; t++) begin
      @(negedge clk_sys);
      for (int i = 0; i < 3; i++) fire($urandom_range(0, 7), $urandom_range(0, 9));
    end
    max_hits = '0;
    sys_cycles(1500);

    // results
    chk(n_unexpected == 0, $sformatf("%0d unexpected hits", n_unexpected));
    chk(expected.size() == 0, $sformatf("%0d expected hits never arrived", expected.size()));
    chk(n_received == n_expected, $sformatf("received %0d of %0d", n_received, n_expected));
    chk(n_badsym == 0, $sformatf("%0d undecodable symbols or bad reserved bytes", n_badsym));
    chk(n_cnt_err == 0, $sformatf("%0d frame counter errors", n_cnt_err));
    chk(n_empty > 0,   $sformatf("empty readout cycles: %0d", n_empty));
    chk(n_received > 0, $sformatf("hits sent: %0d", n_received));
    chk(n_multi > 0,   $sformatf("second pulls in a column: %0d", n_multi));
    chk(n_b2b > 0,     $sformatf("back-to-back hits: %0d", n_b2b));
    chk(n_limit > 0,   $sformatf("cycles ended by the hit limit: %0d", n_limit));
    chk(n_dead > 0,    $sformatf("hits lost to dead time: %0d", n_dead));
    $display("frames %0d empty %0d hits %0d/%0d multi %0d b2b %0d limit %0d dead %0d symbols %0d",
             n_frames, n_empty, n_received, n_expected, n_multi, n_b2b, n_limit, n_dead, n_sym);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
