// tb_mupix7_rates: the full 32 x 40 chip at the hit rates at which the
// prototype was operated and rated: about 1 kHz (electron and positron test
// beams), 380 kHz (highest rate of the muon-beam scan), 500 kHz (pion beam),
// 4.2 MHz (the Mu3e flux of 40 MHz/cm^2 on this chip's 0.1055 cm^2) and
// 30 MHz (the quoted upper limit). Hits arrive on uniformly random pixels
// as a Bernoulli process, one chance per 16 ns clock. For each rate the
// testbench reports the delivered hit rate, the share of 62.5 MHz slots that
// carry hit data and the hits lost to pixel dead time, and checks that
// every live hit arrives exactly once with the right address and time
// stamp, that up to 4.2 MHz the readout keeps up with no dead-time losses
// above 0.5 %, and that at 30 MHz at least 28 MHz of hits are delivered.
// Decoding and reference are those of tb_mupix7_top.
module tb_mupix7_rates;
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
    #400000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Cycles in which the state machine sends a hit (two slots per hit).
  int n_ev_hit = 0;
  always @(posedge clk_sys) if (ev_hit) n_ev_hit++;

  task automatic sys_cycles(input int n);
    repeat (n) @(negedge clk_sys);
  endtask

  task automatic run_rate(input string nm, input real rate_hz, input int n_hits);
    longint unsigned thr;
    int cyc, fired, exp0, rec0, dead0, ev0, rec_win;
    real deliv_mhz, slot_share, dead_share;
    thr   = longint'(rate_hz / 62.5e6 * 4294967296.0);
    exp0  = n_expected; rec0 = n_received; dead0 = n_dead; ev0 = n_ev_hit;
    cyc = 0; fired = 0;
    while (fired < n_hits) begin
      @(negedge clk_sys);
      cyc++;
      if (longint'($urandom) < thr) begin
        fire($urandom_range(0, C - 1), $urandom_range(0, R - 1));
        fired++;
      end
    end
    rec_win = n_ev_hit - ev0;             // hits sent inside the window
    sys_cycles(3000);                     // drain
    deliv_mhz  = real'(rec_win) / (real'(cyc) * 16.0e-9) / 1.0e6;
    slot_share = 2.0 * real'(rec_win) / real'(cyc);
    dead_share = real'(n_dead - dead0) / real'(fired);
    $display("%s: offered %0.3f MHz over %0d cycles, %0d pulses, live %0d, dead %0d (%0.2f %%), delivered %0.3f MHz, hit slots %0.2f %%",
             nm, real'(fired) / (real'(cyc) * 16.0e-9) / 1.0e6, cyc, fired,
             n_expected - exp0, n_dead - dead0, 100.0 * dead_share, deliv_mhz, 100.0 * slot_share);
    chk(expected.size() == 0, $sformatf("%s: %0d hits not delivered", nm, expected.size()));
    chk(n_received - rec0 == n_expected - exp0, $sformatf("%s: delivered %0d of %0d", nm, n_received - rec0, n_expected - exp0));
    if (rate_hz <= 5.0e6) chk(dead_share <= 0.005, $sformatf("%s: dead-time losses %0.2f %%", nm, 100.0 * dead_share));
    else                  chk(deliv_mhz >= 28.0, $sformatf("%s: delivered %0.2f MHz", nm, deliv_mhz));
  endtask

  initial begin
    foreach (comp[c]) comp[c] = '0;
    foreach (age[c, r]) begin age[c][r] = 0; req[c][r] = 1'b0; end
    #1 rst_n = 1'b0;
    wait (table_ready);
    #20 rst_n = 1'b1;
    sys_cycles(60);
    run_rate("1 kHz",    1.0e3,   4);
    run_rate("380 kHz",  380.0e3, 200);
    run_rate("500 kHz",  500.0e3, 200);
    run_rate("4.2 MHz",  4.2e6,   1000);
    run_rate("30 MHz",   30.0e6,  4000);
    chk(n_unexpected == 0, $sformatf("%0d unexpected hits", n_unexpected));
    chk(n_badsym == 0, $sformatf("%0d undecodable symbols or bad reserved bytes", n_badsym));
    chk(n_cnt_err == 0, $sformatf("%0d frame counter errors", n_cnt_err));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
