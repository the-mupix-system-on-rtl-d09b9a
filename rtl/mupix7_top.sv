// mupix7_top: digital part of the MuPix7 HV-MAPS chip.
//
// Each of the COLS x ROWS pixels sends its amplified pulse to a comparator
// in the chip periphery; the comparator outputs are this module's comp
// inputs. Below them sit the digital pixels (hit flag and latched 8-bit
// Gray time stamp), grouped into columns with a second register, a row
// priority logic and a one-hit buffer each. The readout state machine
// copies the hit flags, pulls one hit per column into the buffers, sends
// the first filled column's hit and repeats until all hits are read or the
// hit limit is passed, framing every readout cycle with control words and
// a synchronisation counter. The two bytes it sends per 62.5 MHz cycle are
// 8b/10b coded and serialized at 1.25 Gbit/s. The clock divider derives the
// 62.5 MHz clock from the 1.25 GHz clock of the on-chip PLL.
// That structure and the sizes and rates are the paper's; frame format, hit
// word, buffer depth and priority order are this design's (see the blocks).
//
// Outside this module, and entering or leaving it as ports: the analog
// pixel and comparator (comp), the PLL/VCO (clk_ser), the per-pixel tune
// DACs (analog, no logic here) and the LVDS driver (sdo).
//
// Interface: clk_ser 1.25 GHz, rst_n asynchronous active low, comp[c][r]
// comparator of column c row r, max_hits (0 = no limit); sdo serial data
// (first-coded bit first); clk_sys the derived 62.5 MHz clock; ts_gray the
// current time stamp; ev_hit / ev_limit / cycle_cnt readout status.
// Timing: a hit leaves sdo a few readout cycles after its comparator edge;
// each 62.5 MHz cycle carries 20 line bits.
module mupix7_top
  import mupix_pkg::*;
#(
  parameter int unsigned COLS_P = COLS,
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned HCW    = $clog2(COLS_P * ROWS_P + 1)
) (
  input  logic               clk_ser,
  input  logic               rst_n,
  input  logic [ROWS_P-1:0]  comp [COLS_P],
  input  logic [HCW-1:0]     max_hits,
  output logic               sdo,
  output logic               clk_sys,
  output logic [TS_BITS-1:0] ts_gray,
  output logic               ev_hit,
  output logic               ev_limit,
  output logic [15:0]        cycle_cnt
);

  logic              ser_load;
  logic              load;
  logic              pull;
  logic [COLS_P-1:0] buf_clear;
  logic [COLS_P-1:0] col_valid;
  logic [COLS_P-1:0] col_pending;
  col_hit_t          col_hit [COLS_P];
  link_slot_t        slot;
  logic [19:0]       code;

  clock_divider #(.DIV(20)) u_clkdiv (
    .clk_ser  (clk_ser),
    .rst_n    (rst_n),
    .clk_sys  (clk_sys),
    .ser_load (ser_load)
  );

  gray_counter #(.W(TS_BITS)) u_ts (
    .clk   (clk_sys),
    .rst_n (rst_n),
    .gray  (ts_gray)
  );

  for (genvar c = 0; c < COLS_P; c++) begin : g_col
    pixel_column #(.ROWS_P(ROWS_P)) u_col (
      .clk       (clk_sys),
      .rst_n     (rst_n),
      .comp      (comp[c]),
      .ts_gray   (ts_gray),
      .load      (load),
      .pull      (pull),
      .buf_clear (buf_clear[c]),
      .buf_valid (col_valid[c]),
      .buf_hit   (col_hit[c]),
      .pending   (col_pending[c])
    );
  end

  readout_fsm #(.COLS_P(COLS_P), .ROWS_P(ROWS_P), .HCW(HCW)) u_fsm (
    .clk         (clk_sys),
    .rst_n       (rst_n),
    .max_hits    (max_hits),
    .col_valid   (col_valid),
    .col_hit     (col_hit),
    .col_pending (col_pending),
    .load        (load),
    .pull        (pull),
    .buf_clear   (buf_clear),
    .slot        (slot),
    .ev_hit      (ev_hit),
    .ev_limit    (ev_limit),
    .cycle_cnt   (cycle_cnt)
  );

  link_encoder u_enc (
    .clk   (clk_sys),
    .rst_n (rst_n),
    .slot  (slot),
    .code  (code)
  );

  serializer #(.W(20)) u_ser (
    .clk_ser (clk_ser),
    .rst_n   (rst_n),
    .load    (ser_load),
    .din     (code),
    .sdo     (sdo)
  );

endmodule
