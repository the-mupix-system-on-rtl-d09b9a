// pixel_column: one column of digital pixels with its readout logic.
//
// Holds ROWS digital pixels, a second register that receives a copy of all
// their hit flags, a row priority logic on that copy and a one-hit column
// buffer. This is the column part of the readout the paper describes:
//   load : at the start of a readout cycle the hit flags are copied into the
//          second register;
//   pull : the first hit of the second register (lowest row) is copied into
//          the column buffer together with its time stamp, and in the same
//          cycle the pixel's hit flag and the second-register bit are
//          cleared, so the pixel can take its next hit;
//   buf_clear : the state machine has sent the buffered hit.
// Hits that arrive after a load wait for the next load. The buffer depth of
// one hit and the lowest-row-first order are this design's choices.
//
// Interface: clk (62.5 MHz), rst_n, comp[ROWS] comparator outputs,
// ts_gray time-stamp bus, load/pull/buf_clear from the state machine;
// buf_valid/buf_hit the column buffer, pending = second register not empty.
// Timing: all three commands act at the next clock edge; pull is ignored
// while the buffer is full (the state machine never does that).
module pixel_column
  import mupix_pkg::*;
#(
  parameter int unsigned ROWS_P = ROWS
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [ROWS_P-1:0]  comp,
  input  logic [TS_BITS-1:0] ts_gray,
  input  logic               load,
  input  logic               pull,
  input  logic               buf_clear,
  output logic               buf_valid,
  output col_hit_t           buf_hit,
  output logic               pending
);

  localparam int unsigned RW = (ROWS_P > 1) ? $clog2(ROWS_P) : 1;

  logic [ROWS_P-1:0]              hit;
  logic [TS_BITS-1:0]             ts [ROWS_P];
  logic [ROWS_P-1:0]              clear;
  logic [ROWS_P-1:0]              second_q;
  logic                           found;
  logic [RW-1:0]                  sel;
  logic                           do_pull;

  for (genvar r = 0; r < ROWS_P; r++) begin : g_pix
    digital_pixel #(.TS_BITS(TS_BITS)) u_pix (
      .clk     (clk),
      .rst_n   (rst_n),
      .comp    (comp[r]),
      .ts_gray (ts_gray),
      .clear   (clear[r]),
      .hit     (hit[r]),
      .ts      (ts[r])
    );
  end

  priority_encoder #(.N(ROWS_P)) u_row_prio (
    .req   (second_q),
    .found (found),
    .idx   (sel)
  );

  assign do_pull = pull && found && !buf_valid;
  assign pending = |second_q;

  always_comb begin
    clear = '0;
    if (do_pull) clear[sel] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      second_q  <= '0;
      buf_valid <= 1'b0;
      buf_hit   <= '0;
    end else begin
      if (load) begin
        second_q <= hit;
      end else if (do_pull) begin
        second_q[sel] <= 1'b0;
      end
      if (do_pull) begin
        buf_valid   <= 1'b1;
        buf_hit.row <= 8'(sel);
        buf_hit.ts  <= ts[sel];
      end else if (buf_clear) begin
        buf_valid <= 1'b0;
      end
    end
  end

  // The state machine only pulls into an empty buffer and never loads and
  // pulls in the same cycle.
  a_pull_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                 pull |-> !buf_valid);
  a_load_pull:  assert property (@(posedge clk) disable iff (!rst_n)
                                 !(load && pull));

endmodule
