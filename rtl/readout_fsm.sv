// readout_fsm: the readout state machine of the MuPix7 periphery.
//
// Runs at 62.5 MHz, in parallel with data taking. One readout cycle:
//   HDR0  copy all hit flags into the second registers (load) and send the
//         header K28.0 K28.0;
//   HDR1  send the 16-bit synchronisation counter (readout cycle number);
//   PULL  every column copies its first pending hit into its buffer (pull);
//   HIT0  the column priority logic picks the first column with a full
//         buffer; send its column and row address;
//   HIT1  send the Gray time stamp and a zero byte, empty that buffer;
//         more full buffers -> HIT0, else hits still pending and the hit
//         limit not yet reached -> PULL, else -> TRL;
//   TRL   send the trailer K28.4 K28.4, then start over at HDR0.
// PULL sends the comma K28.5 K28.5 as filler. The sequence copy / pull
// first hit per column / send first column / repeat until empty / restart
// when all hits are read or the adjustable hit limit is passed follows the
// paper. The frame layout, the control characters, the 32-bit hit word and
// testing the hit limit only once the buffers are empty are this design's
// choices. A hit takes two cycles, so the link carries at most 31.25 Mhit/s.
//
// Interface: col_valid/col_hit/col_pending from the columns; load, pull and
// buf_clear (one bit per column) to them; slot is the registered two-byte
// output for the link encoder. max_hits sets the hit limit (0: no limit).
// ev_hit and ev_limit pulse for one cycle when a hit is sent and when a
// cycle is ended by the limit with hits still pending; cycle_cnt is the
// synchronisation counter.
// Timing: slot shows the word of a state one clock after that state.
module readout_fsm
  import mupix_pkg::*;
#(
  parameter int unsigned COLS_P = COLS,
  parameter int unsigned ROWS_P = ROWS,
  parameter int unsigned HCW    = $clog2(COLS_P * ROWS_P + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [HCW-1:0]    max_hits,
  input  logic [COLS_P-1:0] col_valid,
  input  col_hit_t          col_hit [COLS_P],
  input  logic [COLS_P-1:0] col_pending,
  output logic              load,
  output logic              pull,
  output logic [COLS_P-1:0] buf_clear,
  output link_slot_t        slot,
  output logic              ev_hit,
  output logic              ev_limit,
  output logic [15:0]       cycle_cnt
);

  localparam int unsigned CW = (COLS_P > 1) ? $clog2(COLS_P) : 1;

  typedef enum logic [2:0] {
    S_HDR0, S_HDR1, S_PULL, S_HIT0, S_HIT1, S_TRL
  } state_t;

  state_t          state;
  logic [CW-1:0]   sel;
  logic [CW-1:0]   sel_q;
  logic            any_valid;
  logic [COLS_P-1:0] others_valid;
  logic [HCW-1:0]  hit_count;
  logic            limit_reached;

  priority_encoder #(.N(COLS_P)) u_col_prio (
    .req   (col_valid),
    .found (any_valid),
    .idx   (sel)
  );

  assign load = (state == S_HDR0);
  assign pull = (state == S_PULL);

  always_comb begin
    buf_clear = '0;
    if (state == S_HIT1) buf_clear[sel_q] = 1'b1;
  end

  assign others_valid  = col_valid & ~buf_clear;
  // hit_count + 1 includes the hit being sent in HIT1.
  assign limit_reached = (max_hits != '0) && ((hit_count + 1'b1) >= max_hits);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_HDR0;
      sel_q     <= '0;
      hit_count <= '0;
      cycle_cnt <= '0;
      slot      <= '{hi: '{k: 1'b1, data: K28_5}, lo: '{k: 1'b1, data: K28_5}};
      ev_hit    <= 1'b0;
      ev_limit  <= 1'b0;
    end else begin
      ev_hit   <= 1'b0;
      ev_limit <= 1'b0;
      unique case (state)
        S_HDR0: begin
          slot      <= '{hi: '{k: 1'b1, data: K28_0}, lo: '{k: 1'b1, data: K28_0}};
          hit_count <= '0;
          state     <= S_HDR1;
        end
        S_HDR1: begin
          slot      <= '{hi: '{k: 1'b0, data: cycle_cnt[15:8]},
                         lo: '{k: 1'b0, data: cycle_cnt[7:0]}};
          cycle_cnt <= cycle_cnt + 1'b1;
          state     <= S_PULL;
        end
        S_PULL: begin
          slot  <= '{hi: '{k: 1'b1, data: K28_5}, lo: '{k: 1'b1, data: K28_5}};
          state <= (|col_pending) ? S_HIT0 : S_TRL;
        end
        S_HIT0: begin
          sel_q <= sel;
          slot  <= '{hi: '{k: 1'b0, data: 8'(sel)},
                     lo: '{k: 1'b0, data: col_hit[sel].row}};
          state <= S_HIT1;
        end
        S_HIT1: begin
          slot      <= '{hi: '{k: 1'b0, data: 8'(col_hit[sel_q].ts)},
                         lo: '{k: 1'b0, data: 8'h00}};
          hit_count <= hit_count + 1'b1;
          ev_hit    <= 1'b1;
          if (|others_valid) begin
            state <= S_HIT0;
          end else if ((|col_pending) && !limit_reached) begin
            state <= S_PULL;
          end else begin
            ev_limit <= |col_pending;
            state    <= S_TRL;
          end
        end
        S_TRL: begin
          slot  <= '{hi: '{k: 1'b1, data: K28_4}, lo: '{k: 1'b1, data: K28_4}};
          state <= S_HDR0;
        end
        default: state <= S_HDR0;
      endcase
    end
  end

  // HIT0 is entered only with at least one full column buffer.
  a_hit_has_data: assert property (@(posedge clk) disable iff (!rst_n)
                                   (state == S_HIT0) |-> any_valid);

endmodule
