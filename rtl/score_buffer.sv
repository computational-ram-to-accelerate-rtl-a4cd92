// score_buffer: the score read-out buffer at the periphery of one array.
//
// At the end of the score phase of an alignment every row holds its
// similarity score in the same SCORE_W columns. On start the buffer reads the
// rows one at a time through the array's read port, slices the score out of
// each row and hands it to the host as a record {row, loc, score}, where loc is
// the alignment location the controller passed along. The host picks the best
// alignments from these records.
//
// Per row: one cycle to issue the read, READ_CYCLES cycles of read window
// (the array returns data the cycle after the read strobe), then the record is
// offered on out_valid until out_ready. busy is high from the start pulse
// until the last row's record is taken; the controller issues nothing to the
// array meanwhile, which is the idle window of this read-out scheme.
//
// The source design gives the buffer's purpose, that it reads one score per
// row at a time and that each score is tagged with row and location; the
// handshake, read pacing and record format are this design's choices.
module score_buffer
  import cram_pkg::*;
#(
  parameter int unsigned ROWS        = ROWS_DEF,
  parameter int unsigned COLS        = COLS_DEF,
  parameter int unsigned SCORE_W     = score_bits(PAT_CHARS_DEF),
  parameter int unsigned READ_CYCLES = 2
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  col_t            score_col,
  input  loc_t            loc,
  output logic            busy,
  // array read port
  output logic            rd_en,
  output row_t            rd_row,
  input  logic [COLS-1:0] rd_data,
  input  logic            rd_valid,
  // records to the host
  output logic            out_valid,
  input  logic            out_ready,
  output score_rec_t      out_rec
);

  typedef enum logic [1:0] {S_IDLE, S_ISSUE, S_WAIT, S_OUT} state_e;
  state_e     state;
  row_t       row;
  col_t       col_q;
  loc_t       loc_q;
  logic [7:0] score_q;
  logic [3:0] wcnt;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      row     <= '0;
      col_q   <= '0;
      loc_q   <= '0;
      score_q <= '0;
      wcnt    <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          row   <= '0;
          col_q <= score_col;
          loc_q <= loc;
          state <= S_ISSUE;
        end
        S_ISSUE: begin
          wcnt  <= 4'(READ_CYCLES - 1);
          state <= S_WAIT;
        end
        S_WAIT: begin
          if (rd_valid) score_q <= 8'(rd_data[col_q +: SCORE_W]);
          if (wcnt == '0) state <= S_OUT;
          else wcnt <= wcnt - 1'b1;
        end
        S_OUT: if (out_ready) begin
          if (32'(row) == ROWS - 1) state <= S_IDLE;
          else begin
            row   <= row + 1'b1;
            state <= S_ISSUE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign rd_en     = (state == S_ISSUE);
  assign rd_row    = row;
  assign out_valid = (state == S_OUT);
  assign out_rec   = '{row: row, loc: loc_q, score: score_q};

  a_read_cycles: assert property (@(posedge clk) disable iff (!rst_n) READ_CYCLES >= 1 && READ_CYCLES <= 16);
  a_score_w: assert property (@(posedge clk) disable iff (!rst_n) SCORE_W <= 8);

endmodule
