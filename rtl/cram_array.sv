// cram_array: one CRAM-PM array, written as the digital equivalent of its
// magnetic-tunnel-junction (MTJ) cells.
//
// Each cell stores one bit (MTJ low resistance = 0, high resistance = 1). The
// array works in one of two modes at a time:
//   * memory mode: one row is read (rd_en) or written (wr_en, per-column mask)
//     in a cycle, as in a plain MRAM;
//   * logic mode: every row computes the same gate on the same columns. The
//     selected input cells of a row are joined with its output cells over the
//     row's logic line; the input bit-select lines are driven with gate_v_mv
//     and the output's is grounded. The current through an output cell falls
//     with each input that holds a 1. If it stays above the MTJ critical
//     current, the output switches to gate_target (the opposite of its preset);
//     otherwise it keeps its preset. preset_fire writes preset_val into one
//     column of every row at once (gang preset).
//
// The analog part is reduced to a rule: a gate with n inputs is accepted only
// when the voltage lies in that gate's window of the technology table (near-
// or long-term MTJ), and its output switches when fewer than T(n) inputs are 1
// (T = 1 for INV/COPY/NOR, 2 for MAJ3 and the 4-input threshold, 3 for MAJ5).
// A voltage outside the window is flagged on gate_err and nothing switches,
// which is this design's choice: the device would then switch for a
// different set of inputs. A two-output gate switches both outputs by the
// same rule, also this design's choice.
//
// Timing: gate, preset and write take effect at the clock edge where their
// strobe is high; rd_data is registered, valid the cycle after rd_en. The
// controller holds each operation for its technology window; the array itself
// needs only the strobe cycle. Reads and writes may not coincide with logic
// operations, and an output column may not also be an input. rst_n (synchronous,
// active low) clears only the two status flops rd_valid and gate_err: the cells
// are non-volatile and keep their contents. The gate loops run over every row,
// so synthesis tools with a loop-unroll limit below ROWS cannot map this model.
module cram_array
  import cram_pkg::*;
#(
  parameter int unsigned ROWS      = ROWS_DEF,
  parameter int unsigned COLS      = COLS_DEF,
  parameter bit          LONG_TERM = 1'b0
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // logic mode, broadcast to all rows
  input  logic                       gate_fire,
  input  mv_t                        gate_v_mv,
  input  logic [2:0]                 gate_n_in,
  input  logic [1:0]                 gate_n_out,
  input  col_t [MAX_IN-1:0]          gate_in_col,
  input  col_t [MAX_OUT-1:0]         gate_out_col,
  input  logic                       gate_target,
  output logic                       gate_err,
  input  logic                       preset_fire,
  input  col_t                       preset_col,
  input  logic                       preset_val,
  // memory mode, one row
  input  logic                       wr_en,
  input  row_t                       wr_row,
  input  logic [COLS-1:0]            wr_mask,
  input  logic [COLS-1:0]            wr_data,
  input  logic                       rd_en,
  input  row_t                       rd_row,
  output logic [COLS-1:0]            rd_data,
  output logic                       rd_valid
);

  logic [COLS-1:0] mem [ROWS];

  vwin_t      win;
  logic       v_ok;
  logic [2:0] thr;

  always_comb begin
    win  = gate_window(LONG_TERM, gate_n_in);
    v_ok = (gate_n_in != 3'd0) && (gate_v_mv >= win.lo) && (gate_v_mv <= win.hi);
    thr  = switch_threshold(gate_n_in);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) gate_err <= 1'b0;
    else gate_err <= gate_fire && !v_ok;
    if (gate_fire) begin
      if (v_ok) begin
        for (int unsigned r = 0; r < ROWS; r++) begin
          logic [2:0] ones;
          ones = '0;
          for (int unsigned k = 0; k < MAX_IN; k++)
            if (3'(k) < gate_n_in) ones = ones + 3'(mem[r][gate_in_col[k]]);
          if (ones < thr) begin
            mem[r][gate_out_col[0]] <= gate_target;
            if (gate_n_out == 2'd2) mem[r][gate_out_col[1]] <= gate_target;
          end
        end
      end
    end else if (preset_fire) begin
      for (int unsigned r = 0; r < ROWS; r++)
        mem[r][preset_col] <= preset_val;
    end else if (wr_en) begin
      mem[wr_row] <= (mem[wr_row] & ~wr_mask) | (wr_data & wr_mask);
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) rd_valid <= 1'b0;
    else rd_valid <= rd_en;
    if (rd_en) rd_data <= mem[rd_row];
  end

  // Memory access and computation exclude each other.
  a_mode_excl: assert property (@(posedge clk) disable iff (!rst_n) !((gate_fire || preset_fire) && (wr_en || rd_en)));
  a_one_logic: assert property (@(posedge clk) disable iff (!rst_n) !(gate_fire && preset_fire));
  a_out_not_in: assert property (@(posedge clk) disable iff (!rst_n) gate_fire |->
      !((gate_n_in > 3'd0 && gate_in_col[0] == gate_out_col[0]) ||
        (gate_n_in > 3'd1 && gate_in_col[1] == gate_out_col[0]) ||
        (gate_n_in > 3'd2 && gate_in_col[2] == gate_out_col[0]) ||
        (gate_n_in > 3'd3 && gate_in_col[3] == gate_out_col[0]) ||
        (gate_n_in > 3'd4 && gate_in_col[4] == gate_out_col[0])));
  a_rows_in_range: assert property (@(posedge clk) disable iff (!rst_n) (wr_en |-> 32'(wr_row) < ROWS) and (rd_en |-> 32'(rd_row) < ROWS));

endmodule
