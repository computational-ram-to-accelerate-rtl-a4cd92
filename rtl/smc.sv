// smc: the CRAM-PM memory controller. It takes micro-instructions from the
// host, one at a time from its instruction buffer, and drives every array of
// the substrate with them.
//
// Micro-instruction kinds (cram_pkg::mi_kind_e):
//   MI_GATE   look the opcode up in the gate table (voltage, preset value,
//             input/output counts, cycle window); if do_preset is set, gang-
//             preset each output column in all rows first; then fire the gate
//             in all rows with target = opposite of the preset. Gates and
//             presets reach the array arr, or every array when bcast is set
//             (arr_sel), so one program runs in gang on all arrays.
//             Without do_preset the outputs must have been preset earlier
//             (presets hoisted out of the computation by the scheduler).
//   MI_PRESET gang-preset ncell consecutive columns from col, one column per
//             preset window, to val[0], or to val[i] in mask mode.
//   MI_WRITE  write columns [col, col+len) of one row of array arr (or of all
//             arrays when bcast) with the data that came with the instruction.
//   MI_READ   read one row of array arr; the row comes back on rd_out_*.
//   MI_SCORE  start every array's score buffer on columns [col, col+N) with
//             location tag loc, and wait until all of them are done.
//
// Timing: each micro-instruction owns a fixed window of cycles and the strobe
// to the arrays is in its first cycle: a preset takes PRESET_CYCLES, a gate
// the table's cycles, a write WRITE_CYCLES, a read READ_CYCLES. One idle cycle
// separates a finished micro-instruction from the next fetch. So a gate with
// one preset output costs 1 + PRESET_CYCLES + cycles. A gate whose voltage an
// array rejects raises exc; the controller then stops fetching until the host
// pulses exc_clr. idle is high when the buffer is empty and nothing runs.
//
// From the source design: buffered micro-instructions naming a gate type and
// its input and output columns, decode through a table of voltage level and
// preset value, preset before activation, a fixed time window per micro-
// instruction, gang execution on all arrays, row-at-a-time writes, score
// read-out before the next alignment. This design's own choices: the encoding,
// the window lengths (Table values at an assumed 1 GHz: write 3.65 ns -> 4,
// read 1.21 ns -> 2, preset as one 3 ns switching), the handshakes, and the
// halt-on-exception behaviour.
module smc
  import cram_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS    = NUM_ARRAYS_DEF,
  parameter int unsigned COLS          = COLS_DEF,
  parameter int unsigned BUF_DEPTH     = 16,
  parameter bit          LONG_TERM     = 1'b0,
  parameter int unsigned PRESET_CYCLES = 3,
  parameter int unsigned WRITE_CYCLES  = 4,
  parameter int unsigned READ_CYCLES   = 2
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // host: micro-instructions
  input  logic                   in_valid,
  output logic                   in_ready,
  input  micro_instr_t           in_instr,
  input  logic [COLS-1:0]        in_data,
  // host: gate table programming
  input  logic                   lut_we,
  input  gate_op_e               lut_waddr,
  input  lut_entry_t             lut_wdata,
  // host: read data and status
  output logic                   rd_out_valid,
  output arr_t                   rd_out_arr,
  output row_t                   rd_out_row,
  output logic [COLS-1:0]        rd_out_data,
  output logic                   idle,
  output logic                   exc,
  input  logic                   exc_clr,
  // arrays: logic mode (broadcast)
  output logic [NUM_ARRAYS-1:0]  arr_sel,
  output logic                   gate_fire,
  output mv_t                    gate_v_mv,
  output logic [2:0]             gate_n_in,
  output logic [1:0]             gate_n_out,
  output col_t [MAX_IN-1:0]      gate_in_col,
  output col_t [MAX_OUT-1:0]     gate_out_col,
  output logic                   gate_target,
  input  logic                   gate_err,
  output logic                   preset_fire,
  output col_t                   preset_col,
  output logic                   preset_val,
  // arrays: memory mode
  output logic [NUM_ARRAYS-1:0]  wr_en,
  output row_t                   wr_row,
  output logic [COLS-1:0]        wr_mask,
  output logic [COLS-1:0]        wr_data,
  output logic                   rd_en,
  output arr_t                   rd_arr,
  output row_t                   rd_row,
  input  logic [COLS-1:0]        rd_data,
  input  logic                   rd_valid,
  // score buffers
  output logic                   sc_start,
  output col_t                   sc_col,
  output loc_t                   sc_loc,
  input  logic                   sc_busy
);

  // ------------------------------------------------------------ buffer
  logic              buf_valid, buf_pop;
  micro_instr_t      buf_instr;
  logic [COLS-1:0]   buf_data;
  logic [$clog2(BUF_DEPTH+1)-1:0] buf_level;

  instr_buffer #(.DEPTH(BUF_DEPTH), .DATA_W(COLS)) u_buf (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_instr, .in_data,
    .out_valid(buf_valid), .out_ready(buf_pop),
    .out_instr(buf_instr), .out_data(buf_data),
    .level(buf_level)
  );

  // ------------------------------------------------------------ table
  micro_instr_t cur;
  logic [COLS-1:0] cur_data;
  lut_entry_t   ent;

  gate_lut #(.LONG_TERM(LONG_TERM)) u_lut (
    .clk, .rst_n,
    .we(lut_we), .waddr(lut_waddr), .wdata(lut_wdata),
    .raddr(cur.op), .rdata(ent)
  );

  // ------------------------------------------------------------ sequencer
  typedef enum logic [3:0] {
    S_IDLE, S_GPRE, S_GFIRE, S_PRE, S_WR, S_RD, S_SC, S_SCW
  } state_e;

  state_e     state;
  logic [3:0] wcnt;      // cycle within the current window
  logic [7:0] idx;       // output / column index within the instruction
  logic       exc_q;

  logic [3:0] window;
  always_comb begin
    unique case (state)
      S_GPRE:  window = 4'(PRESET_CYCLES);
      S_PRE:   window = 4'(PRESET_CYCLES);
      S_GFIRE: window = (ent.cycles == '0) ? 4'd1 : ent.cycles;
      S_WR:    window = 4'(WRITE_CYCLES);
      S_RD:    window = 4'(READ_CYCLES);
      default: window = 4'd1;
    endcase
  end
  logic last;
  assign last = (wcnt == window - 1'b1);

  assign buf_pop = (state == S_IDLE) && buf_valid && !exc_q && !gate_err;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      wcnt     <= '0;
      idx      <= '0;
      exc_q    <= 1'b0;
      cur      <= '0;
      cur_data <= '0;
    end else begin
      if (gate_err) exc_q <= 1'b1;
      else if (exc_clr) exc_q <= 1'b0;

      if (state != S_IDLE && state != S_SCW) wcnt <= last ? '0 : wcnt + 1'b1;

      unique case (state)
        S_IDLE: if (buf_pop) begin
          cur      <= buf_instr;
          cur_data <= buf_data;
          idx      <= '0;
          wcnt     <= '0;
          unique case (buf_instr.kind)
            MI_GATE:   state <= buf_instr.do_preset ? S_GPRE : S_GFIRE;
            MI_PRESET: state <= (buf_instr.ncell == '0) ? S_IDLE : S_PRE;
            MI_WRITE:  state <= S_WR;
            MI_READ:   state <= S_RD;
            MI_SCORE:  state <= S_SC;
            default:   state <= S_IDLE;
          endcase
        end
        S_GPRE: if (last) begin
          if (idx + 1'b1 < 8'(ent.n_out)) idx <= idx + 1'b1;
          else begin
            idx   <= '0;
            state <= S_GFIRE;
          end
        end
        S_GFIRE: if (last) state <= S_IDLE;
        S_PRE: if (last) begin
          if (idx + 1'b1 < cur.ncell) idx <= idx + 1'b1;
          else state <= S_IDLE;
        end
        S_WR: if (last) state <= S_IDLE;
        S_RD: if (last) state <= S_IDLE;
        S_SC: state <= S_SCW;
        S_SCW: if (!sc_busy) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  logic strobe;
  assign strobe = (wcnt == '0);

  // logic mode: the arrays named by the instruction (all of them when bcast)
  always_comb
    for (int unsigned a = 0; a < NUM_ARRAYS; a++)
      arr_sel[a] = cur.bcast || 32'(cur.arr) == a;
  assign gate_fire    = (state == S_GFIRE) && strobe;
  assign gate_v_mv    = ent.v_mv;
  assign gate_n_in    = ent.n_in;
  assign gate_n_out   = ent.n_out;
  assign gate_in_col  = cur.in_col;
  assign gate_out_col = cur.out_col;
  assign gate_target  = ~ent.preset;

  always_comb begin
    preset_fire = 1'b0;
    preset_col  = '0;
    preset_val  = 1'b0;
    if (state == S_GPRE) begin
      preset_fire = strobe;
      preset_col  = cur.out_col[idx[0]];
      preset_val  = ent.preset;
    end else if (state == S_PRE) begin
      preset_fire = strobe;
      preset_col  = cur.col + col_t'(idx);
      preset_val  = cur.mask_mode ? cur.val[idx[3:0]] : cur.val[0];
    end
  end

  // memory mode
  always_comb begin
    for (int unsigned c = 0; c < COLS; c++)
      wr_mask[c] = (c >= 32'(cur.col)) && (c < 32'(cur.col) + 32'(cur.len));
    wr_data = cur_data;
    wr_row  = cur.row;
    for (int unsigned a = 0; a < NUM_ARRAYS; a++)
      wr_en[a] = (state == S_WR) && strobe && arr_sel[a];
  end
  assign rd_en  = (state == S_RD) && strobe;
  assign rd_arr = cur.arr;
  assign rd_row = cur.row;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_out_valid <= 1'b0;
      rd_out_arr   <= '0;
      rd_out_row   <= '0;
      rd_out_data  <= '0;
    end else begin
      rd_out_valid <= (state == S_RD) && rd_valid;
      if ((state == S_RD) && rd_valid) begin
        rd_out_arr  <= cur.arr;
        rd_out_row  <= cur.row;
        rd_out_data <= rd_data;
      end
    end
  end

  // score read-out
  assign sc_start = (state == S_SC);
  assign sc_col   = cur.col;
  assign sc_loc   = cur.loc;

  assign idle = (state == S_IDLE) && !buf_valid;
  assign exc  = exc_q;

  a_mask_len: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_PRE) |-> (!cur.mask_mode || cur.ncell <= 8'd16));
  a_arr_range: assert property (@(posedge clk) disable iff (!rst_n)
      (state != S_IDLE) |-> (cur.bcast || 32'(cur.arr) < NUM_ARRAYS));
  a_windows: assert property (@(posedge clk) disable iff (!rst_n)
      PRESET_CYCLES >= 1 && PRESET_CYCLES <= 15 && WRITE_CYCLES >= 1 && WRITE_CYCLES <= 15 &&
      READ_CYCLES >= 2 && READ_CYCLES <= 15);

endmodule
