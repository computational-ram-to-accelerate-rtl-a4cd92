// cram_pm_top: the CRAM-PM string-matching substrate. One controller (smc)
// drives NUM_ARRAYS computational-RAM arrays (cram_array); each array has its
// own score buffer (score_buffer) at its periphery.
//
// Use for DNA read alignment: the reference genome is folded over the rows of
// all arrays, REF_CHARS characters (2 bits each) per row; each row also holds
// a pattern of PAT_CHARS characters and scratch cells. For each alignment
// location loc, the host streams micro-instructions that (1) compare the
// pattern bit by bit with the fragment characters at loc .. loc+P-1 using
// row-parallel XOR (two-output NOR + 4-input threshold) and NOR gates, giving
// a match string with a 1 per matching character; (2) count the 1s with a
// tree of in-memory full adders (MAJ3, INV, COPY, MAJ5); (3) read each row's
// score out through the score buffers, tagged with row and loc. Every gate
// runs in all rows of the arrays selected by arr_sel at once; the alignment
// program selects all arrays (gang execution), so one pass of the
// micro-program scores every row of the whole substrate.
//
// Interface: micro-instructions with row data on in_valid/in_ready (back-
// pressure when the controller's buffer is full); gate-table writes on lut_*;
// row reads come back on rd_out_*; one score record stream per array on
// sc_valid/sc_ready/sc_rec. The controller and score buffers work in one clock
// domain with synchronous active-low reset; array contents are not reset, as
// in a non-volatile memory.
//
// From the source design: arrays of 10K rows, 300 arrays for a 3G-character
// reference, the gate set and technology windows, the controller's role, the
// per-array score buffer. This design's own: the row layout (COLS = 2F+4P+9,
// 2409 for F=1000, P=100, against "around 2K" columns and "roughly 24 Mb" per
// array in the source), the encodings and all handshakes.
module cram_pm_top
  import cram_pkg::*;
#(
  parameter int unsigned NUM_ARRAYS = NUM_ARRAYS_DEF,
  parameter int unsigned ROWS       = ROWS_DEF,
  parameter int unsigned REF_CHARS  = REF_CHARS_DEF,
  parameter int unsigned PAT_CHARS  = PAT_CHARS_DEF,
  parameter int unsigned COLS       = row_cols(REF_CHARS, PAT_CHARS),
  parameter int unsigned SCORE_W    = score_bits(PAT_CHARS),
  parameter int unsigned BUF_DEPTH  = 16,
  parameter bit          LONG_TERM  = 1'b0
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  output logic                    in_ready,
  input  micro_instr_t            in_instr,
  input  logic [COLS-1:0]         in_data,
  input  logic                    lut_we,
  input  gate_op_e                lut_waddr,
  input  lut_entry_t              lut_wdata,
  output logic                    rd_out_valid,
  output arr_t                    rd_out_arr,
  output row_t                    rd_out_row,
  output logic [COLS-1:0]         rd_out_data,
  output logic                    idle,
  output logic                    exc,
  input  logic                    exc_clr,
  output logic [NUM_ARRAYS-1:0]   sc_valid,
  input  logic [NUM_ARRAYS-1:0]   sc_ready,
  output score_rec_t              sc_rec [NUM_ARRAYS]
);

  localparam int unsigned READ_CYCLES = 2;

  logic [NUM_ARRAYS-1:0] arr_sel;
  logic                  gate_fire, gate_target, gate_err, preset_fire, preset_val;
  mv_t                   gate_v_mv;
  logic [2:0]            gate_n_in;
  logic [1:0]            gate_n_out;
  col_t [MAX_IN-1:0]     gate_in_col;
  col_t [MAX_OUT-1:0]    gate_out_col;
  col_t                  preset_col;
  logic [NUM_ARRAYS-1:0] wr_en;
  row_t                  wr_row;
  logic [COLS-1:0]       wr_mask, wr_data;
  logic                  smc_rd_en, smc_rd_valid;
  arr_t                  smc_rd_arr;
  row_t                  smc_rd_row;
  logic [COLS-1:0]       smc_rd_data;
  logic                  sc_start, sc_busy_any;
  col_t                  sc_col;
  loc_t                  sc_loc;

  logic [NUM_ARRAYS-1:0] arr_gate_err, arr_rd_valid, sb_busy, sb_rd_en, a_rd_en;
  row_t                  sb_rd_row [NUM_ARRAYS];
  row_t                  a_rd_row  [NUM_ARRAYS];
  logic [COLS-1:0]       arr_rd_data [NUM_ARRAYS];

  smc #(
    .NUM_ARRAYS(NUM_ARRAYS), .COLS(COLS), .BUF_DEPTH(BUF_DEPTH),
    .LONG_TERM(LONG_TERM), .READ_CYCLES(READ_CYCLES)
  ) u_smc (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_instr, .in_data,
    .lut_we, .lut_waddr, .lut_wdata,
    .rd_out_valid, .rd_out_arr, .rd_out_row, .rd_out_data,
    .idle, .exc, .exc_clr,
    .arr_sel, .gate_fire, .gate_v_mv, .gate_n_in, .gate_n_out, .gate_in_col, .gate_out_col,
    .gate_target, .gate_err,
    .preset_fire, .preset_col, .preset_val,
    .wr_en, .wr_row, .wr_mask, .wr_data,
    .rd_en(smc_rd_en), .rd_arr(smc_rd_arr), .rd_row(smc_rd_row),
    .rd_data(smc_rd_data), .rd_valid(smc_rd_valid),
    .sc_start, .sc_col, .sc_loc, .sc_busy(sc_busy_any)
  );

  for (genvar a = 0; a < NUM_ARRAYS; a++) begin : g_arr
    // The score buffer owns the read port while it runs; otherwise the
    // controller's read reaches the array it names.
    assign a_rd_en[a]  = sb_busy[a] ? sb_rd_en[a] : (smc_rd_en && 32'(smc_rd_arr) == a);
    assign a_rd_row[a] = sb_busy[a] ? sb_rd_row[a] : smc_rd_row;

    cram_array #(.ROWS(ROWS), .COLS(COLS), .LONG_TERM(LONG_TERM)) u_array (
      .clk, .rst_n,
      .gate_fire(gate_fire && arr_sel[a]), .gate_v_mv, .gate_n_in, .gate_n_out,
      .gate_in_col, .gate_out_col, .gate_target, .gate_err(arr_gate_err[a]),
      .preset_fire(preset_fire && arr_sel[a]), .preset_col, .preset_val,
      .wr_en(wr_en[a]), .wr_row, .wr_mask, .wr_data,
      .rd_en(a_rd_en[a]), .rd_row(a_rd_row[a]),
      .rd_data(arr_rd_data[a]), .rd_valid(arr_rd_valid[a])
    );

    score_buffer #(.ROWS(ROWS), .COLS(COLS), .SCORE_W(SCORE_W), .READ_CYCLES(READ_CYCLES)) u_sb (
      .clk, .rst_n,
      .start(sc_start), .score_col(sc_col), .loc(sc_loc), .busy(sb_busy[a]),
      .rd_en(sb_rd_en[a]), .rd_row(sb_rd_row[a]),
      .rd_data(arr_rd_data[a]), .rd_valid(arr_rd_valid[a]),
      .out_valid(sc_valid[a]), .out_ready(sc_ready[a]), .out_rec(sc_rec[a])
    );
  end

  assign gate_err     = |arr_gate_err;
  assign sc_busy_any  = |sb_busy;
  assign smc_rd_valid = arr_rd_valid[smc_rd_arr];
  assign smc_rd_data  = arr_rd_data[smc_rd_arr];

endmodule
