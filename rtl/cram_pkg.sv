// cram_pkg: types and constants shared by the CRAM-PM string-matching substrate.
//
// The substrate is a set of computational-RAM arrays. Each array is an MRAM
// array whose cells can also be joined, row by row, into threshold logic gates.
// A controller (the SMC) receives micro-instructions from the host and drives
// every array at once. This package holds:
//   * the default sizes (rows, columns, row layout for DNA matching),
//   * the gate and micro-instruction encodings,
//   * the look-up-table entry that turns a gate opcode into a bit-select-line
//     voltage, an output preset value and a cycle window,
//   * the gate voltage windows of the two MTJ technologies, and the rule by
//     which a voltage and an input count select a switching threshold.
//
// From the source design: 10K rows per array, 300 arrays, 2-bit characters,
// 100-character patterns, 1000-character reference fragments per row,
// N = floor(log2 P)+1 score bits, the gate set (INV, COPY, NOR, MAJ3, MAJ5,
// TH) with its presets, and the voltage windows. Own choices: field widths,
// opcode values, cycle windows (technology latencies at an assumed 1 GHz
// clock), and the exact column layout of a row.
package cram_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_ARRAYS_DEF = 300;    // arrays for a 3G-character reference
  localparam int unsigned ROWS_DEF       = 10000;  // rows per array
  localparam int unsigned REF_CHARS_DEF  = 1000;   // reference fragment per row (characters)
  localparam int unsigned PAT_CHARS_DEF  = 100;    // pattern length (characters)

  // Bits of a similarity score for a pattern of p characters: floor(log2 p)+1.
  function automatic int unsigned score_bits(input int unsigned p);
    int unsigned n;
    n = 0;
    while ((p >> n) != 0) n++;
    return (n == 0) ? 1 : n;
  endfunction

  // Row layout, in column order:
  //   [0, 2F)                 reference fragment, 2 bits per character
  //   [2F, 2F+2P)             pattern, 2 bits per character
  //   [2F+2P, 2F+3P)          region A: match string, later tree partial sums
  //   [2F+3P, 2F+4P)          region B: tree partial sums (ping-pong with A)
  //   [2F+4P, 2F+4P+SCR_TMP)  temporaries: XOR/adder intermediates, constant 0
  localparam int unsigned SCR_TMP = 9;
  function automatic int unsigned row_cols(input int unsigned f, input int unsigned p);
    return 2*f + 4*p + SCR_TMP;
  endfunction
  localparam int unsigned COLS_DEF = row_cols(REF_CHARS_DEF, PAT_CHARS_DEF);  // 2409

  // Field widths of addresses carried in micro-instructions.
  localparam int unsigned COL_W = 12;   // up to 4096 columns
  localparam int unsigned ROW_W = 14;   // up to 16384 rows
  localparam int unsigned ARR_W = 9;    // up to 512 arrays
  localparam int unsigned LOC_W = 12;   // alignment location within a fragment
  localparam int unsigned MAX_IN  = 5;  // MAJ5 has the most inputs
  localparam int unsigned MAX_OUT = 2;  // NOR may drive two outputs
  localparam int unsigned VMV_W = 11;   // gate voltage in millivolts

  typedef logic [COL_W-1:0] col_t;
  typedef logic [ROW_W-1:0] row_t;
  typedef logic [ARR_W-1:0] arr_t;
  typedef logic [LOC_W-1:0] loc_t;
  typedef logic [VMV_W-1:0] mv_t;

  // Character code, 2 bits per DNA base (T = 10 as in the source's example).
  typedef enum logic [1:0] {BASE_A = 2'b00, BASE_C = 2'b01, BASE_T = 2'b10, BASE_G = 2'b11} base_e;

  // ------------------------------------------------------------ gate set
  typedef enum logic [2:0] {
    OP_INV  = 3'd0,   // out = ~in            preset 0
    OP_COPY = 3'd1,   // out =  in            preset 1
    OP_NOR  = 3'd2,   // out = ~(a|b)         preset 0
    OP_NOR2 = 3'd3,   // NOR with two output cells (fused XOR steps 1 and 2)
    OP_MAJ3 = 3'd4,   // 3-input majority     preset 1
    OP_MAJ5 = 3'd5,   // 5-input majority     preset 1
    OP_TH   = 3'd6,   // 4-input threshold: 1 if more than two inputs are 0, preset 0
    OP_RSVD = 3'd7    // free LUT slot, programmable by the host
  } gate_op_e;
  localparam int unsigned NUM_OPS = 8;

  // One look-up-table entry: everything the SMC needs to fire a gate.
  typedef struct packed {
    mv_t        v_mv;     // voltage applied on the input bit-select lines
    logic       preset;   // value the output cells are preset to
    logic [2:0] n_in;     // number of input cells
    logic [1:0] n_out;    // number of output cells
    logic [3:0] cycles;   // cycle window of the evaluation
  } lut_entry_t;

  // ---------------------------------------------------- micro-instructions
  typedef enum logic [2:0] {
    MI_GATE   = 3'd0,  // row-parallel gate on all arrays
    MI_PRESET = 3'd1,  // gang preset of ncell consecutive columns, all rows, all arrays
    MI_WRITE  = 3'd2,  // write one row (columns selected by a mask)
    MI_READ   = 3'd3,  // read one row
    MI_SCORE  = 3'd4,  // read the score of every row out through the score buffers
    MI_NOP    = 3'd5
  } mi_kind_e;

  typedef struct packed {
    mi_kind_e             kind;
    gate_op_e             op;        // MI_GATE
    logic                 do_preset; // MI_GATE: preset the output cells first
    col_t [MAX_IN-1:0]    in_col;    // MI_GATE inputs, in_col[0] first
    col_t [MAX_OUT-1:0]   out_col;   // MI_GATE outputs
    col_t                 col;       // MI_PRESET / MI_WRITE / MI_SCORE first column
    logic [7:0]           ncell;     // MI_PRESET column count
    logic                 mask_mode; // MI_PRESET: val is a per-column bit mask
    logic [15:0]          val;       // MI_PRESET value (bit 0) or mask
    col_t                 len;       // MI_WRITE column count, from col on
    arr_t                 arr;       // MI_WRITE / MI_READ array
    logic                 bcast;     // MI_WRITE to every array
    row_t                 row;       // MI_WRITE / MI_READ row
    loc_t                 loc;       // MI_SCORE alignment location tag
  } micro_instr_t;

  // Score record emitted by a score buffer.
  typedef struct packed {
    row_t       row;
    loc_t       loc;
    logic [7:0] score;
  } score_rec_t;

  // -------------------------------------------------- technology windows
  // Gate voltage windows in mV (near-term / long-term MTJ). A gate is
  // identified by its input count together with the voltage.
  typedef struct packed {
    mv_t lo;
    mv_t hi;
  } vwin_t;

  // Window for a gate of n_in inputs; index 1..5. Entry 0 is unused.
  function automatic vwin_t gate_window(input logic long_term, input logic [2:0] n_in);
    vwin_t w;
    w = '{lo: '1, hi: '0};
    if (!long_term) begin
      unique case (n_in)
        3'd1: w = '{lo: 11'd840, hi: 11'd1300};  // INV / COPY
        3'd2: w = '{lo: 11'd680, hi: 11'd740};   // NOR
        3'd3: w = '{lo: 11'd650, hi: 11'd690};   // MAJ3
        3'd4: w = '{lo: 11'd620, hi: 11'd630};   // TH
        3'd5: w = '{lo: 11'd610, hi: 11'd620};   // MAJ5
        default: ;
      endcase
    end else begin
      unique case (n_in)
        3'd1: w = '{lo: 11'd230, hi: 11'd480};
        3'd2: w = '{lo: 11'd200, hi: 11'd220};
        3'd3: w = '{lo: 11'd200, hi: 11'd210};
        3'd4: w = '{lo: 11'd190, hi: 11'd200};
        3'd5: w = '{lo: 11'd190, hi: 11'd200};
        default: ;
      endcase
    end
    return w;
  endfunction

  // The output switches when fewer than this many inputs hold a 1 (a 1 is the
  // high-resistance state, so more 1s mean less current through the output).
  function automatic logic [2:0] switch_threshold(input logic [2:0] n_in);
    unique case (n_in)
      3'd1: return 3'd1;   // INV/COPY: switch only when the input is 0
      3'd2: return 3'd1;   // NOR: switch only for 00
      3'd3: return 3'd2;   // MAJ3: switch when fewer than two 1s
      3'd4: return 3'd2;   // TH: switch when at least three 0s
      3'd5: return 3'd3;   // MAJ5: switch when fewer than three 1s
      default: return 3'd0;
    endcase
  endfunction

  // Reset contents of the gate look-up table: mid-window voltage of the
  // technology, the preset of each gate, and a 3-cycle window (3 ns MTJ
  // switching at an assumed 1 GHz controller clock; 1 ns long-term).
  function automatic lut_entry_t lut_default(input logic long_term, input gate_op_e op);
    lut_entry_t e;
    logic [3:0] cyc;
    cyc = long_term ? 4'd1 : 4'd3;
    unique case (op)
      OP_INV:  e = '{v_mv: 11'd0, preset: 1'b0, n_in: 3'd1, n_out: 2'd1, cycles: cyc};
      OP_COPY: e = '{v_mv: 11'd0, preset: 1'b1, n_in: 3'd1, n_out: 2'd1, cycles: cyc};
      OP_NOR:  e = '{v_mv: 11'd0, preset: 1'b0, n_in: 3'd2, n_out: 2'd1, cycles: cyc};
      OP_NOR2: e = '{v_mv: 11'd0, preset: 1'b0, n_in: 3'd2, n_out: 2'd2, cycles: cyc};
      OP_MAJ3: e = '{v_mv: 11'd0, preset: 1'b1, n_in: 3'd3, n_out: 2'd1, cycles: cyc};
      OP_MAJ5: e = '{v_mv: 11'd0, preset: 1'b1, n_in: 3'd5, n_out: 2'd1, cycles: cyc};
      OP_TH:   e = '{v_mv: 11'd0, preset: 1'b0, n_in: 3'd4, n_out: 2'd1, cycles: cyc};
      default: e = '{v_mv: 11'd0, preset: 1'b0, n_in: 3'd0, n_out: 2'd0, cycles: cyc};
    endcase
    if (e.n_in != 3'd0) begin
      vwin_t w;
      w = gate_window(long_term, e.n_in);
      e.v_mv = mv_t'((32'(w.lo) + 32'(w.hi)) / 2);
    end
    return e;
  endfunction

endpackage
