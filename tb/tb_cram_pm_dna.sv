// tb_cram_pm_dna: the DNA alignment workload at the full row and column size:
// 10 arrays of 10,000 rows, each row a 1000-character reference fragment with
// a 100-character pattern (2409 columns). All parameters of the top keep their
// defaults except NUM_ARRAYS (300 by default): every array runs the same
// micro-program at once, so the arrays left out only repeat the same work,
// and simulating all 300 takes about half an hour.
//
// Loading uses broadcast writes: every row r of every array gets the same
// fragment and pattern (generated from array 0, row r), and then a few rows of
// a few arrays are overwritten with contents of their own. One alignment
// location is then processed by the micro-program of cram_tb_pkg (hoisted
// presets, 2-step XOR per bit, NOR per character, 194 one-bit full additions
// in the adder tree, score read-out). All 100,000 score records are compared
// with the number of equal characters computed in the testbench, and each
// array must deliver exactly one record per row, tagged with its row and the
// location. The cycle counts of the computation and of the read-out are
// printed (about 9,600 and 40,000 cycles).
module tb_cram_pm_dna;
  import cram_pkg::*;
  import cram_tb_pkg::*;

  localparam int unsigned NA   = 10;
  localparam int unsigned ROWS = ROWS_DEF;
  localparam int unsigned F    = REF_CHARS_DEF;
  localparam int unsigned P    = PAT_CHARS_DEF;
  localparam int unsigned COLS = COLS_DEF;
  localparam int SEED = 11;
  localparam int LOC  = 437;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  micro_instr_t in_instr = '0;
  logic [COLS-1:0] in_data = '0;
  logic lut_we = 1'b0;
  gate_op_e lut_waddr = OP_INV;
  lut_entry_t lut_wdata = '0;
  logic rd_out_valid;
  arr_t rd_out_arr;
  row_t rd_out_row;
  logic [COLS-1:0] rd_out_data;
  logic idle, exc, exc_clr = 1'b0;
  logic [NA-1:0] sc_valid, sc_ready = '1;
  score_rec_t sc_rec [NA];

  cram_pm_top #(.NUM_ARRAYS(NA)) dut (.*);

  int checks = 0, failures = 0;
  int bad_reports = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (bad_reports < 20) $display("FAIL: %s", what);
      bad_reports++;
    end
  endtask

  // Rows with contents of their own (array, row); all others hold array 0's row.
  localparam int NSPEC = 4;
  int spec_a [NSPEC] = '{1, 5, 9, 9};
  int spec_r [NSPEC] = '{5, 4321, 0, 9999};

  function automatic int src_array(input int a, input int r);
    for (int k = 0; k < NSPEC; k++)
      if (spec_a[k] == a && spec_r[k] == r) return a;
    return 0;
  endfunction

  function automatic logic [COLS-1:0] row_image(input int a, input int r);
    logic [COLS-1:0] v;
    v = '0;
    for (int j = 0; j < F; j++) v[2*j +: 2] = ref_char(SEED, a, r, j);
    for (int i = 0; i < P; i++) v[2*F + 2*i +: 2] = pat_char(SEED, a, r, i, F, P);
    return v;
  endfunction

  task automatic send(input micro_instr_t m, input logic [COLS-1:0] d);
    in_valid = 1'b1; in_instr = m; in_data = d;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  int exp_score [ROWS];
  int spec_score [NSPEC];
  int next_row [NA];
  int n_rec = 0;
  bit scoring = 1'b0;

  always @(negedge clk) begin
    if (rst_n) begin
      for (int a = 0; a < NA; a++) begin
        if (sc_valid[a]) begin
          int r, exp;
          r = next_row[a];
          exp = exp_score[r % ROWS];
          for (int k = 0; k < NSPEC; k++)
            if (spec_a[k] == a && spec_r[k] == r) exp = spec_score[k];
          check(scoring, "record only during the score step");
          check(int'(sc_rec[a].row) == r && int'(sc_rec[a].loc) == LOC &&
                int'(sc_rec[a].score) == exp,
                $sformatf("array %0d record row %0d loc %0d score %0d, expected row %0d score %0d",
                          a, sc_rec[a].row, sc_rec[a].loc, sc_rec[a].score, r, exp));
          next_row[a]++;
          n_rec++;
        end
      end
    end
  end

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    micro_instr_t q[$];
    prog_stats_t st;
    longint t0, t1, t2;

    for (int a = 0; a < NA; a++) next_row[a] = 0;
    for (int r = 0; r < int'(ROWS); r++) exp_score[r] = ref_score(SEED, 0, r, LOC, F, P);
    for (int k = 0; k < NSPEC; k++)
      spec_score[k] = ref_score(SEED, spec_a[k], spec_r[k], LOC, F, P);
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    t0 = $time;
    for (int r = 0; r < int'(ROWS); r++) send(mi_write(0, 1'b1, r, 0, COLS), row_image(0, r));
    for (int k = 0; k < NSPEC; k++)
      send(mi_write(spec_a[k], 1'b0, spec_r[k], 0, 2*F + 2*P), row_image(spec_a[k], spec_r[k]));
    while (!idle) @(negedge clk);
    $display("load: %0d cycles", ($time - t0) / 10);

    gen_alignment(F, P, LOC, q, st);
    $display("alignment: %0d micro-instructions, %0d gates, %0d full adders, %0d presets inline, %0d hoisted",
             q.size(), st.gates, st.full_adders, st.inline_presets, st.hoisted_presets);
    t1 = $time;
    scoring = 1'b1;
    foreach (q[k]) begin
      if (q[k].kind == MI_SCORE) begin
        while (!idle) @(negedge clk);
        t2 = $time;
      end
      send(q[k], '0);
    end
    while (!idle) @(negedge clk);
    $display("compute: %0d cycles, score read-out: %0d cycles", (t2 - t1) / 10, ($time - t2) / 10);
    check(!exc, "no exception");
    for (int a = 0; a < NA; a++)
      check(next_row[a] == int'(ROWS), $sformatf("array %0d gave %0d records", a, next_row[a]));
    $display("records checked: %0d", n_rec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
