// tb_cram_pm_top: end-to-end test of the CRAM-PM substrate on DNA read
// alignment, at a reduced size (2 arrays of 6 rows, 12-character reference
// fragments, 5-character patterns).
//
// The host side of the test:
//   1. clears the scratch columns of every row of every array with broadcast
//      writes, then writes each row's reference fragment and pattern into its
//      own array, and reads a few rows back;
//   2. for every alignment location loc = 0 .. F-P, streams the micro-program
//      built by cram_tb_pkg::gen_alignment (match string with XOR/NOR, then a
//      tree of in-memory full adders, then score read-out); the score record of
//      every row of every array is compared with a count of equal characters
//      worked out in the testbench from the same pseudo-random contents;
//   3. presets one column differently in each array, with presets aimed at
//      one array, and reads both back;
//   4. provokes an exception: the gate table entry of INV is reprogrammed to a
//      voltage outside every window, an INV is issued, the controller must halt
//      with exc set and leave the following read pending; the table entry is
//      restored and exc_clr resumes it; the read must return unchanged data.
// Score streams see random back-pressure. Each mechanism is counted (input
// stall, inline and hoisted presets, mask-mode preset, each gate type, gang
// operation on both arrays, broadcast and single writes, read-back, exception,
// table reprogramming, score back-pressure, array-selected preset) and one that never happened is a
// failure.
module tb_cram_pm_top;
  import cram_pkg::*;
  import cram_tb_pkg::*;

  localparam int unsigned NA   = 2;
  localparam int unsigned ROWS = 6;
  localparam int unsigned F    = 12;
  localparam int unsigned P    = 5;
  localparam int unsigned COLS = row_cols(F, P);
  localparam int unsigned SW   = score_bits(P);
  localparam int SEED = 7;

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
  logic [NA-1:0] sc_valid, sc_ready = '0;
  score_rec_t sc_rec [NA];

  cram_pm_top #(
    .NUM_ARRAYS(NA), .ROWS(ROWS), .REF_CHARS(F), .PAT_CHARS(P), .BUF_DEPTH(4)
  ) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // mechanism counters
  int n_stall = 0, n_inline_pre = 0, n_hoist_pre = 0, n_mask_pre = 0;
  int n_gate [NUM_OPS];
  int n_bcast = 0, n_single_wr = 0, n_readback = 0, n_exc = 0, n_lut_wr = 0;
  int n_sc_bp = 0, n_sc_rec = 0, n_gang = 0, n_sel = 0;

  // ---------------------------------------------------------------- host
  task automatic send(input micro_instr_t m, input logic [COLS-1:0] d);
    in_valid = 1'b1; in_instr = m; in_data = d;
    while (!in_ready) begin
      n_stall++;
      @(negedge clk);
    end
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic wait_idle();
    while (!idle) @(negedge clk);
  endtask

  task automatic lut_write(input gate_op_e op, input lut_entry_t e);
    lut_we = 1'b1; lut_waddr = op; lut_wdata = e;
    @(negedge clk);
    lut_we = 1'b0;
    n_lut_wr++;
  endtask

  function automatic logic [COLS-1:0] row_image(input int a, input int r);
    logic [COLS-1:0] v;
    v = '0;
    for (int j = 0; j < F; j++) v[2*j +: 2] = ref_char(SEED, a, r, j);
    for (int i = 0; i < P; i++) v[2*F + 2*i +: 2] = pat_char(SEED, a, r, i, F, P);
    return v;
  endfunction

  // expected read-back
  logic [COLS-1:0] rd_expect_mask, rd_expect_data;
  logic            rd_expected = 1'b0;

  // ------------------------------------------------------------- monitors
  int cur_loc = 0;
  int next_row [NA];
  initial for (int a = 0; a < NA; a++) next_row[a] = 0;

  always @(negedge clk) begin
    if (rst_n) begin
      if (dut.preset_fire) begin
        if (!dut.u_smc.cur.bcast) n_sel++;
        if (dut.u_smc.cur.kind == MI_GATE) n_inline_pre++;
        else begin
          n_hoist_pre++;
          if (dut.u_smc.cur.mask_mode) n_mask_pre++;
        end
      end
      if (dut.gate_fire) begin
        n_gate[dut.u_smc.cur.op]++;
        if (NA > 1) n_gang++;
      end
      if (|dut.wr_en) begin
        if (&dut.wr_en) n_bcast++;
        else n_single_wr++;
      end
      if (rd_out_valid) begin
        check(rd_expected, "read data only when a read was issued");
        check((rd_out_data & rd_expect_mask) == (rd_expect_data & rd_expect_mask),
              $sformatf("read-back of array %0d row %0d", rd_out_arr, rd_out_row));
        n_readback++;
        rd_expected = 1'b0;
      end
      // score streams: random ready, check records on transfer
      sc_ready = NA'($urandom);
      for (int a = 0; a < NA; a++) begin
        if (sc_valid[a] && !sc_ready[a]) n_sc_bp++;
        if (sc_valid[a] && sc_ready[a]) begin
          int exp;
          exp = ref_score(SEED, a, next_row[a], cur_loc, F, P);
          check(int'(sc_rec[a].row) == next_row[a], $sformatf("array %0d record row", a));
          check(int'(sc_rec[a].loc) == cur_loc, $sformatf("array %0d record loc", a));
          check(int'(sc_rec[a].score) == exp,
                $sformatf("array %0d row %0d loc %0d score %0d expected %0d",
                          a, sc_rec[a].row, cur_loc, sc_rec[a].score, exp));
          next_row[a]++;
          n_sc_rec++;
        end
      end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    micro_instr_t q[$];
    prog_stats_t st;
    lut_entry_t good, bad;
    logic [COLS-1:0] saved;
    int t0;

    for (int k = 0; k < NUM_OPS; k++) n_gate[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);

    // 1. load: clear scratch in all arrays (broadcast), then fragments and patterns
    for (int r = 0; r < ROWS; r++)
      send(mi_write(0, 1'b1, r, 2*F + 2*P, COLS - (2*F + 2*P)), '0);
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < ROWS; r++)
        send(mi_write(a, 1'b0, r, 0, 2*F + 2*P), row_image(a, r));
    wait_idle();
    for (int a = 0; a < NA; a++)
      for (int r = 0; r < ROWS; r += 2) begin
        rd_expect_mask = '1;
        rd_expect_data = row_image(a, r);
        rd_expected = 1'b1;
        send(mi_read(a, r), '0);
        wait_idle();
        repeat (4) @(negedge clk);
        check(!rd_expected, "read answered");
      end

    // 2. every alignment location
    for (int loc = 0; loc + int'(P) <= int'(F); loc++) begin
      q.delete();
      st = '{default: 0};
      gen_alignment(F, P, loc, q, st);
      cur_loc = loc;
      for (int a = 0; a < NA; a++) next_row[a] = 0;
      t0 = $time;
      foreach (q[k]) send(q[k], '0);
      wait_idle();
      for (int a = 0; a < NA; a++)
        check(next_row[a] == int'(ROWS), $sformatf("loc %0d: array %0d gave %0d records",
                                                   loc, a, next_row[a]));
      if (loc == 0)
        $display("alignment: %0d micro-instructions, %0d gates, %0d full adders, %0d cycles",
                 q.size(), st.gates, st.full_adders, ($time - t0) / 10);
    end

    // 3. exception and table reprogramming
    rd_expect_mask = '1;
    rd_expect_data = '0;
    @(negedge clk);
    // remember row 1 of array 1 as it is now
    rd_expected = 1'b1;
    rd_expect_mask = '0;
    send(mi_read(1, 1), '0);
    wait_idle();
    repeat (4) @(negedge clk);
    saved = rd_out_data;
    good = lut_default(1'b0, OP_INV);
    bad = good;
    bad.v_mv = 11'd100;
    lut_write(OP_INV, bad);
    send(mi_gate(OP_INV, 1'b0, 0, 0, 0, 0, 0, 2*F + 3*P, 0), '0);
    rd_expected = 1'b1;
    rd_expect_mask = '1;
    rd_expect_data = saved;
    send(mi_read(1, 1), '0);
    repeat (30) @(negedge clk);
    check(exc === 1'b1, "exception raised by an out-of-window gate voltage");
    check(rd_expected, "controller halted: the read after the failed gate waits");
    check(!idle, "halted controller is not idle");
    if (exc) n_exc++;
    lut_write(OP_INV, good);
    exc_clr = 1'b1;
    @(negedge clk);
    exc_clr = 1'b0;
    wait_idle();
    repeat (4) @(negedge clk);
    check(!exc, "exc cleared");
    check(!rd_expected, "read completes after exc_clr");

    // one more alignment after the exception, as a check that all still works
    q.delete();
    st = '{default: 0};
    gen_alignment(F, P, 3, q, st);
    cur_loc = 3;
    for (int a = 0; a < NA; a++) next_row[a] = 0;
    foreach (q[k]) send(q[k], '0);
    wait_idle();
    for (int a = 0; a < NA; a++)
      check(next_row[a] == int'(ROWS), "records after recovery");

    // gang presets aimed at a single array: column 2F+3P of array 0 to 1,
    // of array 1 to 0; both arrays are read back
    send(to_array(mi_preset(2*F + 3*P, 1, 1'b0, 16'h1), 0), '0);
    send(to_array(mi_preset(2*F + 3*P, 1, 1'b0, 16'h0), 1), '0);
    for (int a = 0; a < NA; a++) begin
      rd_expect_mask = '0;
      rd_expect_mask[2*F + 3*P] = 1'b1;
      rd_expect_data = (a == 0) ? rd_expect_mask : '0;
      rd_expected = 1'b1;
      send(mi_read(a, 2), '0);
      wait_idle();
      repeat (4) @(negedge clk);
      check(!rd_expected, "read answered");
    end

    // mechanisms
    check(n_sel > 0, "preset aimed at one array");
    check(n_stall > 0, "input stall (instruction buffer full)");
    check(n_inline_pre > 0, "inline preset");
    check(n_hoist_pre > 0, "hoisted gang preset");
    check(n_mask_pre > 0, "mask-mode preset");
    for (int k = 0; k < 7; k++)
      check(n_gate[k] > 0, $sformatf("gate %s fired", gate_op_e'(k)));
    check(n_gang > 0, "gang gate on all arrays");
    check(n_bcast > 0, "broadcast write");
    check(n_single_wr > 0, "single-array write");
    check(n_readback > 0, "read-back");
    check(n_exc > 0, "exception");
    check(n_lut_wr > 0, "gate table reprogrammed");
    check(n_sc_bp > 0, "score back-pressure");
    $display("stalls=%0d inline_presets=%0d hoisted_presets=%0d mask_presets=%0d records=%0d",
             n_stall, n_inline_pre, n_hoist_pre, n_mask_pre, n_sc_rec);
    $display("gates INV=%0d COPY=%0d NOR=%0d NOR2=%0d MAJ3=%0d MAJ5=%0d TH=%0d",
             n_gate[0], n_gate[1], n_gate[2], n_gate[3], n_gate[4], n_gate[5], n_gate[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
