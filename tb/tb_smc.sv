// tb_smc: self-checking test of the memory controller on its own.
//
// The arrays and score buffers are replaced by small models: an array read
// returns a pattern made of the array and row numbers one cycle after rd_en;
// a gate fired with a voltage outside the window of its input count raises
// gate_err the next cycle; a score buffer stays busy for a chosen number of
// cycles after sc_start.
//
// Phase 1 streams several hundred random micro-instructions (gates with and
// without preset, plain and mask-mode presets, to all arrays or to one, single and broadcast writes,
// reads, score steps) through a small instruction buffer, after two gate-table
// entries have been reprogrammed. Every strobe the controller drives (preset,
// gate, write, read, score start, read data out) is logged as a text line with
// its cycle and fields, and compared with a schedule worked out here from the
// timing rule: one fetch cycle, then PRESET_CYCLES per preset, the table's
// cycles per gate, WRITE_CYCLES per write, READ_CYCLES per read, and a score
// step lasting until the score buffers are done.
// Phase 2 fires a gate at a voltage outside its window: exc must rise, the
// following read must wait while exc is set, and go out after exc_clr.
module tb_smc;
  import cram_pkg::*;
  import cram_tb_pkg::*;

  localparam int unsigned NA   = 3;
  localparam int unsigned COLS = 40;
  localparam int unsigned PC = 3, WC = 4, RC = 2;
  localparam int unsigned NINSTR = 400;

  logic clk = 1'b0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
  logic [NA-1:0] arr_sel;
  logic gate_fire, gate_target, gate_err = 1'b0, preset_fire, preset_val;
  mv_t gate_v_mv;
  logic [2:0] gate_n_in;
  logic [1:0] gate_n_out;
  col_t [MAX_IN-1:0] gate_in_col;
  col_t [MAX_OUT-1:0] gate_out_col;
  col_t preset_col;
  logic [NA-1:0] wr_en;
  row_t wr_row;
  logic [COLS-1:0] wr_mask, wr_data;
  logic rd_en, rd_valid = 1'b0;
  arr_t rd_arr;
  row_t rd_row;
  logic [COLS-1:0] rd_data = '0;
  logic sc_start, sc_busy;
  col_t sc_col;
  loc_t sc_loc;

  smc #(.NUM_ARRAYS(NA), .COLS(COLS), .BUF_DEPTH(4),
        .PRESET_CYCLES(PC), .WRITE_CYCLES(WC), .READ_CYCLES(RC)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ models
  function automatic logic [COLS-1:0] read_pattern(input int a, input int r);
    return COLS'({32'(a) * 32'h2545f491, 32'(r) * 32'h9e3779b9});
  endfunction

  int busy_q[$];
  int busy_cnt = 0;
  assign sc_busy = (busy_cnt != 0);
  always @(posedge clk) begin
    vwin_t w;
    rd_valid <= rd_en;
    if (rd_en) rd_data <= read_pattern(int'(rd_arr), int'(rd_row));
    w = gate_window(1'b0, gate_n_in);
    gate_err <= gate_fire && !(gate_v_mv >= w.lo && gate_v_mv <= w.hi);
    if (sc_start) busy_cnt <= busy_q.pop_front();
    else if (busy_cnt != 0) busy_cnt <= busy_cnt - 1;
  end

  // ------------------------------------------------------------ monitor
  string got[$];
  int t_first = -1;
  always @(negedge clk) begin
    if (rst_n) begin
      string s;
      s = "";
      if (preset_fire) s = $sformatf("P e%b c%0d v%0d", arr_sel, preset_col, preset_val);
      if (gate_fire)
        s = {s, $sformatf("G e%b v%0d n%0d/%0d i%0d,%0d,%0d,%0d,%0d o%0d,%0d t%0d", arr_sel, gate_v_mv,
                          gate_n_in, gate_n_out, gate_in_col[0], gate_in_col[1], gate_in_col[2],
                          gate_in_col[3], gate_in_col[4], gate_out_col[0], gate_out_col[1],
                          gate_target)};
      if (|wr_en) s = {s, $sformatf("W e%b r%0d m%h d%h", wr_en, wr_row, wr_mask, wr_data & wr_mask)};
      if (rd_en) s = {s, $sformatf("R a%0d r%0d", rd_arr, rd_row)};
      if (rd_out_valid) s = {s, $sformatf("O a%0d r%0d d%h", rd_out_arr, rd_out_row, rd_out_data)};
      if (sc_start) s = {s, $sformatf("S c%0d l%0d", sc_col, sc_loc)};
      if (s != "") begin
        if (t_first < 0) t_first = cyc;
        got.push_back($sformatf("%0d %s", cyc - t_first, s));
      end
    end
  end

  // -------------------------------------------------------- expectation
  lut_entry_t tbl [NUM_OPS];
  string exp_q[$];

  // append events at relative time t; the monitor merges events of one cycle
  // in the order P, G, W, R, O, S, so keep one map per cycle
  string ev [int];
  function automatic void add(input int t, input string s);
    if (ev.exists(t)) ev[t] = {ev[t], s};
    else ev[t] = s;
  endfunction

  // schedule of one instruction popped at time t; returns its cost in cycles
  function automatic int schedule(input micro_instr_t m, input logic [COLS-1:0] d, input int t,
                                  input int busy);
    lut_entry_t e;
    logic [COLS-1:0] mask;
    logic [NA-1:0] en;
    int n;
    for (int a = 0; a < int'(NA); a++) en[a] = m.bcast || int'(m.arr) == a;
    unique case (m.kind)
      MI_GATE: begin
        e = tbl[m.op];
        n = 0;
        if (m.do_preset) begin
          for (int o = 0; o < int'(e.n_out); o++)
            add(t + 1 + int'(PC) * o, $sformatf("P e%b c%0d v%0d", en, m.out_col[o], e.preset));
          n = int'(e.n_out);
        end
        add(t + 1 + int'(PC) * n,
            $sformatf("G e%b v%0d n%0d/%0d i%0d,%0d,%0d,%0d,%0d o%0d,%0d t%0d", en, e.v_mv, e.n_in,
                      e.n_out, m.in_col[0], m.in_col[1], m.in_col[2], m.in_col[3], m.in_col[4],
                      m.out_col[0], m.out_col[1], !e.preset));
        return 1 + int'(PC) * n + int'(e.cycles);
      end
      MI_PRESET: begin
        for (int k = 0; k < int'(m.ncell); k++)
          add(t + 1 + int'(PC) * k, $sformatf("P e%b c%0d v%0d", en, int'(m.col) + k,
                                               m.mask_mode ? m.val[k] : m.val[0]));
        return 1 + int'(PC) * int'(m.ncell);
      end
      MI_WRITE: begin
        for (int c = 0; c < int'(COLS); c++) mask[c] = (c >= int'(m.col)) && (c < int'(m.col) + int'(m.len));
        add(t + 1, $sformatf("W e%b r%0d m%h d%h", en, m.row, mask, d & mask));
        return 1 + int'(WC);
      end
      MI_READ: begin
        add(t + 1, $sformatf("R a%0d r%0d", m.arr, m.row));
        add(t + 3, $sformatf("O a%0d r%0d d%h", m.arr, m.row, read_pattern(int'(m.arr), int'(m.row))));
        return 1 + int'(RC);
      end
      MI_SCORE: begin
        add(t + 1, $sformatf("S c%0d l%0d", m.col, m.loc));
        return 3 + busy;
      end
      default: return 1;
    endcase
  endfunction

  task automatic send(input micro_instr_t m, input logic [COLS-1:0] d);
    in_valid = 1'b1; in_instr = m; in_data = d;
    while (!in_ready) @(negedge clk);
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic lut_write(input gate_op_e op, input lut_entry_t e);
    lut_we = 1'b1; lut_waddr = op; lut_wdata = e;
    @(negedge clk);
    lut_we = 1'b0;
    tbl[op] = e;
  endtask

  function automatic int rcol();
    return int'($urandom_range(COLS - 1));
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    micro_instr_t prog[$];
    logic [COLS-1:0] data[$];
    int busy[$];
    int t, n_kind [6];
    lut_entry_t e;

    for (int k = 0; k < NUM_OPS; k++) tbl[k] = lut_default(1'b0, gate_op_e'(k));
    for (int k = 0; k < 6; k++) n_kind[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(idle === 1'b1 && exc === 1'b0, "idle after reset");

    // reprogram two table entries: a slower MAJ3 at another in-window voltage,
    // and the spare slot as a second 3-input gate with preset 0
    e = tbl[OP_MAJ3]; e.cycles = 4'd5; e.v_mv = 11'd660;
    lut_write(OP_MAJ3, e);
    lut_write(OP_RSVD, '{v_mv: 11'd670, preset: 1'b0, n_in: 3'd3, n_out: 2'd1, cycles: 4'd2});

    // ---------------- phase 1: random program, timed
    for (int k = 0; k < int'(NINSTR); k++) begin
      micro_instr_t m;
      logic [COLS-1:0] d;
      int b, sel;
      d = '0;
      b = 0;
      sel = int'($urandom_range(9));
      case (sel)
        0, 1, 2, 3: begin
          gate_op_e op;
          op = gate_op_e'($urandom_range(7));
          m = mi_gate(op, 1'($urandom), 0, 0, 0, 0, 0, rcol(), 0);
          for (int i = 0; i < int'(tbl[op].n_in); i++) m.in_col[i] = col_t'(rcol());
          if (tbl[op].n_out == 2'd2) m.out_col[1] = col_t'(rcol());
        end
        4, 5: begin
          int n;
          n = int'($urandom_range(1, 6));
          m = mi_preset(int'($urandom_range(COLS - n)), n, 1'($urandom), 16'($urandom));
        end
        6: begin
          int c;
          c = rcol();
          m = mi_write(int'($urandom_range(NA - 1)), 1'($urandom), int'($urandom_range(9999)),
                       c, int'($urandom_range(1, COLS - c)));
          d = {$urandom, $urandom};
        end
        7, 8: m = mi_read(int'($urandom_range(NA - 1)), int'($urandom_range(9999)));
        default: begin
          m = mi_score(rcol(), int'($urandom_range(4095)));
          b = int'($urandom_range(1, 8));
        end
      endcase
      if (m.kind == MI_GATE || m.kind == MI_PRESET)
        if ($urandom_range(3) == 0) m = to_array(m, int'($urandom_range(NA - 1)));
      n_kind[m.kind]++;
      prog.push_back(m);
      data.push_back(d);
      busy.push_back(b);
      if (m.kind == MI_SCORE) busy_q.push_back(b);
    end
    // the first instruction is popped one cycle before its first strobe
    t = -1;
    foreach (prog[k]) t += schedule(prog[k], data[k], t, busy[k]);
    foreach (ev[tt]) exp_q.push_back($sformatf("%0d %s", tt, ev[tt]));

    foreach (prog[k]) send(prog[k], data[k]);
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);
    check(got.size() == exp_q.size(), $sformatf("%0d events, expected %0d", got.size(), exp_q.size()));
    for (int k = 0; k < exp_q.size() && k < got.size(); k++)
      check(got[k] == exp_q[k], $sformatf("event %0d: got '%s' expected '%s'", k, got[k], exp_q[k]));
    check(n_kind[MI_GATE] > 0 && n_kind[MI_PRESET] > 0 && n_kind[MI_WRITE] > 0 &&
          n_kind[MI_READ] > 0 && n_kind[MI_SCORE] > 0, "all instruction kinds generated");
    $display("phase 1: %0d instructions in %0d cycles, %0d events", NINSTR, t + 1, got.size());

    // ---------------- phase 2: exception
    got.delete();
    lut_write(OP_RSVD, '{v_mv: 11'd100, preset: 1'b0, n_in: 3'd2, n_out: 2'd1, cycles: 4'd3});
    send(mi_gate(OP_RSVD, 1'b0, 1, 2, 0, 0, 0, 3, 0), '0);
    send(mi_read(2, 77), '0);
    repeat (30) @(negedge clk);
    check(exc === 1'b1, "exc raised by an out-of-window gate");
    check(!idle, "not idle while halted with a pending instruction");
    begin
      bit seen_read;
      seen_read = 1'b0;
      foreach (got[k]) if (got[k].substr(0, 0) != "" && got[k].len() > 0) begin
        for (int i = 0; i + 1 < got[k].len(); i++)
          if (got[k].substr(i, i + 1) == "R ") seen_read = 1'b1;
      end
      check(!seen_read, "no read issued while exc is set");
    end
    exc_clr = 1'b1;
    @(negedge clk);
    exc_clr = 1'b0;
    repeat (8) @(negedge clk);
    check(exc === 1'b0, "exc cleared");
    check(idle === 1'b1, "pending read done after exc_clr");
    begin
      bit seen_out;
      seen_out = 1'b0;
      foreach (got[k])
        for (int i = 0; i + 1 < got[k].len(); i++)
          if (got[k].substr(i, i + 1) == "O ") seen_out = 1'b1;
      check(seen_out, "read data returned after exc_clr");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
