// tb_cram_array: self-checking test of one CRAM-PM array at a small size.
//
// A shadow copy of the array is kept in the testbench. Rows are written with
// random data and read back (read data one cycle after the strobe). Then each
// gate of the set is fired in all rows at once, with its table voltage and
// preset, and every row's output is compared with the Boolean function the gate
// stands for (INV, COPY, NOR, two-output NOR, MAJ3, MAJ5, 4-input threshold).
// Composite operations follow: XOR in two steps (two-output NOR, then
// threshold) and a full adder in four (MAJ3, INV, COPY, MAJ5). A gate fired
// with a voltage outside its window must raise gate_err and change nothing.
module tb_cram_array;
  import cram_pkg::*;

  localparam int unsigned ROWS = 24;
  localparam int unsigned COLS = 40;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0;
  logic gate_fire = 1'b0, gate_target = 1'b0, preset_fire = 1'b0, preset_val = 1'b0;
  mv_t gate_v_mv = '0;
  logic [2:0] gate_n_in = '0;
  logic [1:0] gate_n_out = '0;
  col_t [MAX_IN-1:0] gate_in_col = '0;
  col_t [MAX_OUT-1:0] gate_out_col = '0;
  col_t preset_col = '0;
  logic wr_en = 1'b0, rd_en = 1'b0;
  row_t wr_row = '0, rd_row = '0;
  logic [COLS-1:0] wr_mask = '0, wr_data = '0, rd_data;
  logic gate_err, rd_valid;

  cram_array #(.ROWS(ROWS), .COLS(COLS)) dut (.*);

  int checks = 0, failures = 0;
  logic [COLS-1:0] shadow [ROWS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic write_row(input int r, input logic [COLS-1:0] d, input logic [COLS-1:0] m);
    @(negedge clk);
    wr_en = 1'b1; wr_row = row_t'(r); wr_data = d; wr_mask = m;
    @(negedge clk);
    wr_en = 1'b0;
    shadow[r] = (shadow[r] & ~m) | (d & m);
  endtask

  task automatic read_check(input int r);
    @(negedge clk);
    rd_en = 1'b1; rd_row = row_t'(r);
    @(negedge clk);
    rd_en = 1'b0;
    check(rd_valid === 1'b1, "rd_valid one cycle after rd_en");
    check(rd_data == shadow[r], $sformatf("row %0d read back", r));
  endtask

  task automatic gang_preset(input int c, input logic v);
    @(negedge clk);
    preset_fire = 1'b1; preset_col = col_t'(c); preset_val = v;
    @(negedge clk);
    preset_fire = 1'b0;
    for (int r = 0; r < ROWS; r++) shadow[r][c] = v;
  endtask

  // Fire a gate from the reset table contents of opcode op.
  task automatic fire(input gate_op_e op, input int i0, input int i1, input int i2,
                      input int i3, input int i4, input int o0, input int o1);
    lut_entry_t e;
    e = lut_default(1'b0, op);
    @(negedge clk);
    gate_fire = 1'b1; gate_v_mv = e.v_mv; gate_n_in = e.n_in; gate_n_out = e.n_out;
    gate_target = ~e.preset;
    gate_in_col = {col_t'(i4), col_t'(i3), col_t'(i2), col_t'(i1), col_t'(i0)};
    gate_out_col = {col_t'(o1), col_t'(o0)};
    @(negedge clk);
    gate_fire = 1'b0;
  endtask

  // Expected value of a gate, written as the plain Boolean function.
  function automatic logic ref_gate(input gate_op_e op, input logic a, input logic b,
                                    input logic c, input logic d, input logic e);
    int ones;
    case (op)
      OP_INV:  return ~a;
      OP_COPY: return a;
      OP_NOR, OP_NOR2: return ~(a | b);
      OP_MAJ3: return (a & b) | (a & c) | (b & c);
      OP_MAJ5: begin ones = a + b + c + d + e; return ones >= 3; end
      OP_TH:   begin ones = a + b + c + d; return (4 - ones) > 2; end
      default: return 1'b0;
    endcase
  endfunction

  task automatic test_gate(input gate_op_e op);
    lut_entry_t e;
    e = lut_default(1'b0, op);
    gang_preset(20, e.preset);
    if (e.n_out == 2'd2) gang_preset(21, e.preset);
    fire(op, 0, 1, 2, 3, 4, 20, 21);
    for (int r = 0; r < ROWS; r++) begin
      logic exp;
      exp = ref_gate(op, shadow[r][0], shadow[r][1], shadow[r][2], shadow[r][3], shadow[r][4]);
      shadow[r][20] = exp;
      if (e.n_out == 2'd2) shadow[r][21] = exp;
    end
    for (int r = 0; r < ROWS; r++) read_check(r);
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) shadow[r] = '0;
    repeat (2) @(negedge clk);
    check(rd_valid === 1'b0 && gate_err === 1'b0, "status flags cleared by reset");
    rst_n = 1'b1;
    // memory mode: full writes, then a masked partial write
    for (int r = 0; r < ROWS; r++) write_row(r, {$urandom, $urandom}, '1);
    // make sure the first rows cover all 32 combinations of columns 0..4
    for (int r = 0; r < ROWS && r < 32; r++) write_row(r, COLS'(r), COLS'(5'h1f));
    write_row(3, '1, COLS'(40'h00_0000_ff00));
    for (int r = 0; r < ROWS; r++) read_check(r);

    // every gate of the set
    test_gate(OP_INV);
    test_gate(OP_COPY);
    test_gate(OP_NOR);
    test_gate(OP_NOR2);
    test_gate(OP_MAJ3);
    test_gate(OP_MAJ5);
    test_gate(OP_TH);

    // XOR of columns 0 and 1 into 24: S1,S2 = NOR(a,b) in 22,23; out = TH(a,b,S1,S2)
    gang_preset(22, 1'b0); gang_preset(23, 1'b0); gang_preset(24, 1'b0);
    fire(OP_NOR2, 0, 1, 0, 0, 0, 22, 23);
    fire(OP_TH, 0, 1, 22, 23, 0, 24, 0);
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk); rd_en = 1'b1; rd_row = row_t'(r);
      @(negedge clk); rd_en = 1'b0;
      check(rd_data[24] == (shadow[r][0] ^ shadow[r][1]), $sformatf("XOR row %0d", r));
    end

    // full adder of columns 0,1,2: Co in 25, S1 26, S2 27, Sum 28
    gang_preset(25, 1'b1); gang_preset(26, 1'b0); gang_preset(27, 1'b1); gang_preset(28, 1'b1);
    fire(OP_MAJ3, 0, 1, 2, 0, 0, 25, 0);
    fire(OP_INV, 25, 0, 0, 0, 0, 26, 0);
    fire(OP_COPY, 26, 0, 0, 0, 0, 27, 0);
    fire(OP_MAJ5, 0, 1, 2, 26, 27, 28, 0);
    for (int r = 0; r < ROWS; r++) begin
      int s;
      s = shadow[r][0] + shadow[r][1] + shadow[r][2];
      @(negedge clk); rd_en = 1'b1; rd_row = row_t'(r);
      @(negedge clk); rd_en = 1'b0;
      check(rd_data[25] == s[1] && rd_data[28] == s[0], $sformatf("full adder row %0d", r));
      shadow[r] = rd_data;
    end

    // a NOR fired at a MAJ5 voltage is rejected and changes nothing
    gang_preset(30, 1'b0);
    @(negedge clk);
    gate_fire = 1'b1; gate_v_mv = 11'd615; gate_n_in = 3'd2; gate_n_out = 2'd1; gate_target = 1'b1;
    gate_in_col = {col_t'(0), col_t'(0), col_t'(0), col_t'(1), col_t'(0)};
    gate_out_col = {col_t'(0), col_t'(30)};
    @(negedge clk);
    gate_fire = 1'b0;
    check(gate_err === 1'b1, "out-of-window voltage flagged");
    @(negedge clk);
    check(gate_err === 1'b0, "gate_err is a one-cycle flag");
    for (int r = 0; r < ROWS; r++) read_check(r);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
