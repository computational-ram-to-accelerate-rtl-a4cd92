// tb_score_buffer: runs the score buffer against a small memory that answers
// reads one cycle after the strobe, as the array does. Checks that every row's
// score slice comes out once, in row order, tagged with the row and the loc
// given at start; that out_ready stalls hold the record; that with the host
// always ready each row takes 2 + READ_CYCLES cycles; and that busy drops
// after the last row.
module tb_score_buffer;
  import cram_pkg::*;

  localparam int unsigned ROWS = 7;
  localparam int unsigned COLS = 20;
  localparam int unsigned SW = 5;
  localparam int unsigned RC = 2;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, start = 1'b0, out_ready = 1'b0;
  col_t score_col = '0;
  loc_t loc = '0;
  logic busy, rd_en, rd_valid = 1'b0, out_valid;
  row_t rd_row;
  logic [COLS-1:0] rd_data = '0;
  score_rec_t out_rec;

  score_buffer #(.ROWS(ROWS), .COLS(COLS), .SCORE_W(SW), .READ_CYCLES(RC)) dut (.*);

  logic [COLS-1:0] mem [ROWS];
  always @(posedge clk) begin
    rd_valid <= rd_en;
    if (rd_en) rd_data <= mem[rd_row];
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  int nrec = 0;
  int col_now = 0;
  always @(posedge clk) if (rst_n && out_valid && out_ready) begin
    check(int'(out_rec.row) == nrec, $sformatf("record %0d row", nrec));
    check(out_rec.loc == loc, "loc tag");
    check(int'(out_rec.score) == int'((mem[nrec] >> col_now) & ((1 << SW) - 1)),
          $sformatf("row %0d score", nrec));
    nrec++;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int c, input int l, input bit stalls);
    int t0, t1;
    for (int r = 0; r < ROWS; r++) mem[r] = COLS'($urandom);
    nrec = 0;
    col_now = c;
    @(negedge clk);
    start = 1'b1; score_col = col_t'(c); loc = loc_t'(l);
    t0 = $time;
    @(negedge clk);
    start = 1'b0;
    check(busy == 1'b1, "busy after start");
    while (busy) begin
      out_ready = stalls ? ($urandom_range(2) == 0) : 1'b1;
      @(negedge clk);
    end
    t1 = $time;
    check(nrec == ROWS, $sformatf("all %0d rows read out (%0d)", ROWS, nrec));
    if (!stalls) check((t1 - t0) / 10 == 1 + ROWS * (2 + RC) - 1 + 1,
                       $sformatf("cycles %0d", (t1 - t0) / 10));
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    check(busy == 1'b0, "idle after reset");
    run(3, 17, 1'b0);
    run(11, 900, 1'b1);
    run(0, 5, 1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
