// tb_instr_buffer: pushes random micro-instructions through the buffer with
// random stalls on both sides and checks that they come out complete and in
// order, that in_ready falls exactly when DEPTH entries are held, and that
// the level output tracks the occupancy.
module tb_instr_buffer;
  import cram_pkg::*;

  localparam int unsigned DEPTH = 4;
  localparam int unsigned DW = 20;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, in_valid = 1'b0, out_ready = 1'b0, in_ready, out_valid;
  micro_instr_t in_instr = '0, out_instr;
  logic [DW-1:0] in_data = '0, out_data;
  logic [$clog2(DEPTH+1)-1:0] level;

  instr_buffer #(.DEPTH(DEPTH), .DATA_W(DW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  micro_instr_t exp_q[$];
  logic [DW-1:0] expd_q[$];
  int sent = 0, got = 0, full_seen = 0;
  localparam int N = 300;
  int occ = 0;
  bit acc = 1'b0;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    while (sent < N) begin
      @(negedge clk);
      if (acc) begin
        acc = 1'b0;
        sent++;
        in_valid = 1'b0;
      end
      if (!in_valid && sent < N && ($urandom_range(3) != 0)) begin
        in_valid = 1'b1;
        in_instr = micro_instr_t'({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
        in_data = DW'($urandom);
      end
    end
    in_valid = 1'b0;
  end

  // occupancy model and consumer
  always @(posedge clk) if (rst_n) begin
    check(int'(level) == occ, "level equals occupancy");
    check(in_ready == (occ < DEPTH), "in_ready iff not full");
    if (occ == DEPTH) full_seen++;
    if (in_valid && in_ready) begin
      exp_q.push_back(in_instr);
      expd_q.push_back(in_data);
      acc = 1'b1;
    end
    if (out_valid && out_ready) begin
      check(out_instr == exp_q[0] && out_data == expd_q[0], $sformatf("entry %0d in order", got));
      void'(exp_q.pop_front());
      void'(expd_q.pop_front());
      got++;
    end
    occ = occ + int'(in_valid && in_ready) - int'(out_valid && out_ready);
  end

  initial begin
    wait (rst_n);
    while (got < N) begin
      @(negedge clk);
      // consumer slower than the producer for the first half, to fill the buffer
      out_ready = (got < N/2) ? ($urandom_range(4) == 0) : ($urandom_range(1) == 0);
    end
    repeat (2) @(negedge clk);
    check(full_seen > 0, "buffer filled at least once");
    check(out_valid == 1'b0, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
