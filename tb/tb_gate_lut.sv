// tb_gate_lut: checks the reset contents of the gate table against the
// technology windows and presets of each gate, for both MTJ technologies, then
// reprograms entries and reads them back.
module tb_gate_lut;
  import cram_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n = 1'b0, we = 1'b0;
  gate_op_e waddr = OP_INV, raddr = OP_INV, raddr_l = OP_INV;
  lut_entry_t wdata = '0, rdata, rdata_l;

  gate_lut #(.LONG_TERM(1'b0)) dut (.clk, .rst_n, .we, .waddr, .wdata, .raddr, .rdata);
  gate_lut #(.LONG_TERM(1'b1)) dut_l (.clk, .rst_n, .we(1'b0), .waddr(OP_INV), .wdata('0),
                                      .raddr(raddr_l), .rdata(rdata_l));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Expected values, written out per gate: voltage window in mV, preset, inputs, outputs.
  typedef struct { int lo; int hi; int lo_l; int hi_l; bit pre; int nin; int nout; } exp_t;
  function automatic exp_t expected(input gate_op_e op);
    case (op)
      OP_INV:  return '{840, 1300, 230, 480, 1'b0, 1, 1};
      OP_COPY: return '{840, 1300, 230, 480, 1'b1, 1, 1};
      OP_NOR:  return '{680, 740, 200, 220, 1'b0, 2, 1};
      OP_NOR2: return '{680, 740, 200, 220, 1'b0, 2, 2};
      OP_MAJ3: return '{650, 690, 200, 210, 1'b1, 3, 1};
      OP_MAJ5: return '{610, 620, 190, 200, 1'b1, 5, 1};
      OP_TH:   return '{620, 630, 190, 200, 1'b0, 4, 1};
      default: return '{0, 0, 0, 0, 1'b0, 0, 0};
    endcase
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    for (int i = 0; i < 7; i++) begin
      exp_t x;
      raddr = gate_op_e'(i);
      raddr_l = gate_op_e'(i);
      x = expected(gate_op_e'(i));
      #1;
      check(int'(rdata.v_mv) >= x.lo && int'(rdata.v_mv) <= x.hi, $sformatf("op %0d near-term voltage %0d", i, rdata.v_mv));
      check(int'(rdata_l.v_mv) >= x.lo_l && int'(rdata_l.v_mv) <= x.hi_l, $sformatf("op %0d long-term voltage", i));
      check(rdata.preset == x.pre && int'(rdata.n_in) == x.nin && int'(rdata.n_out) == x.nout,
            $sformatf("op %0d preset/inputs/outputs", i));
      check(rdata.cycles == 4'd3 && rdata_l.cycles == 4'd1, $sformatf("op %0d window", i));
    end
    // reprogram the free slot as a NAND-like entry and overwrite NOR's voltage
    @(negedge clk);
    we = 1'b1; waddr = OP_RSVD; wdata = '{v_mv: 11'd555, preset: 1'b0, n_in: 3'd2, n_out: 2'd1, cycles: 4'd7};
    @(negedge clk);
    waddr = OP_NOR; wdata = '{v_mv: 11'd700, preset: 1'b0, n_in: 3'd2, n_out: 2'd1, cycles: 4'd5};
    @(negedge clk);
    we = 1'b0;
    raddr = OP_RSVD; #1;
    check(rdata.v_mv == 11'd555 && rdata.cycles == 4'd7, "reprogrammed free slot");
    raddr = OP_NOR; #1;
    check(rdata.v_mv == 11'd700 && rdata.cycles == 4'd5, "reprogrammed NOR");
    raddr = OP_MAJ3; #1;
    check(rdata.preset == 1'b1 && rdata.n_in == 3'd3, "other entries untouched");
    // reset restores the defaults
    rst_n = 1'b0; @(negedge clk); rst_n = 1'b1;
    raddr = OP_NOR; #1;
    check(rdata.v_mv == 11'd710 && rdata.cycles == 4'd3, "reset restores NOR");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
