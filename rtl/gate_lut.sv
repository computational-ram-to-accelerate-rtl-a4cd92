// gate_lut: the controller's gate look-up table, kept in host-visible
// configuration registers.
//
// For each gate opcode the table holds the voltage to drive on the input
// bit-select lines, the value the output cells are preset to, the number of
// input and output cells, and how many cycles the evaluation is given. The
// controller reads it combinationally (raddr -> rdata) while decoding a gate
// micro-instruction. Reprogramming an entry (we, waddr, wdata; one write per
// cycle, visible from the next cycle) changes which function a given column
// assignment computes, which is how the array is reconfigured.
//
// Reset contents follow the technology table of the source design: for each
// gate the middle of its voltage window, its preset value and its input
// count. The cycle window (3 cycles near-term, 1 long-term) assumes a 1 GHz
// clock and the MTJ switching time; it is this design's choice, as are the
// opcode numbering and the reset style (synchronous, active low).
module gate_lut
  import cram_pkg::*;
#(
  parameter bit LONG_TERM = 1'b0
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       we,
  input  gate_op_e   waddr,
  input  lut_entry_t wdata,
  input  gate_op_e   raddr,
  output lut_entry_t rdata
);

  lut_entry_t tbl [NUM_OPS];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < NUM_OPS; i++)
        tbl[i] <= lut_default(LONG_TERM, gate_op_e'(i));
    end else if (we) begin
      tbl[waddr] <= wdata;
    end
  end

  assign rdata = tbl[raddr];

endmodule
