// instr_buffer: the controller's micro-instruction buffer, a first-in
// first-out queue between the host and the controller's issue logic.
//
// The host pushes a micro-instruction and its row data (in_valid/in_ready);
// the controller pops the oldest one (out_valid/out_ready). When the buffer is
// full in_ready is low and the host must hold its request: this is the
// back-pressure that paces the host to the substrate. Push and pop may happen
// in the same cycle. The data out is the head entry, available combinationally.
//
// The source design states only that micro-instructions wait in such a
// buffer until they are issued; depth, handshake and reset (synchronous,
// active low, empties the queue) are this design's choices.
module instr_buffer
  import cram_pkg::*;
#(
  parameter int unsigned DEPTH  = 16,
  parameter int unsigned DATA_W = COLS_DEF
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  output logic               in_ready,
  input  micro_instr_t       in_instr,
  input  logic [DATA_W-1:0]  in_data,
  output logic               out_valid,
  input  logic               out_ready,
  output micro_instr_t       out_instr,
  output logic [DATA_W-1:0]  out_data,
  output logic [$clog2(DEPTH+1)-1:0] level
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  micro_instr_t      q_instr [DEPTH];
  logic [DATA_W-1:0] q_data  [DEPTH];
  logic [AW-1:0]     wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic push, pop;
  assign in_ready  = (cnt != DEPTH[$clog2(DEPTH+1)-1:0]);
  assign out_valid = (cnt != '0);
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  function automatic logic [AW-1:0] nxt(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp  <= '0;
      rp  <= '0;
      cnt <= '0;
    end else begin
      if (push) wp <= nxt(wp);
      if (pop)  rp <= nxt(rp);
      unique case ({push, pop})
        2'b10:   cnt <= cnt + 1'b1;
        2'b01:   cnt <= cnt - 1'b1;
        default: ;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (push) begin
      q_instr[wp] <= in_instr;
      q_data[wp]  <= in_data;
    end
  end

  assign out_instr = q_instr[rp];
  assign out_data  = q_data[rp];
  assign level     = cnt;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) cnt <= DEPTH[$clog2(DEPTH+1)-1:0]);
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
      in_valid && !in_ready |=> in_valid && $stable(in_instr));

endmodule
