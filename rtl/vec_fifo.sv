// vec_fifo: synchronous first-in first-out buffer with valid/ready on both sides.
//
// Used for the vector instruction queue between the scalar core and the decode
// unit, and for the accumulation and result queues of the MPTU. DEPTH entries of
// type T are held in a register array; push and pop may happen in the same
// cycle. Data read at the output (data_o) is the oldest entry whenever valid_o is
// set; an entry written in one cycle can be popped in the next. After reset the
// FIFO is empty. The paper names these queues; their depth and handshake are
// this design's choice.
module vec_fifo #(
  parameter type         T     = logic [63:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic clk_i,
  input  logic rst_ni,
  input  logic flush_i,
  // write side
  input  logic valid_i,
  output logic ready_o,
  input  T     data_i,
  // read side
  output logic valid_o,
  input  logic ready_i,
  output T     data_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T                          mem [DEPTH];
  logic [AW-1:0]             rd_ptr, wr_ptr;
  logic [$clog2(DEPTH+1)-1:0] cnt;

  logic push, pop;
  assign ready_o = (cnt < DEPTH[$clog2(DEPTH+1)-1:0]);
  assign valid_o = (cnt != '0);
  assign push    = valid_i && ready_o;
  assign pop     = valid_o && ready_i;
  assign data_o  = mem[rd_ptr];
  assign count_o = cnt;

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else if (flush_i) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      cnt <= cnt + CW'(push) - CW'(pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (push) mem[wr_ptr] <= data_i;
  end

  // the occupancy never exceeds the depth
  assert property (@(posedge clk_i) disable iff (!rst_ni) cnt <= DEPTH[$clog2(DEPTH+1)-1:0]);

endmodule
