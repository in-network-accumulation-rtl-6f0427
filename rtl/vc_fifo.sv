// vc_fifo: flit buffer of one virtual channel.
//
// A circular buffer of DEPTH entries (4 flits in the paper's configuration) with
// first-word fall-through: the oldest entry is always visible on rd_data while
// !empty. push and pop may happen in the same cycle. Overflow cannot happen under
// credit flow control; an assertion checks it.
module vc_fifo #(
  parameter int unsigned DEPTH = 4,
  parameter int unsigned W     = 131
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] wr_data,
  input  logic         pop,
  output logic [W-1:0] rd_data,
  output logic         empty,
  output logic         full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty   = (count == 0);
  assign full    = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign rd_data = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + $bits(count)'(push) - $bits(count)'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= wr_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !pop))
    else $error("vc_fifo overflow");
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty))
    else $error("vc_fifo underflow");
endmodule
