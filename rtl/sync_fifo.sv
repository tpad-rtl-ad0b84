// sync_fifo: single-clock first-word-fall-through FIFO.
//
// Holds up to DEPTH words of W bits in a register array. dout shows the
// oldest word whenever empty is low; pop removes it at the next clock edge.
// push writes din at the next clock edge. Pushing and popping in the same
// cycle is allowed, also when the FIFO is full (the pop frees the slot).
// Pushing into a full FIFO without popping, or popping an empty one, is a
// protocol error, flagged by assertions.
//
// A plain helper of this design: the paper asks for FIFOs or handshaking around
// the TPAD checkers but does not describe them.
module sync_fifo #(
  parameter int unsigned W     = 8,
  parameter int unsigned DEPTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         full,
  output logic [AW:0]  count
);

  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] rd_ptr, wr_ptr;

  assign empty = (count == '0);
  assign full  = (32'(count) == DEPTH);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] inc(input logic [AW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= inc(wr_ptr);
      if (pop)  rd_ptr <= inc(rd_ptr);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("sync_fifo: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("sync_fifo: pop from empty FIFO");

endmodule
