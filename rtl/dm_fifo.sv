// dm_fifo: synchronous first-word-fall-through FIFO.
//
// Used as the per-channel data buffer of a DataMaestro (depth D_DBf) and as
// the per-channel address buffer in front of each memory interface controller
// (depth D_ABf). Storage is a circular buffer of DEPTH registers with read and
// write pointers and an occupancy counter.
//
// Interface: push/din write one entry when not full; pop removes the head,
// which is always visible on dout while empty is low. A push and a pop in the
// same cycle are both honoured, also when the FIFO is full (the popped slot
// is refilled). Pushing into a full FIFO without popping, or popping an empty
// one, is a protocol error caught by the assertions. count is the occupancy.
// Timing: a pushed word is visible at dout the cycle after the push.
module dm_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 8
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic [$clog2(DEPTH+1)-1:0] count,
  output logic                       full,
  output logic                       empty
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [PW-1:0]    rd_ptr, wr_ptr;

  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty = (count == '0);
  assign dout  = mem[rd_ptr];

  function automatic logic [PW-1:0] next_ptr(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= next_ptr(wr_ptr);
      if (pop)  rd_ptr <= next_ptr(rd_ptr);
      if (push && !pop)      count <= count + 1'b1;
      else if (pop && !push) count <= count - 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop))
    else $error("dm_fifo: push into a full FIFO");
  assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty)
    else $error("dm_fifo: pop from an empty FIFO");
endmodule
