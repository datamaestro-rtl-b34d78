// dm_mic_read: memory interface controller of one read channel.
//
// Two parts, as in the paper. The Request Side Controller (RSC) turns the
// address at the head of the channel's address FIFO into a read request and
// keeps it on the port until the crossbar grants it; a grant pops the
// address. The Outstanding Request Manager (ORM) keeps a count of data-FIFO
// slots that are reserved, either by requests in flight or by words waiting
// in the FIFO: +1 when a request is granted (ReqSubmitted), -1 when the
// consumer pops the FIFO (Data Popped). The RSC may only raise a request while
// a slot is free, counting a slot freed by a pop in the same cycle, so the
// data FIFO can never overflow; a slot freed by a pop is re-requested in the
// same cycle. With the one-cycle memory latency a FIFO of two or more words
// sustains one word per cycle and a 1-deep FIFO one word every two cycles,
// which suffices for streams consumed once per K loop (C, D and E). Read data is pushed into the data FIFO when the response arrives.
//
// This design's own choices: responses return in order one cycle after the
// grant; a disabled channel (ch_en = 0) consumes its addresses without a
// memory access and delivers zero words, which lets an extension such as the
// Broadcaster fetch only part of a wide word.
//
// Timing: request valid the cycle the address is at the FIFO head and a slot
// is free; data pushed into the FIFO one cycle after the grant.
module dm_mic_read
  import dm_pkg::*;
#(
  parameter int unsigned DBF = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ch_en,
  // address FIFO head
  input  logic     addr_valid,
  input  addr_t    addr,
  output logic     addr_pop,
  // crossbar port
  output mem_req_t req,
  input  logic     gnt,
  input  mem_rsp_t rsp,
  // data FIFO side
  input  logic     data_popped,
  output logic     rsp_push,
  output word_t    rsp_data
);
  localparam int unsigned CW = $clog2(DBF + 1);

  logic [CW-1:0] reserved;
  logic          slot_free;
  logic          submitted;
  logic          local_q;   // a disabled channel's "response" is due

  // ORM: a slot is free if fewer than DBF are reserved after this cycle's pop.
  assign slot_free = (reserved - CW'(data_popped)) < CW'(DBF);

  // RSC
  assign req.valid = ch_en && addr_valid && slot_free;
  assign req.we    = 1'b0;
  assign req.addr  = addr;
  assign req.wdata = '0;

  assign submitted = ch_en ? (req.valid && gnt) : (addr_valid && slot_free);
  assign addr_pop  = submitted;

  assign rsp_push = rsp.valid || local_q;
  assign rsp_data = local_q ? '0 : rsp.rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reserved <= '0;
      local_q  <= 1'b0;
    end else begin
      reserved <= reserved + CW'(submitted) - CW'(data_popped);
      local_q  <= submitted && !ch_en;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) reserved <= CW'(DBF))
    else $error("dm_mic_read: more slots reserved than the data FIFO holds");
  assert property (@(posedge clk) disable iff (!rst_n) (req.valid && !gnt) |=> req.valid)
    else $error("dm_mic_read: request withdrawn before grant");
endmodule
