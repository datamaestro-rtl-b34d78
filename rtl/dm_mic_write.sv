// dm_mic_write: memory interface controller of one write channel.
//
// It pairs the address at the head of the channel's address FIFO with the
// word at the head of its data FIFO and holds a write request on its crossbar
// port until it is granted; the grant pops both FIFOs. Channels of one
// DataMaestro run independently, so a channel that loses arbitration delays
// only itself. The paper details only the read-mode controller; this is the
// simplest controller that does the write side's job, with full-word writes.
//
// Timing: request valid in the cycle both heads are present; one write per
// cycle while grants keep coming.
module dm_mic_write
  import dm_pkg::*;
(
  input  logic     addr_valid,
  input  addr_t    addr,
  input  logic     data_valid,
  input  word_t    data,
  output logic     pop,
  output mem_req_t req,
  input  logic     gnt
);
  assign req.valid = addr_valid && data_valid;
  assign req.we    = 1'b1;
  assign req.addr  = addr;
  assign req.wdata = data;
  assign pop       = req.valid && gnt;
endmodule
