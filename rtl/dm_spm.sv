// dm_spm: multi-banked scratchpad memory.
//
// NUM_BANKS banks of WORDS_PER_BANK words of BANK_W bits (128KB in the
// evaluation system). The crossbar grants at most one port per bank per
// cycle, so each bank performs at most one access per cycle, like a
// single-port SRAM; the banks are held here in one array indexed by
// bank * WORDS_PER_BANK + row. In silicon each bank would be an SRAM macro.
// Read data is registered and appears on the requesting port's lane one cycle
// after the access. Contents are not reset.
//
// The bank count and width are the paper's; the port-lane organisation is
// this design's (it pairs with dm_xbar).
module dm_spm
  import dm_pkg::*;
#(
  parameter int unsigned NP = 89
) (
  input  logic                 clk,
  input  logic     [NP-1:0]    en,
  input  logic     [NP-1:0]    we,
  input  logic [BANK_BITS-1:0] bank  [NP],
  input  logic [WORD_BITS-1:0] row   [NP],
  input  word_t                wdata [NP],
  output word_t                rdata [NP]
);
  localparam int unsigned DEPTH = NUM_BANKS * WORDS_PER_BANK;
  localparam int unsigned IW    = $clog2(DEPTH);

  word_t mem [DEPTH];

  function automatic logic [IW-1:0] index(input logic [BANK_BITS-1:0] b, input logic [WORD_BITS-1:0] r);
    return IW'(b) * IW'(WORDS_PER_BANK) + IW'(r);
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (en[p] && we[p]) mem[index(bank[p], row[p])] <= wdata[p];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NP; p++) begin
      if (en[p] && !we[p]) rdata[p] <= mem[index(bank[p], row[p])];
    end
  end
endmodule
