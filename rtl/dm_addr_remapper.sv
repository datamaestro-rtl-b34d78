// dm_addr_remapper: runtime addressing-mode switch by address bit permutation.
//
// The crossbar decodes physical addresses fully interleaved, MSB to LSB
// [wordline | bank | byte]. With banks grouped G at a time, a logical address
// is interleaved inside a group and contiguous across groups:
//   logical  [group | wordline | bank-in-group | byte]
//   physical [wordline | group | bank-in-group | byte]
// so the mode is a pure rewiring of bits when G is a power of two. One such
// permutation is wired for each group size in GROUPS (G = NUM_BANKS gives the
// identity, i.e. fully interleaved; G = 1 gives non-interleaved, one bank
// holding contiguous addresses) and mode (R_S) selects one through a
// multiplexer. The permutation-plus-multiplexer structure follows the paper;
// the evaluation system's group list [2048, 512] is the default.
//
// Interface: combinational, addr_in and mode in, addr_out out. A mode value
// beyond the list selects the first entry.
module dm_addr_remapper
  import dm_pkg::*;
#(
  parameter int unsigned NMODES = 2,
  parameter int unsigned GROUPS [MAX_MODES] = '{2048, 512, 1, 1},  // first NMODES used
  parameter int unsigned MODE_W = (NMODES > 1) ? $clog2(NMODES) : 1
) (
  input  addr_t             addr_in,
  input  logic [MODE_W-1:0] mode,
  output addr_t             addr_out
);
  localparam int unsigned WL_BITS = ADDR_W - BANK_BITS - BYTE_BITS;

  addr_t perm [NMODES];

  for (genvar m = 0; m < NMODES; m++) begin : g_mode
    localparam int unsigned LB = $clog2(GROUPS[m]);       // bank-in-group bits
    localparam int unsigned UB = BANK_BITS - LB;            // group-index bits
    if (GROUPS[m] != (1 << LB) || GROUPS[m] > NUM_BANKS) begin : g_bad
      $error("dm_addr_remapper: group size must be a power of two not above NUM_BANKS");
    end
    if (UB == 0) begin : g_full
      assign perm[m] = addr_in;
    end else begin : g_grp
      logic [WL_BITS-1:0] wl;
      logic [UB-1:0]      grp;
      assign grp = addr_in[ADDR_W-1 -: UB];
      assign wl  = addr_in[BYTE_BITS + LB +: WL_BITS];
      if (LB == 0) begin : g_nima
        assign perm[m] = {wl, grp, addr_in[BYTE_BITS-1:0]};
      end else begin : g_gima
        assign perm[m] = {wl, grp, addr_in[BYTE_BITS +: LB], addr_in[BYTE_BITS-1:0]};
      end
    end
  end

  always_comb begin
    addr_out = perm[0];
    for (int m = 1; m < NMODES; m++) begin
      if (mode == MODE_W'(m)) addr_out = perm[m];
    end
  end
endmodule
