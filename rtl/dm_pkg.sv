// dm_pkg: types and constants shared by the DataMaestro streaming engines,
// the memory subsystem and the evaluation system.
//
// The memory subsystem is a byte-addressed scratchpad of 128KB made of
// NUM_BANKS banks of BANK_W bits. A physical address is decoded in fully
// interleaved order, MSB to LSB: [wordline | bank | byte]. Every request port
// (one per DataMaestro channel, plus one for the host/DMA) carries a mem_req_t
// and receives a mem_rsp_t one cycle after its request was granted.
//
// The bank width, the bank count and the memory size are the evaluation
// system's values; the address width follows from the memory size, and the
// request/response bundle is this design's own choice.
package dm_pkg;

  parameter int unsigned BANK_W     = 64;      // W_B, bits per bank word
  parameter int unsigned BYTE_BITS  = $clog2(BANK_W / 8);
  parameter int unsigned MEM_BYTES  = 128 * 1024;
  parameter int unsigned ADDR_W     = $clog2(MEM_BYTES);
  parameter int unsigned NUM_BANKS  = 2048;    // N_BF
  parameter int unsigned BANK_BITS  = $clog2(NUM_BANKS);
  parameter int unsigned WORDS_PER_BANK = MEM_BYTES / (NUM_BANKS * (BANK_W / 8));
  parameter int unsigned WORD_BITS  = (WORDS_PER_BANK > 1) ? $clog2(WORDS_PER_BANK) : 1;
  parameter int unsigned CNT_W      = 16;      // loop bound counter width

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [BANK_W-1:0] word_t;

  // One memory request port: a read (we = 0) or a full-word write (we = 1).
  typedef struct packed {
    logic  valid;
    logic  we;
    addr_t addr;
    word_t wdata;
  } mem_req_t;

  // Read response: valid one cycle after a read request was granted.
  typedef struct packed {
    logic  valid;
    word_t rdata;
  } mem_rsp_t;

  // Runtime configuration of one DataMaestro, sized for the largest instance
  // of the evaluation system (6 temporal dimensions, 2 spatial dimensions,
  // 32 channels, 2 addressing modes); smaller instances use the low entries.
  parameter int unsigned MAX_DT = 6;
  parameter int unsigned MAX_DS = 2;
  parameter int unsigned MAX_NC = 32;
  parameter int unsigned MAX_MODES = 4;  // addressing modes a remapper can hold

  typedef struct packed {
    addr_t                            base;     // Addr_B
    logic [MAX_DT-1:0][CNT_W-1:0]     tbound;   // B_t, entry 0 innermost
    logic [MAX_DT-1:0][ADDR_W-1:0]    tstride;  // S_t
    logic [MAX_DS-1:0][ADDR_W-1:0]    sstride;  // S_s
    logic                             mode;     // R_S: 0 -> N_BG[0], 1 -> N_BG[1]
    logic [MAX_NC-1:0]                ch_en;    // channel enables (read side)
    logic                             bypass;   // bypass the datapath extension
  } stream_cfg_t;

endpackage
