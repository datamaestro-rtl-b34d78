// dm_writer: a DataMaestro in write mode.
//
// It takes a stream of wide words from an accelerator port and scatters them
// to memory along a programmed N-D affine access pattern.
//   Data side: a word is accepted when every channel's data FIFO (DBF deep)
//     has room; channel c's slice [c*BANK_W +: BANK_W] goes into FIFO c.
//   Address side: as in the reader, the temporal AGU, the spatial AGU and one
//     address remapper per channel fill NC address FIFOs (ABF deep), the AGU
//     advancing only when every address FIFO has room.
//   Channels: each channel's write memory interface controller issues a write
//     whenever both its FIFO heads are present and is popped on the grant, so
//     channels drain independently of one another.
// This follows the paper's write-mode DataMaestro; the evaluation system puts
// no datapath extension on its writers, so none is built here.
//
// Interface: start (pulse, while not busy) latches the temporal config;
// cfg_mode must stay stable while busy. in_valid/in_ready/in_data is the
// accelerator stream; mem_req/mem_gnt are NC crossbar ports. busy falls when
// the AGU has finished and every FIFO is empty, i.e. all writes were granted.
// Timing: a word accepted in cycle t can be written in cycle t+1 at the
// earliest; one word per cycle sustained without conflicts.
module dm_writer
  import dm_pkg::*;
#(
  parameter int unsigned DT      = 3,
  parameter int unsigned DS      = 2,
  parameter int unsigned BS [MAX_DS] = '{8, 4},   // entries at DS and above are unused
  parameter int unsigned NC      = 32,
  parameter int unsigned DBF     = 1,
  parameter int unsigned ABF     = 4,
  parameter int unsigned NMODES  = 2,
  parameter int unsigned GROUPS [MAX_MODES] = '{2048, 512, 1, 1},  // first NMODES used
  parameter int unsigned MODE_W  = (NMODES > 1) ? $clog2(NMODES) : 1,
  parameter int unsigned DATA_W  = NC * BANK_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  addr_t             cfg_base,
  input  logic [CNT_W-1:0]  cfg_tbound  [DT],
  input  addr_t             cfg_tstride [DT],
  input  addr_t             cfg_sstride [DS],
  input  logic [MODE_W-1:0] cfg_mode,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [DATA_W-1:0] in_data,
  output mem_req_t          mem_req [NC],
  input  logic [NC-1:0]     mem_gnt,
  output logic              busy
);
  logic  ta_valid, ta_ready, agu_busy;
  addr_t ta;
  addr_t sa [NC];
  addr_t ra [NC];

  dm_temporal_agu #(.DT(DT)) u_tagu (
    .clk, .rst_n, .start,
    .cfg_base, .cfg_bound(cfg_tbound), .cfg_stride(cfg_tstride),
    .ta_valid, .ta_ready, .ta, .busy(agu_busy), .finish()
  );

  dm_spatial_agu #(.DS(DS), .BS(BS), .NC(NC)) u_sagu (
    .ta, .cfg_stride(cfg_sstride), .sa
  );

  logic [NC-1:0] af_full, af_empty, df_full, df_empty, pop;
  addr_t         af_head [NC];
  word_t         df_head [NC];

  assign ta_ready = ~|af_full;
  assign in_ready = ~|df_full;

  for (genvar c = 0; c < NC; c++) begin : g_ch
    dm_addr_remapper #(.NMODES(NMODES), .GROUPS(GROUPS)) u_remap (
      .addr_in(sa[c]), .mode(cfg_mode), .addr_out(ra[c])
    );

    dm_fifo #(.WIDTH(ADDR_W), .DEPTH(ABF)) u_afifo (
      .clk, .rst_n,
      .push(ta_valid && ta_ready), .din(ra[c]),
      .pop(pop[c]), .dout(af_head[c]), .count(),
      .full(af_full[c]), .empty(af_empty[c])
    );

    dm_fifo #(.WIDTH(BANK_W), .DEPTH(DBF)) u_dfifo (
      .clk, .rst_n,
      .push(in_valid && in_ready), .din(in_data[c*BANK_W +: BANK_W]),
      .pop(pop[c]), .dout(df_head[c]), .count(),
      .full(df_full[c]), .empty(df_empty[c])
    );

    dm_mic_write u_mic (
      .addr_valid(!af_empty[c]), .addr(af_head[c]),
      .data_valid(!df_empty[c]), .data(df_head[c]),
      .pop(pop[c]), .req(mem_req[c]), .gnt(mem_gnt[c])
    );
  end

  assign busy = agu_busy || !(&af_empty) || !(&df_empty);

  if (NC != DATA_W / BANK_W) begin : g_bad
    $error("dm_writer: DATA_W must be NC * BANK_W");
  end
endmodule
