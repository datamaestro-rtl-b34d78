// dm_reader: a DataMaestro in read mode.
//
// It turns a programmed N-D affine access pattern into a continuous stream of
// wide words for an accelerator port, fetching ahead of the consumer.
//   AGU: the temporal AGU produces one temporal address per cycle; the spatial
//     AGU expands it into NC channel addresses; each passes an address
//     remapper (runtime addressing mode R_S) and is written into that
//     channel's address FIFO (ABF deep). The AGU advances only when every
//     address FIFO has room (QueueReady), so all channels receive the same
//     sequence of temporal steps.
//   Channels: each of the NC channels has its own read memory interface
//     controller and data FIFO (DBF deep) and issues its requests on its own
//     crossbar port as soon as it has an address and a reserved FIFO slot.
//     Channels are not kept in lockstep, which is the fine-grained prefetch:
//     a bank conflict on one channel delays only that channel.
//   Gather: when every channel FIFO holds a word, the NC heads are popped
//     together as one NC*BANK_W-bit word (channel c in bits [c*BANK_W +:
//     BANK_W]).
//   Extensions: the word then passes the design-time selected extensions in
//     cascade (Transposer, then Broadcaster), each with a runtime bypass.
// This organisation follows the paper. The ordering of extensions, the
// runtime channel enable (cfg_ch_en) and the busy output are this design's.
//
// Interface: start (pulse, while not busy) latches the temporal config and
// begins; cfg_mode, cfg_ch_en and the bypasses must stay stable while busy.
// mem_req/mem_gnt/mem_rsp are NC crossbar ports (response one cycle after
// grant). out_valid/out_ready/out_data is the stream to the accelerator.
// busy falls when the last word has left the reader.
// Timing: with no memory conflicts the first word appears 4 cycles after
// start (AGU, address FIFO, memory, data FIFO) plus one cycle per enabled
// extension; then one word per cycle (one per two cycles with DBF = 1).
module dm_reader
  import dm_pkg::*;
#(
  parameter int unsigned DT      = 6,
  parameter int unsigned DS      = 1,
  parameter int unsigned BS [MAX_DS] = '{8, 1},   // entries at DS and above are unused
  parameter int unsigned NC      = 8,
  parameter int unsigned DBF     = 8,
  parameter int unsigned ABF     = 4,
  parameter int unsigned NMODES  = 2,
  parameter int unsigned GROUPS [MAX_MODES] = '{2048, 512, 1, 1},  // first NMODES used
  parameter bit          EXT_TRANSPOSE = 1'b1,
  parameter bit          EXT_BROADCAST = 1'b0,
  parameter int unsigned TR_ROWS = 8,
  parameter int unsigned TR_COLS = 8,
  parameter int unsigned TR_ELEM_W = 8,
  parameter int unsigned BC_SRC_W  = 256,
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
  input  logic [NC-1:0]     cfg_ch_en,
  input  logic              cfg_bypass_tr,
  input  logic              cfg_bypass_bc,
  output mem_req_t          mem_req [NC],
  input  logic [NC-1:0]     mem_gnt,
  input  mem_rsp_t          mem_rsp [NC],
  output logic              out_valid,
  input  logic              out_ready,
  output logic [DATA_W-1:0] out_data,
  output logic              busy
);
  // ---------------- AGU ----------------
  logic  ta_valid, ta_ready, agu_busy;
  addr_t ta;
  addr_t sa  [NC];
  addr_t ra  [NC];

  dm_temporal_agu #(.DT(DT)) u_tagu (
    .clk, .rst_n, .start,
    .cfg_base, .cfg_bound(cfg_tbound), .cfg_stride(cfg_tstride),
    .ta_valid, .ta_ready, .ta, .busy(agu_busy), .finish()
  );

  dm_spatial_agu #(.DS(DS), .BS(BS), .NC(NC)) u_sagu (
    .ta, .cfg_stride(cfg_sstride), .sa
  );

  // ---------------- channels ----------------
  logic [NC-1:0] af_full, af_empty, af_pop;
  logic [NC-1:0] df_empty, rsp_push;
  addr_t         af_head [NC];
  word_t         df_head [NC];
  word_t         rsp_data [NC];
  logic          g_valid, g_ready, g_pop;
  logic [DATA_W-1:0] g_data;

  assign ta_ready = ~|af_full;

  for (genvar c = 0; c < NC; c++) begin : g_ch
    dm_addr_remapper #(.NMODES(NMODES), .GROUPS(GROUPS)) u_remap (
      .addr_in(sa[c]), .mode(cfg_mode), .addr_out(ra[c])
    );

    dm_fifo #(.WIDTH(ADDR_W), .DEPTH(ABF)) u_afifo (
      .clk, .rst_n,
      .push(ta_valid && ta_ready), .din(ra[c]),
      .pop(af_pop[c]), .dout(af_head[c]), .count(),
      .full(af_full[c]), .empty(af_empty[c])
    );

    dm_mic_read #(.DBF(DBF)) u_mic (
      .clk, .rst_n, .ch_en(cfg_ch_en[c]),
      .addr_valid(!af_empty[c]), .addr(af_head[c]), .addr_pop(af_pop[c]),
      .req(mem_req[c]), .gnt(mem_gnt[c]), .rsp(mem_rsp[c]),
      .data_popped(g_pop), .rsp_push(rsp_push[c]), .rsp_data(rsp_data[c])
    );

    dm_fifo #(.WIDTH(BANK_W), .DEPTH(DBF)) u_dfifo (
      .clk, .rst_n,
      .push(rsp_push[c]), .din(rsp_data[c]),
      .pop(g_pop), .dout(df_head[c]), .count(),
      .full(), .empty(df_empty[c])
    );

    assign g_data[c*BANK_W +: BANK_W] = df_head[c];
  end

  // ---------------- gather ----------------
  assign g_valid = ~|df_empty;
  assign g_pop   = g_valid && g_ready;

  // ---------------- extensions ----------------
  logic              t_valid, t_ready;
  logic [DATA_W-1:0] t_data;

  if (EXT_TRANSPOSE) begin : g_tr
    dm_ext_transposer #(.ROWS(TR_ROWS), .COLS(TR_COLS), .ELEM_W(TR_ELEM_W), .DATA_W(DATA_W)) u_tr (
      .clk, .rst_n, .bypass(cfg_bypass_tr),
      .in_valid(g_valid), .in_ready(g_ready), .in_data(g_data),
      .out_valid(t_valid), .out_ready(t_ready), .out_data(t_data)
    );
  end else begin : g_no_tr
    assign t_valid = g_valid;
    assign g_ready = t_ready;
    assign t_data  = g_data;
  end

  if (EXT_BROADCAST) begin : g_bc
    dm_ext_broadcaster #(.DATA_W(DATA_W), .SRC_W(BC_SRC_W)) u_bc (
      .clk, .rst_n, .bypass(cfg_bypass_bc),
      .in_valid(t_valid), .in_ready(t_ready), .in_data(t_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_no_bc
    assign out_valid = t_valid;
    assign t_ready   = out_ready;
    assign out_data  = t_data;
  end

  // ---------------- status ----------------
  logic inflight_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) inflight_q <= 1'b0;
    else        inflight_q <= |af_pop;
  end

  assign busy = agu_busy || !(&af_empty) || !(&df_empty) || inflight_q || t_valid || out_valid;

  if (NC != DATA_W / BANK_W) begin : g_bad
    $error("dm_reader: DATA_W must be NC * BANK_W");
  end
endmodule
