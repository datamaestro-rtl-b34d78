// dm_system: DataMaestro evaluation system.
//
// Five DataMaestros stream operands between a 128KB multi-banked scratchpad
// and two accelerators:
//   A (read, 6-D temporal AGU, 8 channels, 8-deep data FIFOs, Transposer)
//       -> GeMM operand A, 512 bits
//   B (read, 3-D, 8 channels, 8-deep, Transposer) -> GeMM operand B, 512 bits
//   C (read, 3-D, 8x4 = 32 channels, 1-deep, Broadcaster)
//       -> GeMM initial value C, 2048 bits
//   D (write, 3-D, 32 channels, 1-deep) <- GeMM result D, 2048 bits
//   E (write, 3-D, 8 channels, 1-deep) <- quantizer output E, 512 bits
// The GeMM core (8x8x8 MACs) computes D = A x B + C; its result goes either
// straight to DataMaestro D or, when cfg_quant_en is set, through the
// quantizer to DataMaestro E. Every DataMaestro channel owns one port of the
// interleaved crossbar (88 ports); port 88 is brought out for the host and
// the DMA, which are not part of this RTL. The design-time parameters are
// those of the paper's evaluation system; the abstraction of the host's
// runtime configuration as top-level struct ports and the single start pulse
// are this design's choices.
//
// Interface: load memory through ext_req/ext_gnt/ext_rsp (same protocol as
// any crossbar port: hold the request until ext_gnt, read data one cycle
// later). Set the configuration ports, pulse start for one cycle, wait until
// busy falls. Configuration must stay stable while busy.
module dm_system
  import dm_pkg::*;
#(
  parameter int unsigned ABF = 4   // D_ABf, address FIFO depth of every channel
) (
  input  logic        clk,
  input  logic        rst_n,
  // host / DMA memory port
  input  mem_req_t    ext_req,
  output logic        ext_gnt,
  output mem_rsp_t    ext_rsp,
  // runtime configuration
  input  stream_cfg_t cfg_a,
  input  stream_cfg_t cfg_b,
  input  stream_cfg_t cfg_c,
  input  stream_cfg_t cfg_d,
  input  stream_cfg_t cfg_e,
  input  logic [15:0] cfg_k_tiles,
  input  logic [15:0] cfg_tiles,
  input  logic        cfg_quant_en,
  input  logic signed [31:0] cfg_q_mult,
  input  logic [5:0]  cfg_q_shift,
  input  logic signed [7:0]  cfg_q_zp,
  input  logic        start,
  output logic        busy
);
  localparam int unsigned NC_A = 8, NC_B = 8, NC_C = 32, NC_D = 32, NC_E = 8;
  localparam int unsigned P_A = 0;
  localparam int unsigned P_B = P_A + NC_A;
  localparam int unsigned P_C = P_B + NC_B;
  localparam int unsigned P_D = P_C + NC_C;
  localparam int unsigned P_E = P_D + NC_D;
  localparam int unsigned P_X = P_E + NC_E;
  localparam int unsigned NM  = P_X + 1;

  // ---------------- crossbar and memory ----------------
  mem_req_t             req [NM];
  mem_rsp_t             rsp [NM];
  logic [NM-1:0]        gnt;
  logic [NM-1:0]        bank_en, bank_we;
  logic [BANK_BITS-1:0] bank_sel  [NM];
  logic [WORD_BITS-1:0] bank_row  [NM];
  word_t                bank_wdata[NM];
  word_t                bank_rdata[NM];

  dm_xbar #(.NM(NM)) u_xbar (
    .clk, .rst_n, .req, .gnt, .rsp,
    .bank_en, .bank_we, .bank_sel, .bank_row, .bank_wdata, .bank_rdata
  );

  dm_spm #(.NP(NM)) u_spm (
    .clk, .en(bank_en), .we(bank_we), .bank(bank_sel), .row(bank_row),
    .wdata(bank_wdata), .rdata(bank_rdata)
  );

  assign req[P_X] = ext_req;
  assign ext_gnt  = gnt[P_X];
  assign ext_rsp  = rsp[P_X];

  // ---------------- configuration unpacking ----------------
  logic [CNT_W-1:0] tb_a [6], tb_b [3], tb_c [3], tb_d [3], tb_e [3];
  addr_t            ts_a [6], ts_b [3], ts_c [3], ts_d [3], ts_e [3];
  addr_t            ss_a [1], ss_b [1], ss_c [2], ss_d [2], ss_e [1];

  always_comb begin
    for (int i = 0; i < 6; i++) begin
      tb_a[i] = cfg_a.tbound[i];  ts_a[i] = cfg_a.tstride[i];
    end
    for (int i = 0; i < 3; i++) begin
      tb_b[i] = cfg_b.tbound[i];  ts_b[i] = cfg_b.tstride[i];
      tb_c[i] = cfg_c.tbound[i];  ts_c[i] = cfg_c.tstride[i];
      tb_d[i] = cfg_d.tbound[i];  ts_d[i] = cfg_d.tstride[i];
      tb_e[i] = cfg_e.tbound[i];  ts_e[i] = cfg_e.tstride[i];
    end
    ss_a[0] = cfg_a.sstride[0];
    ss_b[0] = cfg_b.sstride[0];
    ss_e[0] = cfg_e.sstride[0];
    for (int i = 0; i < 2; i++) begin
      ss_c[i] = cfg_c.sstride[i];  ss_d[i] = cfg_d.sstride[i];
    end
  end

  // ---------------- DataMaestros ----------------
  logic a_valid, a_ready, b_valid, b_ready, c_valid, c_ready;
  logic [NC_A*BANK_W-1:0] a_data;
  logic [NC_B*BANK_W-1:0] b_data;
  logic [NC_C*BANK_W-1:0] c_data;
  logic busy_a, busy_b, busy_c, busy_d, busy_e, busy_g;

  dm_reader #(
    .DT(6), .DS(1), .BS('{8, 1}), .NC(NC_A), .DBF(8), .ABF(ABF),
    .NMODES(2), .GROUPS('{2048, 512, 1, 1}), .EXT_TRANSPOSE(1'b1), .EXT_BROADCAST(1'b0)
  ) u_dm_a (
    .clk, .rst_n, .start,
    .cfg_base(cfg_a.base), .cfg_tbound(tb_a), .cfg_tstride(ts_a), .cfg_sstride(ss_a),
    .cfg_mode(cfg_a.mode), .cfg_ch_en(cfg_a.ch_en[NC_A-1:0]),
    .cfg_bypass_tr(cfg_a.bypass), .cfg_bypass_bc(1'b1),
    .mem_req(req[P_A +: NC_A]), .mem_gnt(gnt[P_A +: NC_A]), .mem_rsp(rsp[P_A +: NC_A]),
    .out_valid(a_valid), .out_ready(a_ready), .out_data(a_data), .busy(busy_a)
  );

  dm_reader #(
    .DT(3), .DS(1), .BS('{8, 1}), .NC(NC_B), .DBF(8), .ABF(ABF),
    .NMODES(2), .GROUPS('{2048, 512, 1, 1}), .EXT_TRANSPOSE(1'b1), .EXT_BROADCAST(1'b0)
  ) u_dm_b (
    .clk, .rst_n, .start,
    .cfg_base(cfg_b.base), .cfg_tbound(tb_b), .cfg_tstride(ts_b), .cfg_sstride(ss_b),
    .cfg_mode(cfg_b.mode), .cfg_ch_en(cfg_b.ch_en[NC_B-1:0]),
    .cfg_bypass_tr(cfg_b.bypass), .cfg_bypass_bc(1'b1),
    .mem_req(req[P_B +: NC_B]), .mem_gnt(gnt[P_B +: NC_B]), .mem_rsp(rsp[P_B +: NC_B]),
    .out_valid(b_valid), .out_ready(b_ready), .out_data(b_data), .busy(busy_b)
  );

  dm_reader #(
    .DT(3), .DS(2), .BS('{8, 4}), .NC(NC_C), .DBF(1), .ABF(ABF),
    .NMODES(2), .GROUPS('{2048, 512, 1, 1}), .EXT_TRANSPOSE(1'b0), .EXT_BROADCAST(1'b1),
    .BC_SRC_W(256)
  ) u_dm_c (
    .clk, .rst_n, .start,
    .cfg_base(cfg_c.base), .cfg_tbound(tb_c), .cfg_tstride(ts_c), .cfg_sstride(ss_c),
    .cfg_mode(cfg_c.mode), .cfg_ch_en(cfg_c.ch_en[NC_C-1:0]),
    .cfg_bypass_tr(1'b1), .cfg_bypass_bc(cfg_c.bypass),
    .mem_req(req[P_C +: NC_C]), .mem_gnt(gnt[P_C +: NC_C]), .mem_rsp(rsp[P_C +: NC_C]),
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data), .busy(busy_c)
  );

  // ---------------- accelerators ----------------
  logic g_valid, g_ready, q_in_valid, q_in_ready, q_valid, q_ready, d_valid, d_ready;
  logic [NC_D*BANK_W-1:0] g_data;
  logic [NC_E*BANK_W-1:0] q_data;

  dm_gemm u_gemm (
    .clk, .rst_n, .start, .cfg_k_tiles, .cfg_tiles,
    .a_valid, .a_ready, .a_data,
    .b_valid, .b_ready, .b_data,
    .c_valid, .c_ready, .c_data,
    .d_valid(g_valid), .d_ready(g_ready), .d_data(g_data), .busy(busy_g)
  );

  // Result routing: to memory through D, or through the quantizer to E.
  assign d_valid    = g_valid && !cfg_quant_en;
  assign q_in_valid = g_valid &&  cfg_quant_en;
  assign g_ready    = cfg_quant_en ? q_in_ready : d_ready;

  dm_quant u_quant (
    .clk, .rst_n, .cfg_mult(cfg_q_mult), .cfg_shift(cfg_q_shift), .cfg_zp(cfg_q_zp),
    .in_valid(q_in_valid), .in_ready(q_in_ready), .in_data(g_data),
    .out_valid(q_valid), .out_ready(q_ready), .out_data(q_data)
  );

  dm_writer #(
    .DT(3), .DS(2), .BS('{8, 4}), .NC(NC_D), .DBF(1), .ABF(ABF),
    .NMODES(2), .GROUPS('{2048, 512, 1, 1})
  ) u_dm_d (
    .clk, .rst_n, .start(start && !cfg_quant_en),
    .cfg_base(cfg_d.base), .cfg_tbound(tb_d), .cfg_tstride(ts_d), .cfg_sstride(ss_d),
    .cfg_mode(cfg_d.mode),
    .in_valid(d_valid), .in_ready(d_ready), .in_data(g_data),
    .mem_req(req[P_D +: NC_D]), .mem_gnt(gnt[P_D +: NC_D]), .busy(busy_d)
  );

  dm_writer #(
    .DT(3), .DS(1), .BS('{8, 1}), .NC(NC_E), .DBF(1), .ABF(ABF),
    .NMODES(2), .GROUPS('{2048, 512, 1, 1})
  ) u_dm_e (
    .clk, .rst_n, .start(start && cfg_quant_en),
    .cfg_base(cfg_e.base), .cfg_tbound(tb_e), .cfg_tstride(ts_e), .cfg_sstride(ss_e),
    .cfg_mode(cfg_e.mode),
    .in_valid(q_valid), .in_ready(q_ready), .in_data(q_data),
    .mem_req(req[P_E +: NC_E]), .mem_gnt(gnt[P_E +: NC_E]), .busy(busy_e)
  );

  assign busy = busy_a || busy_b || busy_c || busy_d || busy_e || busy_g || q_valid;
endmodule
