// tb_dm_system: end-to-end test of the DataMaestro evaluation system at its
// default parameters.
// Each run loads int8 matrices A (M x K) and B (K x N) and an int32 initial
// value C into the scratchpad through the host port, programs the five
// DataMaestros and the accelerators, starts them, waits for the end and reads
// the result back through the host port. Layouts in memory:
//   A  8x8 tiles, tile (mt,kt) 64 bytes, one 8-element row per word
//   B  stored transposed: tile (kt,nt) holds B^T, one column per word; the
//      Transposer of DataMaestro B restores row order on the fly
//   C  either one bias row per 8 columns (4 words, DataMaestro C fetches with
//      4 of its 32 channels and the Broadcaster copies it to all 8 rows) or
//      full 8x8 int32 tiles (256 bytes, Broadcaster bypassed)
//   D  8x8 int32 tiles; E 8x8 int8 tiles (quantizer path)
// Memory placement is done in logical addresses; loading and reading back
// apply the addressing-mode permutation, written arithmetically here.
// The expected D and E are computed in the testbench. Counted mechanisms,
// each of which must occur at least once: bank conflicts, Outstanding
// Request Manager throttling, AGU back-pressure (QueueReady low), GeMM
// stalls, Transposer active and bypassed, Broadcaster active and bypassed,
// both addressing modes, result to DataMaestro D and through the quantizer
// to DataMaestro E. The GeMM utilisation (K steps / cycles between start and
// end of the run) is printed for every run. Besides square GeMMs up to
// GeMM-64, two runs take slices of the evaluated Transformer networks
// (a BERT-Base attention head, a ViT-B-16 MLP block) sized to fill most of
// the scratchpad.
module tb_dm_system;
  import dm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  mem_req_t ext_req; logic ext_gnt; mem_rsp_t ext_rsp;
  stream_cfg_t cfg_a, cfg_b, cfg_c, cfg_d, cfg_e;
  logic [15:0] k_tiles, tiles;
  logic quant_en, start, busy;
  logic signed [31:0] q_mult; logic [5:0] q_shift; logic signed [7:0] q_zp;

  dm_system dut (.clk, .rst_n, .ext_req, .ext_gnt, .ext_rsp,
    .cfg_a, .cfg_b, .cfg_c, .cfg_d, .cfg_e, .cfg_k_tiles(k_tiles), .cfg_tiles(tiles),
    .cfg_quant_en(quant_en), .cfg_q_mult(q_mult), .cfg_q_shift(q_shift), .cfg_q_zp(q_zp),
    .start, .busy);

  // ---------------- mechanism counters ----------------
  int n_conflict = 0, n_orm = 0, n_qready = 0, n_gemm_stall = 0;
  int n_tr_on = 0, n_tr_byp = 0, n_bc_on = 0, n_bc_byp = 0, n_mode [2] = '{0, 0};
  int n_to_d = 0, n_to_e = 0, n_steps = 0;
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 88; m++) if (dut.req[m].valid && !dut.gnt[m]) n_conflict++;
    if (dut.u_dm_a.g_ch[0].u_mic.addr_valid && !dut.u_dm_a.g_ch[0].u_mic.slot_free) n_orm++;
    if (dut.u_dm_b.g_ch[0].u_mic.addr_valid && !dut.u_dm_b.g_ch[0].u_mic.slot_free) n_orm++;
    if (dut.u_dm_a.ta_valid && !dut.u_dm_a.ta_ready) n_qready++;
    if (dut.u_gemm.busy && !dut.u_gemm.step) n_gemm_stall++;
    if (dut.u_gemm.step) n_steps++;
    if (dut.u_dm_b.g_valid && dut.u_dm_b.g_ready) begin if (cfg_b.bypass) n_tr_byp++; else n_tr_on++; end
    if (dut.u_dm_a.g_valid && dut.u_dm_a.g_ready) begin if (cfg_a.bypass) n_tr_byp++; else n_tr_on++; end
    if (dut.u_dm_c.g_valid && dut.u_dm_c.g_ready) begin if (cfg_c.bypass) n_bc_byp++; else n_bc_on++; end
    if (dut.d_valid && dut.d_ready) n_to_d++;
    if (dut.q_in_valid && dut.q_in_ready) n_to_e++;
  end

  // ---------------- host port ----------------
  function automatic addr_t remap(input addr_t l, input bit mode);
    int unsigned g, bpg, grp, off, w;
    if (!mode) return l;
    g = 512; bpg = g * WORDS_PER_BANK * 8;
    grp = l / bpg; off = l % bpg; w = off / 8;
    return addr_t'(((w / g) * NUM_BANKS + grp * g + (w % g)) * 8 + (l % 8));
  endfunction

  task automatic host_write(input addr_t a, input word_t d);
    @(negedge clk);
    ext_req = '{valid: 1'b1, we: 1'b1, addr: a, wdata: d};
    #1; while (!ext_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1; ext_req = '0;
  endtask

  task automatic host_read(input addr_t a, output word_t d);
    @(negedge clk);
    ext_req = '{valid: 1'b1, we: 1'b0, addr: a, wdata: '0};
    #1; while (!ext_gnt) begin @(negedge clk); #1; end
    @(posedge clk); #1; ext_req = '0;
    @(negedge clk);
    check(ext_rsp.valid, "host read response");
    d = ext_rsp.rdata;
  endtask

  // ---------------- one GeMM run ----------------
  // operand placement in logical addresses; changed per run where operands are large
  addr_t A_BASE = 17'h00000, B_BASE = 17'h08000, C_BASE = 17'h10000, D_BASE = 17'h18000;

  function automatic logic [7:0] quant(input int x);
    longint p;
    p = longint'(x) * longint'(q_mult);
    if (q_shift != 0) p = p + (longint'(1) <<< (q_shift - 1));
    p = (p >>> q_shift) + longint'(q_zp);
    if (p > 127) p = 127;
    if (p < -128) p = -128;
    return 8'(p);
  endfunction

  task automatic run_gemm(input int M, input int N, input int K, input bit bcast, input bit use_q,
                          input bit mode, input bit tr_a);
    int MT = M / 8, NT = N / 8, KT = K / 8;
    byte  A [][];
    byte  B [][];
    int   C [][];
    int   D [][];
    int   cyc;
    word_t w;
    A = new[M]; foreach (A[i]) A[i] = new[K];
    B = new[K]; foreach (B[i]) B[i] = new[N];
    C = new[M]; foreach (C[i]) C[i] = new[N];
    D = new[M]; foreach (D[i]) D[i] = new[N];
    foreach (A[i, j]) A[i][j] = byte'($urandom);
    foreach (B[i, j]) B[i][j] = byte'($urandom);
    if (bcast) begin
      for (int n = 0; n < N; n++) C[0][n] = int'($urandom) >>> 8;
      for (int m = 1; m < M; m++) for (int n = 0; n < N; n++) C[m][n] = C[0][n];
    end else foreach (C[i, j]) C[i][j] = int'($urandom) >>> 8;
    foreach (D[i, j]) begin
      D[i][j] = C[i][j];
      for (int k = 0; k < K; k++) D[i][j] += int'(A[i][k]) * int'(B[k][j]);
    end
    // ---- load ----
    // A tile (mt,kt): word r = row r; with tr_a the tile is stored transposed
    // (word r = column r) and DataMaestro A's Transposer restores it.
    for (int mt = 0; mt < MT; mt++) for (int kt = 0; kt < KT; kt++) for (int r = 0; r < 8; r++) begin
      for (int e = 0; e < 8; e++) w[e*8 +: 8] = tr_a ? A[mt*8+e][kt*8+r] : A[mt*8+r][kt*8+e];
      host_write(remap(A_BASE + addr_t'((mt*KT + kt)*64 + r*8), mode), w);
    end
    // B^T tile (kt,nt): word c = column n = nt*8+c, element e = k = kt*8+e
    for (int nt = 0; nt < NT; nt++) for (int kt = 0; kt < KT; kt++) for (int c = 0; c < 8; c++) begin
      for (int e = 0; e < 8; e++) w[e*8 +: 8] = B[kt*8+e][nt*8+c];
      host_write(remap(B_BASE + addr_t'((nt*KT + kt)*64 + c*8), mode), w);
    end
    if (bcast) begin
      for (int nt = 0; nt < NT; nt++) for (int c = 0; c < 4; c++) begin
        w = {32'(C[0][nt*8 + 2*c + 1]), 32'(C[0][nt*8 + 2*c])};
        host_write(remap(C_BASE + addr_t'(nt*32 + c*8), mode), w);
      end
    end else begin
      for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++) for (int c = 0; c < 32; c++) begin
        w = {32'(C[mt*8 + c/4][nt*8 + (c%4)*2 + 1]), 32'(C[mt*8 + c/4][nt*8 + (c%4)*2])};
        host_write(remap(C_BASE + addr_t'((mt*NT + nt)*256 + c*8), mode), w);
      end
    end
    // ---- configure ----
    cfg_a = '0; cfg_b = '0; cfg_c = '0; cfg_d = '0; cfg_e = '0;
    cfg_a.base = A_BASE; cfg_a.tbound = '{default: 1}; cfg_a.ch_en = '1; cfg_a.mode = mode; cfg_a.bypass = !tr_a;
    cfg_a.tbound[0] = 16'(KT); cfg_a.tstride[0] = 64;
    cfg_a.tbound[1] = 16'(NT); cfg_a.tstride[1] = 0;
    cfg_a.tbound[2] = 16'(MT); cfg_a.tstride[2] = addr_t'(KT * 64);
    cfg_a.sstride[0] = 8;
    cfg_b.base = B_BASE; cfg_b.tbound = '{default: 1}; cfg_b.ch_en = '1; cfg_b.mode = mode; cfg_b.bypass = 0;
    cfg_b.tbound[0] = 16'(KT); cfg_b.tstride[0] = 64;
    cfg_b.tbound[1] = 16'(NT); cfg_b.tstride[1] = addr_t'(KT * 64);
    cfg_b.tbound[2] = 16'(MT); cfg_b.tstride[2] = 0;
    cfg_b.sstride[0] = 8;
    cfg_c.base = C_BASE; cfg_c.tbound = '{default: 1}; cfg_c.mode = mode;
    if (bcast) begin
      cfg_c.ch_en = 32'h0000000F; cfg_c.bypass = 0;
      cfg_c.tbound[0] = 16'(NT); cfg_c.tstride[0] = 32;
      cfg_c.tbound[1] = 16'(MT); cfg_c.tstride[1] = 0;
    end else begin
      cfg_c.ch_en = '1; cfg_c.bypass = 1;
      cfg_c.tbound[0] = 16'(NT); cfg_c.tstride[0] = 256;
      cfg_c.tbound[1] = 16'(MT); cfg_c.tstride[1] = addr_t'(NT * 256);
    end
    cfg_c.sstride[0] = 8; cfg_c.sstride[1] = 64;
    cfg_d.base = D_BASE; cfg_d.tbound = '{default: 1}; cfg_d.mode = mode;
    cfg_d.tbound[0] = 16'(NT); cfg_d.tstride[0] = 256;
    cfg_d.tbound[1] = 16'(MT); cfg_d.tstride[1] = addr_t'(NT * 256);
    cfg_d.sstride[0] = 8; cfg_d.sstride[1] = 64;
    cfg_e.base = D_BASE; cfg_e.tbound = '{default: 1}; cfg_e.mode = mode;
    cfg_e.tbound[0] = 16'(NT); cfg_e.tstride[0] = 64;
    cfg_e.tbound[1] = 16'(MT); cfg_e.tstride[1] = addr_t'(NT * 64);
    cfg_e.sstride[0] = 8;
    k_tiles = 16'(KT); tiles = 16'(MT * NT); quant_en = use_q;
    q_mult = 32'sd3; q_shift = 6'd9; q_zp = -8'sd5;
    n_mode[mode]++;
    // ---- run ----
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (busy && cyc < 200000) begin @(negedge clk); cyc++; end
    check(!busy, "run finished");
    $display("GeMM M=%0d N=%0d K=%0d bcast=%0d quant=%0d mode=%0d: %0d K steps in %0d cycles, utilisation %0.2f%%",
             M, N, K, bcast, use_q, mode, MT*NT*KT, cyc, 100.0 * MT*NT*KT / cyc);
    // ---- read back ----
    for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++) begin
      if (!use_q) begin
        for (int c = 0; c < 32; c++) begin
          host_read(remap(D_BASE + addr_t'((mt*NT + nt)*256 + c*8), mode), w);
          check(w == {32'(D[mt*8 + c/4][nt*8 + (c%4)*2 + 1]), 32'(D[mt*8 + c/4][nt*8 + (c%4)*2])},
                $sformatf("D tile (%0d,%0d) word %0d", mt, nt, c));
        end
      end else begin
        for (int r = 0; r < 8; r++) begin
          word_t e;
          for (int x = 0; x < 8; x++) e[x*8 +: 8] = quant(D[mt*8 + r][nt*8 + x]);
          host_read(remap(D_BASE + addr_t'((mt*NT + nt)*64 + r*8), mode), w);
          check(w == e, $sformatf("E tile (%0d,%0d) row %0d", mt, nt, r));
        end
      end
    end
  endtask

  initial begin
    ext_req = '0; start = 0; quant_en = 0; k_tiles = 0; tiles = 0;
    cfg_a = '0; cfg_b = '0; cfg_c = '0; cfg_d = '0; cfg_e = '0;
    q_mult = 1; q_shift = 0; q_zp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_gemm(16, 16, 16, 1, 0, 0, 0);
    run_gemm(16, 24, 16, 0, 1, 1, 1);
    run_gemm(32, 32, 32, 1, 0, 1, 0);
    run_gemm(32, 32, 32, 1, 0, 0, 0);
    // K = 8: one K step per output tile, so the result path (1-deep FIFOs of
    // DataMaestro D) sets the pace and back-pressure reaches the readers
    run_gemm(32, 32, 8, 0, 0, 0, 0);
    // GeMM-64 in both addressing modes
    run_gemm(64, 64, 64, 1, 0, 1, 0);
    run_gemm(64, 64, 64, 1, 0, 0, 0);
    // Layer slices of the evaluated networks, sized to fit the 128 KB
    // scratchpad (operands are placed so that each run fills most of it)
    // BERT-Base, one attention head: scores Q x K^T for 128 tokens, head size 64
    A_BASE = 17'h00000; B_BASE = 17'h08000; C_BASE = 17'h0C000; D_BASE = 17'h10000;
    run_gemm(128, 128, 64, 1, 0, 1, 0);
    // ViT-B-16, MLP: 64 tokens x 768 features, 64 of the output features
    A_BASE = 17'h00000; B_BASE = 17'h0C000; C_BASE = 17'h18000; D_BASE = 17'h1C000;
    run_gemm(64, 64, 768, 1, 0, 1, 0);
    check(n_conflict > 0,   $sformatf("bank conflicts: %0d", n_conflict));
    check(n_orm > 0,        $sformatf("ORM throttling cycles: %0d", n_orm));
    check(n_qready > 0,     $sformatf("AGU QueueReady stalls: %0d", n_qready));
    check(n_gemm_stall > 0, $sformatf("GeMM stall cycles: %0d", n_gemm_stall));
    check(n_tr_on > 0 && n_tr_byp > 0, $sformatf("Transposer words active/bypassed: %0d/%0d", n_tr_on, n_tr_byp));
    check(n_bc_on > 0 && n_bc_byp > 0, $sformatf("Broadcaster words active/bypassed: %0d/%0d", n_bc_on, n_bc_byp));
    check(n_mode[0] > 0 && n_mode[1] > 0, "both addressing modes used");
    check(n_to_d > 0 && n_to_e > 0, $sformatf("result tiles to D / through quantizer to E: %0d/%0d", n_to_d, n_to_e));
    $display("counts: conflicts=%0d orm=%0d qready=%0d gemm_stall=%0d tr=%0d/%0d bc=%0d/%0d toD=%0d toE=%0d steps=%0d",
             n_conflict, n_orm, n_qready, n_gemm_stall, n_tr_on, n_tr_byp, n_bc_on, n_bc_byp, n_to_d, n_to_e, n_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
