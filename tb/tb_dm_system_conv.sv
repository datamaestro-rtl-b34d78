// tb_dm_system_conv: end-to-end convolution on the DataMaestro evaluation
// system at its default parameters, with implicit im2col: the GeMM core only
// ever sees 8x8x8 GeMM tiles, and DataMaestro A's six temporal loops walk the
// input feature map directly, so no im2col copy is ever made in memory.
//
// Mapping onto the 8x8x8 core (D[m][n] += A[m][k] * B[k][n]):
//   m = 8 consecutive output pixels of one output row (ox = 8*xt + m)
//   k = 8 input channels of one channel group cg
//   n = 8 output channels of one output-channel tile nt
// One output tile takes KT = (C/8) * FY * FX K steps, ordered fx fastest,
// then fy, then cg.
// Input layout: C/8 x H x W x 8, i.e. one 64-bit word holds the 8 channels
// of a channel group at one pixel, at byte address ((cg*H + iy)*W + ix)*8.
// DataMaestro A (8 channels = 8 rows m, spatial stride 8*S bytes, S being
// the convolution stride) runs the loops, innermost first:
//   fx  (FX, 8)    fy  (FY, 8W)    cg  (C/8, 8HW)
//   nt  (NT, 0)    xt  (OX/8, 64S) oy  (OY, 8WS)
// which uses all six of its temporal dimensions. B holds, per (nt, K step),
// the transposed 8x8 weight tile (one output channel per word), restored by
// the Transposer of DataMaestro B. C is a per-output-channel bias row
// fetched by 4 of C's 32 channels and copied to all rows by the Broadcaster.
// D is written as 8x8 int32 tiles, tile index (oy*XT + xt)*NT + nt.
// Cases: 3x3 kernels with stride 1 and stride 2, in both addressing modes,
// and slices of ResNet-18 and VGG-16 layers that fill most of the memory.
// The expected output is computed in the testbench; the GeMM utilisation of
// each run is printed. Bank conflicts must occur in the strided case.
module tb_dm_system_conv;
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

  int n_conflict = 0, n_steps = 0;
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < 88; m++) if (dut.req[m].valid && !dut.gnt[m]) n_conflict++;
    if (dut.u_gemm.step) n_steps++;
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

  // operand placement in logical addresses; changed per run where operands are large
  addr_t A_BASE = 17'h00000, B_BASE = 17'h08000, C_BASE = 17'h10000, D_BASE = 17'h18000;

  // C input channels, H x W input, KO output channels, FY x FX kernel, stride S
  task automatic run_conv(input int C, input int H, input int W, input int KO,
                          input int FY, input int FX, input int S, input bit mode);
    int OY = (H - FY) / S + 1, OX = (W - FX) / S + 1;
    int CG = C / 8, NT = KO / 8, XT = OX / 8, KT = CG * FY * FX;
    byte I [][][];                  // [c][y][x]
    byte F [][][][];                // [ko][c][fy][fx]
    int  bias [];
    int  O [][][];                  // [ko][oy][ox]
    int  cyc, c0;
    word_t w;
    I = new[C]; foreach (I[c]) begin I[c] = new[H]; foreach (I[c][y]) I[c][y] = new[W]; end
    F = new[KO];
    foreach (F[o]) begin
      F[o] = new[C];
      foreach (F[o][c]) begin F[o][c] = new[FY]; foreach (F[o][c][y]) F[o][c][y] = new[FX]; end
    end
    bias = new[KO];
    O = new[KO]; foreach (O[o]) begin O[o] = new[OY]; foreach (O[o][y]) O[o][y] = new[OX]; end
    foreach (I[c, y, x]) I[c][y][x] = byte'($urandom);
    foreach (F[o, c, y, x]) F[o][c][y][x] = byte'($urandom);
    foreach (bias[o]) bias[o] = int'($urandom) >>> 8;
    foreach (O[o, y, x]) begin
      O[o][y][x] = bias[o];
      for (int c = 0; c < C; c++) for (int fy = 0; fy < FY; fy++) for (int fx = 0; fx < FX; fx++)
        O[o][y][x] += int'(I[c][y*S + fy][x*S + fx]) * int'(F[o][c][fy][fx]);
    end
    // ---- load ----
    for (int cg = 0; cg < CG; cg++) for (int y = 0; y < H; y++) for (int x = 0; x < W; x++) begin
      for (int e = 0; e < 8; e++) w[e*8 +: 8] = I[cg*8 + e][y][x];
      host_write(remap(A_BASE + addr_t'(((cg*H + y)*W + x)*8), mode), w);
    end
    // weight tile (nt, kstep): word c = output channel nt*8+c, element e = input channel cg*8+e
    for (int nt = 0; nt < NT; nt++) for (int cg = 0; cg < CG; cg++)
      for (int fy = 0; fy < FY; fy++) for (int fx = 0; fx < FX; fx++) for (int c = 0; c < 8; c++) begin
        for (int e = 0; e < 8; e++) w[e*8 +: 8] = F[nt*8 + c][cg*8 + e][fy][fx];
        host_write(remap(B_BASE + addr_t'((nt*KT + (cg*FY + fy)*FX + fx)*64 + c*8), mode), w);
      end
    for (int nt = 0; nt < NT; nt++) for (int c = 0; c < 4; c++) begin
      w = {32'(bias[nt*8 + 2*c + 1]), 32'(bias[nt*8 + 2*c])};
      host_write(remap(C_BASE + addr_t'(nt*32 + c*8), mode), w);
    end
    // ---- configure ----
    cfg_a = '0; cfg_b = '0; cfg_c = '0; cfg_d = '0; cfg_e = '0;
    cfg_a.base = A_BASE; cfg_a.ch_en = '1; cfg_a.mode = mode; cfg_a.bypass = 1;
    cfg_a.tbound[0] = 16'(FX); cfg_a.tstride[0] = 8;
    cfg_a.tbound[1] = 16'(FY); cfg_a.tstride[1] = addr_t'(8 * W);
    cfg_a.tbound[2] = 16'(CG); cfg_a.tstride[2] = addr_t'(8 * H * W);
    cfg_a.tbound[3] = 16'(NT); cfg_a.tstride[3] = 0;
    cfg_a.tbound[4] = 16'(XT); cfg_a.tstride[4] = addr_t'(64 * S);
    cfg_a.tbound[5] = 16'(OY); cfg_a.tstride[5] = addr_t'(8 * W * S);
    cfg_a.sstride[0] = addr_t'(8 * S);
    cfg_b.base = B_BASE; cfg_b.tbound = '{default: 1}; cfg_b.ch_en = '1; cfg_b.mode = mode; cfg_b.bypass = 0;
    cfg_b.tbound[0] = 16'(KT); cfg_b.tstride[0] = 64;
    cfg_b.tbound[1] = 16'(NT); cfg_b.tstride[1] = addr_t'(KT * 64);
    cfg_b.tbound[2] = 16'(XT * OY); cfg_b.tstride[2] = 0;
    cfg_b.sstride[0] = 8;
    cfg_c.base = C_BASE; cfg_c.tbound = '{default: 1}; cfg_c.mode = mode;
    cfg_c.ch_en = 32'h0000000F; cfg_c.bypass = 0;
    cfg_c.tbound[0] = 16'(NT); cfg_c.tstride[0] = 32;
    cfg_c.tbound[1] = 16'(XT * OY); cfg_c.tstride[1] = 0;
    cfg_c.sstride[0] = 8; cfg_c.sstride[1] = 64;
    cfg_d.base = D_BASE; cfg_d.tbound = '{default: 1}; cfg_d.mode = mode;
    cfg_d.tbound[0] = 16'(NT * XT * OY); cfg_d.tstride[0] = 256;
    cfg_d.sstride[0] = 8; cfg_d.sstride[1] = 64;
    k_tiles = 16'(KT); tiles = 16'(NT * XT * OY); quant_en = 0;
    // ---- run ----
    c0 = n_conflict;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (busy && cyc < 200000) begin @(negedge clk); cyc++; end
    check(!busy, "run finished");
    $display("conv C=%0d %0dx%0d KO=%0d %0dx%0d stride %0d mode=%0d: %0d K steps in %0d cycles, utilisation %0.2f%%, %0d conflict cycles",
             C, H, W, KO, FY, FX, S, mode, KT*NT*XT*OY, cyc, 100.0 * KT*NT*XT*OY / cyc, n_conflict - c0);
    if (S > 1 && !mode) check(n_conflict > c0, "strided convolution meets bank conflicts");
    // ---- read back ----
    for (int oy = 0; oy < OY; oy++) for (int xt = 0; xt < XT; xt++) for (int nt = 0; nt < NT; nt++)
      for (int c = 0; c < 32; c++) begin
        int m = c / 4, n = (c % 4) * 2;
        host_read(remap(D_BASE + addr_t'((((oy*XT + xt)*NT + nt)*256) + c*8), mode), w);
        check(w == {32'(O[nt*8 + n + 1][oy][xt*8 + m]), 32'(O[nt*8 + n][oy][xt*8 + m])},
              $sformatf("output oy=%0d xt=%0d nt=%0d word %0d", oy, xt, nt, c));
      end
  endtask

  initial begin
    ext_req = '0; start = 0; quant_en = 0; k_tiles = 0; tiles = 0;
    cfg_a = '0; cfg_b = '0; cfg_c = '0; cfg_d = '0; cfg_e = '0;
    q_mult = 1; q_shift = 0; q_zp = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run_conv(16, 10, 10, 16, 3, 3, 1, 1);   // 8x8 output, 3x3, stride 1
    run_conv(16, 10, 10, 16, 3, 3, 1, 0);
    run_conv(16, 17, 17, 16, 3, 3, 2, 0);   // 8x8 output, 3x3, stride 2
    run_conv(16, 17, 17, 16, 3, 3, 2, 1);
    run_conv(8, 18, 18, 8, 3, 3, 1, 1);     // 16x16 output: two pixel tiles per row
    // Layer slices of the evaluated networks, sized to fit the 128 KB
    // scratchpad: an 8x8 output patch and part of the output channels
    // ResNet-18 stage 2, 3x3 conv 128 -> 128: 64 output channels
    // first with input and weights sharing bank group 0, then with the
    // weights moved to groups 1 to 3 so that the two streams never meet
    A_BASE = 17'h00000; B_BASE = 17'h04000; C_BASE = 17'h16000; D_BASE = 17'h17000;
    run_conv(128, 10, 10, 64, 3, 3, 1, 1);
    A_BASE = 17'h00000; B_BASE = 17'h08000; C_BASE = 17'h1A000; D_BASE = 17'h1B000;
    run_conv(128, 10, 10, 64, 3, 3, 1, 1);
    // ResNet-18 stage 3 downsampling, 3x3 conv 128 -> 256, stride 2: 32 output channels
    A_BASE = 17'h00000; B_BASE = 17'h0A000; C_BASE = 17'h13000; D_BASE = 17'h14000;
    run_conv(128, 17, 17, 32, 3, 3, 2, 1);
    // VGG-16 block 3, 3x3 conv 256 -> 256: 32 output channels
    A_BASE = 17'h00000; B_BASE = 17'h06800; C_BASE = 17'h18800; D_BASE = 17'h19000;
    run_conv(256, 10, 10, 32, 3, 3, 1, 1);
    check(n_steps > 0, "GeMM steps taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
