// tb_dm_reader: self-checking test of dm_reader.
// Instance A: the default reader (6-D temporal AGU, 8 channels, 8-deep data
// FIFOs, Transposer). Instance C: 3-D, 8x4 = 32 channels, 1-deep FIFOs,
// Broadcaster. Each channel port sees a memory model that grants at random
// (or always) and answers one cycle later with a word derived from the
// address. The expected stream is computed independently: nested temporal
// loops, spatial offsets, the addressing-mode permutation written
// arithmetically, the memory function, then transposition or broadcast.
// Checked: every output word; one word per cycle with no conflicts for A
// and one per two cycles with the 1-deep FIFOs of C; first-word latency; that disabled channels make no
// request; that busy falls at the end.
module tb_dm_reader;
  import dm_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic word_t memval(input addr_t a);
    return {15'(a) ^ 15'h5A5A, 17'(a), 32'hFEED0000 + 32'(a)};
  endfunction

  function automatic addr_t remap(input addr_t l, input bit mode);
    int unsigned g, bpg, grp, off, w;
    if (!mode) return l;
    g = 512; bpg = g * WORDS_PER_BANK * 8;
    grp = l / bpg; off = l % bpg; w = off / 8;
    return addr_t'(((w / g) * NUM_BANKS + grp * g + (w % g)) * 8 + (l % 8));
  endfunction

  // temporal address list
  function automatic void tlist(input addr_t base, input int unsigned bnd[], input addr_t str[], ref addr_t out[$]);
    int unsigned idx[];
    int unsigned total = 1;
    idx = new[bnd.size()];
    out.delete();
    foreach (bnd[i]) total *= bnd[i];
    for (int unsigned n = 0; n < total; n++) begin
      addr_t a;
      a = base;
      foreach (bnd[i]) a += addr_t'(str[i] * idx[i]);
      out.push_back(a);
      foreach (bnd[i]) begin
        if (idx[i] + 1 < bnd[i]) begin idx[i]++; break; end
        idx[i] = 0;
      end
    end
  endfunction

  // ---------------- instance A ----------------
  logic a_start, a_mode, a_byp, a_ov, a_or, a_busy;
  addr_t a_base; logic [CNT_W-1:0] a_tb [6]; addr_t a_ts [6]; addr_t a_ss [1];
  mem_req_t a_req [8]; logic [7:0] a_gnt; mem_rsp_t a_rsp [8];
  logic [511:0] a_od;
  int a_gnt_pct = 100;

  dm_reader dut_a (.clk, .rst_n, .start(a_start), .cfg_base(a_base), .cfg_tbound(a_tb), .cfg_tstride(a_ts),
    .cfg_sstride(a_ss), .cfg_mode(a_mode), .cfg_ch_en(8'hFF), .cfg_bypass_tr(a_byp), .cfg_bypass_bc(1'b1),
    .mem_req(a_req), .mem_gnt(a_gnt), .mem_rsp(a_rsp), .out_valid(a_ov), .out_ready(a_or), .out_data(a_od), .busy(a_busy));

  always_comb for (int c = 0; c < 8; c++) a_gnt[c] = a_req[c].valid && gnt_a_rand[c];
  logic [7:0] gnt_a_rand;
  always @(negedge clk) for (int c = 0; c < 8; c++) gnt_a_rand[c] = ($urandom_range(0, 99) < a_gnt_pct);
  always_ff @(posedge clk) for (int c = 0; c < 8; c++) begin
    a_rsp[c].valid <= a_gnt[c];
    a_rsp[c].rdata <= memval(a_req[c].addr);
  end

  // ---------------- instance C ----------------
  logic c_start, c_mode, c_byp, c_ov, c_or, c_busy;
  addr_t c_base; logic [CNT_W-1:0] c_tb [3]; addr_t c_ts [3]; addr_t c_ss [2];
  mem_req_t c_req [32]; logic [31:0] c_gnt, c_en; mem_rsp_t c_rsp [32];
  logic [2047:0] c_od;
  int c_reqs_disabled = 0;

  dm_reader #(.DT(3), .DS(2), .BS('{8, 4}), .NC(32), .DBF(1), .EXT_TRANSPOSE(1'b0), .EXT_BROADCAST(1'b1))
  dut_c (.clk, .rst_n, .start(c_start), .cfg_base(c_base), .cfg_tbound(c_tb), .cfg_tstride(c_ts),
    .cfg_sstride(c_ss), .cfg_mode(c_mode), .cfg_ch_en(c_en), .cfg_bypass_tr(1'b1), .cfg_bypass_bc(c_byp),
    .mem_req(c_req), .mem_gnt(c_gnt), .mem_rsp(c_rsp), .out_valid(c_ov), .out_ready(c_or), .out_data(c_od), .busy(c_busy));

  always_comb for (int c = 0; c < 32; c++) c_gnt[c] = c_req[c].valid;
  always_ff @(posedge clk) for (int c = 0; c < 32; c++) begin
    c_rsp[c].valid <= c_gnt[c];
    c_rsp[c].rdata <= memval(c_req[c].addr);
    if (c_req[c].valid && !c_en[c]) c_reqs_disabled++;
  end

  // ---------------- runs ----------------
  task automatic run_a(input int gpct, input int rpct, input bit mode, input bit byp, output int first, output int last, output int n);
    addr_t tl[$];
    int unsigned bnd[] = new[6];
    addr_t str[] = new[6];
    int cyc = 0;
    foreach (bnd[i]) begin bnd[i] = a_tb[i]; str[i] = a_ts[i]; end
    tlist(a_base, bnd, str, tl);
    a_gnt_pct = gpct; a_mode = mode; a_byp = byp;
    @(negedge clk); a_start = 1; @(negedge clk); a_start = 0;
    n = 0; first = -1; last = -1;
    while ((a_busy || n < tl.size()) && cyc < 20000) begin
      a_or = ($urandom_range(0, 99) < rpct);
      #1;
      if (a_ov && a_or) begin
        logic [511:0] raw, exp;
        for (int c = 0; c < 8; c++) raw[c*64 +: 64] = memval(remap(tl[n] + addr_t'(a_ss[0] * c), mode));
        exp = raw;
        if (!byp) for (int r = 0; r < 8; r++) for (int cc = 0; cc < 8; cc++) exp[(cc*8+r)*8 +: 8] = raw[(r*8+cc)*8 +: 8];
        check(n < tl.size() && a_od == exp, $sformatf("A word %0d", n));
        if (first < 0) first = cyc;
        last = cyc; n++;
      end
      @(posedge clk); cyc++; @(negedge clk);
    end
    check(n == tl.size(), $sformatf("A word count %0d of %0d", n, tl.size()));
    check(!a_busy, "A busy falls");
  endtask

  task automatic run_c(input bit byp, input logic [31:0] en, output int first, output int last, output int n);
    addr_t tl[$];
    int unsigned bnd[] = new[3];
    addr_t str[] = new[3];
    int cyc = 0;
    foreach (bnd[i]) begin bnd[i] = c_tb[i]; str[i] = c_ts[i]; end
    tlist(c_base, bnd, str, tl);
    c_byp = byp; c_en = en; c_mode = 0;
    @(negedge clk); c_start = 1; @(negedge clk); c_start = 0;
    n = 0; first = -1; last = -1;
    while ((c_busy || n < tl.size()) && cyc < 20000) begin
      c_or = 1;
      #1;
      if (c_ov && c_or) begin
        logic [2047:0] raw, exp;
        for (int c = 0; c < 32; c++)
          raw[c*64 +: 64] = en[c] ? memval(addr_t'(tl[n] + c_ss[0] * (c % 8) + c_ss[1] * (c / 8))) : '0;
        exp = byp ? raw : {8{raw[255:0]}};
        check(n < tl.size() && c_od == exp, $sformatf("C word %0d", n));
        if (first < 0) first = cyc;
        last = cyc; n++;
      end
      @(posedge clk); cyc++; @(negedge clk);
    end
    check(n == tl.size(), "C word count");
    check(!c_busy, "C busy falls");
  endtask

  initial begin
    int f, l, n;
    a_start = 0; c_start = 0; a_or = 0; c_or = 0; a_mode = 0; c_mode = 0; a_byp = 0; c_byp = 1; c_en = '1;
    a_base = 17'h00100;
    a_tb = '{2, 3, 2, 1, 2, 2}; a_ts = '{17'd64, 17'd512, 17'd0, 17'd8, 17'd4096, 17'h1F000}; a_ss[0] = 8;
    c_base = 17'h08000; c_tb = '{4, 2, 3}; c_ts = '{17'd256, 17'd0, 17'd2048}; c_ss[0] = 8; c_ss[1] = 64;
    repeat (3) @(posedge clk); rst_n = 1;
    // full rate, no conflicts, transposer on: first word 5 cycles after start
    run_a(100, 100, 0, 0, f, l, n);
    check(l - f == n - 1, $sformatf("A one word per cycle: %0d words in %0d cycles", n, l - f + 1));
    check(f == 4, $sformatf("A first word %0d cycles after the start cycle", f + 1));
    // random grants and consumer, both addressing modes, bypass
    run_a(60, 70, 1, 0, f, l, n);
    run_a(30, 50, 0, 1, f, l, n);
    run_a(80, 30, 1, 1, f, l, n);
    // C: 1-deep FIFOs
    run_c(1, '1, f, l, n);
    // a 1-deep FIFO frees its slot only when the word leaves, so each word
    // costs the two-cycle reservation round trip
    check(l - f == 2 * (n - 1), $sformatf("C one word per two cycles: %0d words in %0d cycles", n, l - f + 1));
    // C with broadcaster: only the first 4 channels fetch
    run_c(0, 32'h0000000F, f, l, n);
    check(c_reqs_disabled == 0, "disabled channels made no request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
