// tb_dm_writer: self-checking test of dm_writer (default: 3-D temporal AGU,
// 8x4 = 32 channels, 1-deep data FIFOs).
// Random wide words are offered with random gaps; each channel port sees a
// memory model that grants at random and records writes. Expected: channel c
// of word n lands at remap(TA[n] + S0*(c mod 8) + S1*(c div 8)), the temporal
// addresses coming from nested loops and the remap from the arithmetic form
// of the addressing mode. Checked: every written word, the number of writes,
// no write to an unexpected address, busy falling at the end, and with
// constant grants one word accepted every two cycles (1-deep FIFOs).
module tb_dm_writer;
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

  function automatic addr_t remap(input addr_t l, input bit mode);
    int unsigned g, bpg, grp, off, w;
    if (!mode) return l;
    g = 512; bpg = g * WORDS_PER_BANK * 8;
    grp = l / bpg; off = l % bpg; w = off / 8;
    return addr_t'(((w / g) * NUM_BANKS + grp * g + (w % g)) * 8 + (l % 8));
  endfunction

  logic start, mode, iv, ir, busy;
  addr_t base; logic [CNT_W-1:0] tbnd [3]; addr_t ts [3]; addr_t ss [2];
  logic [2047:0] id;
  mem_req_t req [32]; logic [31:0] gnt, grand;
  int gpct = 100;

  dm_writer dut (.clk, .rst_n, .start, .cfg_base(base), .cfg_tbound(tbnd), .cfg_tstride(ts), .cfg_sstride(ss),
    .cfg_mode(mode), .in_valid(iv), .in_ready(ir), .in_data(id), .mem_req(req), .mem_gnt(gnt), .busy);

  always @(negedge clk) for (int c = 0; c < 32; c++) grand[c] = ($urandom_range(0, 99) < gpct);
  always_comb for (int c = 0; c < 32; c++) gnt[c] = req[c].valid && grand[c];

  word_t mem [addr_t];
  int nwrites = 0;
  always @(posedge clk) for (int c = 0; c < 32; c++) if (gnt[c]) begin
    if (!req[c].we) begin failures++; $display("FAIL read request from a writer"); end
    mem[req[c].addr] = req[c].wdata;
    nwrites++;
  end

  task automatic run(input int gp, input int vpct, input bit md, output int first, output int last, output int n);
    addr_t tl[$];
    logic [2047:0] words[$];
    int idx[3];
    int cyc = 0;
    gpct = gp; mode = md; mem.delete(); nwrites = 0;
    for (int k = 0; k < 3; k++) idx[k] = 0;
    for (int t = 0; t < tbnd[0] * tbnd[1] * tbnd[2]; t++) begin
      logic [2047:0] w;
      tl.push_back(base + addr_t'(ts[0] * idx[0] + ts[1] * idx[1] + ts[2] * idx[2]));
      for (int k = 0; k < 3; k++) begin
        if (idx[k] + 1 < tbnd[k]) begin idx[k]++; break; end
        idx[k] = 0;
      end
      for (int k = 0; k < 64; k++) w[k*32 +: 32] = $urandom;
      words.push_back(w);
    end
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    n = 0; first = -1; last = -1;
    while ((busy || n < words.size()) && cyc < 20000) begin
      iv = (n < words.size()) && ($urandom_range(0, 99) < vpct);
      id = words[n % words.size()];
      #1;
      if (iv && ir) begin
        if (first < 0) first = cyc;
        last = cyc; n++;
      end
      @(posedge clk); cyc++; @(negedge clk);
    end
    iv = 0;
    @(negedge clk);
    check(!busy, "busy falls");
    check(nwrites == 32 * words.size(), $sformatf("writes %0d", nwrites));
    check(mem.size() == 32 * words.size(), "distinct addresses written");
    for (int t = 0; t < words.size(); t++)
      for (int c = 0; c < 32; c++) begin
        addr_t a;
        a = remap(tl[t] + addr_t'(ss[0] * (c % 8) + ss[1] * (c / 8)), md);
        check(mem.exists(a) && mem[a] == words[t][c*64 +: 64], $sformatf("word %0d channel %0d", t, c));
      end
  endtask

  initial begin
    int f, l, n;
    start = 0; iv = 0; id = 0; mode = 0;
    base = 17'h02000; tbnd = '{2, 3, 2}; ts = '{17'd256, 17'd2048, 17'd16384}; ss[0] = 8; ss[1] = 64;
    repeat (3) @(posedge clk); rst_n = 1;
    run(100, 100, 0, f, l, n);
    check(l - f == 2 * (n - 1), $sformatf("one word per two cycles: %0d words in %0d cycles", n, l - f + 1));
    run(50, 70, 1, f, l, n);
    run(20, 90, 0, f, l, n);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
