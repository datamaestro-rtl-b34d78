// tb_dm_gemm: self-checking test of dm_gemm (8x8x8, int8 x int8 + int32).
// Runs of cfg_tiles output tiles with cfg_k_tiles K steps each, operands
// random, with A/B/C sources and the D sink stalling at random, compared with
// a reference D = sum_k A_k x B_k + C. A first run with no stalls must take
// one cycle per K step (tiles * k_tiles steps).
module tb_dm_gemm;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic start, av, ar, bv, br, cv, cr, dv, dr, busy;
  logic [511:0] ad, bd;
  logic [2047:0] cd, dd;
  logic [15:0] kt, nt;

  dm_gemm dut (.clk, .rst_n, .start, .cfg_k_tiles(kt), .cfg_tiles(nt),
    .a_valid(av), .a_ready(ar), .a_data(ad), .b_valid(bv), .b_ready(br), .b_data(bd),
    .c_valid(cv), .c_ready(cr), .c_data(cd), .d_valid(dv), .d_ready(dr), .d_data(dd), .busy);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [2047:0] mac(input logic [2047:0] acc, input logic [511:0] a, input logic [511:0] b);
    logic [2047:0] r;
    for (int m = 0; m < 8; m++) for (int n = 0; n < 8; n++) begin
      int s;
      s = int'(acc[(m*8+n)*32 +: 32]);
      for (int k = 0; k < 8; k++) s += int'($signed(a[(m*8+k)*8 +: 8])) * int'($signed(b[(k*8+n)*8 +: 8]));
      r[(m*8+n)*32 +: 32] = s;
    end
    return r;
  endfunction

  logic [511:0] aq[$], bq[$];
  logic [2047:0] cq[$], dq[$];

  task automatic rnd(output logic [2047:0] x, input int words);
    x = '0;
    for (int i = 0; i < words; i++) x[i*32 +: 32] = $urandom;
  endtask

  task automatic run(input int tiles, input int ks, input int stall, output int cycles);
    int ai = 0, ci = 0, di = 0;
    logic [2047:0] t;
    aq.delete(); bq.delete(); cq.delete(); dq.delete();
    for (int i = 0; i < tiles; i++) begin
      logic [2047:0] acc;
      rnd(t, 64); cq.push_back(t); acc = t;
      for (int k = 0; k < ks; k++) begin
        rnd(t, 16); aq.push_back(t[511:0]);
        rnd(t, 16); bq.push_back(t[511:0]);
        acc = mac(acc, aq[$], bq[$]);
      end
      dq.push_back(acc);
    end
    kt = 16'(ks); nt = 16'(tiles);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cycles = 0;
    while (di < tiles && cycles < 10000) begin
      av = (ai < aq.size()) && ($urandom_range(0, 99) >= stall);
      bv = (ai < bq.size()) && ($urandom_range(0, 99) >= stall);
      cv = (ci < cq.size()) && ($urandom_range(0, 99) >= stall);
      dr = ($urandom_range(0, 99) >= stall);
      ad = aq[ai % aq.size()]; bd = bq[ai % bq.size()]; cd = cq[ci % cq.size()];
      #1;
      check(ar == br, "A and B taken together");
      if (av && ar) ai++;
      if (cv && cr) ci++;
      if (dv && dr) begin
        check(dd == dq[di], $sformatf("D tile %0d", di));
        di++;
      end
      @(posedge clk); cycles++;
      @(negedge clk);
    end
    check(di == tiles && ai == tiles * ks && ci == tiles, "all operands used, all tiles out");
  endtask

  initial begin
    int cyc;
    start = 0; av = 0; bv = 0; cv = 0; dr = 0; ad = 0; bd = 0; cd = 0; kt = 0; nt = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(3, 4, 0, cyc);
    check(cyc == 3 * 4 + 1, $sformatf("12 K steps + 1 output cycle, took %0d", cyc));
    run(5, 1, 0, cyc);
    run(4, 3, 40, cyc);
    run(2, 7, 20, cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
